// cpulp_pkg: types and constants shared by the power-controller SoC.
//
// Two bus flavours recur in the design:
//  * the word-level "TCDM" request/response pair used inside the domains
//    (req/gnt handshake on the request, rvalid exactly one cycle after the
//    grant for single-cycle targets, later for slower targets, always in
//    order), 32-bit address and 32-bit data;
//  * AXI4 with 32-bit address and 64-bit data channels, the width the
//    external master and slave ports have.
// The address map is this design's own choice; the paper gives sizes
// (512 KiB L2, 64 KiB L1) but no addresses.
package cpulp_pkg;

  // ---------------------------------------------------------------- TCDM
  typedef struct packed {
    logic        req;
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
    logic        err;
  } tcdm_rsp_t;

  localparam tcdm_req_t TCDM_REQ_IDLE = '{req: 1'b0, addr: '0, we: 1'b0, be: '0, wdata: '0};
  localparam tcdm_rsp_t TCDM_RSP_IDLE = '{gnt: 1'b0, rvalid: 1'b0, rdata: '0, err: 1'b0};

  // ---------------------------------------------------------------- AXI4
  localparam int unsigned AXI_AW   = 32;
  localparam int unsigned AXI_DW   = 64;
  localparam int unsigned AXI_IDW  = 4;   // ID width of one AXI master (inner side of the mux)
  localparam int unsigned AXI_IDWO = 5;   // ID width after the 2:1 AXI mux

  typedef struct packed {
    logic [AXI_IDWO-1:0] id;
    logic [AXI_AW-1:0]   addr;
    logic [7:0]          len;
    logic [2:0]          size;
    logic [1:0]          burst;
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DW-1:0]   data;
    logic [AXI_DW/8-1:0] strb;
    logic                last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_IDWO-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_IDWO-1:0] id;
    logic [AXI_DW-1:0]   data;
    logic [1:0]          resp;
    logic                last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    ar_ready;
    logic    w_ready;
    logic    b_valid;
    axi_b_t  b;
    logic    r_valid;
    axi_r_t  r;
  } axi_rsp_t;

  localparam logic [1:0] AXI_BURST_FIXED = 2'b00;
  localparam logic [1:0] AXI_BURST_INCR  = 2'b01;
  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;

  // ---------------------------------------------------------------- address map
  localparam logic [31:0] L1_BASE        = 32'h1000_0000;  // 64 KiB cluster L1
  localparam logic [31:0] L1_SIZE        = 32'h0001_0000;
  localparam logic [31:0] CL_PERIPH_BASE = 32'h1020_0000;  // cluster peripherals
  localparam logic [31:0] CL_EU_BASE     = 32'h1020_0000;  //   event unit
  localparam logic [31:0] CL_TIMER_BASE  = 32'h1020_0400;  //   cluster timer
  localparam logic [31:0] CL_DMA_BASE    = 32'h1020_0800;  //   DMA programming port
  localparam logic [31:0] CL_PERIPH_SIZE = 32'h0000_1000;
  localparam logic [31:0] SOC_TIMER_BASE = 32'h1A10_B000;
  localparam logic [31:0] SOC_TIMER_SIZE = 32'h0000_0100;
  localparam logic [31:0] CLIC_BASE      = 32'h1A20_0000;
  localparam logic [31:0] CLIC_SIZE      = 32'h0000_2000;
  localparam logic [31:0] MBOX_BASE      = 32'h1A30_0000;
  localparam logic [31:0] MBOX_SIZE      = 32'h0000_1000;
  localparam logic [31:0] L2_BASE        = 32'h1C00_0000;  // 512 KiB L2
  localparam logic [31:0] L2_PRIV_SIZE   = 32'h0002_0000;  //   two private banks of 64 KiB
  localparam logic [31:0] L2_SIZE        = 32'h0008_0000;

  function automatic logic in_range(logic [31:0] a, logic [31:0] base, logic [31:0] size);
    return (a >= base) && (a - base < size);
  endfunction

endpackage
