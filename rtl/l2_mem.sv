// l2_mem: the manager domain's 512 KiB L2 memory with its TCDM interconnect.
//
// The L2 is split into six banks. The two private banks (64 KiB each, at the
// bottom of the L2 range) are reachable only by the manager core's
// instruction and data ports, masters 0 and 1, so that no DMA, boot or
// cluster traffic can delay the manager's fetches. The four remaining banks
// (96 KiB each) are word-interleaved and shared by all NM masters through a
// round-robin logarithmic crossbar. A request of master 2 or above to a
// private bank, or any request outside the L2 range, is granted and answered
// with err set and no memory access.
// Timing: a granted access is answered one cycle after its grant (constant
// access time when there is no conflict); conflicting masters wait for
// their grant.
// From the paper: 512 KiB, six banks, two private to the manager. This
// design's own choices: the bank sizes (the paper does not split the 512
// KiB), word interleaving, round-robin arbitration and the error response.
module l2_mem
  import cpulp_pkg::*;
#(
  parameter int unsigned NM              = 6,
  parameter int unsigned PRIV_BANK_WORDS = 16384,   // 64 KiB
  parameter int unsigned INTL_BANK_WORDS = 24576,   // 96 KiB
  localparam int unsigned NPRIV          = 2,
  localparam int unsigned NINTL          = 4
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  tcdm_req_t  mst_req_i [NM],
  output tcdm_rsp_t  mst_rsp_o [NM]
);

  localparam logic [31:0] PRIV_BYTES = 32'(PRIV_BANK_WORDS * 4);
  localparam logic [31:0] INTL_BASE  = L2_BASE + NPRIV * PRIV_BYTES;
  localparam logic [31:0] INTL_BYTES = 32'(NINTL * INTL_BANK_WORDS * 4);
  localparam int unsigned PRW        = $clog2(PRIV_BANK_WORDS);
  localparam int unsigned IRW        = $clog2(INTL_BANK_WORDS);

  tcdm_req_t dm_req [NM][3];
  tcdm_rsp_t dm_rsp [NM][3];
  tcdm_rsp_t pv_rsp [NPRIV][2];   // private bank responses to the manager ports
  tcdm_rsp_t i_rsp  [NM];         // interleaved responses
  logic [1:0] sel   [NM];

  // ---------------------------------------------------------- per-master demux
  for (genvar m = 0; m < NM; m++) begin : g_demux
    always_comb begin
      logic [31:0] a;
      a = mst_req_i[m].addr;
      if (in_range(a, L2_BASE, PRIV_BYTES) && m < 2)                  sel[m] = 2'd0;
      else if (in_range(a, L2_BASE + PRIV_BYTES, PRIV_BYTES) && m < 2) sel[m] = 2'd1;
      else if (in_range(a, INTL_BASE, INTL_BYTES))                    sel[m] = 2'd2;
      else                                                            sel[m] = 2'd3;
    end
    tcdm_demux #(.NS(3)) i_demux (
      .clk_i, .rst_ni,
      .sel_i     (sel[m]),
      .mst_req_i (mst_req_i[m]),
      .mst_rsp_o (mst_rsp_o[m]),
      .slv_req_o (dm_req[m]),
      .slv_rsp_i (dm_rsp[m])
    );
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      for (int b = 0; b < NPRIV; b++) dm_rsp[m][b] = (m < 2) ? pv_rsp[b][m % 2] : TCDM_RSP_IDLE;
      dm_rsp[m][2] = i_rsp[m];
    end
  end

  // ---------------------------------------------------------- private banks
  for (genvar b = 0; b < NPRIV; b++) begin : g_priv
    tcdm_req_t       p_req [2];
    tcdm_rsp_t       p_rsp [2];
    logic            bk_req   [1];
    logic            bk_we    [1];
    logic [PRW-1:0]  bk_addr  [1];
    logic [3:0]      bk_be    [1];
    logic [31:0]     bk_wdata [1];
    logic [31:0]     bk_rdata [1];

    for (genvar m = 0; m < 2; m++) begin : g_m
      always_comb begin
        p_req[m]      = dm_req[m][b];
        p_req[m].addr = dm_req[m][b].addr - (L2_BASE + b * PRIV_BYTES);
      end
      assign pv_rsp[b][m] = p_rsp[m];
    end

    tcdm_xbar #(.NM(2), .NB(1), .BANK_WORDS(PRIV_BANK_WORDS)) i_xbar (
      .clk_i, .rst_ni,
      .mst_req_i (p_req), .mst_rsp_o (p_rsp),
      .bank_req_o (bk_req), .bank_we_o (bk_we), .bank_addr_o (bk_addr),
      .bank_be_o (bk_be), .bank_wdata_o (bk_wdata), .bank_rdata_i (bk_rdata)
    );
    sram_bank #(.WORDS(PRIV_BANK_WORDS)) i_bank (
      .clk_i, .req_i (bk_req[0]), .we_i (bk_we[0]), .addr_i (bk_addr[0]),
      .be_i (bk_be[0]), .wdata_i (bk_wdata[0]), .rdata_o (bk_rdata[0])
    );
  end

  // ---------------------------------------------------------- interleaved banks
  tcdm_req_t       i_req [NM];
  logic            ib_req   [NINTL];
  logic            ib_we    [NINTL];
  logic [IRW-1:0]  ib_addr  [NINTL];
  logic [3:0]      ib_be    [NINTL];
  logic [31:0]     ib_wdata [NINTL];
  logic [31:0]     ib_rdata [NINTL];

  for (genvar m = 0; m < NM; m++) begin : g_intl_m
    always_comb begin
      i_req[m]      = dm_req[m][2];
      i_req[m].addr = dm_req[m][2].addr - INTL_BASE;
    end
  end

  tcdm_xbar #(.NM(NM), .NB(NINTL), .BANK_WORDS(INTL_BANK_WORDS)) i_intl_xbar (
    .clk_i, .rst_ni,
    .mst_req_i (i_req), .mst_rsp_o (i_rsp),
    .bank_req_o (ib_req), .bank_we_o (ib_we), .bank_addr_o (ib_addr),
    .bank_be_o (ib_be), .bank_wdata_o (ib_wdata), .bank_rdata_i (ib_rdata)
  );

  for (genvar b = 0; b < NINTL; b++) begin : g_intl
    sram_bank #(.WORDS(INTL_BANK_WORDS)) i_bank (
      .clk_i, .req_i (ib_req[b]), .we_i (ib_we[b]), .addr_i (ib_addr[b]),
      .be_i (ib_be[b]), .wdata_i (ib_wdata[b]), .rdata_o (ib_rdata[b])
    );
  end

endmodule
