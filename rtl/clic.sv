// clic: core-local interrupt controller for the manager core.
//
// NUM_IRQ interrupt lines (256 in this design) each have a memory-mapped
// control word with pending (ip), enable (ie), attributes (selective
// hardware vectoring, trigger type) and an 8-bit control value that is
// split into an interrupt level (upper nlbits bits) and a priority (the
// rest). Every cycle the controller picks, among pending and enabled lines,
// the one with the largest control value (level first, then priority; the
// highest line number wins a tie) and offers it to the core if its level is
// above both the threshold register and the level the core is running at,
// which gives preemption (nesting) by level. The offer (irq_valid_o with id,
// level and shv) is registered: a source edge in cycle n is offered in cycle
// n+1, the one-cycle "CLIC input to output" of the paper's latency table.
// The core claims with irq_ready_i; an edge-triggered line then loses its
// pending bit in the same cycle, a level-triggered one follows its input.
//
// Register map (byte offsets; one 32-bit word per register):
//   0x0000 cliccfg     bits [4:1] nlbits (number of level bits, 0..8)
//   0x0004 mintthresh  bits [7:0] threshold level
//   0x1000 + 4*i       clicint[i]: [0] ip, [8] ie, [16] shv,
//                      [18:17] trig (bit 17: 1 = edge, bit 18: 1 = negative),
//                      [31:24] ctl
// Bus: word-request slave, granted at once, answered in the next cycle.
// From the paper: 256 lines, per-line priority and level, trigger type, SHV,
// nesting, one-cycle input-to-output. The layout follows the RISC-V CLIC
// draft; keeping the threshold in a memory-mapped register instead of a core
// CSR, and the tie-break, are this design's choices.
module clic
  import cpulp_pkg::*;
#(
  parameter int unsigned NUM_IRQ = 256,
  localparam int unsigned IW     = $clog2(NUM_IRQ)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  tcdm_req_t     reg_req_i,
  output tcdm_rsp_t     reg_rsp_o,
  input  logic [NUM_IRQ-1:0] irq_src_i,
  // towards the core
  output logic          irq_valid_o,
  input  logic          irq_ready_i,
  output logic [IW-1:0] irq_id_o,
  output logic [7:0]    irq_level_o,
  output logic          irq_shv_o,
  input  logic [7:0]    core_level_i
);

  typedef struct packed {
    logic [7:0] ctl;
    logic [1:0] trig;
    logic       shv;
    logic       ie;
    logic       ip;
  } clicint_t;

  clicint_t          int_q [NUM_IRQ];
  clicint_t          int_d [NUM_IRQ];
  logic [NUM_IRQ-1:0] src_q;
  logic [3:0]        nlbits_q;
  logic [7:0]        thresh_q;
  logic              rvalid_q;
  logic [31:0]       rdata_q;

  logic              wr, rd;
  logic [9:0]        widx;
  logic              is_int;

  assign wr     = reg_req_i.req && reg_req_i.we;
  assign rd     = reg_req_i.req && !reg_req_i.we;
  assign is_int = reg_req_i.addr[12];
  assign widx   = reg_req_i.addr[11:2];

  // level mask: bits below the level field read as ones
  logic [7:0] lvl_fill;
  always_comb begin
    lvl_fill = 8'hFF >> ((nlbits_q > 4'd8) ? 4'd8 : nlbits_q);
  end

  // next-state of the per-line registers
  always_comb begin
    for (int i = 0; i < NUM_IRQ; i++) begin
      logic edge_hit, lvl;
      int_d[i] = int_q[i];
      edge_hit = 1'b0;
      if (wr && is_int && (int'(widx) == i)) begin
        if (reg_req_i.be[0]) int_d[i].ip   = reg_req_i.wdata[0];
        if (reg_req_i.be[1]) int_d[i].ie   = reg_req_i.wdata[8];
        if (reg_req_i.be[2]) begin
          int_d[i].shv  = reg_req_i.wdata[16];
          int_d[i].trig = reg_req_i.wdata[18:17];
        end
        if (reg_req_i.be[3]) int_d[i].ctl  = reg_req_i.wdata[31:24];
      end
      lvl = irq_src_i[i] ^ int_q[i].trig[1];
      if (int_q[i].trig[0]) begin
        // edge triggered: claim clears, an edge sets
        edge_hit = int_q[i].trig[1] ? (src_q[i] && !irq_src_i[i])
                                    : (!src_q[i] && irq_src_i[i]);
        if (irq_valid_o && irq_ready_i && (int'(irq_id_o) == i)) int_d[i].ip = 1'b0;
        if (edge_hit) int_d[i].ip = 1'b1;
      end else begin
        int_d[i].ip = lvl;
      end
    end
  end

  // arbitration on the next state: result registered towards the core
  logic          best_v;
  logic [IW-1:0] best_id;
  logic [7:0]    best_ctl;
  always_comb begin
    best_v   = 1'b0;
    best_id  = '0;
    best_ctl = '0;
    for (int i = 0; i < NUM_IRQ; i++) begin
      if (int_d[i].ip && int_d[i].ie && (!best_v || int_d[i].ctl >= best_ctl)) begin
        best_v   = 1'b1;
        best_id  = IW'(i);
        best_ctl = int_d[i].ctl;
      end
    end
  end

  logic [7:0] best_lvl, floor_lvl;
  assign best_lvl  = best_ctl | lvl_fill;
  assign floor_lvl = (thresh_q > core_level_i) ? thresh_q : core_level_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_IRQ; i++) int_q[i] <= '0;
      src_q       <= '0;
      nlbits_q    <= 4'd8;
      thresh_q    <= '0;
      irq_valid_o <= 1'b0;
      irq_id_o    <= '0;
      irq_level_o <= '0;
      irq_shv_o   <= 1'b0;
      rvalid_q    <= 1'b0;
      rdata_q     <= '0;
    end else begin
      for (int i = 0; i < NUM_IRQ; i++) int_q[i] <= int_d[i];
      src_q <= irq_src_i;
      if (wr && !is_int && widx == 10'd0 && reg_req_i.be[0]) nlbits_q <= reg_req_i.wdata[4:1];
      if (wr && !is_int && widx == 10'd1 && reg_req_i.be[0]) thresh_q <= reg_req_i.wdata[7:0];
      irq_valid_o <= best_v && (best_lvl > floor_lvl);
      irq_id_o    <= best_id;
      irq_level_o <= best_lvl;
      irq_shv_o   <= int_d[best_id].shv;
      rvalid_q    <= reg_req_i.req;
      if (rd) begin
        if (is_int) begin
          if (int'(widx) < NUM_IRQ)
            rdata_q <= {int_q[widx[IW-1:0]].ctl, 5'b0, int_q[widx[IW-1:0]].trig,
                        int_q[widx[IW-1:0]].shv, 7'b0, int_q[widx[IW-1:0]].ie,
                        7'b0, int_q[widx[IW-1:0]].ip};
          else
            rdata_q <= '0;
        end else if (widx == 10'd0) rdata_q <= {27'b0, nlbits_q, 1'b0};
        else if (widx == 10'd1)     rdata_q <= {24'b0, thresh_q};
        else                        rdata_q <= '0;
      end
    end
  end

  assign reg_rsp_o = '{gnt: reg_req_i.req, rvalid: rvalid_q, rdata: rdata_q, err: 1'b0};

  // a claimed request must have been offered
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   irq_ready_i |-> irq_valid_o)
    else $error("clic: irq_ready_i without irq_valid_o");

endmodule
