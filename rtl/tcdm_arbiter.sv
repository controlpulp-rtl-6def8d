// tcdm_arbiter: merges NM word masters onto one target, round robin.
//
// One request passes per cycle; the granted master's index is pushed into a
// FIFO of DEPTH entries so that responses, which the target returns in order,
// are steered back to the right master. When the FIFO is full no request is
// forwarded, which bounds the number of requests in flight to DEPTH.
// Used where several initiators share one path (the cluster's way out to
// the SoC, the SoC's way into the cluster). Arbitration policy and depth are
// this design's choices.
module tcdm_arbiter
  import cpulp_pkg::*;
#(
  parameter int unsigned NM    = 2,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned MW   = (NM > 1) ? $clog2(NM) : 1,
  localparam int unsigned DW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  tcdm_req_t  mst_req_i [NM],
  output tcdm_rsp_t  mst_rsp_o [NM],
  output tcdm_req_t  slv_req_o,
  input  tcdm_rsp_t  slv_rsp_i
);

  logic [MW-1:0] rr_q, win;
  logic          any;
  logic [MW-1:0] fifo_q [DEPTH];
  logic [DW-1:0] wptr_q, rptr_q;
  logic [DW:0]   cnt_q;
  logic          full, push, pop;

  assign full = (cnt_q == (DW+1)'(DEPTH));

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int k = NM - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(rr_q) + k) % NM;
      if (mst_req_i[idx].req) begin
        any = 1'b1;
        win = MW'(idx);
      end
    end
    slv_req_o     = mst_req_i[win];
    slv_req_o.req = any && !full;
  end

  assign push = slv_req_o.req && slv_rsp_i.gnt;
  assign pop  = slv_rsp_i.rvalid;

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mst_rsp_o[m]        = slv_rsp_i;
      mst_rsp_o[m].gnt    = push && (win == MW'(m));
      mst_rsp_o[m].rvalid = pop && (fifo_q[rptr_q] == MW'(m));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q   <= '0;
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
      for (int i = 0; i < DEPTH; i++) fifo_q[i] <= '0;
    end else begin
      if (push) begin
        rr_q           <= MW'((int'(win) + 1) % NM);
        fifo_q[wptr_q] <= win;
        wptr_q         <= DW'((int'(wptr_q) + 1) % DEPTH);
      end
      if (pop) rptr_q <= DW'((int'(rptr_q) + 1) % DEPTH);
      cnt_q <= cnt_q + (DW+1)'(push) - (DW+1)'(pop);
    end
  end

endmodule
