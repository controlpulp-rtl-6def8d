// tcdm_to_axi: turns 32-bit word requests into AXI4 transactions on the
// 64-bit data, 32-bit address AXI master of the design.
//
// Each request becomes one single-beat AXI transaction (len 0, size 4
// bytes); the word rides in the 64-bit lane selected by address bit 2, with
// the byte enables moved to the matching strobes. Reads are granted when AR
// is accepted; writes when both AW and W are accepted (they may be accepted
// in different cycles). Up to MAX_OUT transactions may be in flight, so a
// stream of requests (the DMA's reads of PVT registers) is pipelined across
// the latency of the on-chip network. A FIFO remembers the order of reads and
// writes; responses are handed back in that order (R is accepted only when a
// read is at the head, B only when a write is), so the word side always sees
// in-order responses. A write is acknowledged with rvalid when its B
// arrives; err reports a non-OKAY response.
// From the paper: AXI4, 64-bit data, 32-bit address, a bridge from the
// cores' memory ports to AXI ("to-AXI converters", "TCDM to AXI") and many
// outstanding transactions. Single-beat transactions and the ordering FIFO
// are this design's choices.
module tcdm_to_axi
  import cpulp_pkg::*;
#(
  parameter int unsigned MAX_OUT = 128,
  parameter logic [AXI_IDWO-1:0] AXI_ID = '0,
  localparam int unsigned FW = $clog2(MAX_OUT)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t req_i,
  output tcdm_rsp_t rsp_o,
  output axi_req_t  axi_req_o,
  input  axi_rsp_t  axi_rsp_i
);

  // order FIFO: {is_write, lane}
  logic [1:0]  ord_q [MAX_OUT];
  logic [FW-1:0] wp_q, rp_q;
  logic [FW:0] cnt_q;
  logic        full, push, pop;
  logic        aw_done_q, w_done_q;
  logic        aw_hs, w_hs, ar_hs;
  logic        head_wr, head_lane;

  assign full      = (cnt_q == (FW+1)'(MAX_OUT));
  assign head_wr   = ord_q[rp_q][1];
  assign head_lane = ord_q[rp_q][0];

  always_comb begin
    axi_req_o = '0;
    // AR
    axi_req_o.ar.id    = AXI_ID;
    axi_req_o.ar.addr  = {req_i.addr[31:2], 2'b00};
    axi_req_o.ar.len   = 8'd0;
    axi_req_o.ar.size  = 3'd2;
    axi_req_o.ar.burst = AXI_BURST_INCR;
    axi_req_o.ar_valid = req_i.req && !req_i.we && !full;
    // AW + W
    axi_req_o.aw       = axi_req_o.ar;
    axi_req_o.aw_valid = req_i.req && req_i.we && !full && !aw_done_q;
    axi_req_o.w.data   = {req_i.wdata, req_i.wdata};
    axi_req_o.w.strb   = req_i.addr[2] ? {req_i.be, 4'b0} : {4'b0, req_i.be};
    axi_req_o.w.last   = 1'b1;
    axi_req_o.w_valid  = req_i.req && req_i.we && !full && !w_done_q;
    // responses, in request order
    axi_req_o.r_ready  = (cnt_q != 0) && !head_wr;
    axi_req_o.b_ready  = (cnt_q != 0) &&  head_wr;
  end

  assign ar_hs = axi_req_o.ar_valid && axi_rsp_i.ar_ready;
  assign aw_hs = axi_req_o.aw_valid && axi_rsp_i.aw_ready;
  assign w_hs  = axi_req_o.w_valid  && axi_rsp_i.w_ready;
  assign push  = ar_hs || (req_i.req && req_i.we && !full &&
                           (aw_done_q || aw_hs) && (w_done_q || w_hs));
  assign pop   = (axi_rsp_i.r_valid && axi_req_o.r_ready) ||
                 (axi_rsp_i.b_valid && axi_req_o.b_ready);

  always_comb begin
    rsp_o        = TCDM_RSP_IDLE;
    rsp_o.gnt    = push;
    rsp_o.rvalid = pop;
    rsp_o.rdata  = head_lane ? axi_rsp_i.r.data[63:32] : axi_rsp_i.r.data[31:0];
    rsp_o.err    = head_wr ? (axi_rsp_i.b.resp != AXI_RESP_OKAY)
                           : (axi_rsp_i.r.resp != AXI_RESP_OKAY);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wp_q <= '0; rp_q <= '0; cnt_q <= '0;
      aw_done_q <= 1'b0; w_done_q <= 1'b0;
      for (int i = 0; i < MAX_OUT; i++) ord_q[i] <= '0;
    end else begin
      if (push) begin
        ord_q[wp_q] <= {req_i.we, req_i.addr[2]};
        wp_q        <= FW'((int'(wp_q) + 1) % MAX_OUT);
        aw_done_q   <= 1'b0;
        w_done_q    <= 1'b0;
      end else begin
        if (aw_hs) aw_done_q <= 1'b1;
        if (w_hs)  w_done_q  <= 1'b1;
      end
      if (pop) rp_q <= FW'((int'(rp_q) + 1) % MAX_OUT);
      cnt_q <= cnt_q + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

endmodule
