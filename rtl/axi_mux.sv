// axi_mux: merges NS AXI4 masters onto one AXI4 master port.
//
// In the design it joins the SoC (manager) path and the cluster path in
// front of the AXI master port that reaches the PVT registers, the PLLs and
// the mailboxes. The inner masters use IDs below 2**AXI_IDW; the mux puts
// the index of the master into the ID bits above, so B and R responses are
// routed back by their ID alone. AW and AR are arbitrated round robin, each
// on its own; a choice is held while its valid waits for ready, so the
// output channel stays stable as AXI requires. The order in which write
// addresses were granted is kept in a FIFO (W_DEPTH entries) and W beats are
// taken from the master at its head until the beat with last set.
// From the paper: an AXI-4 mux with inputs "from SoC" and "from Cluster"
// driving the AXI master port. ID extension, round robin and the FIFO depth
// are this design's choices.
module axi_mux
  import cpulp_pkg::*;
#(
  parameter int unsigned NS      = 2,
  parameter int unsigned W_DEPTH = 8,
  localparam int unsigned SW     = (NS > 1) ? $clog2(NS) : 1,
  localparam int unsigned DW     = $clog2(W_DEPTH)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  slv_req_i [NS],
  output axi_rsp_t  slv_rsp_o [NS],
  output axi_req_t  mst_req_o,
  input  axi_rsp_t  mst_rsp_i
);

  // ------------------------------------------------------------ AW / AR arbitration
  logic [SW-1:0] aw_rr_q, ar_rr_q, aw_sel, ar_sel, aw_lock_sel_q, ar_lock_sel_q;
  logic          aw_any, ar_any, aw_lock_q, ar_lock_q;
  logic [SW-1:0] wfifo_q [W_DEPTH];
  logic [DW-1:0] wwp_q, wrp_q;
  logic [DW:0]   wcnt_q;
  logic          wfull, aw_hs, ar_hs, w_hs, wlast_hs;
  logic [SW-1:0] w_sel;

  always_comb begin
    aw_any = 1'b0; aw_sel = '0;
    ar_any = 1'b0; ar_sel = '0;
    for (int k = NS - 1; k >= 0; k--) begin
      int unsigned ia, ir;
      ia = (int'(aw_rr_q) + k) % NS;
      ir = (int'(ar_rr_q) + k) % NS;
      if (slv_req_i[ia].aw_valid) begin aw_any = 1'b1; aw_sel = SW'(ia); end
      if (slv_req_i[ir].ar_valid) begin ar_any = 1'b1; ar_sel = SW'(ir); end
    end
    if (aw_lock_q) aw_sel = aw_lock_sel_q;
    if (ar_lock_q) ar_sel = ar_lock_sel_q;
  end

  assign wfull    = (wcnt_q == (DW+1)'(W_DEPTH));
  assign w_sel    = wfifo_q[wrp_q];

  always_comb begin
    mst_req_o          = '0;
    mst_req_o.aw       = slv_req_i[aw_sel].aw;
    mst_req_o.aw.id    = {aw_sel, slv_req_i[aw_sel].aw.id[AXI_IDW-1:0]};
    mst_req_o.aw_valid = aw_any && slv_req_i[aw_sel].aw_valid && !wfull;
    mst_req_o.ar       = slv_req_i[ar_sel].ar;
    mst_req_o.ar.id    = {ar_sel, slv_req_i[ar_sel].ar.id[AXI_IDW-1:0]};
    mst_req_o.ar_valid = ar_any && slv_req_i[ar_sel].ar_valid;
    mst_req_o.w        = slv_req_i[w_sel].w;
    mst_req_o.w_valid  = (wcnt_q != 0) && slv_req_i[w_sel].w_valid;
    mst_req_o.b_ready  = slv_req_i[mst_rsp_i.b.id[AXI_IDWO-1 -: SW]].b_ready;
    mst_req_o.r_ready  = slv_req_i[mst_rsp_i.r.id[AXI_IDWO-1 -: SW]].r_ready;
  end

  assign aw_hs    = mst_req_o.aw_valid && mst_rsp_i.aw_ready;
  assign ar_hs    = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  assign w_hs     = mst_req_o.w_valid && mst_rsp_i.w_ready;
  assign wlast_hs = w_hs && mst_req_o.w.last;

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      slv_rsp_o[s]          = '0;
      slv_rsp_o[s].aw_ready = aw_hs && (aw_sel == SW'(s));
      slv_rsp_o[s].ar_ready = ar_hs && (ar_sel == SW'(s));
      slv_rsp_o[s].w_ready  = (wcnt_q != 0) && (w_sel == SW'(s)) && mst_rsp_i.w_ready;
      slv_rsp_o[s].b        = mst_rsp_i.b;
      slv_rsp_o[s].b.id     = {{SW{1'b0}}, mst_rsp_i.b.id[AXI_IDW-1:0]};
      slv_rsp_o[s].b_valid  = mst_rsp_i.b_valid && (mst_rsp_i.b.id[AXI_IDWO-1 -: SW] == SW'(s));
      slv_rsp_o[s].r        = mst_rsp_i.r;
      slv_rsp_o[s].r.id     = {{SW{1'b0}}, mst_rsp_i.r.id[AXI_IDW-1:0]};
      slv_rsp_o[s].r_valid  = mst_rsp_i.r_valid && (mst_rsp_i.r.id[AXI_IDWO-1 -: SW] == SW'(s));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_rr_q <= '0; ar_rr_q <= '0;
      aw_lock_q <= 1'b0; ar_lock_q <= 1'b0;
      aw_lock_sel_q <= '0; ar_lock_sel_q <= '0;
      wwp_q <= '0; wrp_q <= '0; wcnt_q <= '0;
      for (int i = 0; i < W_DEPTH; i++) wfifo_q[i] <= '0;
    end else begin
      aw_lock_q     <= mst_req_o.aw_valid && !mst_rsp_i.aw_ready;
      aw_lock_sel_q <= aw_sel;
      ar_lock_q     <= mst_req_o.ar_valid && !mst_rsp_i.ar_ready;
      ar_lock_sel_q <= ar_sel;
      if (aw_hs) begin
        aw_rr_q        <= SW'((int'(aw_sel) + 1) % NS);
        wfifo_q[wwp_q] <= aw_sel;
        wwp_q          <= DW'((int'(wwp_q) + 1) % W_DEPTH);
      end
      if (ar_hs) ar_rr_q <= SW'((int'(ar_sel) + 1) % NS);
      if (wlast_hs) wrp_q <= DW'((int'(wrp_q) + 1) % W_DEPTH);
      wcnt_q <= wcnt_q + (DW+1)'(aw_hs) - (DW+1)'(wlast_hs);
    end
  end

  // the output must hold AW/AR stable while waiting
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (mst_req_o.aw_valid && !mst_rsp_i.aw_ready) |=> mst_req_o.aw_valid && $stable(mst_req_o.aw))
    else $error("axi_mux: AW changed while waiting");

endmodule
