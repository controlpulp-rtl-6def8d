// tcdm_demux: routes one word master to one of NS targets.
//
// The caller decodes the address and gives the target index on sel_i; an
// index of NS or above means "no target" and is answered by an internal
// error responder (granted at once, rvalid with err one cycle later). Targets
// may answer after different latencies, so the demux counts the requests in
// flight and lets a request go to a different target only when none is
// outstanding: responses therefore always come back in order. This is the
// "core demux" / "TCDM demuxer" of the block diagram; its ordering rule is
// this design's own.
module tcdm_demux
  import cpulp_pkg::*;
#(
  parameter int unsigned NS      = 2,
  parameter int unsigned MAX_OUT = 255,
  localparam int unsigned SW     = $clog2(NS + 1),
  localparam int unsigned CW     = $clog2(MAX_OUT + 1),
  localparam int unsigned IW     = (NS > 1) ? $clog2(NS) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [SW-1:0]   sel_i,
  input  tcdm_req_t       mst_req_i,
  output tcdm_rsp_t       mst_rsp_o,
  output tcdm_req_t       slv_req_o [NS],
  input  tcdm_rsp_t       slv_rsp_i [NS]
);

  logic [CW-1:0] out_q;
  logic [SW-1:0] last_q;
  logic          allow, fire, done;
  logic          err_rvalid_q;

  assign allow = (out_q == '0) || ((sel_i == last_q) && (out_q != CW'(MAX_OUT)));

  always_comb begin
    mst_rsp_o = TCDM_RSP_IDLE;
    for (int s = 0; s < NS; s++) begin
      slv_req_o[s]     = mst_req_i;
      slv_req_o[s].req = mst_req_i.req && allow && (int'(sel_i) == s);
    end
    if (int'(sel_i) < NS) mst_rsp_o.gnt = allow && slv_rsp_i[sel_i[IW-1:0]].gnt;
    else                  mst_rsp_o.gnt = allow && mst_req_i.req;
    if (int'(last_q) < NS) begin
      mst_rsp_o.rvalid = slv_rsp_i[last_q[IW-1:0]].rvalid;
      mst_rsp_o.rdata  = slv_rsp_i[last_q[IW-1:0]].rdata;
      mst_rsp_o.err    = slv_rsp_i[last_q[IW-1:0]].err;
    end else begin
      mst_rsp_o.rvalid = err_rvalid_q;
      mst_rsp_o.err    = err_rvalid_q;
    end
  end

  assign fire = mst_req_i.req && mst_rsp_o.gnt;
  assign done = mst_rsp_o.rvalid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_q        <= '0;
      last_q       <= '0;
      err_rvalid_q <= 1'b0;
    end else begin
      out_q        <= out_q + CW'(fire) - CW'(done);
      if (fire) last_q <= sel_i;
      err_rvalid_q <= fire && (int'(sel_i) >= NS);
    end
  end

endmodule
