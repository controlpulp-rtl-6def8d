// axi_to_tcdm: AXI4 slave (64-bit data, 32-bit address) in front of the
// word-wide L2/L1 interconnect. The external secure boot subsystem writes the
// firmware image into L2 through it.
//
// One transaction is served at a time; when both are waiting, a write goes
// before a read. Bursts of type INCR (and FIXED) with any length are
// accepted. For each beat the bridge issues one 32-bit request per 32-bit
// half of the beat that the transfer covers: both halves for 8-byte beats,
// the half chosen by address bit 2 for narrower ones; a write half whose
// strobes are all zero is skipped. Each word request waits for its response
// before the next one, so a 64-bit beat costs about four cycles on a
// single-cycle memory. B or R carries SLVERR if any word access returned
// an error.
// From the paper: the AXI slave port, its widths, and its role in booting.
// Everything about how the bridge works is this design's choice.
module axi_to_tcdm
  import cpulp_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  axi_req_i,
  output axi_rsp_t  axi_rsp_o,
  output tcdm_req_t req_o,
  input  tcdm_rsp_t rsp_i
);

  typedef enum logic [2:0] {IDLE, W_BEAT, W_WORD, B_RESP, R_WORD, R_BEAT} state_e;

  state_e      state_q;
  axi_ax_t     ax_q;
  logic [7:0]  beats_left_q;
  logic [31:0] beat_addr_q;
  axi_w_t      w_q;
  logic [63:0] rdata_q;
  logic        err_q;
  logic [1:0]  lanes_q;       // halves still to access in this beat
  logic        pend_q;        // a word request is waiting for its response
  logic        lane;

  // the lowest half still pending
  assign lane = lanes_q[0] ? 1'b0 : 1'b1;

  function automatic logic [1:0] beat_lanes(logic [2:0] size, logic [31:0] a);
    if (size >= 3'd3) return 2'b11;
    return a[2] ? 2'b10 : 2'b01;
  endfunction

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.aw_ready = (state_q == IDLE);
    axi_rsp_o.ar_ready = (state_q == IDLE) && !axi_req_i.aw_valid;
    axi_rsp_o.w_ready  = (state_q == W_BEAT);
    axi_rsp_o.b_valid  = (state_q == B_RESP);
    axi_rsp_o.b.id     = ax_q.id;
    axi_rsp_o.b.resp   = err_q ? AXI_RESP_SLVERR : AXI_RESP_OKAY;
    axi_rsp_o.r_valid  = (state_q == R_BEAT);
    axi_rsp_o.r.id     = ax_q.id;
    axi_rsp_o.r.data   = rdata_q;
    axi_rsp_o.r.resp   = err_q ? AXI_RESP_SLVERR : AXI_RESP_OKAY;
    axi_rsp_o.r.last   = (beats_left_q == 8'd0);

    req_o       = TCDM_REQ_IDLE;
    req_o.req   = ((state_q == W_WORD) || (state_q == R_WORD)) && !pend_q && (lanes_q != 2'b00);
    req_o.we    = (state_q == W_WORD);
    req_o.addr  = {beat_addr_q[31:3], lane, 2'b00};
    req_o.be    = lane ? w_q.strb[7:4] : w_q.strb[3:0];
    req_o.wdata = lane ? w_q.data[63:32] : w_q.data[31:0];
  end

  logic [31:0] next_addr;
  assign next_addr = (ax_q.burst == AXI_BURST_FIXED) ? beat_addr_q
                                                     : beat_addr_q + (32'd1 << ax_q.size);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; ax_q <= '0; beats_left_q <= '0; beat_addr_q <= '0;
      w_q <= '0; rdata_q <= '0; err_q <= 1'b0; lanes_q <= '0; pend_q <= 1'b0;
    end else begin
      if (req_o.req && rsp_i.gnt) pend_q <= 1'b1;
      if (pend_q && rsp_i.rvalid) begin
        pend_q <= 1'b0;
        err_q  <= err_q | rsp_i.err;
        if (state_q == R_WORD) begin
          if (lane) rdata_q[63:32] <= rsp_i.rdata;
          else      rdata_q[31:0]  <= rsp_i.rdata;
        end
        lanes_q[lane] <= 1'b0;
      end
      unique case (state_q)
        IDLE: begin
          err_q <= 1'b0;
          if (axi_req_i.aw_valid) begin
            ax_q         <= axi_req_i.aw;
            beats_left_q <= axi_req_i.aw.len;
            beat_addr_q  <= axi_req_i.aw.addr;
            state_q      <= W_BEAT;
          end else if (axi_req_i.ar_valid) begin
            ax_q         <= axi_req_i.ar;
            beats_left_q <= axi_req_i.ar.len;
            beat_addr_q  <= axi_req_i.ar.addr;
            lanes_q      <= beat_lanes(axi_req_i.ar.size, axi_req_i.ar.addr);
            rdata_q      <= '0;
            state_q      <= R_WORD;
          end
        end
        W_BEAT: if (axi_req_i.w_valid) begin
          logic [1:0] l;
          w_q <= axi_req_i.w;
          l = beat_lanes(ax_q.size, beat_addr_q);
          if (axi_req_i.w.strb[3:0] == 4'b0) l[0] = 1'b0;
          if (axi_req_i.w.strb[7:4] == 4'b0) l[1] = 1'b0;
          lanes_q <= l;
          state_q <= W_WORD;
        end
        W_WORD: if (lanes_q == 2'b00 && !pend_q) begin
          if (beats_left_q == 8'd0) state_q <= B_RESP;
          else begin
            beats_left_q <= beats_left_q - 8'd1;
            beat_addr_q  <= next_addr;
            state_q      <= W_BEAT;
          end
        end
        B_RESP: if (axi_req_i.b_ready) state_q <= IDLE;
        R_WORD: if (lanes_q == 2'b00 && !pend_q) state_q <= R_BEAT;
        R_BEAT: if (axi_req_i.r_ready) begin
          if (beats_left_q == 8'd0) state_q <= IDLE;
          else begin
            beats_left_q <= beats_left_q - 8'd1;
            beat_addr_q  <= next_addr;
            lanes_q      <= beat_lanes(ax_q.size, next_addr);
            err_q        <= 1'b0;
            state_q      <= R_WORD;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
