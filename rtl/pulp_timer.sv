// pulp_timer: 64-bit timer with compare interrupt.
//
// Used twice: as the SoC timer of the manager domain (the paper measures
// transfer times with it) and as the cluster timer. The counter advances by
// one every PRESCALER+1 cycles while enabled. When it equals the compare
// value irq_o pulses for one cycle and, with "one-shot/reset on match" set,
// the counter restarts from zero.
// Registers (byte offsets):
//   0x00 CFG   [0] enable, [1] reset counter (self-clearing), [2] irq enable,
//              [3] reset on match, [15:8] prescaler
//   0x04 CNT_LO, 0x08 CNT_HI   counter (writable)
//   0x0C CMP_LO, 0x10 CMP_HI   compare value
// Bus: word-request slave, granted at once, answered in the next cycle.
// The paper only names the two timers; all of the above is this design's
// choice, modelled on common microcontroller timers.
module pulp_timer
  import cpulp_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t reg_req_i,
  output tcdm_rsp_t reg_rsp_o,
  output logic      irq_o
);

  logic        en_q, irq_en_q, rst_match_q;
  logic [7:0]  presc_q, pcnt_q;
  logic [63:0] cnt_q, cmp_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic        wr, tick;
  logic [2:0]  widx;

  assign wr   = reg_req_i.req && reg_req_i.we;
  assign widx = reg_req_i.addr[4:2];
  assign tick = en_q && (pcnt_q == presc_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0; irq_en_q <= 1'b0; rst_match_q <= 1'b0;
      presc_q <= '0; pcnt_q <= '0; cnt_q <= '0; cmp_q <= '1;
      irq_o <= 1'b0; rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      irq_o <= 1'b0;
      if (en_q) pcnt_q <= tick ? 8'd0 : pcnt_q + 8'd1;
      if (tick) begin
        if (cnt_q == cmp_q) begin
          irq_o <= irq_en_q;
          cnt_q <= rst_match_q ? 64'd0 : cnt_q + 64'd1;
        end else begin
          cnt_q <= cnt_q + 64'd1;
        end
      end
      if (wr) begin
        unique case (widx)
          3'd0: begin
            en_q        <= reg_req_i.wdata[0];
            irq_en_q    <= reg_req_i.wdata[2];
            rst_match_q <= reg_req_i.wdata[3];
            presc_q     <= reg_req_i.wdata[15:8];
            if (reg_req_i.wdata[1]) begin cnt_q <= '0; pcnt_q <= '0; end
          end
          3'd1: cnt_q[31:0]  <= reg_req_i.wdata;
          3'd2: cnt_q[63:32] <= reg_req_i.wdata;
          3'd3: cmp_q[31:0]  <= reg_req_i.wdata;
          3'd4: cmp_q[63:32] <= reg_req_i.wdata;
          default: ;
        endcase
      end
      rvalid_q <= reg_req_i.req;
      if (reg_req_i.req && !reg_req_i.we) begin
        unique case (widx)
          3'd0:    rdata_q <= {16'b0, presc_q, 4'b0, rst_match_q, irq_en_q, 1'b0, en_q};
          3'd1:    rdata_q <= cnt_q[31:0];
          3'd2:    rdata_q <= cnt_q[63:32];
          3'd3:    rdata_q <= cmp_q[31:0];
          3'd4:    rdata_q <= cmp_q[63:32];
          default: rdata_q <= '0;
        endcase
      end
    end
  end

  assign reg_rsp_o = '{gnt: reg_req_i.req, rvalid: rvalid_q, rdata: rdata_q, err: 1'b0};

endmodule
