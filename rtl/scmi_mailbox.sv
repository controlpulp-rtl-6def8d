// scmi_mailbox: hardware mailboxes carrying SCMI messages from the
// processing elements (agents) to the power controller (platform).
//
// NCH channels (64) each own a 40-byte shared-memory window laid out as the
// SCMI single-channel shared memory area, followed by a doorbell word:
//   0x00 agent id      (a field the SCMI layout reserves; it carries the
//                       sender so that several agents can share a channel)
//   0x04 channel status ([0] channel free, [1] channel error; free at reset)
//   0x08, 0x0C         reserved
//   0x10 channel flags ([0] interrupt enable for completion)
//   0x14 length
//   0x18 message header
//   0x1C, 0x20         payload (8 bytes)
//   0x24 doorbell      ([0] ring)
// Channel c starts at byte 40*c. Writing 1 to a channel's doorbell bit raises
// doorbell_o[c], one interrupt line per channel towards the CLIC; the
// platform lowers it by writing 0 (or any value with bit 0 clear). A write to
// the channel status that sets "free" with the completion interrupt flag set
// pulses completion_o[c] towards the agents.
// Two word-request ports, agent side (from the NoC) and platform side (from
// the manager core); both are granted at once and answered in the next
// cycle. If both write the same word in one cycle the platform wins.
// From the paper: 64 channels, the SCMI single-channel layout, 8 bytes of
// payload, 40 B per channel, one doorbell line per channel, the agent id in a
// reserved field. This design's choices: which reserved field holds the agent
// id, the doorbell word at 0x24 (the paper's 40 B total leaves four bytes past
// the SCMI area) and the completion pulse.
module scmi_mailbox
  import cpulp_pkg::*;
#(
  parameter int unsigned NCH      = 64,
  localparam int unsigned WPC     = 10,          // 32-bit words per channel
  localparam int unsigned NW      = NCH * WPC,
  localparam int unsigned WAW     = $clog2(NW)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  tcdm_req_t      agent_req_i,
  output tcdm_rsp_t      agent_rsp_o,
  input  tcdm_req_t      plat_req_i,
  output tcdm_rsp_t      plat_rsp_o,
  output logic [NCH-1:0] doorbell_o,
  output logic [NCH-1:0] completion_o
);

  logic [31:0] mem_q [NW];
  logic [31:0] a_rdata_q, p_rdata_q;
  logic        a_rvalid_q, p_rvalid_q;
  logic [WAW-1:0] a_idx, p_idx;
  logic        a_ok, p_ok;

  // byte offset to word index; offsets beyond the area are ignored
  assign a_idx = WAW'(agent_req_i.addr[31:2]);
  assign p_idx = WAW'(plat_req_i.addr[31:2]);
  assign a_ok  = (agent_req_i.addr[31:2] < 30'(NW));
  assign p_ok  = (plat_req_i.addr[31:2]  < 30'(NW));

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] wd, logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = wd[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int w = 0; w < NW; w++) mem_q[w] <= (w % WPC == 1) ? 32'h1 : 32'h0;
      a_rdata_q    <= '0;
      p_rdata_q    <= '0;
      a_rvalid_q   <= 1'b0;
      p_rvalid_q   <= 1'b0;
      completion_o <= '0;
    end else begin
      completion_o <= '0;
      a_rvalid_q   <= agent_req_i.req;
      p_rvalid_q   <= plat_req_i.req;
      if (agent_req_i.req && agent_req_i.we && a_ok)
        mem_q[a_idx] <= merge(mem_q[a_idx], agent_req_i.wdata, agent_req_i.be);
      if (plat_req_i.req && plat_req_i.we && p_ok) begin
        mem_q[p_idx] <= merge(mem_q[p_idx], plat_req_i.wdata, plat_req_i.be);
        // status word written "free" with completion interrupts enabled
        if ((int'(p_idx) % WPC == 1) && plat_req_i.be[0] && plat_req_i.wdata[0] &&
            mem_q[int'(p_idx) + 3][0])
          completion_o[int'(p_idx) / WPC] <= 1'b1;
      end
      if (agent_req_i.req && !agent_req_i.we) a_rdata_q <= a_ok ? mem_q[a_idx] : '0;
      if (plat_req_i.req  && !plat_req_i.we)  p_rdata_q <= p_ok ? mem_q[p_idx] : '0;
    end
  end

  always_comb begin
    for (int c = 0; c < NCH; c++) doorbell_o[c] = mem_q[c * WPC + 9][0];
  end

  assign agent_rsp_o = '{gnt: agent_req_i.req, rvalid: a_rvalid_q, rdata: a_rdata_q, err: 1'b0};
  assign plat_rsp_o  = '{gnt: plat_req_i.req,  rvalid: p_rvalid_q, rdata: p_rdata_q, err: 1'b0};

endmodule
