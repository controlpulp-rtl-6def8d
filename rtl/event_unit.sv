// event_unit: the cluster's event unit with its hardware barrier.
//
// Every worker has a private port and a 32-bit event buffer masked by a
// per-core event mask. Events are: bit 0 software event (another core or the
// manager wrote the trigger register), bit 1 DMA transfer done, bit 2
// cluster timer, bit 3 software event sent by the SoC (the manager's
// offload). A core that reads EVT_WAIT_CLR is held (its response is withheld
// and core_sleep_o asks for its clock to be gated) until one of its masked
// events is buffered; the read then returns the masked events and clears
// them. The barrier: a core that reads BARRIER_WAIT is held until every core
// of the team mask has read it; all of them are released in the same cycle,
// one cycle after the last arrival. This is what the firmware uses to join
// the workers before core 0 computes a reduction sum.
// Registers (byte offsets, same map on every core port; the SoC port has
// only SW_EVT_TRIG and BARRIER_TEAM):
//   0x00 EVT_MASK     rw
//   0x04 EVT_BUFFER   r; write 1 to clear
//   0x08 EVT_WAIT_CLR r, blocking
//   0x0C SW_EVT_TRIG  w, data[NC-1:0] = target cores
//   0x10 BARRIER_TEAM rw, data[NC-1:0]
//   0x14 BARRIER_WAIT r, blocking
// From the paper: a cluster event unit and a hardware barrier synchronising
// the workers. The register map, event numbering and release timing are
// this design's choices.
module event_unit
  import cpulp_pkg::*;
#(
  parameter int unsigned NC = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  tcdm_req_t       core_req_i [NC],
  output tcdm_rsp_t       core_rsp_o [NC],
  input  tcdm_req_t       soc_req_i,
  output tcdm_rsp_t       soc_rsp_o,
  input  logic            dma_evt_i,
  input  logic            timer_evt_i,
  output logic [NC-1:0]   evt_o,
  output logic [NC-1:0]   core_sleep_o
);

  localparam int unsigned EVT_SW = 0, EVT_DMA = 1, EVT_TIMER = 2, EVT_SOC = 3;

  logic [31:0]   mask_q  [NC];
  logic [31:0]   buf_q   [NC];
  logic [NC-1:0] wait_evt_q, wait_bar_q, arrived_q, rvalid_q;
  logic [31:0]   rdata_q [NC];
  logic [NC-1:0] team_q;
  logic          soc_rvalid_q;
  logic [31:0]   soc_rdata_q;

  // software triggers of this cycle
  logic [NC-1:0] sw_trig, soc_trig;
  always_comb begin
    sw_trig = '0;
    for (int c = 0; c < NC; c++)
      if (core_req_i[c].req && core_req_i[c].we && core_req_i[c].addr[7:2] == 6'd3)
        sw_trig |= core_req_i[c].wdata[NC-1:0];
    soc_trig = '0;
    if (soc_req_i.req && soc_req_i.we && soc_req_i.addr[7:2] == 6'd3)
      soc_trig = soc_req_i.wdata[NC-1:0];
  end

  logic bar_done;
  assign bar_done = (team_q != '0) && ((arrived_q & team_q) == team_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int c = 0; c < NC; c++) begin
        mask_q[c]  <= '0;
        buf_q[c]   <= '0;
        rdata_q[c] <= '0;
      end
      wait_evt_q   <= '0;
      wait_bar_q   <= '0;
      arrived_q    <= '0;
      rvalid_q     <= '0;
      team_q       <= '0;
      soc_rvalid_q <= 1'b0;
      soc_rdata_q  <= '0;
    end else begin
      if (bar_done) arrived_q <= '0;
      for (int c = 0; c < NC; c++) begin
        logic [31:0] nb;
        logic [5:0]  r;
        nb = buf_q[c];
        nb[EVT_SW]    = nb[EVT_SW]    | sw_trig[c];
        nb[EVT_SOC]   = nb[EVT_SOC]   | soc_trig[c];
        nb[EVT_DMA]   = nb[EVT_DMA]   | dma_evt_i;
        nb[EVT_TIMER] = nb[EVT_TIMER] | timer_evt_i;
        r = core_req_i[c].addr[7:2];
        rvalid_q[c] <= 1'b0;
        if (core_req_i[c].req) begin
          if (core_req_i[c].we) begin
            unique case (r)
              6'd0: mask_q[c] <= core_req_i[c].wdata;
              6'd1: nb = nb & ~core_req_i[c].wdata;
              6'd4: team_q    <= core_req_i[c].wdata[NC-1:0];
              default: ;
            endcase
            rvalid_q[c] <= 1'b1;
          end else begin
            unique case (r)
              6'd0: begin rdata_q[c] <= mask_q[c];        rvalid_q[c] <= 1'b1; end
              6'd1: begin rdata_q[c] <= buf_q[c];         rvalid_q[c] <= 1'b1; end
              6'd2: wait_evt_q[c] <= 1'b1;
              6'd4: begin rdata_q[c] <= 32'(team_q);      rvalid_q[c] <= 1'b1; end
              6'd5: begin wait_bar_q[c] <= 1'b1; arrived_q[c] <= 1'b1; end
              default: begin rdata_q[c] <= '0;            rvalid_q[c] <= 1'b1; end
            endcase
          end
        end
        // blocked event wait completes
        if (wait_evt_q[c] && ((buf_q[c] & mask_q[c]) != '0)) begin
          rdata_q[c]    <= buf_q[c] & mask_q[c];
          nb            = nb & ~(buf_q[c] & mask_q[c]);
          rvalid_q[c]   <= 1'b1;
          wait_evt_q[c] <= 1'b0;
        end
        // barrier release
        if (wait_bar_q[c] && bar_done) begin
          rdata_q[c]    <= 32'(team_q);
          rvalid_q[c]   <= 1'b1;
          wait_bar_q[c] <= 1'b0;
        end
        buf_q[c] <= nb;
      end
      soc_rvalid_q <= soc_req_i.req;
      if (soc_req_i.req && soc_req_i.we && soc_req_i.addr[7:2] == 6'd4)
        team_q <= soc_req_i.wdata[NC-1:0];
      if (soc_req_i.req && !soc_req_i.we)
        soc_rdata_q <= (soc_req_i.addr[7:2] == 6'd4) ? 32'(team_q) : '0;
    end
  end

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      core_rsp_o[c]   = '{gnt: core_req_i[c].req, rvalid: rvalid_q[c], rdata: rdata_q[c], err: 1'b0};
      evt_o[c]        = (buf_q[c] & mask_q[c]) != '0;
      core_sleep_o[c] = wait_evt_q[c] || wait_bar_q[c];
    end
  end
  assign soc_rsp_o = '{gnt: soc_req_i.req, rvalid: soc_rvalid_q, rdata: soc_rdata_q, err: 1'b0};

endmodule
