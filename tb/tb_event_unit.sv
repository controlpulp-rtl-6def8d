// tb_event_unit: self-checking test of the cluster event unit.
// Checks the event mask and buffer, software events between cores, the
// SoC-triggered event, a blocking wait woken by the DMA event, and the
// hardware barrier: no core is released before the last team member
// arrives and all of them are released in the same cycle.
module tb_event_unit;
  import cpulp_pkg::*;
  localparam int NC = 8;
  logic clk = 0, rst_n = 0;
  tcdm_req_t creq [NC]; tcdm_rsp_t crsp [NC];
  tcdm_req_t sreq; tcdm_rsp_t srsp;
  logic dma_evt = 0, tim_evt = 0;
  logic [NC-1:0] evt, sleep;
  int checks = 0, failures = 0;
  int rel_cyc [NC];
  int cyc = 0;

  event_unit #(.NC(NC)) dut (.clk_i(clk), .rst_ni(rst_n), .core_req_i(creq), .core_rsp_o(crsp),
    .soc_req_i(sreq), .soc_rsp_o(srsp), .dma_evt_i(dma_evt), .timer_evt_i(tim_evt),
    .evt_o(evt), .core_sleep_o(sleep));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one access on core port c; waits for the (possibly withheld) response
  task automatic acc(input int c, input logic [31:0] a, input logic we, input logic [31:0] wd,
                     output logic [31:0] rd);
    creq[c] = '{req: 1'b1, addr: CL_EU_BASE + a, we: we, be: 4'hF, wdata: wd};
    @(negedge clk);
    creq[c] = TCDM_REQ_IDLE;
    #1;
    while (!crsp[c].rvalid) begin @(negedge clk); #1; end
    rd = crsp[c].rdata;
    rel_cyc[c] = cyc;
    @(negedge clk);
  endtask

  logic [31:0] d;

  initial begin
    for (int c = 0; c < NC; c++) creq[c] = TCDM_REQ_IDLE;
    sreq = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // masks
    for (int c = 0; c < NC; c++) acc(c, 32'h00, 1'b1, 32'hF, d);
    acc(3, 32'h00, 1'b0, 0, d);
    check(d == 32'hF, "mask read-back");
    // software event core 0 -> cores 2 and 5
    acc(0, 32'h0C, 1'b1, 32'h24, d);
    check(evt == 8'h24, "sw event reaches exactly cores 2 and 5");
    acc(2, 32'h04, 1'b0, 0, d);
    check(d[0] == 1'b1, "event buffer shows the sw event");
    acc(2, 32'h04, 1'b1, 32'h1, d);
    check(evt == 8'h20, "write-1-to-clear of core 2 buffer");
    acc(5, 32'h08, 1'b0, 0, d);
    check(d == 32'h1 && evt == 8'h00, "wait on a pending event returns at once and clears it");
    // SoC offload event to core 1
    sreq = '{req: 1'b1, addr: CL_EU_BASE + 32'h0C, we: 1'b1, be: 4'hF, wdata: 32'h2};
    @(negedge clk); sreq = TCDM_REQ_IDLE; #1;
    check(evt == 8'h02, "SoC event reaches core 1");
    acc(1, 32'h08, 1'b0, 0, d);
    check(d == 32'h8, "SoC event is bit 3");
    // blocking wait woken by the DMA event
    fork
      acc(4, 32'h08, 1'b0, 0, d);
      begin
        repeat (10) @(negedge clk);
        check(sleep[4] && !crsp[4].rvalid, "core 4 sleeps while waiting");
        dma_evt = 1; @(negedge clk); dma_evt = 0;
      end
    join
    check(d[1], "DMA event wakes the waiting core");
    for (int c = 0; c < NC; c++) if (c != 4) acc(c, 32'h04, 1'b1, 32'hF, d);
    // barrier with all eight cores arriving at random times
    acc(0, 32'h10, 1'b1, 32'hFF, d);
    for (int rnd = 0; rnd < 4; rnd++) begin
      int last;
      int arr [NC];
      for (int c = 0; c < NC; c++) arr[c] = $urandom_range(0, 40);
      last = 0;
      for (int c = 0; c < NC; c++) begin
        automatic int cc = c;
        fork
          begin
            logic [31:0] dd;
            repeat (arr[cc]) @(negedge clk);
            acc(cc, 32'h14, 1'b0, 0, dd);
          end
        join_none
      end
      wait fork;
      for (int c = 0; c < NC; c++) if (arr[c] > arr[last]) last = c;
      for (int c = 1; c < NC; c++) check(rel_cyc[c] == rel_cyc[0], "barrier releases all cores together");
      check(rel_cyc[0] >= rel_cyc[last], "barrier never releases before the last arrival");
      check(sleep == '0, "no core left asleep after the barrier");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
