// tb_clic: self-checking test of the CLIC.
// Checks the one-cycle input-to-output latency, selection of the highest
// control value, the level threshold, preemption by level against the
// core's current level, edge-triggered claim, level-triggered behaviour,
// falling-edge trigger, selective hardware vectoring flag and register
// read-back.
module tb_clic;
  import cpulp_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq; tcdm_rsp_t rs;
  logic [N-1:0] src;
  logic vld, rdy, shv; logic [7:0] id, lvl, core_lvl;
  int checks = 0, failures = 0;

  clic #(.NUM_IRQ(N)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rs),
    .irq_src_i(src), .irq_valid_o(vld), .irq_ready_i(rdy), .irq_id_o(id),
    .irq_level_o(lvl), .irq_shv_o(shv), .core_level_i(core_lvl));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (vld=%b id=%0d lvl=%0d)", what, vld, id, lvl); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    rq = '{req: 1'b1, addr: a, we: 1'b1, be: 4'hF, wdata: d};
    @(negedge clk);
    rq = TCDM_REQ_IDLE;
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    rq = '{req: 1'b1, addr: a, we: 1'b0, be: 4'hF, wdata: 0};
    @(negedge clk);
    rq = TCDM_REQ_IDLE;
    #1 d = rs.rdata;
  endtask

  // clicint word: ctl, trig, shv, ie
  function automatic logic [31:0] cfg(logic [7:0] ctl, logic edg, logic neg, logic shv_, logic ie);
    return {ctl, 5'b0, neg, edg, shv_, 7'b0, ie, 8'b0};
  endfunction

  logic [31:0] d;

  initial begin
    rq = TCDM_REQ_IDLE; src = '0; rdy = 0; core_lvl = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    wr(32'h0, {27'b0, 4'd4, 1'b0});                         // nlbits = 4
    wr(32'h1000 + 4 * 40, cfg(8'h5F, 1, 0, 1, 1));         // line 40: level 0x5F, edge, shv
    wr(32'h1000 + 4 * 200, cfg(8'h9F, 1, 0, 0, 1));        // line 200: level 0x9F, edge
    wr(32'h1000 + 4 * 100, cfg(8'h30, 0, 0, 0, 1));        // line 100: level-triggered
    wr(32'h1000 + 4 * 7, cfg(8'hF0, 1, 1, 0, 1));          // line 7: falling edge
    wr(32'h1000 + 4 * 9, cfg(8'hFF, 1, 0, 0, 0));          // line 9: disabled
    rd(32'h1000 + 4 * 40, d);
    check(d == cfg(8'h5F, 1, 0, 1, 1), "clicint read-back");
    rd(32'h0, d);
    check(d[4:1] == 4'd4, "cliccfg read-back");
    // single edge: offered exactly one cycle later
    @(negedge clk);
    src[40] = 1;
    #1 check(!vld, "no offer in the same cycle");
    @(negedge clk);
    #1 check(vld && id == 40 && shv, "offer one cycle after the edge, with shv");
    check(lvl == 8'h5F, "level with low bits filled");
    // a higher level arrives: it replaces the offer
    src[200] = 1;
    @(negedge clk);
    #1 check(vld && id == 200, "highest level wins");
    // disabled line never offered
    src[9] = 1;
    @(negedge clk);
    #1 check(id != 9, "disabled line ignored");
    // claim 200 (edge): pending cleared, 40 offered next
    rdy = 1;
    @(negedge clk);
    rdy = 0;
    #1 check(vld && id == 40, "after claim the next one is offered");
    // core running at level 0x6F blocks 40 (0x5F)
    core_lvl = 8'h6F;
    @(negedge clk);
    #1 check(!vld, "preemption: lower level than the core is held back");
    core_lvl = 8'h50;
    @(negedge clk);
    #1 check(vld && id == 40, "higher than the core level is offered");
    core_lvl = 0;
    // threshold register
    wr(32'h4, 32'h60);
    @(negedge clk);
    #1 check(!vld, "threshold blocks level 0x5F");
    wr(32'h4, 32'h0);
    @(negedge clk);
    #1 check(vld && id == 40, "threshold lowered");
    rdy = 1; @(negedge clk); rdy = 0;
    #1 check(!vld, "all edge interrupts claimed");
    // level-triggered line follows its input
    src[100] = 1;
    @(negedge clk);
    #1 check(vld && id == 100, "level-triggered offered");
    rdy = 1; @(negedge clk); rdy = 0;
    #1 check(vld && id == 100, "level-triggered stays pending while input high");
    src[100] = 0;
    @(negedge clk);
    #1 check(!vld, "level-triggered withdrawn");
    // falling edge on line 7
    src[7] = 1;
    @(negedge clk); @(negedge clk);
    #1 check(!vld, "rising edge ignored on falling-edge line");
    src[7] = 0;
    @(negedge clk);
    #1 check(vld && id == 7 && lvl == 8'hFF, "falling edge taken");
    rd(32'h1000 + 4 * 7, d);
    check(d[0], "pending bit visible");
    wr(32'h1000 + 4 * 7, cfg(8'hF0, 1, 1, 0, 1));          // software clears ip
    #1 check(!vld, "software clear of pending");
    repeat (2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
