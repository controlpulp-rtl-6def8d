// tb_pulp_timer: self-checking test of the 64-bit timer.
// Checks that the counter stays at zero until enabled, counts one per cycle,
// honours the prescaler, raises the compare interrupt in the right cycle,
// restarts on match when asked and carries into the upper word.
module tb_pulp_timer;
  import cpulp_pkg::*;
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq; tcdm_rsp_t rs;
  logic irq;
  int checks = 0, failures = 0;
  int irq_cnt = 0;
  longint irq_cyc [4];
  longint cyc = 0;

  pulp_timer dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rs), .irq_o(irq));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (irq && rst_n) begin
      if (irq_cnt < 4) irq_cyc[irq_cnt] <= cyc;
      irq_cnt <= irq_cnt + 1;
    end
  end

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
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    rq = '{req: 1'b1, addr: a, we: 1'b1, be: 4'hF, wdata: d};
    @(negedge clk); rq = TCDM_REQ_IDLE;
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    rq = '{req: 1'b1, addr: a, we: 1'b0, be: 4'hF, wdata: 0};
    @(negedge clk); rq = TCDM_REQ_IDLE;
    #1 d = rs.rdata;
  endtask

  logic [31:0] d, d2;

  initial begin
    rq = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    repeat (5) @(negedge clk);
    rd(32'h04, d);
    check(d == 0, "counter idle while disabled");
    // free running, no prescaler: 10 cycles between two reads
    wr(32'h00, 32'h1);
    rd(32'h04, d);
    repeat (9) @(negedge clk);
    rd(32'h04, d2);
    check(d2 - d == 10, "one count per cycle");
    // prescaler 3: one count every 4 cycles
    wr(32'h00, 32'h0000_0302);              // disable, reset counter, prescaler 3
    wr(32'h00, 32'h0000_0301);
    repeat (39) @(negedge clk);
    rd(32'h04, d);
    check(d == 9, "prescaler divides by 4 (ticks 4, 8, .., 36 cycles after enabling)");
    // compare interrupt with restart on match, period cmp+1 = 20 cycles
    wr(32'h00, 32'h0000_0002);
    wr(32'h0C, 32'd19);
    wr(32'h10, 32'd0);
    wr(32'h00, 32'h0000_000D);              // enable, irq enable, reset on match
    repeat (70) @(negedge clk);
    check(irq_cnt == 3, "three interrupts in 70 cycles");
    check(irq_cyc[1] - irq_cyc[0] == 20 && irq_cyc[2] - irq_cyc[1] == 20, "interrupt period cmp+1");
    // carry into the upper word
    wr(32'h00, 32'h0000_0000);
    wr(32'h04, 32'hFFFF_FFFE);
    wr(32'h08, 32'h0000_0000);
    wr(32'h0C, 32'hFFFF_FFFF);
    wr(32'h10, 32'hFFFF_FFFF);
    wr(32'h00, 32'h0000_0001);
    repeat (4) @(negedge clk);
    rd(32'h08, d);
    check(d == 1, "carry into CNT_HI");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
