// tb_scmi_mailbox: self-checking test of the SCMI mailboxes.
// An agent fills channel 5 (agent id, header, length, payload) and rings its
// doorbell; the test checks that exactly doorbell line 5 rises, that the
// platform reads the message the agent wrote, that the platform's clear
// drops the doorbell, the reset state of channel status (free), the
// completion pulse, the 40-byte channel stride (channel 63 is the last) and
// byte-enable writes.
module tb_scmi_mailbox;
  import cpulp_pkg::*;
  localparam int NCH = 64;
  logic clk = 0, rst_n = 0;
  tcdm_req_t aq, pq; tcdm_rsp_t as_, ps;
  logic [NCH-1:0] db, cpl;
  int checks = 0, failures = 0;
  logic saw_cpl = 0;

  scmi_mailbox #(.NCH(NCH)) dut (.clk_i(clk), .rst_ni(rst_n), .agent_req_i(aq), .agent_rsp_o(as_),
    .plat_req_i(pq), .plat_rsp_o(ps), .doorbell_o(db), .completion_o(cpl));

  always #5 clk = ~clk;
  always @(posedge clk) if (cpl[5]) saw_cpl <= 1;

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

  task automatic awr(input int ch, input int off, input logic [31:0] d, input logic [3:0] be = 4'hF);
    aq = '{req: 1'b1, addr: 32'(40 * ch + off), we: 1'b1, be: be, wdata: d};
    @(negedge clk); aq = TCDM_REQ_IDLE;
  endtask
  task automatic pwr(input int ch, input int off, input logic [31:0] d);
    pq = '{req: 1'b1, addr: 32'(40 * ch + off), we: 1'b1, be: 4'hF, wdata: d};
    @(negedge clk); pq = TCDM_REQ_IDLE;
  endtask
  task automatic prd(input int ch, input int off, output logic [31:0] d);
    pq = '{req: 1'b1, addr: 32'(40 * ch + off), we: 1'b0, be: 4'hF, wdata: 0};
    @(negedge clk); pq = TCDM_REQ_IDLE;
    #1 d = ps.rdata;
    check(ps.rvalid, "platform read answered in one cycle");
  endtask
  task automatic ard(input int ch, input int off, output logic [31:0] d);
    aq = '{req: 1'b1, addr: 32'(40 * ch + off), we: 1'b0, be: 4'hF, wdata: 0};
    @(negedge clk); aq = TCDM_REQ_IDLE;
    #1 d = as_.rdata;
  endtask

  logic [31:0] d;

  initial begin
    aq = TCDM_REQ_IDLE; pq = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(db == '0, "no doorbell after reset");
    ard(5, 4, d);
    check(d == 32'h1, "channel free after reset");
    // agent 17 sends SCMI base protocol message 0 on channel 5
    awr(5, 32'h00, 32'd17);                       // agent id in the reserved field
    awr(5, 32'h04, 32'h0);                        // channel busy
    awr(5, 32'h10, 32'h1);                        // completion interrupt wanted
    awr(5, 32'h14, 32'd12);                       // length
    awr(5, 32'h18, {14'b0, 8'h10, 10'h000});      // header: protocol 0x10, message 0
    awr(5, 32'h1C, 32'hDEAD_BEEF);
    awr(5, 32'h20, 32'h0123_4567);
    check(db == '0, "doorbell still low before ringing");
    awr(5, 32'h24, 32'h1);
    #1 check(db == (64'b1 << 5), "exactly doorbell 5 raised");
    prd(5, 32'h00, d); check(d == 32'd17, "platform reads agent id");
    prd(5, 32'h18, d); check(d[17:10] == 8'h10, "platform reads protocol id");
    prd(5, 32'h1C, d); check(d == 32'hDEAD_BEEF, "payload word 0");
    prd(5, 32'h20, d); check(d == 32'h0123_4567, "payload word 1");
    prd(4, 32'h1C, d); check(d == 32'h0, "neighbouring channel untouched");
    // platform answers and frees the channel
    pwr(5, 32'h24, 32'h0);
    #1 check(db == '0, "doorbell cleared by platform");
    pwr(5, 32'h04, 32'h1);
    @(negedge clk);
    check(saw_cpl, "completion pulse to the agent");
    // last channel and byte enables
    awr(63, 32'h1C, 32'hFFFF_FFFF);
    awr(63, 32'h1C, 32'h0000_0000, 4'b0011);
    awr(63, 32'h24, 32'h1);
    #1 check(db == (64'b1 << 63), "doorbell 63");
    prd(63, 32'h1C, d); check(d == 32'hFFFF_0000, "byte enables on channel 63");
    repeat (2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
