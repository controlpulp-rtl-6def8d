// tb_l2_mem: self-checking test of the L2 memory and its interconnect.
// Checks single-cycle read latency, read-after-write through every bank
// kind, exclusivity of the private banks to the manager ports, the error
// answer outside L2, word interleaving across the four shared banks and the
// one-cycle stall of a bank conflict.
module tb_l2_mem;
  import cpulp_pkg::*;
  localparam int NM = 6;
  logic clk = 0, rst_n = 0;
  tcdm_req_t req [NM];
  tcdm_rsp_t rsp [NM];
  int checks = 0, failures = 0;

  l2_mem #(.NM(NM)) dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(req), .mst_rsp_o(rsp));

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
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input int m, input logic we, input logic [31:0] addr,
                        input logic [31:0] wdata, output logic [31:0] rdata,
                        output logic err, output int lat);
    req[m] = '{req: 1'b1, addr: addr, we: we, be: 4'hF, wdata: wdata};
    #1;
    while (!rsp[m].gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    req[m].req = 1'b0;
    #1;
    lat = 1;
    while (!rsp[m].rvalid) begin @(negedge clk); #1; lat++; end
    rdata = rsp[m].rdata;
    err   = rsp[m].err;
  endtask

  logic [31:0] rd; logic er; int lat;
  logic [31:0] PRIV0 = L2_BASE, PRIV1 = L2_BASE + 32'h1_0000, INTL = L2_BASE + 32'h2_0000;

  initial begin
    for (int m = 0; m < NM; m++) req[m] = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // manager data port: both private banks
    access(1, 1, PRIV0 + 32'h40, 32'hCAFE_0001, rd, er, lat);
    access(1, 1, PRIV1 + 32'h80, 32'hCAFE_0002, rd, er, lat);
    access(1, 0, PRIV0 + 32'h40, 0, rd, er, lat);
    check(rd == 32'hCAFE_0001 && !er, "private bank 0 read back");
    check(lat == 1, "private bank read latency is one cycle");
    access(0, 0, PRIV1 + 32'h80, 0, rd, er, lat);
    check(rd == 32'hCAFE_0002 && !er, "instruction port reads private bank 1");
    // non-manager master may not touch private banks
    access(2, 1, PRIV0 + 32'h40, 32'hBAD0_BAD0, rd, er, lat);
    check(er, "write of master 2 into private bank gets an error");
    access(4, 0, PRIV1 + 32'h80, 0, rd, er, lat);
    check(er, "read of uDMA into private bank gets an error");
    access(1, 0, PRIV0 + 32'h40, 0, rd, er, lat);
    check(rd == 32'hCAFE_0001, "private bank unchanged by refused write");
    // interleaved region from every master, read back crosswise
    for (int i = 0; i < 16; i++) begin
      access(2 + (i % 4), 1, INTL + 32'(4 * i), 32'h1000 + 32'(i * 7), rd, er, lat);
      check(!er, "interleaved write accepted");
    end
    for (int i = 0; i < 16; i++) begin
      access(i % 2, 0, INTL + 32'(4 * i), 0, rd, er, lat);
      check(rd == 32'h1000 + 32'(i * 7), "interleaved read back");
      check(lat == 1, "interleaved read latency is one cycle");
    end
    // last word of L2 and out of range
    access(3, 1, L2_BASE + L2_SIZE - 4, 32'h5A5A_A5A5, rd, er, lat);
    access(5, 0, L2_BASE + L2_SIZE - 4, 0, rd, er, lat);
    check(rd == 32'h5A5A_A5A5 && !er, "last L2 word");
    access(3, 0, L2_BASE + L2_SIZE, 0, rd, er, lat);
    check(er, "beyond L2 gets an error");
    // bank conflict: masters 2 and 3 on the same bank, masters 4 on another
    @(negedge clk);
    req[2] = '{req: 1'b1, addr: INTL + 32'h100, we: 1'b0, be: 4'hF, wdata: 0};
    req[3] = '{req: 1'b1, addr: INTL + 32'h110, we: 1'b0, be: 4'hF, wdata: 0};
    req[4] = '{req: 1'b1, addr: INTL + 32'h104, we: 1'b0, be: 4'hF, wdata: 0};
    #1;
    check(rsp[2].gnt ^ rsp[3].gnt, "conflict: exactly one of two masters granted");
    check(rsp[4].gnt, "other bank granted in parallel");
    begin
      int loser;
      loser = rsp[2].gnt ? 3 : 2;
      @(negedge clk);
      req[5 - loser] = TCDM_REQ_IDLE; req[4] = TCDM_REQ_IDLE;
      #1;
      check(rsp[loser].gnt, "conflict: loser granted in the next cycle");
      @(negedge clk);
      req[loser] = TCDM_REQ_IDLE;
    end
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
