// tb_l1_tcdm: self-checking test of the 64 KiB, 16-bank L1.
// Ten masters (eight workers, DMA, SoC) write and read back; the test checks
// single-cycle latency, byte enables, word interleaving (16 masters hitting
// 16 consecutive words are all granted in one cycle) and round-robin
// fairness on a conflict (every master of a fully conflicting group is
// served within NM cycles).
module tb_l1_tcdm;
  import cpulp_pkg::*;
  localparam int NM = 10;
  logic clk = 0, rst_n = 0;
  tcdm_req_t req [NM];
  tcdm_rsp_t rsp [NM];
  int checks = 0, failures = 0;

  l1_tcdm #(.NM(NM)) dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(req), .mst_rsp_o(rsp));

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

  task automatic access(input int m, input logic we, input logic [31:0] addr, input logic [3:0] be,
                        input logic [31:0] wdata, output logic [31:0] rdata, output int lat);
    req[m] = '{req: 1'b1, addr: addr, we: we, be: be, wdata: wdata};
    #1;
    while (!rsp[m].gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    req[m].req = 1'b0;
    #1;
    lat = 1;
    while (!rsp[m].rvalid) begin @(negedge clk); #1; lat++; end
    rdata = rsp[m].rdata;
  endtask

  logic [31:0] rd; int lat;
  int ngnt;

  initial begin
    for (int m = 0; m < NM; m++) req[m] = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // fill 64 words from rotating masters, read back from others
    for (int i = 0; i < 64; i++)
      access(i % NM, 1, L1_BASE + 32'(4 * i * 37 % 65536), 4'hF, 32'hA000_0000 + 32'(i), rd, lat);
    for (int i = 0; i < 64; i++) begin
      access((i + 3) % NM, 0, L1_BASE + 32'(4 * i * 37 % 65536), 4'hF, 0, rd, lat);
      check(rd == 32'hA000_0000 + 32'(i), "read back");
      check(lat == 1, "single-cycle latency");
    end
    // byte enables
    access(0, 1, L1_BASE + 32'h100, 4'hF, 32'h1122_3344, rd, lat);
    access(1, 1, L1_BASE + 32'h100, 4'b0101, 32'hAABB_CCDD, rd, lat);
    access(2, 0, L1_BASE + 32'h100, 4'hF, 0, rd, lat);
    check(rd == 32'h11BB_33DD, "byte enables");
    // lower and upper half are distinct words
    access(4, 1, L1_BASE + 32'h0010, 4'hF, 32'h0000_AAAA, rd, lat);
    access(5, 1, L1_BASE + 32'h8010, 4'hF, 32'h0000_BBBB, rd, lat);
    access(6, 0, L1_BASE + 32'h0010, 4'hF, 0, rd, lat);
    check(rd == 32'h0000_AAAA, "no aliasing between the two halves of L1");
    // top of L1
    access(9, 1, L1_BASE + 32'hFFFC, 4'hF, 32'h7777_8888, rd, lat);
    access(8, 0, L1_BASE + 32'hFFFC, 4'hF, 0, rd, lat);
    check(rd == 32'h7777_8888, "last L1 word");
    // interleaving: ten masters on ten consecutive words are all granted at once
    @(negedge clk);
    for (int m = 0; m < NM; m++) req[m] = '{req: 1'b1, addr: L1_BASE + 32'h200 + 32'(4 * m), we: 1'b0, be: 4'hF, wdata: 0};
    #1;
    ngnt = 0;
    for (int m = 0; m < NM; m++) ngnt += int'(rsp[m].gnt);
    check(ngnt == NM, "consecutive words: no conflicts");
    @(negedge clk);
    for (int m = 0; m < NM; m++) req[m] = TCDM_REQ_IDLE;
    // conflict: all masters on bank 0; each granted exactly once within NM cycles
    begin
      logic [NM-1:0] served;
      int cyc;
      served = '0;
      @(negedge clk);
      for (int m = 0; m < NM; m++) req[m] = '{req: 1'b1, addr: L1_BASE + 32'(64 * m), we: 1'b0, be: 4'hF, wdata: 0};
      cyc = 0;
      while (served != '1 && cyc < 2 * NM) begin
        #1;
        ngnt = 0;
        for (int m = 0; m < NM; m++) if (rsp[m].gnt) begin ngnt++; served[m] = 1'b1; end
        check(ngnt == 1, "one grant per cycle on a conflicting bank");
        @(negedge clk);
        for (int m = 0; m < NM; m++) if (served[m]) req[m] = TCDM_REQ_IDLE;
        cyc++;
      end
      check(cyc == NM, "round robin serves all masters in NM cycles");
    end
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
