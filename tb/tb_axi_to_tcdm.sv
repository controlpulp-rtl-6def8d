// tb_axi_to_tcdm: self-checking test of the AXI slave bridge.
// An AXI master writes random INCR bursts of 64-bit beats (partial strobes
// included) into a word memory with random grant stalls, reads them back
// with bursts, issues a narrow 32-bit read, a FIXED burst and an access to
// an address that the memory refuses (expects SLVERR on B and R).
module tb_axi_to_tcdm;
  import cpulp_pkg::*;
  logic clk = 0, rst_n = 0;
  axi_req_t sreq; axi_rsp_t srsp;
  tcdm_req_t wreq; tcdm_rsp_t wrsp;
  int checks = 0, failures = 0;

  axi_to_tcdm dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(sreq), .axi_rsp_o(srsp),
    .req_o(wreq), .rsp_i(wrsp));

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

  // word memory; addresses at or above 0x2000_0000 answer with err
  logic [31:0] wmem [logic [31:0]];
  logic g_en = 1;
  always @(negedge clk) g_en = ($urandom_range(0, 2) != 0);
  assign wrsp.gnt = wreq.req && g_en;
  always @(posedge clk) begin
    wrsp.rvalid <= wreq.req && wrsp.gnt;
    wrsp.err    <= wreq.req && wrsp.gnt && wreq.addr >= 32'h2000_0000;
    if (wreq.req && wrsp.gnt) begin
      logic [31:0] v;
      v = wmem.exists(wreq.addr) ? wmem[wreq.addr] : 32'h0;
      wrsp.rdata <= v;
      if (wreq.we) begin
        for (int b = 0; b < 4; b++) if (wreq.be[b]) v[8*b +: 8] = wreq.wdata[8*b +: 8];
        wmem[wreq.addr] = v;
      end
    end
  end

  task automatic axi_write(input logic [31:0] a, input int len, input logic [1:0] burst,
                           input logic [63:0] data [], input logic [7:0] strb [], output logic [1:0] resp);
    sreq.aw = '{id: 5'd2, addr: a, len: 8'(len), size: 3'd3, burst: burst};
    sreq.aw_valid = 1;
    #1; while (!srsp.aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); sreq.aw_valid = 0;
    for (int i = 0; i <= len; i++) begin
      sreq.w = '{data: data[i], strb: strb[i], last: (i == len)};
      sreq.w_valid = 1;
      #1; while (!srsp.w_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      sreq.w_valid = 0;
    end
    sreq.b_ready = 1;
    #1; while (!srsp.b_valid) begin @(negedge clk); #1; end
    resp = srsp.b.resp;
    check(srsp.b.id == 5'd2, "B carries the AW id");
    @(negedge clk); sreq.b_ready = 0;
  endtask

  task automatic axi_read(input logic [31:0] a, input int len, input logic [2:0] size, input logic [1:0] burst,
                          output logic [63:0] data [], output logic [1:0] resp);
    data = new[len + 1];
    resp = AXI_RESP_OKAY;
    sreq.ar = '{id: 5'd7, addr: a, len: 8'(len), size: size, burst: burst};
    sreq.ar_valid = 1;
    #1; while (!srsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); sreq.ar_valid = 0;
    sreq.r_ready = 1;
    for (int i = 0; i <= len; i++) begin
      #1; while (!srsp.r_valid) begin @(negedge clk); #1; end
      data[i] = srsp.r.data;
      if (srsp.r.resp != AXI_RESP_OKAY) resp = srsp.r.resp;
      check(srsp.r.last == (i == len), "R last on the final beat only");
      check(srsp.r.id == 5'd7, "R carries the AR id");
      @(negedge clk);
    end
    sreq.r_ready = 0;
  endtask

  logic [63:0] wd [], rdat [];
  logic [7:0]  st [];
  logic [63:0] model [int];
  logic [1:0]  resp;

  initial begin
    sreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // random INCR bursts into 0x1C00_0000.., keep a 64-bit model
    for (int t = 0; t < 12; t++) begin
      int len, base;
      len = $urandom_range(0, 15);
      base = $urandom_range(0, 47);
      wd = new[len + 1]; st = new[len + 1];
      for (int i = 0; i <= len; i++) begin
        logic [63:0] m;
        wd[i] = {$urandom, $urandom};
        st[i] = (t < 8) ? 8'hFF : 8'($urandom);
        m = model.exists(base + i) ? model[base + i] : 64'h0;
        for (int b = 0; b < 8; b++) if (st[i][b]) m[8*b +: 8] = wd[i][8*b +: 8];
        model[base + i] = m;
      end
      axi_write(32'h1C00_0000 + 8 * base, len, AXI_BURST_INCR, wd, st, resp);
      check(resp == AXI_RESP_OKAY, "write burst OKAY");
    end
    axi_read(32'h1C00_0000, 63, 3'd3, AXI_BURST_INCR, rdat, resp);
    check(resp == AXI_RESP_OKAY, "read burst OKAY");
    for (int i = 0; i < 64; i++)
      check(rdat[i] == (model.exists(i) ? model[i] : 64'h0), "burst read-back matches");
    // narrow read of the upper half of beat 5
    axi_read(32'h1C00_0000 + 8 * 5 + 4, 0, 3'd2, AXI_BURST_INCR, rdat, resp);
    check(rdat[0][63:32] == (model.exists(5) ? model[5][63:32] : 32'h0), "narrow 32-bit read in the upper lane");
    // FIXED burst reads the same beat repeatedly
    axi_read(32'h1C00_0000 + 8 * 9, 3, 3'd3, AXI_BURST_FIXED, rdat, resp);
    for (int i = 0; i < 4; i++) check(rdat[i] == (model.exists(9) ? model[9] : 64'h0), "FIXED burst");
    // error path
    wd = new[1]; st = new[1]; wd[0] = 64'h1; st[0] = 8'hFF;
    axi_write(32'h2000_0000, 0, AXI_BURST_INCR, wd, st, resp);
    check(resp == AXI_RESP_SLVERR, "refused write gives SLVERR");
    axi_read(32'h2000_0000, 1, 3'd3, AXI_BURST_INCR, rdat, resp);
    check(resp == AXI_RESP_SLVERR, "refused read gives SLVERR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
