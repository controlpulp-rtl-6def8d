// tb_tcdm_to_axi: self-checking test of the word-to-AXI bridge.
// A word master issues a random pipelined stream of reads and writes (not
// waiting for responses) to an AXI memory with random ready stalls and up to
// 30 cycles of response latency. Checks read data in both 32-bit lanes,
// byte-enable to strobe mapping, in-order responses across reads and
// writes, that several transactions are in flight, and that the bound of
// MAX_OUT outstanding transactions holds.
module tb_tcdm_to_axi;
  import cpulp_pkg::*;
  localparam int MAX_OUT = 16;
  localparam int MEM_DLY = 30;
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq; tcdm_rsp_t rs;
  axi_req_t mreq; axi_rsp_t mrsp;
  int checks = 0, failures = 0;

  tcdm_to_axi #(.MAX_OUT(MAX_OUT), .AXI_ID(5'd3)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_i(rq), .rsp_o(rs), .axi_req_o(mreq), .axi_rsp_i(mrsp));

  `include "axi_mem_model.svh"

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

  // expected responses, in order
  typedef struct { logic rd; logic [31:0] data; } exp_t;
  exp_t expq [$];
  int nresp = 0, inflight = 0, max_inflight = 0;
  logic [31:0] shadow [logic [31:0]];

  always @(posedge clk) begin
    if (rst_n && rs.rvalid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL: response without request"); end
      else begin
        e = expq.pop_front();
        if (e.rd && rs.rdata !== e.data) begin
          failures++; $display("FAIL: read data %h expected %h", rs.rdata, e.data);
        end
      end
      nresp++;
    end
  end

  function automatic logic [31:0] init_word(logic [31:0] a);
    logic [63:0] v;
    v = {~(a & ~32'h7), a & ~32'h7};
    return a[2] ? v[63:32] : v[31:0];
  endfunction

  task automatic issue(input logic we, input logic [31:0] a, input logic [3:0] be, input logic [31:0] d);
    exp_t e;
    rq = '{req: 1'b1, addr: a, we: we, be: be, wdata: d};
    #1; while (!rs.gnt) begin @(negedge clk); #1; end
    e.rd = !we;
    e.data = we ? 32'h0 : (shadow.exists(a) ? shadow[a] : init_word(a));
    expq.push_back(e);
    @(negedge clk);
    rq = TCDM_REQ_IDLE;
  endtask

  initial begin
    int n;
    rq = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: mixed stream, writes to 0x6000_0000.., reads of untouched 0x7000_0000..
    n = 0;
    for (int i = 0; i < 300; i++) begin
      if ($urandom_range(0, 1)) begin
        logic [31:0] a, d, old; logic [3:0] be;
        a = 32'h6000_0000 + 4 * $urandom_range(0, 63);
        d = $urandom; be = 4'($urandom_range(1, 15));
        old = shadow.exists(a) ? shadow[a] : init_word(a);
        for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = d[8*b +: 8];
        shadow[a] = old;
        issue(1'b1, a, be, d);
      end else
        issue(1'b0, 32'h7000_0000 + 4 * $urandom_range(0, 255), 4'hF, 0);
      n++;
      if ($urandom_range(0, 7) == 0) repeat ($urandom_range(1, 5)) @(negedge clk);
    end
    while (nresp < n) @(negedge clk);
    // phase 2: read back everything written (both lanes)
    for (int w = 0; w < 64; w++) begin issue(1'b0, 32'h6000_0000 + 4 * w, 4'hF, 0); n++; end
    while (nresp < n) @(negedge clk);
    check(expq.size() == 0, "every request answered exactly once");
    check(mem_outst_max > 1, "several reads in flight on AXI");
    check(mem_outst_max <= MAX_OUT, "outstanding bound respected");
    check(mreq.aw.len == 0 && mreq.ar.len == 0 && mreq.ar.size == 3'd2, "single-beat word transactions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
