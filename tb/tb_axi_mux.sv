// tb_axi_mux: self-checking test of the AXI multiplexer.
// Two word masters, each behind its own word-to-AXI bridge using the same
// inner AXI ID, stream random reads and writes at the same time through
// the mux into one AXI memory with random stalls and latency. Checks that
// every response returns to the master that issued it, with the right
// data, that the W beats follow their AW, that the source is visible in the
// ID MSB on the shared port, and that both masters were served while
// competing.
module tb_axi_mux;
  import cpulp_pkg::*;
  localparam int MEM_DLY = 20;
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq [2]; tcdm_rsp_t rs [2];
  axi_req_t sreq [2]; axi_rsp_t srsp [2];
  axi_req_t mreq; axi_rsp_t mrsp;
  int checks = 0, failures = 0;
  int ids_seen [2];

  for (genvar m = 0; m < 2; m++) begin : g_br
    tcdm_to_axi #(.MAX_OUT(8), .AXI_ID(5'd1)) br (.clk_i(clk), .rst_ni(rst_n),
      .req_i(rq[m]), .rsp_o(rs[m]), .axi_req_o(sreq[m]), .axi_rsp_i(srsp[m]));
  end
  axi_mux #(.NS(2)) dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq), .slv_rsp_o(srsp),
    .mst_req_o(mreq), .mst_rsp_i(mrsp));

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

  typedef struct { logic rd; logic [31:0] data; } exp_t;
  exp_t expq0 [$], expq1 [$];
  int nresp [2] = '{0, 0};
  logic [31:0] shadow [logic [31:0]];

  function automatic logic [31:0] init_word(logic [31:0] a);
    logic [63:0] v;
    v = {~(a & ~32'h7), a & ~32'h7};
    return a[2] ? v[63:32] : v[31:0];
  endfunction

  always @(posedge clk) begin
    if (rst_n && mreq.ar_valid && mrsp.ar_ready) ids_seen[mreq.ar.id[4]]++;
    for (int m = 0; m < 2; m++)
      if (rst_n && rs[m].rvalid) begin
        exp_t e;
        checks++;
        if ((m == 0 ? expq0.size() : expq1.size()) == 0) begin failures++; $display("FAIL: stray response at master %0d", m); end
        else begin
          e = (m == 0) ? expq0.pop_front() : expq1.pop_front();
          if (e.rd && rs[m].rdata !== e.data) begin
            failures++; $display("FAIL: master %0d read %h expected %h", m, rs[m].rdata, e.data);
          end
        end
        nresp[m]++;
      end
  end

  task automatic stream(input int m, input int n);
    for (int i = 0; i < n; i++) begin
      exp_t e;
      logic [31:0] a, d;
      logic we;
      we = $urandom_range(0, 1);
      // each master writes its own region and reads a region never written
      a = we ? (32'h6000_0000 + 32'h1000 * m + 4 * $urandom_range(0, 31))
             : (32'h7000_0000 + 32'h1000 * m + 4 * $urandom_range(0, 255));
      d = $urandom;
      if (we) shadow[a] = d;
      rq[m] = '{req: 1'b1, addr: a, we: we, be: 4'hF, wdata: d};
      #1; while (!rs[m].gnt) begin @(negedge clk); #1; end
      e.rd = !we; e.data = we ? 0 : init_word(a);
      if (m == 0) expq0.push_back(e); else expq1.push_back(e);
      @(negedge clk);
      rq[m] = TCDM_REQ_IDLE;
    end
  endtask

  initial begin
    rq[0] = TCDM_REQ_IDLE; rq[1] = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      stream(0, 200);
      stream(1, 200);
    join
    while (nresp[0] < 200 || nresp[1] < 200) @(negedge clk);
    // read back what each master wrote, through the other master
    fork
      for (int w = 0; w < 32; w++) begin
        exp_t e; logic [31:0] a;
        a = 32'h6000_1000 + 4 * w;
        rq[0] = '{req: 1'b1, addr: a, we: 1'b0, be: 4'hF, wdata: 0};
        #1; while (!rs[0].gnt) begin @(negedge clk); #1; end
        e.rd = 1; e.data = shadow.exists(a) ? shadow[a] : init_word(a); expq0.push_back(e);
        @(negedge clk); rq[0] = TCDM_REQ_IDLE;
      end
      for (int w = 0; w < 32; w++) begin
        exp_t e; logic [31:0] a;
        a = 32'h6000_0000 + 4 * w;
        rq[1] = '{req: 1'b1, addr: a, we: 1'b0, be: 4'hF, wdata: 0};
        #1; while (!rs[1].gnt) begin @(negedge clk); #1; end
        e.rd = 1; e.data = shadow.exists(a) ? shadow[a] : init_word(a); expq1.push_back(e);
        @(negedge clk); rq[1] = TCDM_REQ_IDLE;
      end
    join
    while (nresp[0] < 232 || nresp[1] < 232) @(negedge clk);
    check(expq0.size() == 0 && expq1.size() == 0, "every request answered at its own master");
    check(ids_seen[0] > 0 && ids_seen[1] > 0, "both sources visible in the ID MSB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
