// tb_dma_2d: self-checking test of the 2-D DMA.
// The external port is served by a memory model with random grant stalls
// and random, in-order response latency of up to 40 cycles (the on-chip
// network between the controller and the sensor registers); the L1 port by
// a single-cycle memory. Checks a strided 1-D gather of PVT-like registers
// into L1, a 2-D copy from L1 to the external space, two descriptors queued
// back to back, the done pulse/counter, and that many reads are kept in
// flight (more than one, never more than MAX_OUT).
module tb_dma_2d;
  import cpulp_pkg::*;
  localparam int MAX_OUT = 128;
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq, ereq, lreq; tcdm_rsp_t rs, ersp, lrsp;
  logic done;
  int checks = 0, failures = 0, cyc = 0, done_pulses = 0;
  int outst = 0, max_outst = 0;

  dma_2d #(.MAX_OUT(MAX_OUT)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rs),
    .ext_req_o(ereq), .ext_rsp_i(ersp), .l1_req_o(lreq), .l1_rsp_i(lrsp), .done_o(done));

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

  // ---- external memory: default content is a function of the address
  logic [31:0] emem [logic [31:0]];
  function automatic logic [31:0] eval(logic [31:0] a);
    return emem.exists(a) ? emem[a] : (a ^ 32'hA5A5_0000);
  endfunction
  logic egnt_en = 1;
  typedef struct { int ready; logic [31:0] data; logic we; } pend_t;
  pend_t pq [$];
  int last_ready = 0;
  always @(negedge clk) egnt_en = ($urandom_range(0, 3) != 0);
  always_comb begin
    ersp.gnt = ereq.req && egnt_en;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    ersp.rvalid <= 1'b0;
    ersp.err    <= 1'b0;
    if (rst_n && pq.size() > 0 && pq[0].ready <= cyc) begin
      ersp.rvalid <= 1'b1;
      ersp.rdata  <= pq[0].data;
      if (!pq[0].we) outst = outst - 1;
      void'(pq.pop_front());
    end
    if (rst_n && ereq.req && ersp.gnt) begin
      pend_t p;
      p.ready = cyc + $urandom_range(1, 40);
      if (p.ready < last_ready) p.ready = last_ready;
      last_ready = p.ready;
      p.we = ereq.we;
      p.data = eval(ereq.addr);
      if (ereq.we) emem[ereq.addr] = ereq.wdata;
      pq.push_back(p);
      if (!ereq.we) begin
        outst = outst + 1;
        if (outst > max_outst) max_outst = outst;
      end
    end
    if (done && rst_n) done_pulses++;
  end

  // ---- L1: single-cycle
  logic [31:0] lmem [logic [31:0]];
  assign lrsp.gnt = lreq.req;
  assign lrsp.err = 1'b0;
  always @(posedge clk) begin
    lrsp.rvalid <= lreq.req;
    if (lreq.req) begin
      lrsp.rdata <= lmem.exists(lreq.addr) ? lmem[lreq.addr] : 32'hDEAD_BEEF;
      if (lreq.we) lmem[lreq.addr] = lreq.wdata;
    end
  end

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    rq = '{req: 1'b1, addr: CL_DMA_BASE + a, we: 1'b1, be: 4'hF, wdata: d};
    #1; while (!rs.gnt) begin @(negedge clk); #1; end
    @(negedge clk); rq = TCDM_REQ_IDLE;
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    rq = '{req: 1'b1, addr: CL_DMA_BASE + a, we: 1'b0, be: 4'hF, wdata: 0};
    #1; while (!rs.gnt) begin @(negedge clk); #1; end
    @(negedge clk); rq = TCDM_REQ_IDLE; #1;
    while (!rs.rvalid) begin @(negedge clk); #1; end
    d = rs.rdata;
  endtask
  task automatic prog(input logic [31:0] src, dst, len, ss, ds, reps);
    wr(32'h00, src); wr(32'h04, dst); wr(32'h08, len);
    wr(32'h0C, ss);  wr(32'h10, ds);  wr(32'h14, reps); wr(32'h18, 32'h1);
  endtask
  task automatic wait_done(input int n);
    logic [31:0] d;
    do begin repeat (20) @(negedge clk); rd(32'h20, d); end while (d < n);
  endtask

  logic [31:0] d;
  localparam logic [31:0] PVT = 32'h4000_0000;

  initial begin
    rq = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1) gather 200 sensor registers spaced 0x40 apart into consecutive L1 words
    prog(PVT, L1_BASE + 32'h100, 4, 32'h40, 4, 200);
    wait_done(1);
    for (int i = 0; i < 200; i++) begin
      check(lmem[L1_BASE + 32'h100 + 4 * i] === ((PVT + 32'h40 * i) ^ 32'hA5A5_0000), "gathered word");
    end
    check(max_outst > 1, "several reads in flight");
    check(max_outst <= MAX_OUT, "never more than MAX_OUT reads in flight");
    // 2) two queued 2-D transfers L1 -> external: 4 rows of 32 B, source
    //    stride 64 B, destination stride 128 B
    for (int i = 0; i < 64; i++) lmem[L1_BASE + 32'h2000 + 4 * i] = $urandom;
    prog(L1_BASE + 32'h2000, 32'h5000_0000, 32, 64, 128, 4);
    prog(L1_BASE + 32'h2020, 32'h5000_1000, 32, 64, 128, 4);
    rd(32'h1C, d);
    check(d[0] == 1'b1, "busy while transfers run");
    wait_done(3);
    for (int r = 0; r < 4; r++)
      for (int w = 0; w < 8; w++) begin
        check(eval(32'h5000_0000 + 128 * r + 4 * w) === lmem[L1_BASE + 32'h2000 + 64 * r + 4 * w], "2-D row copy, first descriptor");
        check(eval(32'h5000_1000 + 128 * r + 4 * w) === lmem[L1_BASE + 32'h2020 + 64 * r + 4 * w], "2-D row copy, second descriptor");
      end
    check(!emem.exists(32'h5000_0000 + 32), "nothing written into the destination gaps");
    repeat (50) @(negedge clk);
    rd(32'h1C, d);
    check(d[0] == 1'b0 && d[15:8] == 0, "idle and queue empty at the end");
    $display("done_pulses=%0d max_outst=%0d", done_pulses, max_outst);
    check(done_pulses == 3, "one done pulse per transfer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
