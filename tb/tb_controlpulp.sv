// tb_controlpulp: end-to-end test of the power-controller top at its
// default size (8 workers, 256 CLIC lines, 64 mailbox channels, 512 KiB
// L2, 64 KiB L1, 128 DMA reads in flight).
// The testbench plays the parts that are not RTL: the manager core and the
// eight workers (as scripted word accesses on their ports), the external
// boot master on the AXI slave, an SCMI agent on the mailbox port, the uDMA,
// and the PVT sensor/PLL space behind the AXI master (a memory with random
// network-on-chip latency). It walks one power-control step the way the
// firmware of the paper does it: boot image written over AXI, a doorbell
// from the agent, the manager offloading to the cluster, a 2-D DMA gather
// of sensor registers, a barrier, results copied to L2, timers ticking.
// Every mechanism has a counter; one that never happened is a failure.
module tb_controlpulp;
  import cpulp_pkg::*;
  localparam int NC = 8;
  localparam int MEM_DLY = 40;
  localparam logic [31:0] PVT = 32'h4000_0000;
  logic clk = 0, rst_n = 0;

  // word ports: 0 manager data, 1 manager instr, 2 mailbox agent,
  // 3/4 uDMA, 5 cluster icache, 8..15 workers
  tcdm_req_t preq [16];
  tcdm_rsp_t prsp [16];
  tcdm_req_t creq [NC];
  tcdm_rsp_t crsp [NC];
  tcdm_req_t ureq [2];
  tcdm_rsp_t ursp [2];
  for (genvar c = 0; c < NC; c++) begin : g_c
    assign creq[c]     = preq[8 + c];
    assign prsp[8 + c] = crsp[c];
  end
  assign ureq[0] = preq[3];
  assign ureq[1] = preq[4];
  assign prsp[3] = ursp[0];
  assign prsp[4] = ursp[1];
  assign prsp[6] = TCDM_RSP_IDLE;
  assign prsp[7] = TCDM_RSP_IDLE;

  logic        irq_valid, irq_ready = 0, irq_shv;
  logic [7:0]  irq_id, irq_level;
  logic [255:0] ext_irq = '0;
  logic [NC-1:0] cl_evt, cl_sleep;
  logic        dma_done;
  logic [63:0] mbox_compl;
  axi_req_t    mreq, sreq;
  axi_rsp_t    mrsp, srsp;

  controlpulp dut (
    .clk_i (clk), .rst_ni (rst_n),
    .mgr_instr_req_i (preq[1]), .mgr_instr_rsp_o (prsp[1]),
    .mgr_data_req_i (preq[0]), .mgr_data_rsp_o (prsp[0]),
    .mgr_irq_valid_o (irq_valid), .mgr_irq_ready_i (irq_ready), .mgr_irq_id_o (irq_id),
    .mgr_irq_level_o (irq_level), .mgr_irq_shv_o (irq_shv), .mgr_irq_core_level_i (8'd0),
    .ext_irq_i (ext_irq),
    .udma_req_i (ureq), .udma_rsp_o (ursp),
    .cl_core_req_i (creq), .cl_core_rsp_o (crsp),
    .cl_icache_req_i (preq[5]), .cl_icache_rsp_o (prsp[5]),
    .cl_evt_o (cl_evt), .cl_sleep_o (cl_sleep), .cl_dma_done_o (dma_done),
    .mbox_req_i (preq[2]), .mbox_rsp_o (prsp[2]), .mbox_completion_o (mbox_compl),
    .axi_mst_req_o (mreq), .axi_mst_rsp_i (mrsp),
    .axi_slv_req_i (sreq), .axi_slv_rsp_o (srsp));

  `include "axi_mem_model.svh"

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int mech [string];
  int cyc = 0;
  int rel_cyc [NC];
  int dma_done_cnt = 0, compl_cnt = 0;
  int ar_src [2] = '{0, 0};

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dma_done) dma_done_cnt++;
    if (rst_n && mbox_compl != '0) compl_cnt++;
    if (rst_n && mreq.ar_valid && mrsp.ar_ready) ar_src[mreq.ar.id[4]]++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic hit(input string m);
    mech[m] = mech[m] + 1;
  endtask

  // one word access on port p; returns data and error flag
  task automatic acc(input int p, input logic [31:0] a, input logic we, input logic [31:0] wd,
                     output logic [31:0] rd, output logic err);
    preq[p] = '{req: 1'b1, addr: a, we: we, be: 4'hF, wdata: wd};
    #1; while (!prsp[p].gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    preq[p] = TCDM_REQ_IDLE;
    #1; while (!prsp[p].rvalid) begin @(negedge clk); #1; end
    rd = prsp[p].rdata;
    err = prsp[p].err;
    if (p >= 8) rel_cyc[p - 8] = cyc;
    @(negedge clk);
  endtask
  task automatic wr(input int p, input logic [31:0] a, input logic [31:0] wd);
    logic [31:0] d; logic e;
    acc(p, a, 1'b1, wd, d, e);
    check(!e, $sformatf("write to %h accepted", a));
  endtask
  task automatic rd(input int p, input logic [31:0] a, output logic [31:0] d);
    logic e;
    acc(p, a, 1'b0, 0, d, e);
    check(!e, $sformatf("read of %h accepted", a));
  endtask

  // AXI slave master (boot subsystem)
  task automatic axi_write(input logic [31:0] a, input int len, input logic [63:0] data [],
                           output logic [1:0] resp);
    sreq.aw = '{id: 5'd1, addr: a, len: 8'(len), size: 3'd3, burst: AXI_BURST_INCR};
    sreq.aw_valid = 1;
    #1; while (!srsp.aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); sreq.aw_valid = 0;
    for (int i = 0; i <= len; i++) begin
      sreq.w = '{data: data[i], strb: 8'hFF, last: (i == len)};
      sreq.w_valid = 1;
      #1; while (!srsp.w_ready) begin @(negedge clk); #1; end
      @(negedge clk); sreq.w_valid = 0;
    end
    sreq.b_ready = 1;
    #1; while (!srsp.b_valid) begin @(negedge clk); #1; end
    resp = srsp.b.resp;
    @(negedge clk); sreq.b_ready = 0;
  endtask
  task automatic axi_read1(input logic [31:0] a, output logic [63:0] data, output logic [1:0] resp);
    sreq.ar = '{id: 5'd2, addr: a, len: 8'd0, size: 3'd3, burst: AXI_BURST_INCR};
    sreq.ar_valid = 1;
    #1; while (!srsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); sreq.ar_valid = 0;
    sreq.r_ready = 1;
    #1; while (!srsp.r_valid) begin @(negedge clk); #1; end
    data = srsp.r.data; resp = srsp.r.resp;
    @(negedge clk); sreq.r_ready = 0;
  endtask

  task automatic wait_irq(input logic [7:0] id, input int max_cyc, output int lat);
    lat = 0;
    while (!(irq_valid && irq_id == id) && lat < max_cyc) begin @(negedge clk); lat++; end
  endtask
  task automatic claim();
    if (irq_valid) begin irq_ready = 1; @(negedge clk); irq_ready = 0; end
  endtask

  function automatic logic [31:0] mbox_off(int ch, int word);
    return 32'(4 * (10 * ch + word));
  endfunction

  // DMA programming from worker c
  task automatic dma(input int c, input logic [31:0] src, dst, len, ss, ds, reps);
    wr(8 + c, CL_DMA_BASE + 32'h00, src); wr(8 + c, CL_DMA_BASE + 32'h04, dst);
    wr(8 + c, CL_DMA_BASE + 32'h08, len); wr(8 + c, CL_DMA_BASE + 32'h0C, ss);
    wr(8 + c, CL_DMA_BASE + 32'h10, ds);  wr(8 + c, CL_DMA_BASE + 32'h14, reps);
    wr(8 + c, CL_DMA_BASE + 32'h18, 1);
  endtask

  logic [31:0] d, d2;
  logic        e;
  logic [63:0] img [];
  logic [63:0] q;
  logic [1:0]  resp;
  int          lat, n0;
  localparam string MECHS [17] = '{
    "boot_image_via_axi_slave", "manager_fetch_from_l2", "manager_private_l2_bank",
    "private_bank_refused_to_others", "udma_into_l2", "mailbox_doorbell_interrupt",
    "mailbox_completion", "soc_timer_interrupt", "offload_event_to_cluster",
    "dma_2d_gather_over_axi", "many_axi_reads_in_flight", "hardware_barrier",
    "dma_l1_to_l2", "l1_bank_conflict", "cluster_timer_event", "axi_mux_both_sources",
    "cluster_and_icache_l2_access"};

  initial begin
    for (int i = 0; i < 16; i++) preq[i] = TCDM_REQ_IDLE;
    sreq = '0;
    foreach (MECHS[i]) mech[MECHS[i]] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1) boot: 32 beats of firmware written by the external master into
    //    the shared L2 banks, then fetched by the manager's instruction port
    img = new[32];
    foreach (img[i]) img[i] = {$urandom, $urandom};
    axi_write(L2_BASE + 32'h2_0000, 31, img, resp);
    check(resp == AXI_RESP_OKAY, "boot write accepted");
    if (resp == AXI_RESP_OKAY) hit("boot_image_via_axi_slave");
    n0 = 0;
    for (int i = 0; i < 64; i++) begin
      rd(1, L2_BASE + 32'h2_0000 + 4 * i, d);
      if (d == (i[0] ? img[i / 2][63:32] : img[i / 2][31:0])) n0++;
    end
    check(n0 == 64, "manager fetches the boot image");
    if (n0 == 64) hit("manager_fetch_from_l2");

    // 2) private banks: the manager's stack/data, refused to everyone else
    wr(0, L2_BASE + 32'h100, 32'hCAFE_0001);
    wr(0, L2_BASE + 32'h1_0100, 32'hCAFE_0002);
    rd(0, L2_BASE + 32'h100, d); rd(0, L2_BASE + 32'h1_0100, d2);
    check(d == 32'hCAFE_0001 && d2 == 32'hCAFE_0002, "manager private banks");
    if (d == 32'hCAFE_0001 && d2 == 32'hCAFE_0002) hit("manager_private_l2_bank");
    axi_read1(L2_BASE + 32'h100, q, resp);
    check(resp == AXI_RESP_SLVERR, "AXI slave cannot read a private bank");
    acc(8, L2_BASE + 32'h100, 1'b0, 0, d, e);
    check(e, "worker cannot read a private bank");
    if (resp == AXI_RESP_SLVERR && e) hit("private_bank_refused_to_others");

    // 3) uDMA peripheral data into shared L2
    for (int i = 0; i < 8; i++) wr(3 + (i % 2), L2_BASE + 32'h3_0000 + 4 * i, 32'h5A00 + i);
    n0 = 0;
    for (int i = 0; i < 8; i++) begin rd(0, L2_BASE + 32'h3_0000 + 4 * i, d); if (d == 32'h5A00 + i) n0++; end
    check(n0 == 8, "uDMA data visible to the manager");
    if (n0 == 8) hit("udma_into_l2");

    // 4) SCMI: agent fills channel 5 and rings its doorbell (CLIC line 37)
    wr(0, CLIC_BASE + 32'h1000 + 4 * 37, 32'h8000_0100);           // ctl 0x80, level, enabled
    wr(0, CLIC_BASE + 32'h1000 + 4 * 7,  32'h9002_0100);           // ctl 0x90, edge, enabled
    wr(2, mbox_off(5, 0), 32'h0000_0003);                          // agent id
    wr(2, mbox_off(5, 4), 32'h0000_0001);                          // flags: completion irq
    wr(2, mbox_off(5, 6), 32'h0000_0010);                          // header
    wr(2, mbox_off(5, 7), 32'h0000_1234);                          // payload: power limit
    wr(2, mbox_off(5, 1), 32'h0000_0000);                          // status: busy
    wr(2, mbox_off(5, 9), 32'h0000_0001);                          // doorbell
    wait_irq(8'd37, 100, lat);
    check(irq_valid && irq_id == 8'd37, "doorbell offered to the manager");
    check(lat <= 3, "doorbell reaches the manager within a few cycles");
    if (irq_valid && irq_id == 8'd37 && lat <= 3) hit("mailbox_doorbell_interrupt");
    claim();
    rd(0, MBOX_BASE + mbox_off(5, 7), d);
    check(d == 32'h1234, "manager reads the SCMI payload");
    rd(0, MBOX_BASE + mbox_off(5, 0), d);
    check(d == 32'h3, "agent id in the reserved field");
    wr(0, MBOX_BASE + mbox_off(5, 9), 32'h0);                      // doorbell served
    n0 = compl_cnt;
    wr(0, MBOX_BASE + mbox_off(5, 1), 32'h1);                      // channel free again
    repeat (2) @(negedge clk);
    check(compl_cnt > n0, "completion interrupt towards the agent");
    check(!(irq_valid && irq_id == 8'd37), "doorbell line drops after service");
    if (compl_cnt > n0) hit("mailbox_completion");

    // 5) SoC timer: periodic tick of the control loop (CLIC line 7)
    wr(0, SOC_TIMER_BASE + 32'h0C, 32'd60);
    wr(0, SOC_TIMER_BASE + 32'h10, 32'd0);
    wr(0, SOC_TIMER_BASE + 32'h00, 32'h0000_000D);
    wait_irq(8'd7, 200, lat);
    check(irq_valid && irq_id == 8'd7, "SoC timer interrupt offered");
    if (irq_valid && irq_id == 8'd7) hit("soc_timer_interrupt");
    claim();
    wr(0, SOC_TIMER_BASE + 32'h00, 32'h0);
    wr(0, CLIC_BASE + 32'h1000 + 4 * 7, 32'h0);
    repeat (3) @(negedge clk);

    // 6) the manager wakes the cluster: workers unmask events and the
    //    manager sends the offload event through the SoC port of the event unit
    for (int c = 0; c < NC; c++) wr(8 + c, CL_EU_BASE + 32'h00, 32'hF);
    wr(0, CL_EU_BASE + 32'h0C, 32'hFF);
    check(cl_evt == 8'hFF, "offload event raised on every worker");
    n0 = 0;
    for (int c = 0; c < NC; c++) begin rd(8 + c, CL_EU_BASE + 32'h08, d); if (d[3]) n0++; end
    check(n0 == NC && cl_evt == '0, "workers consume the offload event");
    if (n0 == NC) hit("offload_event_to_cluster");

    // 7) worker 0 gathers 128 PVT registers (spaced 64 B) into L1 with one
    //    2-D DMA command; the registers sit behind the AXI master
    n0 = dma_done_cnt;
    dma(0, PVT, L1_BASE + 32'h1000, 4, 32'h40, 4, 128);
    while (dma_done_cnt == n0) @(negedge clk);
    n0 = 0;
    for (int i = 0; i < 128; i++) begin
      rd(8 + (i % NC), L1_BASE + 32'h1000 + 4 * i, d);
      if (d == PVT + 32'h40 * i) n0++;
    end
    check(n0 == 128, "sensor values gathered into L1");
    if (n0 == 128) hit("dma_2d_gather_over_axi");
    check(mem_outst_max > 4, "DMA keeps many AXI reads in flight");
    if (mem_outst_max > 4) hit("many_axi_reads_in_flight");
    rd(8, CL_EU_BASE + 32'h04, d);
    check(d[1], "DMA completion event buffered at the workers");
    wr(8, CL_EU_BASE + 32'h04, 32'hF);

    // 8) each worker computes its share and joins the hardware barrier
    wr(8, CL_EU_BASE + 32'h10, 32'hFF);
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork
        begin
          automatic logic [31:0] s, v, dd;
          automatic int dl;
          s = 0;
          for (int k = 0; k < 16; k++) begin rd(8 + cc, L1_BASE + 32'h1000 + 4 * (16 * cc + k), v); s += v; end
          wr(8 + cc, L1_BASE + 32'h3000 + 4 * cc, s);
          dl = $urandom_range(0, 30);
          repeat (dl) @(negedge clk);
          rd(8 + cc, CL_EU_BASE + 32'h14, dd);
        end
      join_none
    end
    wait fork;
    n0 = 0;
    for (int c = 1; c < NC; c++) if (rel_cyc[c] == rel_cyc[0]) n0++;
    check(n0 == NC - 1 && cl_sleep == '0, "barrier releases all workers together");
    if (n0 == NC - 1) hit("hardware_barrier");

    // 9) results to L2 with the DMA (L1 -> L2 through the cluster's
    //    external port), read by the manager
    n0 = dma_done_cnt;
    dma(1, L1_BASE + 32'h3000, L2_BASE + 32'h4_0000, 4 * NC, 0, 0, 1);
    while (dma_done_cnt == n0) @(negedge clk);
    n0 = 0;
    for (int c = 0; c < NC; c++) begin
      logic [31:0] s;
      s = 0;
      for (int k = 0; k < 16; k++) s += PVT + 32'h40 * (16 * c + k);
      rd(0, L2_BASE + 32'h4_0000 + 4 * c, d);
      if (d == s) n0++;
    end
    check(n0 == NC, "per-worker partial sums in L2");
    if (n0 == NC) hit("dma_l1_to_l2");

    // 10) two workers hit the same L1 bank in the same cycle
    preq[8]  = '{req: 1'b1, addr: L1_BASE + 32'h0, we: 1'b0, be: 4'hF, wdata: 0};
    preq[9]  = '{req: 1'b1, addr: L1_BASE + 32'h40, we: 1'b0, be: 4'hF, wdata: 0};
    preq[10] = '{req: 1'b1, addr: L1_BASE + 32'h4, we: 1'b0, be: 4'hF, wdata: 0};
    #1;
    check(prsp[10].gnt, "different bank granted at once");
    check(prsp[8].gnt != prsp[9].gnt, "same-bank requests serialised");
    if (prsp[8].gnt != prsp[9].gnt) hit("l1_bank_conflict");
    @(negedge clk);
    if (prsp[8].gnt) preq[8] = TCDM_REQ_IDLE; else preq[9] = TCDM_REQ_IDLE;
    preq[10] = TCDM_REQ_IDLE;
    #1;
    check(prsp[8].gnt || prsp[9].gnt, "loser granted next cycle");
    @(negedge clk);
    preq[8] = TCDM_REQ_IDLE; preq[9] = TCDM_REQ_IDLE;
    repeat (3) @(negedge clk);

    // 11) cluster timer wakes a sleeping worker
    wr(10, CL_EU_BASE + 32'h04, 32'hF);
    wr(10, CL_TIMER_BASE + 32'h0C, 32'd40);
    wr(10, CL_TIMER_BASE + 32'h10, 32'd0);
    wr(10, CL_TIMER_BASE + 32'h00, 32'h0000_0007);
    rd(10, CL_EU_BASE + 32'h08, d);
    check(d[2], "cluster timer event wakes the worker");
    if (d[2]) hit("cluster_timer_event");
    wr(10, CL_TIMER_BASE + 32'h00, 32'h0);

    // 12) manager and a worker use the AXI master at the same time
    fork
      begin
        wr(0, 32'h6000_0000, 32'h1111_2222);
        rd(0, 32'h6000_0000, d);
        check(d == 32'h1111_2222, "manager AXI write/read");
      end
      for (int i = 0; i < 4; i++) begin
        logic [31:0] v;
        rd(11, 32'h6100_0000 + 8 * i, v);
        check(v == 32'h6100_0000 + 8 * i, "worker AXI read");
      end
    join
    check(ar_src[0] > 0 && ar_src[1] > 0, "both AXI sources used the master port");
    if (ar_src[0] > 0 && ar_src[1] > 0) hit("axi_mux_both_sources");

    // 13) a worker and the instruction refill port read shared L2
    rd(12, L2_BASE + 32'h2_0000, d);
    rd(5, L2_BASE + 32'h2_0004, d2);
    check(d == img[0][31:0] && d2 == img[0][63:32], "cluster reads of shared L2");
    if (d == img[0][31:0] && d2 == img[0][63:32]) hit("cluster_and_icache_l2_access");

    foreach (MECHS[i]) begin
      checks++;
      if (mech[MECHS[i]] == 0) begin failures++; $display("FAIL: mechanism never exercised: %s", MECHS[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
