// controlpulp: top level of the parallel power controller (PCS).
//
// The controller sits in the uncore of a many-core HPC processor. Its
// manager domain runs the real-time firmware on one core; its cluster domain
// adds eight worker cores, a 64 KiB L1 and a 2-D DMA, and executes the
// per-core control action in parallel. This top wires the logic around the
// cores:
//  * manager domain: the 512 KiB L2 (two banks private to the manager core,
//    four interleaved ones), the CLIC with 256 lines, the SoC timer, the
//    SCMI mailboxes whose 64 doorbells raise CLIC lines 32..95, the AXI
//    slave bridge used by the external boot subsystem, and the manager's
//    path to the AXI master;
//  * cluster domain (cluster_domain): L1, DMA, event unit, cluster timer;
//  * the AXI mux that joins the SoC and cluster paths onto the AXI master
//    (PVT sensor registers, PLLs).
// The cores (CV32E40P with FPU), their instruction caches, the debug module,
// the uDMA with its I2C/SPI/PMBus/AVSBus interfaces and the clock generation
// are not part of this RTL. Their connections are ports: the manager's
// instruction and data ports, the interrupt offer to the manager, the
// workers' data ports, the cluster's instruction refill port, the two uDMA
// ports into L2, and interrupt inputs for the remaining CLIC lines.
// Everything runs on one clock; the paper's AXI clock-domain crossings
// between the domains are left out.
//
// Address map (cpulp_pkg): L1 0x1000_0000 (64 KiB), cluster peripherals
// 0x1020_0000, SoC timer 0x1A10_B000, CLIC 0x1A20_0000, mailboxes
// 0x1A30_0000, L2 0x1C00_0000 (512 KiB, the first 128 KiB private); every
// other address goes to the AXI master port.
module controlpulp
  import cpulp_pkg::*;
#(
  parameter int unsigned NC          = 8,
  parameter int unsigned NUM_IRQ     = 256,
  parameter int unsigned MBOX_CH     = 64,
  parameter int unsigned MBOX_IRQ0   = 32,
  parameter int unsigned TIMER_IRQ   = 7,
  parameter int unsigned DMA_OUT     = 128,
  parameter int unsigned L2_PRIV_WORDS = 16384,
  parameter int unsigned L2_INTL_WORDS = 24576,
  parameter int unsigned L1_BYTES    = 65536,
  localparam int unsigned IW         = $clog2(NUM_IRQ)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // manager core
  input  tcdm_req_t          mgr_instr_req_i,
  output tcdm_rsp_t          mgr_instr_rsp_o,
  input  tcdm_req_t          mgr_data_req_i,
  output tcdm_rsp_t          mgr_data_rsp_o,
  output logic               mgr_irq_valid_o,
  input  logic               mgr_irq_ready_i,
  output logic [IW-1:0]      mgr_irq_id_o,
  output logic [7:0]         mgr_irq_level_o,
  output logic               mgr_irq_shv_o,
  input  logic [7:0]         mgr_irq_core_level_i,
  input  logic [NUM_IRQ-1:0] ext_irq_i,
  // uDMA channels into L2 (TX, RX)
  input  tcdm_req_t          udma_req_i [2],
  output tcdm_rsp_t          udma_rsp_o [2],
  // cluster workers
  input  tcdm_req_t          cl_core_req_i [NC],
  output tcdm_rsp_t          cl_core_rsp_o [NC],
  input  tcdm_req_t          cl_icache_req_i,
  output tcdm_rsp_t          cl_icache_rsp_o,
  output logic [NC-1:0]      cl_evt_o,
  output logic [NC-1:0]      cl_sleep_o,
  output logic               cl_dma_done_o,
  // SCMI mailboxes, agent side (from the processor's NoC)
  input  tcdm_req_t          mbox_req_i,
  output tcdm_rsp_t          mbox_rsp_o,
  output logic [MBOX_CH-1:0] mbox_completion_o,
  // AXI4 ports
  output axi_req_t           axi_mst_req_o,
  input  axi_rsp_t           axi_mst_rsp_i,
  input  axi_req_t           axi_slv_req_i,
  output axi_rsp_t           axi_slv_rsp_o
);

  localparam int unsigned NL2 = 6;  // mgr instr, mgr data, AXI slave, cluster, uDMA TX, uDMA RX

  tcdm_req_t l2_req [NL2];
  tcdm_rsp_t l2_rsp [NL2];

  // ---------------------------------------------------------------- manager data demux
  tcdm_req_t md_req [6];
  tcdm_rsp_t md_rsp [6];
  logic [2:0] md_sel;
  tcdm_req_t clic_req, tim_req, mbp_req, soc2cl_req [2], soc_axi_req;
  tcdm_rsp_t clic_rsp, tim_rsp, mbp_rsp, soc2cl_rsp [2], soc_axi_rsp;

  always_comb begin
    logic [31:0] a;
    a = mgr_data_req_i.addr;
    if (in_range(a, L2_BASE, L2_SIZE))                        md_sel = 3'd0;
    else if (in_range(a, CLIC_BASE, CLIC_SIZE))               md_sel = 3'd1;
    else if (in_range(a, SOC_TIMER_BASE, SOC_TIMER_SIZE))     md_sel = 3'd2;
    else if (in_range(a, MBOX_BASE, MBOX_SIZE))               md_sel = 3'd3;
    else if (in_range(a, L1_BASE, L1_SIZE) ||
             in_range(a, CL_PERIPH_BASE, CL_PERIPH_SIZE))     md_sel = 3'd4;
    else                                                      md_sel = 3'd5;
  end

  tcdm_demux #(.NS(6)) i_mgr_demux (
    .clk_i, .rst_ni, .sel_i (md_sel),
    .mst_req_i (mgr_data_req_i), .mst_rsp_o (mgr_data_rsp_o),
    .slv_req_o (md_req), .slv_rsp_i (md_rsp)
  );

  always_comb begin
    l2_req[0]     = mgr_instr_req_i;
    mgr_instr_rsp_o = l2_rsp[0];
    l2_req[1]     = md_req[0];  md_rsp[0] = l2_rsp[1];
    clic_req      = md_req[1];  md_rsp[1] = clic_rsp;
    tim_req       = md_req[2];  md_rsp[2] = tim_rsp;
    mbp_req       = md_req[3];  mbp_req.addr = md_req[3].addr - MBOX_BASE;  md_rsp[3] = mbp_rsp;
    soc2cl_req[0] = md_req[4];  md_rsp[4] = soc2cl_rsp[0];
    soc_axi_req   = md_req[5];  md_rsp[5] = soc_axi_rsp;
  end

  // ---------------------------------------------------------------- AXI slave (boot)
  tcdm_req_t as_req;  tcdm_rsp_t as_rsp;
  tcdm_req_t asd_req [2];  tcdm_rsp_t asd_rsp [2];
  logic [1:0] as_sel;

  axi_to_tcdm i_axi_slv (
    .clk_i, .rst_ni, .axi_req_i (axi_slv_req_i), .axi_rsp_o (axi_slv_rsp_o),
    .req_o (as_req), .rsp_i (as_rsp)
  );

  always_comb begin
    if (in_range(as_req.addr, L2_BASE, L2_SIZE))                 as_sel = 2'd0;
    else if (in_range(as_req.addr, L1_BASE, L1_SIZE) ||
             in_range(as_req.addr, CL_PERIPH_BASE, CL_PERIPH_SIZE)) as_sel = 2'd1;
    else                                                         as_sel = 2'd2;
  end

  tcdm_demux #(.NS(2)) i_axi_slv_demux (
    .clk_i, .rst_ni, .sel_i (as_sel),
    .mst_req_i (as_req), .mst_rsp_o (as_rsp),
    .slv_req_o (asd_req), .slv_rsp_i (asd_rsp)
  );
  assign l2_req[2]     = asd_req[0];
  assign asd_rsp[0]    = l2_rsp[2];
  assign soc2cl_req[1] = asd_req[1];
  assign asd_rsp[1]    = soc2cl_rsp[1];

  // ---------------------------------------------------------------- uDMA into L2
  assign l2_req[4]     = udma_req_i[0];
  assign l2_req[5]     = udma_req_i[1];
  assign udma_rsp_o[0] = l2_rsp[4];
  assign udma_rsp_o[1] = l2_rsp[5];

  // ---------------------------------------------------------------- L2
  l2_mem #(.NM(NL2), .PRIV_BANK_WORDS(L2_PRIV_WORDS), .INTL_BANK_WORDS(L2_INTL_WORDS)) i_l2 (
    .clk_i, .rst_ni, .mst_req_i (l2_req), .mst_rsp_o (l2_rsp)
  );

  // ---------------------------------------------------------------- interrupts
  logic [MBOX_CH-1:0] doorbell;
  logic               soc_timer_irq;
  logic [NUM_IRQ-1:0] irq_src;

  always_comb begin
    irq_src = ext_irq_i;
    irq_src[TIMER_IRQ] = soc_timer_irq;
    irq_src[MBOX_IRQ0 +: MBOX_CH] = doorbell;
  end

  clic #(.NUM_IRQ(NUM_IRQ)) i_clic (
    .clk_i, .rst_ni,
    .reg_req_i (clic_req), .reg_rsp_o (clic_rsp),
    .irq_src_i (irq_src),
    .irq_valid_o (mgr_irq_valid_o), .irq_ready_i (mgr_irq_ready_i),
    .irq_id_o (mgr_irq_id_o), .irq_level_o (mgr_irq_level_o),
    .irq_shv_o (mgr_irq_shv_o), .core_level_i (mgr_irq_core_level_i)
  );

  pulp_timer i_soc_timer (
    .clk_i, .rst_ni, .reg_req_i (tim_req), .reg_rsp_o (tim_rsp), .irq_o (soc_timer_irq)
  );

  scmi_mailbox #(.NCH(MBOX_CH)) i_mailbox (
    .clk_i, .rst_ni,
    .agent_req_i (mbox_req_i), .agent_rsp_o (mbox_rsp_o),
    .plat_req_i (mbp_req), .plat_rsp_o (mbp_rsp),
    .doorbell_o (doorbell), .completion_o (mbox_completion_o)
  );

  // ---------------------------------------------------------------- cluster
  tcdm_req_t soc_in_req;  tcdm_rsp_t soc_in_rsp;
  tcdm_req_t cl_ext_req;  tcdm_rsp_t cl_ext_rsp;

  tcdm_arbiter #(.NM(2), .DEPTH(2)) i_soc2cl_arb (
    .clk_i, .rst_ni, .mst_req_i (soc2cl_req), .mst_rsp_o (soc2cl_rsp),
    .slv_req_o (soc_in_req), .slv_rsp_i (soc_in_rsp)
  );

  cluster_domain #(.NC(NC), .L1_BYTES(L1_BYTES), .DMA_OUT(DMA_OUT)) i_cluster (
    .clk_i, .rst_ni,
    .core_req_i (cl_core_req_i), .core_rsp_o (cl_core_rsp_o),
    .icache_req_i (cl_icache_req_i), .icache_rsp_o (cl_icache_rsp_o),
    .soc_req_i (soc_in_req), .soc_rsp_o (soc_in_rsp),
    .ext_req_o (cl_ext_req), .ext_rsp_i (cl_ext_rsp),
    .evt_o (cl_evt_o), .core_sleep_o (cl_sleep_o), .dma_done_o (cl_dma_done_o)
  );

  // cluster traffic leaving the cluster: L2 or the AXI master
  tcdm_req_t cd_req [2];  tcdm_rsp_t cd_rsp [2];
  tcdm_req_t cl_axi_req;  tcdm_rsp_t cl_axi_rsp;
  tcdm_demux #(.NS(2)) i_cl_ext_demux (
    .clk_i, .rst_ni,
    .sel_i (in_range(cl_ext_req.addr, L2_BASE, L2_SIZE) ? 2'd0 : 2'd1),
    .mst_req_i (cl_ext_req), .mst_rsp_o (cl_ext_rsp),
    .slv_req_o (cd_req), .slv_rsp_i (cd_rsp)
  );
  assign l2_req[3]  = cd_req[0];
  assign cd_rsp[0]  = l2_rsp[3];
  assign cl_axi_req = cd_req[1];
  assign cd_rsp[1]  = cl_axi_rsp;

  // ---------------------------------------------------------------- AXI master
  axi_req_t mx_req [2];
  axi_rsp_t mx_rsp [2];

  tcdm_to_axi #(.MAX_OUT(4)) i_soc_to_axi (
    .clk_i, .rst_ni, .req_i (soc_axi_req), .rsp_o (soc_axi_rsp),
    .axi_req_o (mx_req[0]), .axi_rsp_i (mx_rsp[0])
  );
  tcdm_to_axi #(.MAX_OUT(DMA_OUT)) i_cl_to_axi (
    .clk_i, .rst_ni, .req_i (cl_axi_req), .rsp_o (cl_axi_rsp),
    .axi_req_o (mx_req[1]), .axi_rsp_i (mx_rsp[1])
  );

  axi_mux #(.NS(2)) i_axi_mux (
    .clk_i, .rst_ni, .slv_req_i (mx_req), .slv_rsp_o (mx_rsp),
    .mst_req_o (axi_mst_req_o), .mst_rsp_i (axi_mst_rsp_i)
  );

endmodule
