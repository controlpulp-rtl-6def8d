// cluster_domain: the programmable accelerator of the power controller,
// without its cores.
//
// The workers (NC cores, eight by default) are CV32E40P cores with FPUs that
// are not part of this RTL; their data ports come in as word-request ports.
// Each worker's port passes a core demux that sends the L1 window to the
// 64 KiB L1 (single-cycle logarithmic interconnect), the event-unit window to
// the worker's private event-unit port, the timer and DMA windows to the
// shared peripheral arbiter, and everything else out of the cluster towards
// the SoC (L2, AXI master). The DMA has one port into L1 and one port out of
// the cluster; the instruction refill port of the (not included) instruction
// caches also leaves the cluster. The SoC reaches into the cluster (L1, event
// unit, peripherals) through one word port. The paper's AXI crossbars and
// clock-domain crossings between the domains are replaced here by these word
// ports in one clock domain.
// Timing: L1 and peripherals answer one cycle after the grant; outgoing
// requests take what the SoC side takes.
module cluster_domain
  import cpulp_pkg::*;
#(
  parameter int unsigned NC        = 8,
  parameter int unsigned L1_BYTES  = 65536,
  parameter int unsigned L1_BANKS  = 16,
  parameter int unsigned DMA_OUT   = 128
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  tcdm_req_t     core_req_i [NC],
  output tcdm_rsp_t     core_rsp_o [NC],
  input  tcdm_req_t     icache_req_i,
  output tcdm_rsp_t     icache_rsp_o,
  input  tcdm_req_t     soc_req_i,
  output tcdm_rsp_t     soc_rsp_o,
  output tcdm_req_t     ext_req_o,
  input  tcdm_rsp_t     ext_rsp_i,
  output logic [NC-1:0] evt_o,
  output logic [NC-1:0] core_sleep_o,
  output logic          dma_done_o
);

  localparam int unsigned NL1 = NC + 2;   // workers, DMA, SoC
  localparam int unsigned NPA = NC + 1;   // workers, SoC
  localparam int unsigned NEX = NC + 2;   // workers, DMA, instruction refill

  tcdm_req_t l1_req [NL1];  tcdm_rsp_t l1_rsp [NL1];
  tcdm_req_t pa_req [NPA];  tcdm_rsp_t pa_rsp [NPA];
  tcdm_req_t ex_req [NEX];  tcdm_rsp_t ex_rsp [NEX];
  tcdm_req_t eu_req [NC];   tcdm_rsp_t eu_rsp [NC];
  tcdm_req_t eu_soc_req;    tcdm_rsp_t eu_soc_rsp;
  tcdm_req_t per_req;       tcdm_rsp_t per_rsp;
  tcdm_req_t tim_req, dreg_req; tcdm_rsp_t tim_rsp, dreg_rsp;
  tcdm_req_t dma_ext_req, dma_l1_req; tcdm_rsp_t dma_ext_rsp, dma_l1_rsp;
  logic      timer_irq, dma_done;

  function automatic logic [2:0] decode(logic [31:0] a);
    if (in_range(a, L1_BASE, 32'(L1_BYTES)))          return 3'd0;
    if (in_range(a, CL_EU_BASE, 32'h400))             return 3'd1;
    if (in_range(a, CL_PERIPH_BASE, CL_PERIPH_SIZE))  return 3'd2;
    return 3'd3;
  endfunction

  // ---------------------------------------------------------------- worker demuxes
  for (genvar c = 0; c < NC; c++) begin : g_core
    tcdm_req_t d_req [4];
    tcdm_rsp_t d_rsp [4];
    tcdm_demux #(.NS(4)) i_core_demux (
      .clk_i, .rst_ni,
      .sel_i (decode(core_req_i[c].addr)),
      .mst_req_i (core_req_i[c]), .mst_rsp_o (core_rsp_o[c]),
      .slv_req_o (d_req), .slv_rsp_i (d_rsp)
    );
    assign l1_req[c] = d_req[0]; assign d_rsp[0] = l1_rsp[c];
    assign eu_req[c] = d_req[1]; assign d_rsp[1] = eu_rsp[c];
    assign pa_req[c] = d_req[2]; assign d_rsp[2] = pa_rsp[c];
    assign ex_req[c] = d_req[3]; assign d_rsp[3] = ex_rsp[c];
  end

  // ---------------------------------------------------------------- SoC into the cluster
  begin : g_soc
    tcdm_req_t d_req [3];
    tcdm_rsp_t d_rsp [3];
    logic [2:0] s;
    assign s = decode(soc_req_i.addr);
    tcdm_demux #(.NS(3)) i_soc_demux (
      .clk_i, .rst_ni,
      .sel_i (s[1:0] == 2'd3 ? 2'd3 : s[1:0]),
      .mst_req_i (soc_req_i), .mst_rsp_o (soc_rsp_o),
      .slv_req_o (d_req), .slv_rsp_i (d_rsp)
    );
    assign l1_req[NC+1] = d_req[0]; assign d_rsp[0] = l1_rsp[NC+1];
    assign eu_soc_req   = d_req[1]; assign d_rsp[1] = eu_soc_rsp;
    assign pa_req[NC]   = d_req[2]; assign d_rsp[2] = pa_rsp[NC];
  end

  // ---------------------------------------------------------------- L1
  assign l1_req[NC] = dma_l1_req;
  assign dma_l1_rsp = l1_rsp[NC];

  l1_tcdm #(.NM(NL1), .NB(L1_BANKS), .SIZE_BYTES(L1_BYTES)) i_l1 (
    .clk_i, .rst_ni, .mst_req_i (l1_req), .mst_rsp_o (l1_rsp)
  );

  // ---------------------------------------------------------------- peripherals
  tcdm_arbiter #(.NM(NPA), .DEPTH(2)) i_periph_arb (
    .clk_i, .rst_ni, .mst_req_i (pa_req), .mst_rsp_o (pa_rsp),
    .slv_req_o (per_req), .slv_rsp_i (per_rsp)
  );

  begin : g_per
    tcdm_req_t d_req [2];
    tcdm_rsp_t d_rsp [2];
    logic [1:0] s;
    always_comb begin
      if (in_range(per_req.addr, CL_TIMER_BASE, 32'h400))    s = 2'd0;
      else if (in_range(per_req.addr, CL_DMA_BASE, 32'h400)) s = 2'd1;
      else                                                   s = 2'd2;
    end
    tcdm_demux #(.NS(2)) i_per_demux (
      .clk_i, .rst_ni, .sel_i (s),
      .mst_req_i (per_req), .mst_rsp_o (per_rsp),
      .slv_req_o (d_req), .slv_rsp_i (d_rsp)
    );
    assign tim_req  = d_req[0]; assign d_rsp[0] = tim_rsp;
    assign dreg_req = d_req[1]; assign d_rsp[1] = dreg_rsp;
  end

  pulp_timer i_cluster_timer (
    .clk_i, .rst_ni, .reg_req_i (tim_req), .reg_rsp_o (tim_rsp), .irq_o (timer_irq)
  );

  dma_2d #(.MAX_OUT(DMA_OUT)) i_dma (
    .clk_i, .rst_ni,
    .reg_req_i (dreg_req), .reg_rsp_o (dreg_rsp),
    .ext_req_o (dma_ext_req), .ext_rsp_i (dma_ext_rsp),
    .l1_req_o (dma_l1_req), .l1_rsp_i (dma_l1_rsp),
    .done_o (dma_done)
  );
  assign dma_done_o = dma_done;

  event_unit #(.NC(NC)) i_event_unit (
    .clk_i, .rst_ni,
    .core_req_i (eu_req), .core_rsp_o (eu_rsp),
    .soc_req_i (eu_soc_req), .soc_rsp_o (eu_soc_rsp),
    .dma_evt_i (dma_done), .timer_evt_i (timer_irq),
    .evt_o, .core_sleep_o
  );

  // ---------------------------------------------------------------- out of the cluster
  assign ex_req[NC]   = dma_ext_req;
  assign dma_ext_rsp  = ex_rsp[NC];
  assign ex_req[NC+1] = icache_req_i;
  assign icache_rsp_o = ex_rsp[NC+1];

  tcdm_arbiter #(.NM(NEX), .DEPTH(DMA_OUT)) i_ext_arb (
    .clk_i, .rst_ni, .mst_req_i (ex_req), .mst_rsp_o (ex_rsp),
    .slv_req_o (ext_req_o), .slv_rsp_i (ext_rsp_i)
  );

endmodule
