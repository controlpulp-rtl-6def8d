// l1_tcdm: the cluster's 64 KiB L1 tightly coupled data memory.
//
// NB word-interleaved SRAM banks (16 in the block diagram) sit behind a
// logarithmic crossbar shared by the workers, the DMA and the SoC's way
// into the cluster. Consecutive 32-bit words fall in consecutive banks, so
// workers walking arrays spread over all banks. Each bank arbitrates round
// robin; a granted access is answered in the next cycle (single-cycle
// latency, as the paper states). Addresses are taken relative to L1_BASE;
// bits above the 64 KiB window are ignored.
// From the paper: 64 KiB, 16 banks (figure), single-cycle logarithmic
// interconnect. This design's choice: interleaving on word granularity and
// round-robin arbitration.
module l1_tcdm
  import cpulp_pkg::*;
#(
  parameter int unsigned NM         = 10,
  parameter int unsigned NB         = 16,
  parameter int unsigned SIZE_BYTES = 65536,
  localparam int unsigned BANK_WORDS = SIZE_BYTES / (4 * NB),
  localparam int unsigned RW         = $clog2(BANK_WORDS)
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  tcdm_req_t  mst_req_i [NM],
  output tcdm_rsp_t  mst_rsp_o [NM]
);

  tcdm_req_t      x_req [NM];
  logic           bk_req   [NB];
  logic           bk_we    [NB];
  logic [RW-1:0]  bk_addr  [NB];
  logic [3:0]     bk_be    [NB];
  logic [31:0]    bk_wdata [NB];
  logic [31:0]    bk_rdata [NB];

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      x_req[m]      = mst_req_i[m];
      x_req[m].addr = (mst_req_i[m].addr - L1_BASE) & (SIZE_BYTES - 1);
    end
  end

  tcdm_xbar #(.NM(NM), .NB(NB), .BANK_WORDS(BANK_WORDS)) i_xbar (
    .clk_i, .rst_ni,
    .mst_req_i (x_req), .mst_rsp_o (mst_rsp_o),
    .bank_req_o (bk_req), .bank_we_o (bk_we), .bank_addr_o (bk_addr),
    .bank_be_o (bk_be), .bank_wdata_o (bk_wdata), .bank_rdata_i (bk_rdata)
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    sram_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .req_i (bk_req[b]), .we_i (bk_we[b]), .addr_i (bk_addr[b]),
      .be_i (bk_be[b]), .wdata_i (bk_wdata[b]), .rdata_o (bk_rdata[b])
    );
  end

endmodule
