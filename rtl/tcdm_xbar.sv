// tcdm_xbar: logarithmic interconnect from NM word masters to NB
// word-interleaved banks.
//
// Each master's word address (byte address bits [BW+1:2], with BW =
// log2(NB)) selects the bank, the bits above select the row. Every bank has a
// round-robin arbiter: among the masters requesting it in a cycle the first
// one at or after the bank's priority pointer is granted and the pointer moves
// past it. A granted request reaches the bank in the same cycle, and the
// response (rdata, rvalid) returns to the master in the next cycle, so a
// conflict-free access takes one cycle, as the L1 and L2 of the paper do.
// Masters must give byte addresses relative to the start of the banked region.
// Bank ports go out so that the caller owns the SRAM macros.
module tcdm_xbar
  import cpulp_pkg::*;
#(
  parameter int unsigned NM         = 4,
  parameter int unsigned NB         = 4,
  parameter int unsigned BANK_WORDS = 256,
  localparam int unsigned BW        = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned RW        = (BANK_WORDS > 1) ? $clog2(BANK_WORDS) : 1,
  localparam int unsigned MW        = (NM > 1) ? $clog2(NM) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  tcdm_req_t       mst_req_i [NM],
  output tcdm_rsp_t       mst_rsp_o [NM],
  output logic            bank_req_o   [NB],
  output logic            bank_we_o    [NB],
  output logic [RW-1:0]   bank_addr_o  [NB],
  output logic [3:0]      bank_be_o    [NB],
  output logic [31:0]     bank_wdata_o [NB],
  input  logic [31:0]     bank_rdata_i [NB]
);

  logic [BW-1:0] mst_bank [NM];
  logic [MW-1:0] rr_q     [NB];
  logic [MW-1:0] winner   [NB];
  logic          bank_hit [NB];
  logic          gnt      [NM];
  logic          rvalid_q [NM];
  logic [BW-1:0] rbank_q  [NM];

  always_comb begin
    for (int m = 0; m < NM; m++)
      mst_bank[m] = (NB > 1) ? BW'(mst_req_i[m].addr[2 +: BW]) : '0;
  end

  // per-bank round-robin arbitration
  always_comb begin
    for (int m = 0; m < NM; m++) gnt[m] = 1'b0;
    for (int b = 0; b < NB; b++) begin
      bank_hit[b] = 1'b0;
      winner[b]   = '0;
      for (int k = NM - 1; k >= 0; k--) begin
        int unsigned idx;
        idx = (int'(rr_q[b]) + k) % NM;
        if (mst_req_i[idx].req && (int'(mst_bank[idx]) == b)) begin
          bank_hit[b] = 1'b1;
          winner[b]   = MW'(idx);
        end
      end
      if (bank_hit[b]) gnt[winner[b]] = 1'b1;
      bank_req_o[b]   = bank_hit[b];
      bank_we_o[b]    = mst_req_i[winner[b]].we;
      bank_be_o[b]    = mst_req_i[winner[b]].be;
      bank_wdata_o[b] = mst_req_i[winner[b]].wdata;
      bank_addr_o[b]  = RW'(mst_req_i[winner[b]].addr >> (2 + ((NB > 1) ? BW : 0)));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NB; b++) rr_q[b] <= '0;
      for (int m = 0; m < NM; m++) begin
        rvalid_q[m] <= 1'b0;
        rbank_q[m]  <= '0;
      end
    end else begin
      for (int b = 0; b < NB; b++)
        if (bank_hit[b]) rr_q[b] <= MW'((int'(winner[b]) + 1) % NM);
      for (int m = 0; m < NM; m++) begin
        rvalid_q[m] <= gnt[m];
        if (gnt[m]) rbank_q[m] <= mst_bank[m];
      end
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mst_rsp_o[m].gnt    = gnt[m];
      mst_rsp_o[m].rvalid = rvalid_q[m];
      mst_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
      mst_rsp_o[m].err    = 1'b0;
    end
  end

endmodule
