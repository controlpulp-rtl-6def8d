// sram_bank: one single-port SRAM bank with byte enables.
//
// Stands for an SRAM macro of the L1 or L2 memory. It is written as a plain
// array so that it synthesizes to memory on an FPGA and simulates anywhere.
// Timing: a request (req) in cycle n writes the enabled bytes at the end of
// cycle n, or returns the word in rdata during cycle n+1. rdata holds its
// value until the next read. The paper gives bank counts and sizes only; the
// single-cycle read latency follows its "single-cycle latency" L1 and
// "constant access time" L2.
module sram_bank #(
  parameter int unsigned WORDS = 1024,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [3:0]    be_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
