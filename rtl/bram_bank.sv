// bram_bank: one dual-port on-chip memory bank built from BRAM.
//
// Rows of LANES x 54-bit coefficients, like the URAM banks, but with one
// read port and one write port usable in the same cycle. The c0 and c1
// BRAM banks (DEPTH 2048 = 8 polynomials, 256 x 3 x 2 BRAM18 blocks each)
// hold the extension limbs produced by basis conversion, where reading a
// running sum and writing it back every cycle needs both ports. The
// miscellaneous bank (DEPTH 1024 = 4 polynomials) buffers key limbs and
// other data from main memory. Read data is registered (one cycle).
// Sizes and dual-port use follow the paper; the port split (A read, B
// write) is this design's choice.
module bram_bank #(
  parameter int unsigned W     = 54,
  parameter int unsigned LANES = 256,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [LANES*W-1:0]       rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [LANES*W-1:0]       wdata
);
  logic [LANES*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
