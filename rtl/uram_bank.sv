// uram_bank: one single-port on-chip memory bank built from URAM.
//
// A row holds one coefficient for each of the LANES functional units
// (256 x 54 bits), so one access reads or writes 256 coefficients, as many
// as there are lanes. With DEPTH = 4096 rows and N/LANES = 256 rows per
// polynomial a bank holds 16 polynomials (limbs). In the FPGA a bank is
// 64 x 3 URAM blocks (three 72-bit blocks per four 54-bit coefficients).
// URAM has only one port, so a cycle is either a read (en & !we) or a
// write (en & we). Read data is registered: it appears the cycle after the
// request and holds until the next read.
// Sizes and the single port follow the paper; the row layout (lane l of a
// row holds coefficient row*LANES + l) is this design's choice.
module uram_bank #(
  parameter int unsigned W     = 54,
  parameter int unsigned LANES = 256,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [LANES*W-1:0]       wdata,
  output logic [LANES*W-1:0]       rdata
);
  logic [LANES*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
