// automorph_unit: destination index of one coefficient under a rotation.
//
// Rotate needs the coefficients of a polynomial permuted by the Galois map
// for rotation index k. For a slot index i the rotated position is
//     new_index_k(i) = (g - 1)/2 + g * i  (mod N),   g = 5^k mod 2N,
// with g taken from a small table of precomputed powers of five (about 60
// rotation indices occur in bootstrapping). The division by two is a
// shift and the reduction modulo N (a power of two) is an AND with N-1.
// For mode PERM_BITREV (or PERM_BOTH) the index is also bit-reversed over
// LOGN bits, which lets the bit-reversal needed before an NTT ride along
// with this pass, as the paper does. One index per cycle, latency 1.
//
// The paper prints the term as 5 * i; for k = 1 that is the same map, but
// only g * i = 5^k * i gives rotation by k for every k (the odd exponent
// 2i+1 goes to 5^k (2i+1)), so this unit multiplies by g. The bit-reverse
// option is this design's way of carrying out the bit reversal.
module automorph_unit
  import fab_pkg::*;
#(
  parameter int unsigned LOGN_P = LOGN
) (
  input  logic              clk,
  input  logic [LOGN_P-1:0] idx,     // source coefficient index i
  input  logic [LOGN_P:0]   g,       // 5^k mod 2N (odd)
  input  logic [1:0]        mode,    // PERM_AUTO / PERM_BITREV / PERM_BOTH
  output logic [LOGN_P-1:0] new_idx
);
  logic [LOGN_P-1:0] rot, sel;
  logic [2*LOGN_P:0] prod;

  always_comb begin
    prod = g * idx;
    rot  = LOGN_P'((g - 1'b1) >> 1) + prod[LOGN_P-1:0];   // mod N by truncation
    unique case (mode)
      PERM_BITREV: sel = idx;
      default:     sel = rot;
    endcase
  end

  always_ff @(posedge clk) begin
    if (mode == PERM_AUTO)
      new_idx <= sel;
    else
      new_idx <= {<<{sel}};   // bit reversal over LOGN bits
  end
endmodule
