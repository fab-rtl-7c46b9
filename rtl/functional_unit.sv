// functional_unit: one of the 256 arithmetic lanes of the accelerator.
//
// A lane holds a modular multiplier (integer multiply, then reduction), a
// modular adder, a modular subtractor and an automorph index unit. The
// arithmetic is one fixed pipeline:
//     m    = mul_en ? (a * b mod q) : a       (24 cycles: multiply 12 + reduce 12)
//     sum  = (x + m) mod q                    (7 cycles)
//     diff = (x - m) mod q                    (7 cycles)
// with x delayed to meet m. This one shape serves every operation:
//   add      x=A, a=B, mul_en=0 -> sum        sub   x=A, a=B -> diff
//   multiply x=0, a=A, b=B      -> sum        mac   x=D, a=A, b=B -> sum
//   NTT Cooley-Tukey butterfly  x=even, a=odd, b=twiddle -> sum and diff.
// Latency is FU_LAT = 31 cycles for every operation, one operation per
// cycle. q and the madd table belong to the limb being processed and are
// broadcast to all lanes. The automorph index path is independent (latency 1).
//
// The units and their latencies follow the paper; chaining them into one
// fixed 31-cycle lane (so additions also take 31 cycles here rather than 7)
// is this design's choice, made so the control logic sees one latency.
module functional_unit
  import fab_pkg::*;
#(
  parameter int unsigned W      = LOGQ,
  parameter int unsigned LOGN_P = LOGN
) (
  input  logic              clk,
  input  logic              mul_en,
  input  logic [W-1:0]      x,
  input  logic [W-1:0]      a,
  input  logic [W-1:0]      b,
  input  logic [W-1:0]      q,
  input  logic [W-1:0]      madd [MADD_N],
  output logic [W-1:0]      sum,
  output logic [W-1:0]      diff,
  // automorph index path
  input  logic [LOGN_P-1:0] idx,
  input  logic [LOGN_P:0]   g,
  input  logic [1:0]        perm_mode,
  output logic [LOGN_P-1:0] new_idx
);
  localparam int unsigned MLAT = MUL_LAT + RED_LAT;

  logic [2*W-1:0] prod;
  logic [W-1:0]   red;
  logic [W-1:0]   x_d   [MLAT];
  logic [W-1:0]   a_d   [MLAT];
  logic           en_d  [MLAT];
  logic [W-1:0]   m;

  int_mul #(.W(W), .LAT(MUL_LAT)) u_mul (.clk, .a, .b, .p(prod));
  mod_red #(.W(W), .SHIFTS(SHIFTS)) u_red (.clk, .a(prod), .q, .madd, .c(red));

  always_ff @(posedge clk) begin
    x_d[0] <= x; a_d[0] <= a; en_d[0] <= mul_en;
    for (int s = 1; s < MLAT; s++) begin
      x_d[s] <= x_d[s-1]; a_d[s] <= a_d[s-1]; en_d[s] <= en_d[s-1];
    end
  end

  assign m = en_d[MLAT-1] ? red : a_d[MLAT-1];

  mod_add #(.W(W)) u_add (.clk, .a(x_d[MLAT-1]), .b(m), .q, .c(sum));
  mod_sub #(.W(W)) u_sub (.clk, .a(x_d[MLAT-1]), .b(m), .q, .c(diff));

  automorph_unit #(.LOGN_P(LOGN_P)) u_auto (
    .clk, .idx, .g, .mode(perm_mode), .new_idx
  );
endmodule
