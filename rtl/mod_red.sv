// mod_red: pipelined modular reduction of a 108-bit product modulo a 54-bit q.
//
// Multi-bit-shift variant of Will and Ko's shift-and-add reduction (the
// paper's Algorithm 1). The input is split as a = A1 * 2^W + A0. A1 is then
// multiplied by 2^W modulo q, SHIFTS bits at a time: each step shifts A1
// left by SHIFTS bits, and the bits pushed out (carry, 1..63) are folded
// back by adding madd[carry-1] = carry * 2^W mod q, a table precomputed
// per modulus and supplied on the madd input. With W = 54 and SHIFTS = 6
// there are nine steps. Finally c = A1 + A0 is brought below q.
//
// Pipeline: stage 1 split (and A0 made < q), stages 2..10 the nine shift
// steps, stage 11 A1 made < q, stage 12 add and final correction: LAT = 12.
// q and madd must be held steady while values of one modulus are in flight.
//
// Own choices where Algorithm 1 is silent: q must have its top bit set
// (a full 54-bit limb) so that one conditional subtraction brings any
// 54-bit word below q; when as1 + madd overflows 54 bits, q is subtracted
// at once so that A1 stays 54 bits wide and the 63-entry table suffices;
// A0 and A1 are each made < q before the final sum so that a single
// subtraction ("if c >= q", the algorithm prints c > q) gives a result < q.
module mod_red #(
  parameter int unsigned W      = 54,
  parameter int unsigned SHIFTS = 6
) (
  input  logic           clk,
  input  logic [2*W-1:0] a,
  input  logic [W-1:0]   q,
  input  logic [W-1:0]   madd [2**SHIFTS-1],
  output logic [W-1:0]   c
);
  localparam int unsigned STEPS = W / SHIFTS;

  logic [W-1:0] a1_s [STEPS+1];   // A1 after each step
  logic [W-1:0] a0_s [STEPS+1];   // A0 carried along
  logic [W-1:0] a1_f, a0_f;
  logic [W-1:0] nxt [STEPS];
  logic [W:0]   fsum;

  assign fsum = {1'b0, a1_f} + {1'b0, a0_f};

  // one shift-and-fold step per stage
  for (genvar s = 0; s < STEPS; s++) begin : g_step
    logic [SHIFTS-1:0] carry;
    logic [W-1:0]      as1;
    logic [W:0]        sum;
    always_comb begin
      {carry, as1} = {a1_s[s], {SHIFTS{1'b0}}};
      sum = {1'b0, as1} + ((carry != '0) ? {1'b0, madd[carry - 1'b1]} : '0);
      nxt[s] = sum[W] ? W'(sum - {1'b0, q}) : sum[W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    // stage 1
    a1_s[0] <= a[2*W-1:W];
    a0_s[0] <= (a[W-1:0] >= q) ? a[W-1:0] - q : a[W-1:0];
    // stages 2..STEPS+1
    for (int s = 0; s < STEPS; s++) begin
      a1_s[s+1] <= nxt[s];
      a0_s[s+1] <= a0_s[s];
    end
    // stage STEPS+2
    a1_f <= (a1_s[STEPS] >= q) ? a1_s[STEPS] - q : a1_s[STEPS];
    a0_f <= a0_s[STEPS];
    // stage STEPS+3
    c <= (fsum >= {1'b0, q}) ? W'(fsum - {1'b0, q}) : fsum[W-1:0];
  end
endmodule
