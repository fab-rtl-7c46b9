// mod_add: pipelined modular addition c = (a + b) mod q on 54-bit limbs.
//
// Multi-word form of the textbook modular addition (add, then subtract q
// once if the sum reached q): every operand is split into two 27-bit words
// so that each step maps onto the 27-bit pre-adder of an FPGA DSP slice.
// The correction step (sum - q) is also done as two 27-bit subtractions
// with a borrow between them, as the paper proposes instead of one 54-bit
// subtraction. Seven register stages, so a result appears LAT = 7 cycles
// after its operands; one new operation is accepted every cycle.
//   stage 1 operands, 2 low-word sum, 3 high-word sum, 4 low-word sum-q,
//   stage 5 high-word sum-q, 6 select, 7 output register.
// Inputs must satisfy a, b < q. The stage split is this design's choice;
// the width, the 27-bit words and the 7-cycle latency follow the paper.
module mod_add #(
  parameter int unsigned W = 54
) (
  input  logic         clk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] c
);
  localparam int unsigned H = W / 2;   // 27-bit words

  // stage 1
  logic [W-1:0] a1, b1, q1;
  // stage 2: low word sum
  logic [H:0]   slo2;
  logic [W-1:H] ahi2, bhi2;
  logic [W-1:0] q2;
  // stage 3: high word sum (+ carry)
  logic [W:0]   s3;
  logic [W-1:0] q3;
  // stage 4: low word of s - q
  logic [H:0]   tlo4;
  logic [W:0]   s4;
  logic [W-1:0] q4;
  // stage 5: high word of s - q
  logic [W+1:0] t5;    // t5[W+1] = borrow out
  logic [W:0]   s5;
  // stage 6: select, stage 7: output
  logic [W-1:0] r6;

  always_ff @(posedge clk) begin
    a1 <= a; b1 <= b; q1 <= q;

    slo2 <= {1'b0, a1[H-1:0]} + {1'b0, b1[H-1:0]};
    ahi2 <= a1[W-1:H]; bhi2 <= b1[W-1:H]; q2 <= q1;

    s3[W:H]   <= {1'b0, ahi2} + {1'b0, bhi2} + {{(W-H){1'b0}}, slo2[H]};
    s3[H-1:0] <= slo2[H-1:0];
    q3 <= q2;

    tlo4 <= {1'b0, s3[H-1:0]} - {1'b0, q3[H-1:0]};
    s4 <= s3; q4 <= q3;

    t5[H-1:0]   <= tlo4[H-1:0];
    t5[W+1:H]   <= {1'b0, s4[W:H]} - {2'b0, q4[W-1:H]} - {{(W-H+1){1'b0}}, tlo4[H]};
    s5 <= s4;

    // s >= q exactly when the subtraction did not borrow
    r6 <= t5[W+1] ? s5[W-1:0] : t5[W-1:0];

    c <= r6;
  end
endmodule
