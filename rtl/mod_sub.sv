// mod_sub: pipelined modular subtraction c = (a - b) mod q on 54-bit limbs.
//
// Multi-word textbook subtraction (subtract, then add q back once if the
// difference went negative) on two 27-bit words with a borrow between them;
// the correction (add q) is likewise two 27-bit additions with a carry, the
// change the paper makes to the final step. Seven register stages: a result
// appears LAT = 7 cycles after its operands, one operation per cycle.
//   stage 1 operands, 2 low-word difference, 3 high-word difference,
//   stage 4 low-word d+q, 5 high-word d+q, 6 select, 7 output register.
// Inputs must satisfy a, b < q. The stage split is this design's choice;
// width, word size and latency follow the paper.
module mod_sub #(
  parameter int unsigned W = 54
) (
  input  logic         clk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] c
);
  localparam int unsigned H = W / 2;

  logic [W-1:0] a1, b1, q1;
  logic [H:0]   dlo2;          // dlo2[H] = borrow
  logic [W-1:H] ahi2, bhi2;
  logic [W-1:0] q2;
  logic [W:0]   d3;            // d3[W] = final borrow (negative result)
  logic [W-1:0] q3;
  logic [H:0]   tlo4;          // tlo4[H] = carry
  logic [W:0]   d4;
  logic [W-1:0] q4;
  logic [W-1:0] t5;
  logic [W:0]   d5;
  logic [W-1:0] r6;

  always_ff @(posedge clk) begin
    a1 <= a; b1 <= b; q1 <= q;

    dlo2 <= {1'b0, a1[H-1:0]} - {1'b0, b1[H-1:0]};
    ahi2 <= a1[W-1:H]; bhi2 <= b1[W-1:H]; q2 <= q1;

    d3[W:H]   <= {1'b0, ahi2} - {1'b0, bhi2} - {{(W-H){1'b0}}, dlo2[H]};
    d3[H-1:0] <= dlo2[H-1:0];
    q3 <= q2;

    tlo4 <= {1'b0, d3[H-1:0]} + {1'b0, q3[H-1:0]};
    d4 <= d3; q4 <= q3;

    t5[H-1:0] <= tlo4[H-1:0];
    t5[W-1:H] <= d4[W-1:H] + q4[W-1:H] + {{(W-H-1){1'b0}}, tlo4[H]};
    d5 <= d4;

    r6 <= d5[W] ? t5 : d5[W-1:0];

    c <= r6;
  end
endmodule
