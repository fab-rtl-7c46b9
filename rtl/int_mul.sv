// int_mul: pipelined 54 x 54-bit integer multiplier built from 18-bit words.
//
// Operand-scanning (schoolbook) multiplication: each operand is cut into
// three 18-bit words, matching the 18-bit multiplier inputs of FPGA DSP
// slices, and all nine word products are formed in parallel (the loop of
// the schoolbook method fully unrolled). The products are summed by column
// and the columns are combined into the 108-bit product. Latency is
// LAT = 12 cycles, throughput one product per cycle.
//   stage 1 operands, 2 products (DSP M register), 3 DSP P register,
//   stage 4 column sums, 5 partial combine, 6 final combine,
//   stages 7..12 balancing registers up to the 12 cycles the paper gives.
// Word size, unrolling and latency follow the paper; the stage split is
// this design's choice.
module int_mul #(
  parameter int unsigned W   = 54,
  parameter int unsigned LAT = 12
) (
  input  logic           clk,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] p
);
  localparam int unsigned K = W / 3;        // 18-bit words
  localparam int unsigned EXTRA = LAT - 6;  // balancing stages

  logic [W-1:0]   a1, b1;
  logic [2*K-1:0] pp2 [3][3];
  logic [2*K-1:0] pp3 [3][3];
  logic [2*K+1:0] col4 [5];
  logic [2*W-1:0] lo5, hi5;
  logic [2*W-1:0] p6;
  logic [2*W-1:0] dly [EXTRA];

  always_ff @(posedge clk) begin
    a1 <= a; b1 <= b;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        pp2[i][j] <= a1[K*i +: K] * b1[K*j +: K];
    pp3 <= pp2;
    col4[0] <= {2'b0, pp3[0][0]};
    col4[1] <= {2'b0, pp3[0][1]} + {2'b0, pp3[1][0]};
    col4[2] <= {2'b0, pp3[0][2]} + {2'b0, pp3[1][1]} + {2'b0, pp3[2][0]};
    col4[3] <= {2'b0, pp3[1][2]} + {2'b0, pp3[2][1]};
    col4[4] <= {2'b0, pp3[2][2]};
    lo5 <= (2*W)'(col4[0]) + ((2*W)'(col4[1]) << K);
    hi5 <= (2*W)'(col4[2]) + ((2*W)'(col4[3]) << K) + ((2*W)'(col4[4]) << (2*K));
    p6  <= lo5 + (hi5 << (2*K));
    dly[0] <= p6;
    for (int s = 1; s < EXTRA; s++) dly[s] <= dly[s-1];
  end

  assign p = dly[EXTRA-1];
endmodule
