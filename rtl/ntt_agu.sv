// ntt_agu: NTT address generation (data mapping and twiddle mapping).
//
// The NTT is a radix-2 Cooley-Tukey transform in constant-geometry form:
// every stage s (0..LOGN-1) reads the pairs (2j, 2j+1) and writes
//     B[j]       = A[2j] + w * A[2j+1]
//     B[j + N/2] = A[2j] - w * A[2j+1],   w = W^( (j >> (LOGN-1-s)) * N/2^(s+1) )
// for j = 0..N/2-1, where W is the N-th root of unity (its inverse for the
// inverse transform). Input in bit-reversed order gives output in natural
// order. With LANES butterflies per cycle, pair-row r (0..N/(2 LANES)-1)
// covers j = LANES*r + l: it reads rows 2r and 2r+1 of the source and
// writes rows r and r + N/(2 LANES) of the destination (the write rows are
// formed at write-back from the pair-row in flight), so logN stages take
// logN * N/512 cycles for 256 lanes, as in the paper.
//
// Twiddle mapping: stage s needs the 2^s values T_s[t] = W^(t N/2^(s+1)),
// stored from row tw_base + base(s) of the URAM miscellaneous bank,
// base(s) = sum over s' < s of ceil(2^s' / LANES). Lane l of pair-row r
// needs t = (LANES r + l) >> (LOGN-1-s): all lanes of a pair-row fall in
// one stored row, whose address is given here; tw_sel[l] is the position
// of lane l's twiddle inside that row, delayed one cycle so that it meets
// the read data. Only shifts, ANDs and adds are used, as in the paper.
// The paper gives the unified Cooley-Tukey datapath, the data/twiddle
// mapping sub-units and the counters; the constant-geometry ordering and
// the twiddle table layout are this design's choices.
module ntt_agu
  import fab_pkg::*;
#(
  parameter int unsigned LANES_P = LANES,
  parameter int unsigned LOGN_P  = LOGN
) (
  input  logic                   clk,
  input  logic [4:0]             stage,
  input  logic [LOGN_P-1:0]      pr,          // pair-row counter
  input  logic [15:0]            tw_base,     // first row of the twiddle table
  output logic [LOGN_P-1:0]      rd_row0,
  output logic [LOGN_P-1:0]      rd_row1,
  output logic [15:0]            tw_row,
  output logic [$clog2(LANES_P)-1:0] tw_sel [LANES_P]
);
  localparam int unsigned LL    = $clog2(LANES_P);

  logic [4:0]        sh;
  logic [31:0]       base_s;
  logic [31:0]       t0;
  logic [LL-1:0]     sel_c [LANES_P];

  always_comb begin
    sh = 5'(LOGN_P - 1) - stage;
    base_s = 0;
    for (int s = 0; s < 32; s++)
      if (s < int'(stage))
        base_s += (s >= LL) ? (32'd1 << (s - LL)) : 32'd1;
    t0 = (32'(pr) << LL) >> sh;
    tw_row  = 16'(32'(tw_base) + base_s + (t0 >> LL));
    rd_row0 = LOGN_P'({pr, 1'b0});
    rd_row1 = LOGN_P'({pr, 1'b1});
    for (int l = 0; l < LANES_P; l++)
      sel_c[l] = LL'(((32'(pr) << LL) + 32'(l)) >> sh);
  end

  always_ff @(posedge clk) tw_sel <= sel_c;
endmodule
