// reg_file: the accelerator's register file (scalars and polynomial slots).
//
// Scalar part, written by the host before a run through atomic 64-bit
// writes (wr_en, wr_addr, wr_data), read by the control logic:
//   region 0  moduli q[0..31]                      (wr_addr[17:16] = 0)
//   region 1  madd tables, 63 words per modulus    (1, index limb*64 + e)
//   region 2  powers of five g_k = 5^k mod 2N      (2, up to 64 rotations)
//   region 3  general constants (basis-conversion factors, N^-1, P^-1 ...)
// The modulus and madd table of limb `limb`, the power g of rotation
// `gsel` and the constant `sidx` are presented on registered outputs
// (one cycle after their selects change).
//
// Polynomial part: PSLOTS slots of N coefficients each, holding the
// intermediate polynomials of Rotate and Mult and serving as the NTT
// working store. Two row read ports and two row write ports (a row is
// LANES consecutive coefficients) serve the NTT, which reads two rows and
// writes two rows per cycle; a scatter port writes LANES coefficients to
// arbitrary positions of one slot per cycle, which the automorph units use
// to store a polynomial in permuted order. Reads are registered.
//
// The 2 MB total, the split (about a quarter for scalars, the rest for up
// to four polynomials), the host writes and the many same-latency ports
// follow the paper. Region layout, port count and the constant count
// (NCONST) are this design's choices.
module reg_file
  import fab_pkg::*;
#(
  parameter int unsigned W      = LOGQ,
  parameter int unsigned LANES_P = LANES,
  parameter int unsigned LOGN_P = LOGN,
  parameter int unsigned PSLOTS = 4,
  parameter int unsigned NCONST = 4096
) (
  input  logic                  clk,
  // host write port
  input  logic                  wr_en,
  input  logic [17:0]           wr_addr,
  input  logic [63:0]           wr_data,
  // scalar reads
  input  logic [4:0]            limb,
  input  logic [5:0]            gsel,
  input  logic [15:0]           sidx,
  output logic [W-1:0]          q,
  output logic [W-1:0]          madd [MADD_N],
  output logic [LOGN_P:0]       g,
  output logic [W-1:0]          scalar,
  // polynomial row reads
  input  logic [1:0]            rd_slot [2],
  input  logic [LOGN_P-1:0]     rd_row  [2],     // row index (only low bits used)
  output logic [LANES_P*W-1:0]  rd_data [2],
  // polynomial row writes
  input  logic                  rw_en   [2],
  input  logic [1:0]            rw_slot [2],
  input  logic [LOGN_P-1:0]     rw_row  [2],
  input  logic [LANES_P*W-1:0]  rw_data [2],
  // scatter write
  input  logic                  sc_en,
  input  logic [1:0]            sc_slot,
  input  logic [LOGN_P-1:0]     sc_idx  [LANES_P],
  input  logic [W-1:0]          sc_data [LANES_P]
);
  localparam int unsigned NN   = 1 << LOGN_P;
  localparam int unsigned LL   = $clog2(LANES_P);

  logic [W-1:0]    q_tab    [NMOD];
  logic [W-1:0]    madd_tab [NMOD][MADD_N];
  logic [LOGN_P:0] g_tab    [64];
  logic [W-1:0]    c_tab    [NCONST];
  logic [W-1:0]    poly     [PSLOTS][NN];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_addr[17:16])
        2'd0: q_tab[wr_addr[4:0]] <= wr_data[W-1:0];
        2'd1: if (wr_addr[5:0] != 6'd63) madd_tab[wr_addr[10:6]][wr_addr[5:0]] <= wr_data[W-1:0];
        2'd2: g_tab[wr_addr[5:0]] <= wr_data[LOGN_P:0];
        default: if (32'(wr_addr[15:0]) < NCONST) c_tab[wr_addr[$clog2(NCONST)-1:0]] <= wr_data[W-1:0];
      endcase
    end
    q      <= q_tab[limb];
    madd   <= madd_tab[limb];
    g      <= g_tab[gsel];
    scalar <= c_tab[sidx[$clog2(NCONST)-1:0]];
  end

  // row reads and writes
  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++)
      for (int l = 0; l < LANES_P; l++)
        rd_data[p][l*W +: W] <= poly[rd_slot[p]][{rd_row[p][LOGN_P-LL-1:0], LL'(l)}];
    for (int p = 0; p < 2; p++)
      if (rw_en[p])
        for (int l = 0; l < LANES_P; l++)
          poly[rw_slot[p]][{rw_row[p][LOGN_P-LL-1:0], LL'(l)}] <= rw_data[p][l*W +: W];
    if (sc_en)
      for (int l = 0; l < LANES_P; l++)
        poly[sc_slot][sc_idx[l]] <= sc_data[l];
  end

  a_rows_distinct: assert property (@(posedge clk)
    !(rw_en[0] && rw_en[1] && rw_slot[0] == rw_slot[1] && rw_row[0] == rw_row[1]));
  a_no_mixed_write: assert property (@(posedge clk) !(sc_en && (rw_en[0] || rw_en[1])));

endmodule
