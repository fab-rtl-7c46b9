// tb_automorph_unit: self-checking test of the automorph index unit at the
// full size N = 2^16. For several rotation indices k it feeds every index
// i (one per cycle) and checks, one cycle later:
//  * the rotated index against an independent form of the Galois map:
//    the odd exponent 2i+1 goes to 5^k (2i+1) mod 2N, whose index is
//    (that - 1)/2;
//  * that the map is a permutation (every destination hit once);
//  * the bit-reverse and combined modes.
module tb_automorph_unit;
  import fab_pkg::*;
  localparam int unsigned LN = 16, NN = 1 << LN;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [LN-1:0] idx, new_idx;
  logic [LN:0]   g;
  logic [1:0]    mode;
  int checks = 0, failures = 0;
  bit hit [NN];

  automorph_unit #(.LOGN_P(LN)) dut (.clk, .idx, .g, .mode, .new_idx);

  function automatic logic [LN-1:0] brev(logic [LN-1:0] v);
    logic [LN-1:0] r;
    for (int i = 0; i < LN; i++) r[i] = v[LN-1-i];
    return r;
  endfunction

  initial begin
    int ks [4] = '{1, 2, 7, 1000};
    foreach (ks[t]) begin
      longint unsigned gg = 1;
      for (int j = 0; j < ks[t]; j++) gg = (gg * 5) % (2 * NN);
      g = (LN+1)'(gg);
      foreach (hit[i]) hit[i] = 0;
      for (int m = 0; m < 3; m++) begin
        mode = 2'(m);
        for (int i = 0; i < NN; i += (m == 0 ? 1 : 37)) begin
          longint unsigned ex;
          logic [LN-1:0] e;
          idx = LN'(i);
          ex = (gg * (2 * longint'(i) + 1)) % (2 * NN);
          e  = LN'((ex - 1) / 2);
          if (m == 1) e = brev(LN'(i));
          if (m == 2) e = brev(e);
          @(posedge clk); #1;
          checks++;
          if (new_idx !== e) begin
            failures++;
            if (failures < 5) $display("k=%0d mode=%0d i=%0d got %0d exp %0d", ks[t], m, i, new_idx, e);
          end
          if (m == 0) hit[new_idx] = 1;
        end
        if (m == 0) begin
          int missing = 0;
          foreach (hit[i]) if (!hit[i]) missing++;
          checks++;
          if (missing != 0) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
