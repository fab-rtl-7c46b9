// tb_mod_red: self-checking test of the multi-shift modular reduction.
// For each of several random full-width 54-bit moduli it builds the
// 63-entry madd table (madd[c-1] = c * 2^54 mod q), streams products of
// two residues below q (and the largest such product) one per cycle, and
// checks every result exactly 12 cycles later against a % q computed with
// wide arithmetic. The pipeline is drained before the modulus changes.
module tb_mod_red;
  localparam int unsigned W = 54, SH = 6, LAT = 12, NOPS = 1000, NQ = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [2*W-1:0] a;
  logic [W-1:0] q, c;
  logic [W-1:0] madd [2**SH-1];
  logic [W-1:0] exp_q [$];
  int checks = 0, failures = 0;

  mod_red #(.W(W), .SHIFTS(SH)) dut (.clk, .a, .q, .madd, .c);

  function automatic logic [W-1:0] rnd_below(logic [W-1:0] m);
    logic [63:0] r = {$urandom, $urandom};
    return W'(r % 64'(m));
  endfunction

  initial begin
    for (int k = 0; k < NQ; k++) begin
      q = {1'b1, (W-1)'({$urandom, $urandom})} | 1;
      if (k == 0) q = '1;            // 2^54 - 1
      for (int i = 1; i < 2**SH; i++)
        madd[i-1] = W'(((2*W)'(i) << W) % (2*W)'(q));
      for (int n = 0; n < NOPS + LAT; n++) begin
        if (n < NOPS) begin
          logic [W-1:0] x, y;
          x = (n % 9 == 0) ? q - 1 : rnd_below(q);
          y = (n % 9 == 0) ? q - 1 : rnd_below(q);
          a = (2*W)'(x) * (2*W)'(y);
          exp_q.push_back(W'(a % (2*W)'(q)));
        end
        @(posedge clk); #1;
        if (n >= LAT - 1 && n - (LAT - 1) < NOPS) begin
          automatic logic [W-1:0] e = exp_q.pop_front();
          checks++;
          if (c !== e) begin
            failures++;
            if (failures < 5) $display("mismatch q=%h: got %h exp %h", q, c, e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
