// tb_mod_add: self-checking test of mod_add (modular addition, 54-bit limbs).
// Streams one random operation per cycle for 2000 cycles against random
// full-width moduli and checks every result exactly LAT = 7 cycles after
// its operands were applied, against a reference computed with wide
// integer arithmetic.
module tb_mod_add;
  localparam int unsigned W = 54, LAT = 7, NOPS = 2000;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [W-1:0] a, b, q, c;
  logic [W-1:0] exp_q [$];
  int checks = 0, failures = 0;

  mod_add #(.W(W)) dut (.clk, .a, .b, .q, .c);

  function automatic logic [W-1:0] rnd_below(logic [W-1:0] m);
    logic [63:0] r = {$urandom, $urandom};
    return W'(r % 64'(m));
  endfunction

  initial begin
    q = {1'b1, (W-1)'({$urandom, $urandom})} | 1;
    for (int n = 0; n < NOPS + LAT; n++) begin
      if (n % 500 == 0 && n < NOPS) q = {1'b1, (W-1)'({$urandom, $urandom})} | 1;
      if (n < NOPS) begin
        if (n % 7 == 0) begin a = q - 1; b = q - 1; end
        else if (n % 7 == 1) begin a = 0; b = q - 1; end
        else begin a = rnd_below(q); b = rnd_below(q); end
        exp_q.push_back(W'(((W+1)'(a) + (W+1)'(b)) % (W+1)'(q)));
      end
      @(posedge clk); #1;
      if (n >= LAT - 1 && exp_q.size() > 0 && n - (LAT - 1) < NOPS) begin
        automatic logic [W-1:0] e = exp_q.pop_front();
        checks++;
        if (c !== e) begin
          failures++;
          if (failures < 5) $display("mismatch op %0d: got %h exp %h", n-LAT+1, c, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // q changes only every 500 operations; hold it for the ops in flight
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
