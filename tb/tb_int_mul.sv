// tb_int_mul: self-checking test of the 54x54-bit integer multiplier.
// Streams one random product per cycle (plus all-ones corner cases) and
// checks each result exactly LAT = 12 cycles after its operands, against
// the simulator's own wide multiplication.
module tb_int_mul;
  localparam int unsigned W = 54, LAT = 12, NOPS = 2000;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [W-1:0] a, b;
  logic [2*W-1:0] p;
  logic [2*W-1:0] exp_q [$];
  int checks = 0, failures = 0;

  int_mul #(.W(W), .LAT(LAT)) dut (.clk, .a, .b, .p);

  initial begin
    for (int n = 0; n < NOPS + LAT; n++) begin
      if (n < NOPS) begin
        if (n % 5 == 0) begin a = '1; b = '1; end
        else begin a = W'({$urandom, $urandom}); b = W'({$urandom, $urandom}); end
        exp_q.push_back((2*W)'(a) * (2*W)'(b));
      end
      @(posedge clk); #1;
      if (n >= LAT - 1 && n - (LAT - 1) < NOPS) begin
        automatic logic [2*W-1:0] e = exp_q.pop_front();
        checks++;
        if (p !== e) begin
          failures++;
          if (failures < 5) $display("mismatch op %0d: got %h exp %h", n-LAT+1, p, e);
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
