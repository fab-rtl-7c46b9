// sync_fifo: single-clock first-in first-out buffer.
//
// Used for the 32 HBM read FIFOs (256 bits x 512, four outstanding
// 128-beat bursts), the 32 HBM write FIFOs (256 bits x 128, one burst) and
// the 512-bit Ethernet transmit and receive FIFOs. push writes din when
// not full; pop removes the head, which is always visible on dout (show-
// ahead). count gives the fill level for credit checks. Pushing a full or
// popping an empty FIFO is a protocol error, checked by assertions.
// Depths and widths follow the paper; all FIFOs run on one clock here
// (the paper places the read FIFOs in a 450 MHz memory clock domain while
// calling them synchronous; this design keeps a single clock).
module sync_fifo #(
  parameter int unsigned DW    = 256,
  parameter int unsigned DEPTH = 512
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [DW-1:0]          din,
  input  logic                   pop,
  output logic [DW-1:0]          dout,
  output logic                   full,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) wp <= AW'(wp + 1'b1);
      if (pop && !empty) rp <= AW'(rp + 1'b1);
      count <= count + ((push && !full) ? 1'b1 : 1'b0) - ((pop && !empty) ? 1'b1 : 1'b0);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
