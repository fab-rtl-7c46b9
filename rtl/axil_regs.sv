// axil_regs: AXI4-Lite control slave through which the host drives the kernel.
//
// The host passes the HBM buffer base address, the kernel arguments (moduli,
// madd tables, powers of five, precomputed constants) and the program to
// run, then starts the kernel and polls for completion. Register map (byte
// addresses, 32-bit data):
//   0x000000 CTRL    write bit0 = 1: start; read {error, done, busy}
//   0x000008 BASE_LO / 0x00000C BASE_HI   HBM base address
//   0x000010 CYCLES, 0x000014 STALLS, 0x000018 RETIRED   (read only)
//   0x001000 + 16*i + 4*w   instruction i, 32-bit word w (0..2); writing
//            word 2 commits the whole instruction
//   0x800000 + 8*a (+4)     register-file word a: the low half is held and
//            the write of the high half commits all 64 bits at once, so the
//            register file only ever sees whole (atomic) writes
// A write is taken when address and data are both valid and no response is
// pending; a read answers one cycle after its address. Responses are OKAY.
// The AXI4-Lite link and its use for base address, kernel arguments and
// precomputed scalars follow the paper; the register map and the program
// download are this design's choices.
module axil_regs
  import fab_pkg::*;
#(
  parameter int unsigned AXW  = 33,
  parameter int unsigned IMW  = 10      // log2 of instruction memory depth
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [23:0]        s_awaddr,
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [31:0]        s_wdata,
  input  logic               s_wvalid,
  output logic               s_wready,
  output logic [1:0]         s_bresp,
  output logic               s_bvalid,
  input  logic               s_bready,
  input  logic [23:0]        s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready,
  // to the kernel
  output logic               start,
  output logic [AXW-1:0]     base_addr,
  output logic               im_we,
  output logic [IMW-1:0]     im_addr,
  output logic [INSTR_W-1:0] im_data,
  output logic               rf_we,
  output logic [17:0]        rf_addr,
  output logic [63:0]        rf_data,
  input  logic               busy,
  input  logic               done,
  input  logic               error,
  input  logic [31:0]        cycles,
  input  logic [31:0]        stalls,
  input  logic [31:0]        retired
);
  logic        wr_take;
  logic [31:0] im_w0, im_w1, rf_lo;
  logic [63:0] base_q;

  assign wr_take   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_take;
  assign s_wready  = wr_take;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign base_addr = AXW'(base_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      start <= 1'b0; im_we <= 1'b0; rf_we <= 1'b0;
      base_q <= '0; im_w0 <= '0; im_w1 <= '0; rf_lo <= '0;
      im_addr <= '0; im_data <= '0; rf_addr <= '0; rf_data <= '0;
    end else begin
      start <= 1'b0; im_we <= 1'b0; rf_we <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_take) begin
        s_bvalid <= 1'b1;
        if (s_awaddr[23]) begin
          if (s_awaddr[2]) begin
            rf_we <= 1'b1; rf_addr <= s_awaddr[20:3]; rf_data <= {s_wdata, rf_lo};
          end else rf_lo <= s_wdata;
        end else if (s_awaddr[22:12] != '0) begin
          unique case (s_awaddr[3:2])
            2'd0: im_w0 <= s_wdata;
            2'd1: im_w1 <= s_wdata;
            default: begin
              im_we <= 1'b1;
              im_addr <= IMW'((s_awaddr - 24'h1000) >> 4);
              im_data <= INSTR_W'({s_wdata, im_w1, im_w0});
            end
          endcase
        end else begin
          unique case (s_awaddr[7:0])
            8'h00: start <= s_wdata[0];
            8'h08: base_q[31:0]  <= s_wdata;
            8'h0C: base_q[63:32] <= s_wdata;
            default: ;
          endcase
        end
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[7:0])
          8'h00: s_rdata <= {29'b0, error, done, busy};
          8'h08: s_rdata <= base_q[31:0];
          8'h0C: s_rdata <= base_q[63:32];
          8'h10: s_rdata <= cycles;
          8'h14: s_rdata <= stalls;
          8'h18: s_rdata <= retired;
          default: s_rdata <= '0;
        endcase
      end
    end
  end
endmodule
