// fab_top: the FAB kernel, an FPGA accelerator for CKKS fully homomorphic
// encryption with bootstrapping (N = 2^16, 54-bit RNS limbs).
//
// Blocks: LANES functional units (modular multiply, add, subtract and
// automorph each); five single-port URAM banks (c0 bank-1/2, c1 bank-1/2,
// miscellaneous; 16 limbs each) and three dual-port BRAM banks (c0, c1 for
// extension limbs, 8 limbs each; miscellaneous, 4 limbs); the register file
// (scalars and four polynomial slots); NTT address generation (data and
// twiddle mapping); URAM/BRAM row address generation; the control logic;
// the HBM DMA with 32 read and 32 write FIFOs on 32 AXI4 master ports; the
// Ethernet Tx/Rx stream with its FIFOs; the AXI4-Lite slave for the host.
//
// Dataflow: the control logic issues one row (LANES coefficients) per cycle.
// Operand rows are read from the banks or register file (one-cycle read),
// pass the 31-cycle lanes and are written back 32 cycles after issue. For
// an NTT stage the register file delivers two rows (512 coefficients) that
// feed 256 butterflies, with twiddles read from the URAM miscellaneous bank
// and mapped to lanes by the NTT address generator. PERM sends a row
// through the automorph units and scatters it into a register-file slot.
// HBM loads (possibly in the background while computing) and Ethernet
// receives write whole rows into a bank when its write port is free.
//
// External ports: AXI4-Lite slave (host), 32 AXI4 master ports (HBM2),
// 512-bit AXI4-Stream transmit and receive (towards the CMAC core). One
// clock; active-low asynchronous reset.
// What follows the paper: the unit counts, widths, bank sizes and port
// types, the FIFO sizes, the interfaces and the operation set. Own choices:
// the instruction-driven control, row layout, operand-to-port rules, the
// constant-geometry NTT ordering and the single clock domain.
module fab_top
  import fab_pkg::*;
#(
  parameter int unsigned LANES_P = LANES,     // 256 functional units
  parameter int unsigned LOGN_P  = LOGN,      // log2 N = 16
  parameter int unsigned PORTS   = 32,        // HBM AXI ports
  parameter int unsigned URAM_D  = 4096,      // rows per URAM bank (16 limbs)
  parameter int unsigned BRAM_D  = 2048,      // rows per BRAM c0/c1 bank (8 limbs)
  parameter int unsigned BMISC_D = 1024,      // rows of the BRAM misc bank (4 limbs)
  parameter int unsigned IMW     = 10,        // instruction memory: 1024 entries
  parameter int unsigned AXW     = 33         // HBM byte address width (8 GB)
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave (host)
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
  // AXI4 masters (HBM2)
  output logic [AXW-1:0]     m_araddr  [PORTS],
  output logic [7:0]         m_arlen   [PORTS],
  output logic               m_arvalid [PORTS],
  input  logic               m_arready [PORTS],
  input  logic [255:0]       m_rdata   [PORTS],
  input  logic               m_rvalid  [PORTS],
  output logic               m_rready  [PORTS],
  input  logic               m_rlast   [PORTS],
  output logic [AXW-1:0]     m_awaddr  [PORTS],
  output logic [7:0]         m_awlen   [PORTS],
  output logic               m_awvalid [PORTS],
  input  logic               m_awready [PORTS],
  output logic [255:0]       m_wdata   [PORTS],
  output logic               m_wvalid  [PORTS],
  input  logic               m_wready  [PORTS],
  output logic               m_wlast   [PORTS],
  input  logic               m_bvalid  [PORTS],
  output logic               m_bready  [PORTS],
  // AXI4-Stream to / from the CMAC subsystem
  output logic [511:0]       tx_tdata,
  output logic               tx_tvalid,
  input  logic               tx_tready,
  output logic               tx_tlast,
  input  logic [511:0]       rx_tdata,
  input  logic               rx_tvalid,
  output logic               rx_tready,
  // interrupt-style status
  output logic               done
);
  localparam int unsigned W     = LOGQ;
  localparam int unsigned NN    = 1 << LOGN_P;
  localparam int unsigned ROWS  = NN / LANES_P;
  localparam int unsigned NPAIR = ROWS / 2;
  localparam int unsigned RB    = LANES_P * W;
  localparam int unsigned LL    = $clog2(LANES_P);
  localparam int unsigned RWD   = $clog2(ROWS);
  localparam int unsigned UAW   = $clog2(URAM_D);
  localparam int unsigned BAW   = $clog2(BRAM_D);
  localparam int unsigned MAW   = $clog2(BMISC_D);

  typedef logic [RB-1:0] row_t;

  // ---------------- host interface ----------------
  logic               start, im_we, rf_we, busy, error;
  logic [IMW-1:0]     im_addr;
  logic [INSTR_W-1:0] im_data;
  logic [17:0]        rf_waddr;
  logic [63:0]        rf_wdata;
  logic [AXW-1:0]     base_addr;
  logic [31:0]        cycles, stalls, retired;

  axil_regs #(.AXW(AXW), .IMW(IMW)) u_axil (
    .clk, .rst_n, .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready, .s_rdata,
    .s_rresp, .s_rvalid, .s_rready, .start, .base_addr, .im_we, .im_addr, .im_data,
    .rf_we, .rf_addr(rf_waddr), .rf_data(rf_wdata), .busy, .done, .error,
    .cycles, .stalls, .retired);

  // ---------------- control ----------------
  instr_t            ins;
  logic              iss_valid, p1_valid, wb_valid, pm_valid;
  logic [LOGN_P-1:0] iss_row, p1_row, wb_row, pm_row;
  logic [4:0]        stage;
  logic              ntt_odd;
  logic              ld_start, st_start, tx_start, rx_start;
  logic              ld_busy, st_busy, st_ready, tx_busy, tx_ready, rx_busy;
  logic [3:0]        ld_mem;
  logic [4:0]        ld_poly;

  fab_ctrl #(.LANES_P(LANES_P), .LOGN_P(LOGN_P), .IMW(IMW)) u_ctrl (
    .clk, .rst_n, .start, .im_we, .im_addr, .im_data,
    .ld_busy, .st_busy, .st_ready, .tx_busy, .tx_ready, .rx_busy,
    .ins, .iss_valid, .iss_row, .stage, .p1_valid, .p1_row, .wb_valid, .wb_row,
    .pm_valid, .pm_row, .ld_start, .st_start, .tx_start, .rx_start, .ld_mem, .ld_poly,
    .ntt_odd, .busy, .done, .error, .cycles, .stalls, .retired);

  // ---------------- operation decode ----------------
  logic is_ew, is_scalar, reads_d, is_ntt, is_perm, is_rdonly, mul_en;
  always_comb begin
    is_ew     = ins.op inside {OP_ADD, OP_SUB, OP_MUL, OP_MAC, OP_SMUL, OP_SMAC};
    is_scalar = ins.op inside {OP_SMUL, OP_SMAC};
    reads_d   = ins.op inside {OP_MAC, OP_SMAC};
    is_ntt    = (ins.op == OP_NTT);
    is_perm   = (ins.op == OP_PERM);
    is_rdonly = ins.op inside {OP_STORE, OP_TX};
    mul_en    = ins.op inside {OP_MUL, OP_MAC, OP_SMUL, OP_SMAC, OP_NTT};
  end

  // ---------------- register file ----------------
  logic [W-1:0]      q, scalar;
  logic [W-1:0]      madd [MADD_N];
  logic [LOGN_P:0]   g;
  logic [1:0]        rf_rd_slot [2];
  logic [LOGN_P-1:0] rf_rd_row  [2];
  row_t              rf_rd_data [2];
  logic              rf_rw_en   [2];
  logic [1:0]        rf_rw_slot [2];
  logic [LOGN_P-1:0] rf_rw_row  [2];
  row_t              rf_rw_data [2];
  logic              sc_en;
  logic [LOGN_P-1:0] sc_idx  [LANES_P];
  logic [W-1:0]      sc_data [LANES_P];

  reg_file #(.W(W), .LANES_P(LANES_P), .LOGN_P(LOGN_P)) u_rf (
    .clk, .wr_en(rf_we), .wr_addr(rf_waddr), .wr_data(rf_wdata),
    .limb(ins.limb), .gsel(ins.aux[5:0]), .sidx(ins.sidx),
    .q, .madd, .g, .scalar,
    .rd_slot(rf_rd_slot), .rd_row(rf_rd_row), .rd_data(rf_rd_data),
    .rw_en(rf_rw_en), .rw_slot(rf_rw_slot), .rw_row(rf_rw_row), .rw_data(rf_rw_data),
    .sc_en, .sc_slot(ins.dst_poly[1:0]), .sc_idx, .sc_data);

  // ---------------- NTT address generation ----------------
  logic [LOGN_P-1:0] ntt_rd0, ntt_rd1;
  logic [15:0]       tw_row;
  logic [LL-1:0]     tw_sel [LANES_P];

  ntt_agu #(.LANES_P(LANES_P), .LOGN_P(LOGN_P)) u_ntt_agu (
    .clk, .stage, .pr(iss_row), .tw_base(ins.aux[15:0]),
    .rd_row0(ntt_rd0), .rd_row1(ntt_rd1),
    .tw_row, .tw_sel);

  // ---------------- URAM / BRAM row address generation ----------------
  // The issue row comes from the control logic's counter; each operand's
  // bank address is {polynomial, row} (bank_agu form, shared counter).
  logic [8:0] rd_en;               // memory m read at issue
  logic [4:0] rd_poly [8];
  always_comb begin
    for (int m = 0; m < 8; m++) begin rd_en[m] = 1'b0; rd_poly[m] = '0; end
    rd_en[8] = 1'b0;
    if (iss_valid) begin
      if (is_ew || is_perm || is_rdonly) begin
        if (ins.a_mem <= 4'd8) rd_en[ins.a_mem] = 1'b1;
        if (ins.a_mem < 4'd8)  rd_poly[ins.a_mem[2:0]] = ins.a_poly;
      end
      if (is_ew && !is_scalar) begin
        if (ins.b_mem <= 4'd8) rd_en[ins.b_mem] = 1'b1;
        if (ins.b_mem < 4'd8)  rd_poly[ins.b_mem[2:0]] = ins.b_poly;
      end
      if (reads_d) begin
        if (ins.dst_mem <= 4'd8) rd_en[ins.dst_mem] = 1'b1;
        if (ins.dst_mem < 4'd8)  rd_poly[ins.dst_mem[2:0]] = ins.dst_poly;
      end
      if (is_ntt) rd_en[MEM_URAM_MISC] = 1'b1;
    end
  end

  // RF read ports: A -> 0, B -> 1, D -> 1 if A uses 0, else 0; NTT uses both.
  logic d_port;
  assign d_port = (ins.a_mem == MEM_RF);
  always_comb begin
    rf_rd_slot[0] = ins.a_poly[1:0]; rf_rd_row[0] = iss_row;
    rf_rd_slot[1] = ins.b_poly[1:0]; rf_rd_row[1] = iss_row;
    if (reads_d && ins.dst_mem == MEM_RF) begin
      rf_rd_slot[d_port] = ins.dst_poly[1:0];
    end
    if (is_ntt) begin
      rf_rd_slot[0] = ntt_odd ? ins.b_poly[1:0] : ins.a_poly[1:0];
      rf_rd_slot[1] = rf_rd_slot[0];
      rf_rd_row[0]  = ntt_rd0;
      rf_rd_row[1]  = ntt_rd1;
    end
  end

  // ---------------- banks ----------------
  row_t bank_rd [8];
  logic bank_we [8];
  logic [12:0] bank_waddr [8];
  row_t bank_wd [8];
  logic [12:0] bank_raddr [8];

  always_comb begin
    for (int m = 0; m < 8; m++) begin
      bank_raddr[m] = 13'({rd_poly[m], iss_row[RWD-1:0]});
      if (is_ntt && m == int'(MEM_URAM_MISC)) bank_raddr[m] = 13'(tw_row);
    end
  end

  for (genvar m = 0; m < 5; m++) begin : g_uram
    uram_bank #(.W(W), .LANES(LANES_P), .DEPTH(URAM_D)) u_bank (
      .clk, .en(rd_en[m] || bank_we[m]), .we(bank_we[m]),
      .addr(bank_we[m] ? UAW'(bank_waddr[m]) : UAW'(bank_raddr[m])),
      .wdata(bank_wd[m]), .rdata(bank_rd[m]));
    a_single_port: assert property (@(posedge clk) disable iff (!rst_n)
      !(rd_en[m] && bank_we[m]));
  end
  for (genvar m = 5; m < 7; m++) begin : g_bram
    bram_bank #(.W(W), .LANES(LANES_P), .DEPTH(BRAM_D)) u_bank (
      .clk, .re(rd_en[m]), .raddr(BAW'(bank_raddr[m])), .rdata(bank_rd[m]),
      .we(bank_we[m]), .waddr(BAW'(bank_waddr[m])), .wdata(bank_wd[m]));
  end
  bram_bank #(.W(W), .LANES(LANES_P), .DEPTH(BMISC_D)) u_bram_misc (
    .clk, .re(rd_en[7]), .raddr(MAW'(bank_raddr[7])), .rdata(bank_rd[7]),
    .we(bank_we[7]), .waddr(MAW'(bank_waddr[7])), .wdata(bank_wd[7]));

  // ---------------- operand selection (one cycle after issue) ----------------
  function automatic row_t mem_row(input logic [3:0] mid, input logic port);
    if (mid == MEM_RF) return rf_rd_data[port];
    else return bank_rd[mid[2:0]];
  endfunction

  row_t rowA, rowB, rowD, tw_data;
  always_comb begin
    rowA = mem_row(ins.a_mem, 1'b0);
    rowB = mem_row(ins.b_mem, 1'b1);
    rowD = mem_row(ins.dst_mem, d_port);
    tw_data = bank_rd[MEM_URAM_MISC];
  end

  // ---------------- functional units ----------------
  logic [W-1:0]      fx [LANES_P], fa [LANES_P], fb [LANES_P];
  logic [W-1:0]      fsum [LANES_P], fdiff [LANES_P];
  logic [LOGN_P-1:0] fidx [LANES_P], fnew [LANES_P];
  row_t              sum_row, diff_row;
  logic [2*RB-1:0]   pair_cat;

  assign pair_cat = {rf_rd_data[1], rf_rd_data[0]};

  for (genvar l = 0; l < LANES_P; l++) begin : g_fu
    always_comb begin
      fx[l] = rowA[l*W +: W];
      fa[l] = rowB[l*W +: W];
      fb[l] = is_scalar ? scalar : rowB[l*W +: W];
      unique case (ins.op)
        OP_MUL, OP_SMUL: begin fx[l] = '0; fa[l] = rowA[l*W +: W]; end
        OP_MAC, OP_SMAC: begin fx[l] = rowD[l*W +: W]; fa[l] = rowA[l*W +: W]; end
        OP_NTT: begin
          // pair (2l, 2l+1) of the 2*LANES coefficients read this cycle
          fx[l] = pair_cat[(2*l)*W +: W];
          fa[l] = pair_cat[(2*l+1)*W +: W];
          fb[l] = tw_data[tw_sel[l]*W +: W];
        end
        default: ;
      endcase
      fidx[l] = LOGN_P'({p1_row[RWD-1:0], LL'(l)});
    end

    functional_unit #(.W(W), .LOGN_P(LOGN_P)) u_fu (
      .clk, .mul_en, .x(fx[l]), .a(fa[l]), .b(fb[l]), .q, .madd,
      .sum(fsum[l]), .diff(fdiff[l]),
      .idx(fidx[l]), .g, .perm_mode(ins.aux[7:6]), .new_idx(fnew[l]));

    assign sum_row[l*W +: W]  = fsum[l];
    assign diff_row[l*W +: W] = fdiff[l];
  end

  // ---------------- PERM: automorph scatter into the register file ----------------
  row_t perm_hold;
  always_ff @(posedge clk) perm_hold <= rowA;
  always_comb begin
    sc_en = pm_valid;
    for (int l = 0; l < LANES_P; l++) begin
      sc_idx[l]  = fnew[l];
      sc_data[l] = perm_hold[l*W +: W];
    end
  end

  // ---------------- engines: HBM DMA and Ethernet stream ----------------
  logic                ld_row_valid, ld_row_ready;
  row_t                ld_row_data, rx_row_data;
  logic [RWD-1:0]      ld_row_idx, rx_row_idx;
  logic                rx_row_valid, rx_row_ready;

  hbm_dma #(.W(W), .LANES_P(LANES_P), .ROWS(ROWS), .PORTS(PORTS), .DW(256), .AXW(AXW)) u_dma (
    .clk, .rst_n, .base_addr,
    .ld_start, .ld_beat(ins.aux[23:0]), .ld_busy, .ld_row_valid, .ld_row_ready,
    .ld_row_data, .ld_row_idx,
    .st_start, .st_beat(ins.aux[23:0]), .st_busy, .st_ready,
    .st_row_valid(p1_valid && ins.op == OP_STORE), .st_row_data(rowA),
    .m_araddr, .m_arlen, .m_arvalid, .m_arready, .m_rdata, .m_rvalid, .m_rready, .m_rlast,
    .m_awaddr, .m_awlen, .m_awvalid, .m_awready, .m_wdata, .m_wvalid, .m_wready, .m_wlast,
    .m_bvalid, .m_bready);

  cmac_stream #(.W(W), .LANES_P(LANES_P), .ROWS(ROWS)) u_cmac (
    .clk, .rst_n,
    .tx_start, .tx_busy, .tx_ready, .tx_row_valid(p1_valid && ins.op == OP_TX),
    .tx_row_data(rowA), .tx_tdata, .tx_tvalid, .tx_tready, .tx_tlast,
    .rx_start, .rx_busy, .rx_tdata, .rx_tvalid, .rx_tready,
    .rx_row_valid, .rx_row_ready, .rx_row_data, .rx_row_idx);

  // ---------------- write ports ----------------
  // Priority: compute write-back, then Ethernet receive, then HBM load.
  logic ew_wb;
  assign ew_wb = wb_valid && is_ew;
  assign rx_row_ready = 1'b1;
  always_comb begin
    ld_row_ready = 1'b0;
    for (int m = 0; m < 8; m++) begin
      bank_we[m] = 1'b0; bank_waddr[m] = '0; bank_wd[m] = sum_row;
    end
    // compute write-back
    if (ew_wb && ins.dst_mem < 4'd8) begin
      bank_we[ins.dst_mem[2:0]]    = 1'b1;
      bank_waddr[ins.dst_mem[2:0]] = 13'({ins.dst_poly, wb_row[RWD-1:0]});
      bank_wd[ins.dst_mem[2:0]]    = (ins.op == OP_SUB) ? diff_row : sum_row;
    end
    // Ethernet receive (foreground)
    if (rx_row_valid && ins.op == OP_RX && ins.dst_mem < 4'd8) begin
      bank_we[ins.dst_mem[2:0]]    = 1'b1;
      bank_waddr[ins.dst_mem[2:0]] = 13'({ins.dst_poly, rx_row_idx});
      bank_wd[ins.dst_mem[2:0]]    = rx_row_data;
    end
    // HBM load, when the target's port is free this cycle
    if (ld_row_valid && ld_mem < 4'd8 && !bank_we[ld_mem[2:0]] &&
        !(ld_mem <= MEM_URAM_MISC && rd_en[ld_mem])) begin
      ld_row_ready = 1'b1;
      bank_we[ld_mem[2:0]]    = 1'b1;
      bank_waddr[ld_mem[2:0]] = 13'({ld_poly, ld_row_idx});
      bank_wd[ld_mem[2:0]]    = ld_row_data;
    end
  end

  // register file row writes: element-wise results and NTT butterflies
  always_comb begin
    rf_rw_en[0]   = ew_wb && ins.dst_mem == MEM_RF;
    rf_rw_slot[0] = ins.dst_poly[1:0];
    rf_rw_row[0]  = wb_row;
    rf_rw_data[0] = (ins.op == OP_SUB) ? diff_row : sum_row;
    rf_rw_en[1]   = 1'b0;
    rf_rw_slot[1] = ins.dst_poly[1:0];
    rf_rw_row[1]  = wb_row;
    rf_rw_data[1] = diff_row;
    if (wb_valid && is_ntt) begin
      rf_rw_en[0]   = 1'b1;
      rf_rw_en[1]   = 1'b1;
      rf_rw_slot[0] = ntt_odd ? ins.a_poly[1:0] : ins.b_poly[1:0];
      rf_rw_slot[1] = rf_rw_slot[0];
      rf_rw_row[0]  = wb_row;
      rf_rw_row[1]  = LOGN_P'(wb_row + NPAIR);
      rf_rw_data[0] = sum_row;
      rf_rw_data[1] = diff_row;
    end
  end
endmodule
