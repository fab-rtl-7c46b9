// tb_fab_top: end-to-end test of the FAB kernel at reduced size
// (8 lanes, N = 512, 2 HBM ports; 64 rows per polynomial, so that
// write-back, 32 cycles after issue, overlaps the issue of later rows), driven the way the host drives it.
//
// The host side (AXI4-Lite) writes the modulus, its madd table, a power of
// five and a constant into the register file, downloads a program, starts
// the kernel and polls for done. HBM is the behavioural hbm_model; the
// Ethernet side is driven and captured here. The program:
//   load A (foreground), load B in the background while a scalar multiply
//   runs and writes the same BRAM (the load waits for the free port),
//   wait; add, sub, mul; two operations that read and write the same
//   single-port URAM bank (stalls), one of them a multiply-accumulate;
//   stores of all results; load of the twiddle table; bit-reverse PERM,
//   NTT, store; automorph PERM (rotation k = 1), store; transmit A;
//   receive C and store it; an illegal add (two reads of one URAM bank);
//   halt.
// Every stored polynomial is compared with a reference computed here
// (direct DFT for the NTT, the Galois index map for the automorph), the
// transmitted beats with A, and the number of NTT issue cycles with
// logN * N/(2*LANES). Each mechanism (stall, background load overlap,
// deferred load write, Tx back-pressure, illegal-instruction skip) is
// counted and must occur at least once.
module tb_fab_top;
  import fab_pkg::*;
  localparam int unsigned LA = 8, LN = 9, PT = 2, NN = 1 << LN, ROWS = NN / LA;
  localparam int unsigned CPB = 4;
  localparam logic [53:0] Q  = 54'h200000000e0001;   // 54-bit prime, q = 1 mod 2^17
  localparam logic [53:0] WN = 54'h473871db72a99;    // primitive 512th root of unity mod q
  localparam logic [53:0] S0 = 54'h123456789abcd;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // AXI4-Lite
  logic [23:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  // AXI4 masters
  logic [32:0] m_araddr [PT], m_awaddr [PT];
  logic [7:0] m_arlen [PT], m_awlen [PT];
  logic m_arvalid [PT], m_arready [PT], m_rvalid [PT], m_rready [PT], m_rlast [PT];
  logic m_awvalid [PT], m_awready [PT], m_wvalid [PT], m_wready [PT], m_wlast [PT];
  logic m_bvalid [PT], m_bready [PT];
  logic [255:0] m_rdata [PT], m_wdata [PT];
  // stream
  logic [511:0] tx_tdata, rx_tdata;
  logic tx_tvalid, tx_tready, tx_tlast, rx_tvalid, rx_tready, done;

  fab_top #(.LANES_P(LA), .LOGN_P(LN), .PORTS(PT), .URAM_D(256), .BRAM_D(128),
            .BMISC_D(128), .IMW(6)) dut (.*);

  hbm_model #(.PORTS(PT)) u_hbm (
    .clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rvalid(m_rvalid), .rready(m_rready), .rlast(m_rlast),
    .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wvalid(m_wvalid), .wready(m_wready), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready));

  int checks = 0, failures = 0;
  int n_stall, n_overlap, n_defer, n_txbp, n_ntt_iss;
  logic [53:0] A [NN], B [NN], C [NN], TW [2*NN], R [NN];

  // ---------------- arithmetic helpers ----------------
  function automatic logic [53:0] mm(logic [53:0] a, logic [53:0] b);
    return 54'((108'(a) * 108'(b)) % 108'(Q));
  endfunction
  function automatic logic [53:0] pw(logic [53:0] a, int e);
    logic [53:0] r = 1;
    for (int i = 0; i < e; i++) r = mm(r, a);
    return r;
  endfunction
  function automatic logic [53:0] ad(logic [53:0] a, logic [53:0] b);
    return 54'((55'(a) + 55'(b)) % 55'(Q));
  endfunction
  function automatic logic [53:0] sb(logic [53:0] a, logic [53:0] b);
    return 54'((55'(a) + 55'(Q) - 55'(b)) % 55'(Q));
  endfunction

  // ---------------- HBM contents ----------------
  task automatic put_poly(longint beat0, input logic [53:0] v [NN], int off);
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < PT; p++) begin
        automatic logic [255:0] d = '0;
        for (int c = 0; c < CPB; c++) d[c*64 +: 54] = v[off + r*LA + p*CPB + c];
        u_hbm.poke(p, beat0 + longint'(r), d);
      end
  endtask
  task automatic get_poly(longint beat0, output logic [53:0] v [NN]);
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < PT; p++) begin
        automatic logic [255:0] d = u_hbm.peek(p, beat0 + r);
        for (int c = 0; c < CPB; c++) v[r*LA + p*CPB + c] = d[c*64 +: 54];
      end
  endtask
  task automatic check_poly(string what, longint beat0, input logic [53:0] e [NN]);
    logic [53:0] g [NN];
    int bad = 0;
    get_poly(beat0, g);
    for (int i = 0; i < NN; i++) begin
      checks++;
      if (g[i] !== e[i]) begin
        failures++; bad++;
        if (bad < 3) $display("%s[%0d]: got %h exp %h", what, i, g[i], e[i]);
      end
    end
  endtask

  // ---------------- AXI4-Lite host ----------------
  task automatic axil_write(logic [23:0] addr, logic [31:0] data);
    s_awaddr = addr; s_wdata = data; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    #1 s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(posedge clk);
    @(posedge clk); #1;
  endtask
  task automatic axil_read(logic [23:0] addr, output logic [31:0] data);
    s_araddr = addr; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    #1 s_arvalid = 0;
    while (!s_rvalid) @(posedge clk);
    data = s_rdata;
    @(posedge clk); #1;
  endtask
  task automatic rf_write(logic [17:0] a, logic [63:0] d);
    axil_write(24'h800000 + {3'b0, a, 3'b000}, d[31:0]);
    axil_write(24'h800004 + {3'b0, a, 3'b000}, d[63:32]);
  endtask
  int pcount = 0;
  task automatic emit(op_e op, logic async_, logic [3:0] dm, logic [4:0] dp, logic [3:0] am,
                      logic [4:0] ap, logic [3:0] bm, logic [4:0] bp, logic [15:0] sidx,
                      logic [31:0] aux);
    instr_t i;
    logic [95:0] w;
    i = '{op: op, async: async_, dst_mem: dm, dst_poly: dp, a_mem: am, a_poly: ap,
          b_mem: bm, b_poly: bp, limb: 5'd0, sidx: sidx, aux: aux};
    w = 96'(i);
    axil_write(24'h001000 + 24'(pcount * 16) + 0, w[31:0]);
    axil_write(24'h001000 + 24'(pcount * 16) + 4, w[63:32]);
    axil_write(24'h001000 + 24'(pcount * 16) + 8, w[95:64]);
    pcount++;
  endtask

  localparam logic [3:0] C0A = 4'd0, C0B = 4'd1, C1A = 4'd2, C1B = 4'd3, UMS = 4'd4,
                         BC0 = 4'd5, BC1 = 4'd6, BMS = 4'd7, RF = 4'd8;
  function automatic longint outb(int k); return 256 + 64 * k; endfunction

  // ---------------- mechanism monitors ----------------
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.st == 4 && dut.u_ctrl.want && dut.u_ctrl.conflict) n_stall++;
    if (dut.ld_busy && dut.iss_valid) n_overlap++;
    if (dut.ld_row_valid && !dut.ld_row_ready) n_defer++;
    if (tx_tvalid && !tx_tready) n_txbp++;
    if (dut.iss_valid && dut.ins.op == OP_NTT) n_ntt_iss++;
  end

  // ---------------- Ethernet side ----------------
  logic [53:0] txcap [$];
  int tx_last_seen = 0;
  always @(posedge clk) begin
    tx_tready <= ($urandom % 3) != 0;
    if (tx_tvalid && tx_tready) begin
      for (int l = 0; l < LA; l++) txcap.push_back(tx_tdata[l*54 +: 54]);
      if (tx_tlast) tx_last_seen++;
    end
  end
  int rx_row = 0;
  always @(posedge clk) begin
    if (!rst_n) begin rx_tvalid <= 0; rx_row <= 0; end
    else begin
      if (rx_tvalid && rx_tready) rx_row <= rx_row + 1;
      rx_tvalid <= (dut.ins.op == OP_RX) && (rx_row + ((rx_tvalid && rx_tready) ? 1 : 0) < ROWS);
    end
  end
  always_comb begin
    rx_tdata = '0;
    for (int l = 0; l < LA; l++) rx_tdata[l*54 +: 54] = C[(rx_row % ROWS)*LA + l];
  end

  initial begin
    logic [31:0] st;
    logic [53:0] e [NN];
    s_awvalid = 0; s_wvalid = 0; s_bready = 1; s_arvalid = 0; s_rready = 1;
    for (int i = 0; i < NN; i++) begin
      A[i] = 54'({$urandom, $urandom}) % Q;
      B[i] = 54'({$urandom, $urandom}) % Q;
      C[i] = 54'({$urandom, $urandom}) % Q;
    end
    if (1) begin
      // twiddle tables: stage s at row base(s), T_s[t] = w^(t*N/2^(s+1))
      int base = 0;
      foreach (TW[i]) TW[i] = '0;
      for (int s = 0; s < LN; s++) begin
        for (int t = 0; t < (1 << s); t++) TW[base * LA + t] = pw(WN, t * (NN >> (s + 1)));
        base += ((1 << s) + LA - 1) / LA;
      end
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk); #1;
    put_poly(0, A, 0);
    put_poly(64, B, 0);
    begin
      logic [53:0] t0 [NN], t1 [NN];
      for (int i = 0; i < NN; i++) begin t0[i] = TW[i]; t1[i] = TW[NN + i]; end
      put_poly(128, t0, 0);
      put_poly(192, t1, 0);
    end

    // kernel arguments
    rf_write(18'h00000, 64'(Q));
    for (int c = 1; c < 64; c++) rf_write({2'd1, 5'd0, 5'd0, 6'(c - 1)}, 64'(54'((108'(c) << 54) % 108'(Q))));
    rf_write({2'd2, 10'd0, 6'd1}, 64'd5);       // g_1 = 5 mod 2N
    rf_write({2'd3, 16'd0}, 64'(S0));

    // program
    emit(OP_LOAD, 0, C0A, 0, 0, 0, 0, 0, 0, 0);
    emit(OP_LOAD, 1, BMS, 0, 0, 0, 0, 0, 0, 64);
    emit(OP_SMUL, 0, BMS, 1, C0A, 0, 0, 0, 0, 0);
    emit(OP_WAIT, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    emit(OP_ADD, 0, C1B, 1, C0A, 0, BMS, 0, 0, 0);
    emit(OP_SUB, 0, BC1, 0, C0A, 0, BMS, 0, 0, 0);
    emit(OP_MUL, 0, UMS, 2, C0A, 0, BMS, 0, 0, 0);
    emit(OP_SMUL, 0, C0A, 1, C0A, 0, 0, 0, 0, 0);
    emit(OP_MAC, 0, C0A, 1, C1B, 1, BMS, 0, 0, 0);
    emit(OP_STORE, 0, 0, 0, BMS, 1, 0, 0, 0, 32'(outb(0)));
    emit(OP_STORE, 0, 0, 0, C1B, 1, 0, 0, 0, 32'(outb(1)));
    emit(OP_STORE, 0, 0, 0, BC1, 0, 0, 0, 0, 32'(outb(2)));
    emit(OP_STORE, 0, 0, 0, UMS, 2, 0, 0, 0, 32'(outb(3)));
    emit(OP_STORE, 0, 0, 0, C0A, 1, 0, 0, 0, 32'(outb(4)));
    emit(OP_LOAD, 0, UMS, 0, 0, 0, 0, 0, 0, 128);
    emit(OP_LOAD, 0, UMS, 1, 0, 0, 0, 0, 0, 192);
    emit(OP_PERM, 0, RF, 0, C0A, 0, 0, 0, 0, {24'd0, PERM_BITREV, 6'd0});
    emit(OP_NTT, 0, RF, 0, RF, 0, RF, 1, 0, 0);
    // logN odd: the result ends in the second slot
    emit(OP_STORE, 0, 0, 0, RF, 5'(LN % 2), 0, 0, 0, 32'(outb(5)));
    emit(OP_PERM, 0, RF, 2, C0A, 0, 0, 0, 0, {24'd0, PERM_AUTO, 6'd1});
    emit(OP_STORE, 0, 0, 0, RF, 2, 0, 0, 0, 32'(outb(6)));
    emit(OP_TX, 0, 0, 0, C0A, 0, 0, 0, 0, 0);
    emit(OP_RX, 0, C1A, 3, 0, 0, 0, 0, 0, 0);
    emit(OP_STORE, 0, 0, 0, C1A, 3, 0, 0, 0, 32'(outb(7)));
    emit(OP_ADD, 0, C0A, 2, C0A, 0, C0A, 1, 0, 0);   // illegal: two reads of one URAM bank
    emit(OP_HALT, 0, 0, 0, 0, 0, 0, 0, 0, 0);

    axil_write(24'h000000, 32'd1);
    do axil_read(24'h000000, st); while (!st[1]);

    // results
    for (int i = 0; i < NN; i++) e[i] = mm(A[i], S0);
    check_poly("smul", outb(0), e);
    for (int i = 0; i < NN; i++) e[i] = ad(A[i], B[i]);
    check_poly("add", outb(1), e);
    for (int i = 0; i < NN; i++) e[i] = sb(A[i], B[i]);
    check_poly("sub", outb(2), e);
    for (int i = 0; i < NN; i++) e[i] = mm(A[i], B[i]);
    check_poly("mul", outb(3), e);
    for (int i = 0; i < NN; i++) e[i] = ad(mm(A[i], S0), mm(ad(A[i], B[i]), B[i]));
    check_poly("mac", outb(4), e);
    for (int i = 0; i < NN; i++) R[i] = pw(WN, i);
    for (int k = 0; k < NN; k++) begin
      automatic logic [53:0] acc = 0;
      for (int n = 0; n < NN; n++) acc = ad(acc, mm(A[n], R[(n * k) % NN]));
      e[k] = acc;
    end
    check_poly("ntt", outb(5), e);
    for (int i = 0; i < NN; i++) e[(2 + 5 * i) % NN] = A[i];
    check_poly("automorph", outb(6), e);
    check_poly("rx", outb(7), C);
    checks++;
    if (txcap.size() != NN || tx_last_seen != 1) begin
      failures++; $display("tx: %0d coefficients, %0d tlast", txcap.size(), tx_last_seen);
    end else for (int i = 0; i < NN; i++) begin
      checks++;
      if (txcap[i] !== A[i]) failures++;
    end
    checks++;
    if (!st[2]) begin failures++; $display("illegal instruction not flagged"); end
    checks++;
    if (n_ntt_iss != LN * ROWS / 2) begin failures++; $display("NTT issue cycles %0d", n_ntt_iss); end
    axil_read(24'h000018, st);
    checks++;
    if (st != 32'd25) begin failures++; $display("retired %0d", st); end
    $display("mechanisms: stall=%0d overlap=%0d deferred_load=%0d tx_backpressure=%0d",
             n_stall, n_overlap, n_defer, n_txbp);
    checks += 4;
    if (n_stall == 0) failures++;
    if (n_overlap == 0) failures++;
    if (n_defer == 0) failures++;
    if (n_txbp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
