// fab_ctrl: control logic of the accelerator.
//
// Runs a program of polynomial-level instructions (instr_t) from an
// instruction memory filled by the host. Each instruction works on one limb
// (N coefficients, ROWS rows of LANES lanes). Sequence: fetch, decode and
// legality check, one set-up cycle for the register-file scalars, execute,
// drain, next. Operations:
//  * element-wise ADD/SUB/MUL/MAC/SMUL/SMAC: one row issued per cycle; the
//    result is written back WB = 1 + FU_LAT cycles after issue. If the
//    destination is a single-port (URAM) bank that this operation also
//    reads, a write-back and an issue cannot share the port: the write wins
//    and the issue stalls that cycle (counted in stalls). MAC reads the old
//    destination row, which is how the key-switch inner product and the
//    basis-conversion sums accumulate.
//  * NTT: LOGN stages of N/(2 LANES) pair-rows, ping-ponging between two
//    register-file slots; the pipeline drains between stages.
//  * PERM: rows of a polynomial are sent through the automorph units into a
//    register-file slot (written two cycles after issue).
//  * LOAD/STORE (HBM) and TX/RX (Ethernet): the DMA or stream engine is
//    started; STORE and TX rows are issued whenever the engine is ready.
//    A LOAD with the async bit runs in the background (prefetch) while
//    later instructions compute; WAIT blocks until it has finished.
//  * HALT ends the program (done). An instruction whose operands need more
//    read ports of one memory than it has is skipped and sets error.
// Outputs tell the datapath what is issued (iss_*), which rows are in
// flight (p1_* one cycle after issue, wb_* at write-back, pm_* for PERM).
//
// The paper names control logic and describes the operations and their
// scheduling but not an instruction set; the instruction set, the drain
// between instructions and the stall rule are this design's choices.
module fab_ctrl
  import fab_pkg::*;
#(
  parameter int unsigned LANES_P = LANES,
  parameter int unsigned LOGN_P  = LOGN,
  parameter int unsigned IMW     = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               im_we,
  input  logic [IMW-1:0]     im_addr,
  input  logic [INSTR_W-1:0] im_data,
  // engine status
  input  logic               ld_busy,
  input  logic               st_busy,
  input  logic               st_ready,
  input  logic               tx_busy,
  input  logic               tx_ready,
  input  logic               rx_busy,
  // to the datapath
  output instr_t             ins,
  output logic               iss_valid,
  output logic [LOGN_P-1:0]  iss_row,      // row, or pair-row for NTT
  output logic [4:0]         stage,
  output logic               p1_valid,
  output logic [LOGN_P-1:0]  p1_row,
  output logic               wb_valid,
  output logic [LOGN_P-1:0]  wb_row,
  output logic               pm_valid,
  output logic [LOGN_P-1:0]  pm_row,
  output logic               ld_start,
  output logic               st_start,
  output logic               tx_start,
  output logic               rx_start,
  output logic [3:0]         ld_mem,       // target of the running load
  output logic [4:0]         ld_poly,
  output logic               ntt_odd,      // NTT stage parity (source slot select)
  // status
  output logic               busy,
  output logic               done,
  output logic               error,
  output logic [31:0]        cycles,
  output logic [31:0]        stalls,
  output logic [31:0]        retired
);
  localparam int unsigned NN    = 1 << LOGN_P;
  localparam int unsigned ROWS  = NN / LANES_P;
  localparam int unsigned NPAIR = ROWS / 2;
  localparam int unsigned WB    = 1 + FU_LAT;

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_SETUP, S_EXEC, S_DRAIN, S_WAITENG, S_NEXT
  } state_e;

  state_e            st;
  logic [INSTR_W-1:0] imem [1 << IMW];
  logic [INSTR_W-1:0] im_q;
  logic [IMW-1:0]    pc;
  logic [LOGN_P-1:0] cnt;
  logic              pv   [WB+1];
  logic [LOGN_P-1:0] prow [WB+1];
  logic              in_flight;
  logic              is_ew, is_scalar, reads_d, legal, want, conflict;
  logic [8:0]        rmask;           // memories read by the current instruction
  logic [3:0]        nbank_rd [9];

  always_ff @(posedge clk) begin
    if (im_we) imem[im_addr] <= im_data;
    im_q <= imem[pc];
  end

  // ---- decode helpers (on the latched instruction) ----
  always_comb begin
    is_ew     = ins.op inside {OP_ADD, OP_SUB, OP_MUL, OP_MAC, OP_SMUL, OP_SMAC};
    is_scalar = ins.op inside {OP_SMUL, OP_SMAC};
    reads_d   = ins.op inside {OP_MAC, OP_SMAC};
    for (int m = 0; m < 9; m++) nbank_rd[m] = '0;
    if (is_ew || ins.op inside {OP_PERM, OP_STORE, OP_TX})
      if (ins.a_mem <= 4'd8) nbank_rd[ins.a_mem] = nbank_rd[ins.a_mem] + 1'b1;
    if (is_ew && !is_scalar && ins.b_mem <= 4'd8) nbank_rd[ins.b_mem] = nbank_rd[ins.b_mem] + 1'b1;
    if (reads_d && ins.dst_mem <= 4'd8) nbank_rd[ins.dst_mem] = nbank_rd[ins.dst_mem] + 1'b1;
    for (int m = 0; m < 9; m++) rmask[m] = (nbank_rd[m] != '0);
    legal = 1'b1;
    for (int m = 0; m < 8; m++) if (nbank_rd[m] > 4'd1) legal = 1'b0;
    if (nbank_rd[8] > 4'd2) legal = 1'b0;
    if (ins.a_mem > 4'd8 || ins.dst_mem > 4'd8 || (!is_scalar && ins.b_mem > 4'd8)) begin
      if (is_ew || ins.op inside {OP_PERM, OP_STORE, OP_TX}) legal = 1'b0;
    end
    if (ins.op == OP_PERM && ins.a_mem == MEM_RF && ins.a_poly[1:0] == ins.dst_poly[1:0]) legal = 1'b0;
    if (ins.op == OP_NTT && ins.a_poly[1:0] == ins.b_poly[1:0]) legal = 1'b0;
    if (ins.op inside {OP_LOAD, OP_RX} && ins.dst_mem == MEM_RF) legal = 1'b0;
    // a write-back to a single-port bank blocks a read of that bank
    conflict = pv[WB] && is_ew && (ins.dst_mem <= MEM_URAM_MISC) && rmask[ins.dst_mem];
    unique case (ins.op)
      OP_STORE: want = st_ready;
      OP_TX:    want = tx_ready;
      default:  want = 1'b1;
    endcase
  end

  always_comb begin
    in_flight = 1'b0;
    for (int k = 1; k <= WB; k++) if (pv[k]) in_flight = 1'b1;
  end

  assign iss_valid = (st == S_EXEC) && want && !conflict;
  assign iss_row   = cnt;
  assign p1_valid  = pv[1];
  assign p1_row    = prow[1];
  assign pm_valid  = pv[2] && (ins.op == OP_PERM);
  assign pm_row    = prow[2];
  assign wb_valid  = pv[WB] && (is_ew || ins.op == OP_NTT);
  assign wb_row    = prow[WB];
  assign ntt_odd   = stage[0];
  assign busy      = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= WB; k++) begin pv[k] <= 1'b0; prow[k] <= '0; end
    end else begin
      pv[1] <= iss_valid; prow[1] <= iss_row;
      for (int k = 2; k <= WB; k++) begin pv[k] <= pv[k-1]; prow[k] <= prow[k-1]; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; cnt <= '0; stage <= '0; ins <= '0;
      done <= 1'b0; error <= 1'b0; cycles <= '0; stalls <= '0; retired <= '0;
      ld_start <= 1'b0; st_start <= 1'b0; tx_start <= 1'b0; rx_start <= 1'b0;
      ld_mem <= '0; ld_poly <= '0;
    end else begin
      ld_start <= 1'b0; st_start <= 1'b0; tx_start <= 1'b0; rx_start <= 1'b0;
      if (st != S_IDLE) cycles <= cycles + 1;
      if (st == S_EXEC && want && conflict) stalls <= stalls + 1;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_FETCH; pc <= '0; done <= 1'b0; error <= 1'b0;
          cycles <= '0; stalls <= '0; retired <= '0;
        end
        S_FETCH:  st <= S_DECODE;            // imem read
        S_DECODE: begin ins <= instr_t'(im_q); st <= S_SETUP; end
        S_SETUP: begin
          cnt <= '0; stage <= '0;
          if (!legal) begin
            error <= 1'b1; st <= S_NEXT;
          end else unique case (ins.op)
            OP_HALT: begin done <= 1'b1; st <= S_IDLE; end
            OP_NOP:  st <= S_NEXT;
            OP_WAIT: st <= S_WAITENG;
            OP_LOAD: if (!ld_busy) begin
              ld_start <= 1'b1; ld_mem <= ins.dst_mem; ld_poly <= ins.dst_poly;
              st <= ins.async ? S_NEXT : S_WAITENG;
            end
            OP_RX:    begin rx_start <= 1'b1; st <= S_WAITENG; end
            OP_STORE: begin st_start <= 1'b1; st <= S_EXEC; end
            OP_TX:    begin tx_start <= 1'b1; st <= S_EXEC; end
            default:  st <= S_EXEC;
          endcase
        end
        S_EXEC: if (iss_valid) begin
          if (ins.op == OP_NTT) begin
            if (cnt == LOGN_P'(NPAIR - 1)) begin cnt <= '0; st <= S_DRAIN; end
            else cnt <= cnt + 1'b1;
          end else begin
            if (cnt == LOGN_P'(ROWS - 1)) begin cnt <= '0; st <= S_DRAIN; end
            else cnt <= cnt + 1'b1;
          end
        end
        S_DRAIN: if (!in_flight && !iss_valid) begin
          if (ins.op == OP_NTT && stage != 5'(LOGN_P - 1)) begin
            stage <= stage + 1'b1; st <= S_EXEC;
          end else if (ins.op inside {OP_STORE, OP_TX}) begin
            st <= S_WAITENG;
          end else st <= S_NEXT;
        end
        S_WAITENG: begin
          unique case (ins.op)
            OP_STORE: if (!st_busy && !st_start) st <= S_NEXT;
            OP_TX:    if (!tx_busy && !tx_start) st <= S_NEXT;
            OP_RX:    if (!rx_busy && !rx_start) st <= S_NEXT;
            default:  if (!ld_busy && !ld_start) st <= S_NEXT;
          endcase
        end
        S_NEXT: begin
          retired <= retired + 1;
          pc <= pc + 1'b1;
          st <= S_FETCH;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_no_issue_on_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(iss_valid && conflict));
endmodule
