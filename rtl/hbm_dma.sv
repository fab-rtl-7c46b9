// hbm_dma: moves polynomials between the on-chip banks and HBM2 over the
// 32 AXI4 master ports, through the per-port read and write FIFOs.
//
// Data layout in HBM: each coefficient is a 64-bit word (54 bits used), a
// 256-bit beat carries CPB = 4 coefficients, and each port (one HBM
// pseudo-channel, base + p * 2^28 bytes) carries LANES/PORTS coefficients
// of every row: beat k of port p holds lanes k*PORTS*CPB + p*CPB + c. With
// 256 lanes a row is two beats on each of the 32 ports and a polynomial is
// 512 beats per port, fetched as four 128-beat bursts.
//
// Load (ld_start): every port issues INCR bursts of BL = 128 beats while
// the beats already requested and not yet consumed leave room in its
// 512-deep read FIFO, i.e. up to four bursts outstanding, as in the paper.
// Once every read FIFO holds data, one beat per port per cycle is moved
// into a row register; after KB beats the row is offered on ld_row_*
// (valid/ready) with its row number.
// Store (st_start): rows from the banks are accepted on st_row_* (st_ready
// high means a row may be read for us now), split into beats and pushed
// into the 128-deep write FIFOs. A port issues a write burst once a whole
// 128-beat burst is buffered and counts the responses; st_busy falls after
// the last response. Only one load and one store may be active at a time.
//
// FIFO depths, burst length, port count and width follow the paper; the
// data layout, credit rule and one-burst-at-a-time write are this design's.
module hbm_dma #(
  parameter int unsigned W        = 54,
  parameter int unsigned LANES_P  = 256,
  parameter int unsigned ROWS     = 256,
  parameter int unsigned PORTS    = 32,
  parameter int unsigned DW       = 256,
  parameter int unsigned AXW      = 33,
  parameter int unsigned RDF_D    = 512,
  parameter int unsigned WRF_D    = 128,
  parameter int unsigned BURST    = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [AXW-1:0]          base_addr,
  // load
  input  logic                    ld_start,
  input  logic [23:0]             ld_beat,       // first beat of the polynomial on each port
  output logic                    ld_busy,
  output logic                    ld_row_valid,
  input  logic                    ld_row_ready,
  output logic [LANES_P*W-1:0]    ld_row_data,
  output logic [$clog2(ROWS)-1:0] ld_row_idx,
  // store
  input  logic                    st_start,
  input  logic [23:0]             st_beat,
  output logic                    st_busy,
  output logic                    st_ready,
  input  logic                    st_row_valid,
  input  logic [LANES_P*W-1:0]    st_row_data,
  // AXI4 master ports (read and write channels)
  output logic [AXW-1:0]          m_araddr  [PORTS],
  output logic [7:0]              m_arlen   [PORTS],
  output logic                    m_arvalid [PORTS],
  input  logic                    m_arready [PORTS],
  input  logic [DW-1:0]           m_rdata   [PORTS],
  input  logic                    m_rvalid  [PORTS],
  output logic                    m_rready  [PORTS],
  input  logic                    m_rlast   [PORTS],
  output logic [AXW-1:0]          m_awaddr  [PORTS],
  output logic [7:0]              m_awlen   [PORTS],
  output logic                    m_awvalid [PORTS],
  input  logic                    m_awready [PORTS],
  output logic [DW-1:0]           m_wdata   [PORTS],
  output logic                    m_wvalid  [PORTS],
  input  logic                    m_wready  [PORTS],
  output logic                    m_wlast   [PORTS],
  input  logic                    m_bvalid  [PORTS],
  output logic                    m_bready  [PORTS]
);
  localparam int unsigned CPB = DW / 64;              // coefficients per beat
  localparam int unsigned CPP = LANES_P / PORTS;      // coefficients per port per row
  localparam int unsigned KB  = (CPP + CPB - 1) / CPB;// beats per port per row
  localparam int unsigned TBP = ROWS * KB;            // beats per port per polynomial
  localparam int unsigned BL  = (TBP < BURST) ? TBP : BURST;
  localparam int unsigned NB  = TBP / BL;             // bursts per port
  localparam int unsigned RW  = $clog2(ROWS);
  localparam int unsigned KW  = (KB > 1) ? $clog2(KB) : 1;

  // ---------------- load ----------------
  logic [DW-1:0]  rf_dout  [PORTS];
  logic           rf_empty [PORTS];
  logic           rf_full  [PORTS];
  logic [$clog2(RDF_D):0] rf_cnt [PORTS];
  logic           rf_pop;
  logic [15:0]    ar_cnt   [PORTS];
  logic [31:0]    reserved [PORTS];   // beats requested and not yet popped
  logic           all_have;
  logic [KW-1:0]  ld_k;
  logic [RW:0]    ld_rows;            // rows handed out
  logic           ld_act;
  logic [23:0]    ld_beat_q, st_beat_q;

  always_comb begin
    all_have = 1'b1;
    for (int p = 0; p < PORTS; p++) if (rf_empty[p]) all_have = 1'b0;
  end
  assign rf_pop = ld_act && all_have && !ld_row_valid;

  for (genvar p = 0; p < PORTS; p++) begin : g_rd
    sync_fifo #(.DW(DW), .DEPTH(RDF_D)) u_rdf (
      .clk, .rst_n, .push(m_rvalid[p] && m_rready[p]), .din(m_rdata[p]),
      .pop(rf_pop), .dout(rf_dout[p]), .full(rf_full[p]), .empty(rf_empty[p]),
      .count(rf_cnt[p]));
    assign m_rready[p]  = !rf_full[p];
    assign m_arlen[p]   = 8'(BL - 1);
    assign m_araddr[p]  = AXW'(base_addr + (AXW'(p) << 28) + (AXW'(ld_beat_q + 24'(ar_cnt[p] * BL)) << 5));
    assign m_arvalid[p] = ld_act && (ar_cnt[p] < 16'(NB)) && (reserved[p] + BL <= RDF_D);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ar_cnt[p] <= '0; reserved[p] <= '0;
      end else if (ld_start) begin
        ar_cnt[p] <= '0; reserved[p] <= '0;
      end else begin
        if (m_arvalid[p] && m_arready[p]) ar_cnt[p] <= ar_cnt[p] + 1'b1;
        reserved[p] <= reserved[p] + ((m_arvalid[p] && m_arready[p]) ? 32'(BL) : 32'd0)
                                   - (rf_pop ? 32'd1 : 32'd0);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_act <= 1'b0; ld_k <= '0; ld_rows <= '0; ld_row_valid <= 1'b0; ld_row_idx <= '0;
      ld_beat_q <= '0;
    end else if (ld_start) begin
      ld_act <= 1'b1; ld_k <= '0; ld_rows <= '0; ld_row_valid <= 1'b0; ld_row_idx <= '0;
      ld_beat_q <= ld_beat;
    end else begin
      if (rf_pop) begin
        for (int p = 0; p < PORTS; p++)
          for (int c = 0; c < CPB; c++)
            if (32'(ld_k) * PORTS * CPB + p * CPB + c < LANES_P)
              ld_row_data[(32'(ld_k) * PORTS * CPB + p * CPB + c) * W +: W] <= rf_dout[p][c*64 +: W];
        if (32'(ld_k) == KB - 1) begin
          ld_k <= '0;
          ld_row_valid <= 1'b1;
        end else begin
          ld_k <= KW'(ld_k + 1'b1);
        end
      end
      if (ld_row_valid && ld_row_ready) begin
        ld_row_valid <= 1'b0;
        ld_row_idx   <= RW'(ld_row_idx + 1'b1);
        ld_rows      <= ld_rows + 1'b1;
        if (ld_rows == (RW+1)'(ROWS - 1)) ld_act <= 1'b0;
      end
    end
  end
  assign ld_busy = ld_act;

  // ---------------- store ----------------
  logic [LANES_P*W-1:0] st_hold;
  logic                 st_hold_v;
  logic [KW-1:0]        st_k;
  logic                 wf_push;
  logic [DW-1:0]        wf_din  [PORTS];
  logic [DW-1:0]        wf_dout [PORTS];
  logic                 wf_empty[PORTS];
  logic                 wf_full [PORTS];
  logic [$clog2(WRF_D):0] wf_cnt [PORTS];
  logic                 wf_pop  [PORTS];
  logic                 st_act;
  logic                 room;
  logic [15:0]          aw_cnt [PORTS];
  logic [15:0]          b_cnt  [PORTS];
  logic [15:0]          w_beat [PORTS];
  logic                 in_burst [PORTS];
  logic                 all_b;

  always_comb begin
    room = 1'b1;
    all_b = 1'b1;
    for (int p = 0; p < PORTS; p++) begin
      if (32'(wf_cnt[p]) + 2 * KB > WRF_D) room = 1'b0;
      if (b_cnt[p] != 16'(NB)) all_b = 1'b0;
    end
  end
  assign st_ready = st_act && !st_hold_v && !st_row_valid && room;
  assign wf_push  = st_hold_v;

  for (genvar p = 0; p < PORTS; p++) begin : g_wr
    always_comb begin
      wf_din[p] = '0;
      for (int c = 0; c < CPB; c++)
        if (32'(st_k) * PORTS * CPB + p * CPB + c < LANES_P)
          wf_din[p][c*64 +: W] = st_hold[(32'(st_k) * PORTS * CPB + p * CPB + c) * W +: W];
    end
    sync_fifo #(.DW(DW), .DEPTH(WRF_D)) u_wrf (
      .clk, .rst_n, .push(wf_push), .din(wf_din[p]), .pop(wf_pop[p]),
      .dout(wf_dout[p]), .full(wf_full[p]), .empty(wf_empty[p]), .count(wf_cnt[p]));
    assign m_awlen[p]   = 8'(BL - 1);
    assign m_awaddr[p]  = AXW'(base_addr + (AXW'(p) << 28) + (AXW'(st_beat_q + 24'(aw_cnt[p] * BL)) << 5));
    assign m_awvalid[p] = st_act && !in_burst[p] && (aw_cnt[p] < 16'(NB)) && (32'(wf_cnt[p]) >= BL);
    assign m_wvalid[p]  = in_burst[p] && !wf_empty[p];
    assign m_wdata[p]   = wf_dout[p];
    assign m_wlast[p]   = (w_beat[p] == 16'(BL - 1));
    assign wf_pop[p]    = m_wvalid[p] && m_wready[p];
    assign m_bready[p]  = 1'b1;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        aw_cnt[p] <= '0; b_cnt[p] <= '0; w_beat[p] <= '0; in_burst[p] <= 1'b0;
      end else if (st_start) begin
        aw_cnt[p] <= '0; b_cnt[p] <= '0; w_beat[p] <= '0; in_burst[p] <= 1'b0;
      end else begin
        if (m_awvalid[p] && m_awready[p]) begin
          aw_cnt[p] <= aw_cnt[p] + 1'b1;
          in_burst[p] <= 1'b1;
        end
        if (wf_pop[p]) begin
          if (m_wlast[p]) begin
            w_beat[p] <= '0; in_burst[p] <= 1'b0;
          end else begin
            w_beat[p] <= w_beat[p] + 1'b1;
          end
        end
        if (m_bvalid[p]) b_cnt[p] <= b_cnt[p] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_act <= 1'b0; st_hold_v <= 1'b0; st_k <= '0; st_beat_q <= '0;
    end else if (st_start) begin
      st_act <= 1'b1; st_hold_v <= 1'b0; st_k <= '0; st_beat_q <= st_beat;
    end else begin
      if (st_row_valid) begin
        st_hold <= st_row_data; st_hold_v <= 1'b1; st_k <= '0;
      end else if (st_hold_v) begin
        if (32'(st_k) == KB - 1) st_hold_v <= 1'b0;
        st_k <= KW'(st_k + 1'b1);
      end
      if (st_act && all_b) st_act <= 1'b0;
    end
  end
  assign st_busy = st_act;

  a_row_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    st_row_valid |-> (st_act && !st_hold_v));
endmodule
