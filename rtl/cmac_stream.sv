// cmac_stream: streams polynomial rows to and from the 100G Ethernet
// (CMAC) subsystem through the 512-bit transmit and receive FIFOs.
//
// A row of LANES 54-bit coefficients is packed densely, lowest lane first,
// into BEATS = ceil(LANES*54/512) beats of 512 bits (27 beats for 256
// lanes, which fits exactly). Transmit: a row accepted on tx_row_* (tx_ready
// means a row may be read for us now) is cut into beats and pushed into the
// Tx FIFO, whose head drives an AXI4-Stream master (tdata/tvalid/tready,
// tlast on the final beat of a polynomial). Receive: beats from the AXI4-
// Stream slave fill the Rx FIFO; BEATS of them are gathered into a row,
// offered on rx_row_* (valid/ready) with its row number. tx_start/rx_start
// begin a polynomial of ROWS rows; busy stays high until its last beat has
// left the Tx FIFO or its last row has been delivered.
// The 512-bit interface, the Tx/Rx FIFOs and the adapters' role follow the
// paper; the packing, framing (tlast per polynomial) and FIFO depth are
// this design's choices. The CMAC core itself is vendor IP, outside it.
module cmac_stream #(
  parameter int unsigned W       = 54,
  parameter int unsigned LANES_P = 256,
  parameter int unsigned ROWS    = 256,
  parameter int unsigned SW      = 512,
  parameter int unsigned FDEPTH  = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // transmit
  input  logic                    tx_start,
  output logic                    tx_busy,
  output logic                    tx_ready,
  input  logic                    tx_row_valid,
  input  logic [LANES_P*W-1:0]    tx_row_data,
  output logic [SW-1:0]           tx_tdata,
  output logic                    tx_tvalid,
  input  logic                    tx_tready,
  output logic                    tx_tlast,
  // receive
  input  logic                    rx_start,
  output logic                    rx_busy,
  input  logic [SW-1:0]           rx_tdata,
  input  logic                    rx_tvalid,
  output logic                    rx_tready,
  output logic                    rx_row_valid,
  input  logic                    rx_row_ready,
  output logic [LANES_P*W-1:0]    rx_row_data,
  output logic [$clog2(ROWS)-1:0] rx_row_idx
);
  localparam int unsigned RB    = LANES_P * W;
  localparam int unsigned BEATS = (RB + SW - 1) / SW;
  localparam int unsigned PB    = BEATS * SW;
  localparam int unsigned BW    = $clog2(BEATS + 1);
  localparam int unsigned RW    = $clog2(ROWS);
  localparam int unsigned TOT   = ROWS * BEATS;

  // ---------------- transmit ----------------
  logic [PB-1:0]   tx_sh;
  logic [BW-1:0]   tx_left;
  logic            tx_act;
  logic [31:0]     tx_sent;
  logic [SW:0]     txf_din, txf_dout;     // {last, data}
  logic            txf_full, txf_empty;
  logic [$clog2(FDEPTH):0] txf_cnt;
  logic [31:0]     tx_pushed;

  sync_fifo #(.DW(SW+1), .DEPTH(FDEPTH)) u_txf (
    .clk, .rst_n, .push(tx_left != '0), .din(txf_din),
    .pop(tx_tvalid && tx_tready), .dout(txf_dout), .full(txf_full),
    .empty(txf_empty), .count(txf_cnt));

  assign txf_din   = {(tx_pushed == TOT - 1), tx_sh[SW-1:0]};
  assign tx_tdata  = txf_dout[SW-1:0];
  assign tx_tlast  = txf_dout[SW];
  assign tx_tvalid = !txf_empty;
  assign tx_ready  = tx_act && (tx_left == '0) && !tx_row_valid &&
                     (32'(txf_cnt) + 2 * BEATS <= FDEPTH);
  assign tx_busy   = tx_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_act <= 1'b0; tx_left <= '0; tx_sent <= '0; tx_pushed <= '0;
    end else if (tx_start) begin
      tx_act <= 1'b1; tx_left <= '0; tx_sent <= '0; tx_pushed <= '0;
    end else begin
      if (tx_row_valid) begin
        tx_sh   <= PB'(tx_row_data);
        tx_left <= BW'(BEATS);
      end else if (tx_left != '0) begin
        tx_sh   <= tx_sh >> SW;
        tx_left <= tx_left - 1'b1;
        tx_pushed <= tx_pushed + 1;
      end
      if (tx_tvalid && tx_tready) begin
        tx_sent <= tx_sent + 1;
        if (tx_sent == TOT - 1) tx_act <= 1'b0;
      end
    end
  end

  // ---------------- receive ----------------
  logic [SW-1:0]   rxf_dout;
  logic            rxf_full, rxf_empty, rxf_pop;
  logic [$clog2(FDEPTH):0] rxf_cnt;
  logic [PB-1:0]   rx_sh;
  logic [BW-1:0]   rx_got;
  logic            rx_act;
  logic [RW:0]     rx_rows;

  sync_fifo #(.DW(SW), .DEPTH(FDEPTH)) u_rxf (
    .clk, .rst_n, .push(rx_tvalid && rx_tready), .din(rx_tdata), .pop(rxf_pop),
    .dout(rxf_dout), .full(rxf_full), .empty(rxf_empty), .count(rxf_cnt));

  assign rx_tready   = !rxf_full;
  assign rxf_pop     = rx_act && !rxf_empty && !rx_row_valid;
  assign rx_row_data = rx_sh[RB-1:0];
  assign rx_busy     = rx_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_act <= 1'b0; rx_got <= '0; rx_rows <= '0; rx_row_valid <= 1'b0; rx_row_idx <= '0;
    end else if (rx_start) begin
      rx_act <= 1'b1; rx_got <= '0; rx_rows <= '0; rx_row_valid <= 1'b0; rx_row_idx <= '0;
    end else begin
      if (rxf_pop) begin
        rx_sh <= (rx_sh >> SW) | (PB'(rxf_dout) << (PB - SW));
        if (32'(rx_got) == BEATS - 1) begin
          rx_got <= '0; rx_row_valid <= 1'b1;
        end else begin
          rx_got <= rx_got + 1'b1;
        end
      end
      if (rx_row_valid && rx_row_ready) begin
        rx_row_valid <= 1'b0;
        rx_row_idx   <= RW'(rx_row_idx + 1'b1);
        rx_rows      <= rx_rows + 1'b1;
        if (rx_rows == (RW+1)'(ROWS - 1)) rx_act <= 1'b0;
      end
    end
  end

  a_tx_row_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    tx_row_valid |-> (tx_act && tx_left == '0));
endmodule
