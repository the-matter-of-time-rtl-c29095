// imu_serial_if - IMU serial port with timestamping at the interface.
//
// The IMU is triggered by trigger_timer and answers with one sample, a burst
// of bytes on its serial line. This block receives the burst and packs it with
// the timer value taken at the falling edge of the first start bit, that is at
// the moment the sample reaches the chip rather than when software reads it.
//
// Framing: a sample starts with the first byte after the line has been idle and
// ends when either PKT_BYTES bytes have arrived (PKT_BYTES > 0), IMU_MAX_BYTES
// bytes have arrived, or the line stays idle for GAP_BITS bit times after a
// byte. The record is then presented on rec_o with a one-clock rec_valid_o;
// there is no back-pressure, the receiver of records must take one per clock
// it is offered (samples are at least a byte time apart). A byte with a bad
// stop bit drops the sample and counts in err_cnt_o.
//
// Timing: the stamp is the timer value three clocks after the line falls (the
// uart_rx synchronizer); that fixed offset is left for software to remove.
// rec_valid_o comes GAP_BITS bit times after the last byte (or with the
// PKT_BYTES-th byte).
//
// Command direction: bytes from the Arm cores (tx_data_i with tx_valid_i,
// taken while tx_ready_o is high) go to the IMU on uart_tx_o through an 8N1
// transmitter at the same baud rate, e.g. to configure its output rate or
// range. This path carries no timestamps.
//
// From the paper: IMU samples are received on a serial port in the fabric and
// timestamped there, and the link to the IMU is drawn in both directions.
// Framing, byte format, the command path and the record layout are this
// design's choices.
module imu_serial_if
  import sync_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 868,  // 100 MHz / 115200 baud
  parameter int unsigned PKT_BYTES    = 0,    // 0: frame by idle gap only
  parameter int unsigned GAP_BITS     = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        uart_rx_i,
  input  ts_t         now_i,
  output logic        rec_valid_o,
  output imu_rec_t    rec_o,
  output logic [15:0] err_cnt_o,
  // command bytes to the IMU
  input  logic [7:0]  tx_data_i,
  input  logic        tx_valid_i,
  output logic        tx_ready_o,
  output logic        uart_tx_o
);
  localparam int unsigned GAP_CYC = GAP_BITS * CLKS_PER_BIT;
  localparam int unsigned GW      = $clog2(GAP_CYC + 1);

  initial assert (PKT_BYTES <= IMU_MAX_BYTES) else $error("PKT_BYTES above IMU_MAX_BYTES");

  logic       b_edge, b_start, b_valid, b_ferr;
  logic [7:0] b_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx_i(uart_rx_i),
    .edge_o(b_edge), .start_o(b_start),
    .byte_valid_o(b_valid), .byte_o(b_data), .frame_err_o(b_ferr)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .data_i(tx_data_i), .valid_i(tx_valid_i),
    .ready_o(tx_ready_o), .tx_o(uart_tx_o)
  );

  logic          in_pkt;     // at least one byte of the current sample received
  logic          first_seen; // start bit of the current sample confirmed
  ts_t           edge_ts;    // stamp of the latest start-bit edge
  logic [5:0]    cnt;
  logic [GW-1:0] gap;
  logic          done;

  assign done = in_pkt && b_valid &&
                (((PKT_BYTES != 0) && (cnt + 1'b1 == 6'(PKT_BYTES))) ||
                 (cnt + 1'b1 == 6'(IMU_MAX_BYTES)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt      <= 1'b0;
      first_seen  <= 1'b0;
      edge_ts     <= '0;
      cnt         <= '0;
      gap         <= '0;
      rec_valid_o <= 1'b0;
      rec_o       <= '0;
      err_cnt_o   <= '0;
    end else begin
      rec_valid_o <= 1'b0;
      // The stamp of a sample is its first start-bit edge; later edges of the
      // same sample do not move it.
      if (b_edge && !in_pkt && !first_seen) edge_ts <= now_i;
      if (b_start && !in_pkt && !first_seen) begin
        first_seen <= 1'b1;
        rec_o.ts   <= edge_ts;
        rec_o.data <= '0;
      end

      if (b_ferr) begin
        in_pkt     <= 1'b0;
        first_seen <= 1'b0;
        cnt        <= '0;
        err_cnt_o  <= err_cnt_o + 1'b1;
      end else if (b_valid && first_seen) begin
        rec_o.data[cnt*8 +: 8] <= b_data;
        gap <= '0;
        if (done || (!in_pkt && PKT_BYTES == 1)) begin
          rec_o.len   <= cnt + 1'b1;
          rec_valid_o <= 1'b1;
          in_pkt      <= 1'b0;
          first_seen  <= 1'b0;
          cnt         <= '0;
        end else begin
          in_pkt <= 1'b1;
          cnt    <= cnt + 1'b1;
        end
      end else if (in_pkt) begin
        // idle-gap end of sample; a new start bit restarts the gap count
        if (b_edge) begin
          gap <= '0;
        end else if (gap == GW'(GAP_CYC - 1)) begin
          rec_o.len   <= cnt;
          rec_valid_o <= 1'b1;
          in_pkt      <= 1'b0;
          first_seen  <= 1'b0;
          cnt         <= '0;
        end else begin
          gap <= gap + 1'b1;
        end
      end
    end
  end
endmodule
