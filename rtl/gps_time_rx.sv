// gps_time_rx - serial port for the external global time source (GPS).
//
// A GPS receiver gives global time in two parts: a pulse-per-second (PPS) line
// whose rising edge marks the exact start of a UTC second, and a serial time
// message saying which second that is. This block receives both and hands
// them to the machine timer (trigger_timer) and to the Arm cores.
//
// Time message (this design's own format; the paper does not give one): 8N1
// serial, six bytes
//     0xA5, sec[7:0], sec[15:8], sec[23:16], sec[31:24], checksum
// where checksum is the XOR of the four seconds bytes, and sec is the UTC
// second that begins at the NEXT PPS rising edge. A message with a bad
// checksum or a byte with a bad stop bit is dropped and counted in err_cnt_o.
// A good message sets next_sec_valid_o with next_sec_o; the next PPS edge
// consumes it.
//
// PPS: synchronized by two flops; pps_o is a one-clock pulse registered
// PPS_LATENCY = 3 clocks after the PPS line rises. The timer adds that latency
// back when it loads the time, so the loaded value is the time of the edge
// itself to within one clock.
//
// msg_o pulses for one clock with every good message, for the Arm cores.
module gps_time_rx
  import sync_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 10417    // 100 MHz / 9600 baud
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             uart_rx_i,
  input  logic             pps_i,
  output logic             pps_o,
  output logic [SEC_W-1:0] next_sec_o,
  output logic             next_sec_valid_o,
  output logic             msg_o,
  output logic [15:0]      err_cnt_o
);
  localparam logic [7:0] SYNC_BYTE = 8'hA5;

  logic       b_valid, b_ferr, b_edge, b_start;
  logic [7:0] b_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx_i(uart_rx_i),
    .edge_o(b_edge), .start_o(b_start),
    .byte_valid_o(b_valid), .byte_o(b_data), .frame_err_o(b_ferr)
  );

  // ---------------- message parser ----------------
  logic [2:0]  idx;          // 0: waiting for sync byte, 1..4 seconds bytes, 5 checksum
  logic [31:0] sec_acc;
  logic [7:0]  xsum;

  // ---------------- PPS synchronizer ----------------
  logic [2:0] pps_sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx              <= '0;
      sec_acc          <= '0;
      xsum             <= '0;
      next_sec_o       <= '0;
      next_sec_valid_o <= 1'b0;
      msg_o            <= 1'b0;
      err_cnt_o        <= '0;
      pps_sync         <= '0;
      pps_o            <= 1'b0;
    end else begin
      msg_o    <= 1'b0;
      pps_sync <= {pps_sync[1:0], pps_i};
      pps_o    <= pps_sync[1] & ~pps_sync[2];
      // The PPS edge consumes the announced second.
      if (pps_o) next_sec_valid_o <= 1'b0;

      if (b_ferr) begin
        idx       <= '0;
        err_cnt_o <= err_cnt_o + 1'b1;
      end else if (b_valid) begin
        if (idx == 3'd0) begin
          if (b_data == SYNC_BYTE) begin
            idx  <= 3'd1;
            xsum <= '0;
          end
        end else if (idx <= 3'd4) begin
          sec_acc <= {b_data, sec_acc[31:8]};
          xsum    <= xsum ^ b_data;
          idx     <= idx + 1'b1;
        end else begin
          idx <= '0;
          if (b_data == xsum) begin
            next_sec_o       <= sec_acc;
            next_sec_valid_o <= 1'b1;
            msg_o            <= 1'b1;
          end else begin
            err_cnt_o <= err_cnt_o + 1'b1;
          end
        end
      end
    end
  end

  // edge/start of the time message are not timed: the PPS line carries the timing.
  logic unused;
  assign unused = b_edge ^ b_start;
endmodule
