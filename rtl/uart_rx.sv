// uart_rx - 8N1 asynchronous serial receiver, shared by the GPS time port and
// the IMU serial port.
//
// The line is brought into the clock domain by a two-flop synchronizer. A
// falling edge on the idle (high) line is taken as a start bit: at that clock
// the receiver raises edge_o for one cycle, which is the earliest point at
// which the sample is known to the fabric and where a caller takes its
// timestamp. The start bit is checked again at its middle and start_o pulses
// if it is still low (a glitch shorter than half a bit gives edge_o but no
// start_o, so a caller keeps the stamp only once start_o confirms it), then
// 8 data bits, LSB first, are sampled at their
// middles and the stop bit is checked. byte_valid_o pulses for one cycle with
// the byte one half bit into the stop bit; frame_err_o pulses instead if the
// stop bit is low.
//
// Timing: edge_o is registered three clocks after the line falls (two-flop
// synchronizer plus edge register), start_o
// half a bit later.
// CLKS_PER_BIT = clock frequency / baud rate, at least 4.
// Frame format (8N1) and the synchronizer depth are this design's choice: the
// paper only says the IMU and GPS are connected through serial ports.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx_i,
  output logic       edge_o,
  output logic       start_o,
  output logic       byte_valid_o,
  output logic [7:0] byte_o,
  output logic       frame_err_o
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;
  state_t state;

  logic [2:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bit_idx;
  logic [7:0]    shreg;
  logic          rx_s, rx_prev;

  assign rx_s    = sync[1];
  assign rx_prev = sync[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync         <= '1;
      state        <= S_IDLE;
      cnt          <= '0;
      bit_idx      <= '0;
      shreg        <= '0;
      edge_o       <= 1'b0;
      start_o      <= 1'b0;
      byte_valid_o <= 1'b0;
      byte_o       <= '0;
      frame_err_o  <= 1'b0;
    end else begin
      sync         <= {sync[1:0], rx_i};
      edge_o       <= 1'b0;
      start_o      <= 1'b0;
      byte_valid_o <= 1'b0;
      frame_err_o  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (rx_prev && !rx_s) begin
            state  <= S_START;
            edge_o <= 1'b1;
            cnt   <= CW'(1);
          end
        end
        S_START: begin
          if (cnt == CW'(CLKS_PER_BIT / 2)) begin
            if (!rx_s) begin
              state   <= S_DATA;
              cnt     <= '0;
              bit_idx <= '0;
              start_o <= 1'b1;
            end else begin
              state <= S_IDLE;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {rx_s, shreg[7:1]};
            if (bit_idx == 3'd7) state <= S_STOP;
            bit_idx <= bit_idx + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            state <= S_IDLE;
            if (rx_s) begin
              byte_valid_o <= 1'b1;
              byte_o       <= shreg;
            end else begin
              frame_err_o  <= 1'b1;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
