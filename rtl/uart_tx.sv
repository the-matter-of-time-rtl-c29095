// uart_tx - 8N1 asynchronous serial transmitter, used by the IMU serial port
// to send configuration and command bytes from the Arm cores to the IMU.
//
// A byte offered with valid_i while ready_o is high is taken at that clock
// edge and sent as one start bit (low), 8 data bits LSB first and one stop
// bit (high), each CLKS_PER_BIT clocks long. ready_o is high while the line
// is idle and in the last clock of a stop bit, so bytes offered back to back
// leave with no idle time between them. A byte offered while
// ready_o is low is ignored (there is no queue).
//
// Timing: tx_o is a register. The start bit begins one clock after the byte
// is taken; a byte occupies the line for 10 * CLKS_PER_BIT clocks.
//
// From the paper: the IMU is connected to a serial port in the fabric, with a
// link drawn in both directions. The frame format and the single-byte
// interface are this design's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data_i,
  input  logic       valid_i,
  output logic       ready_o,
  output logic       tx_o
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT);

  initial assert (CLKS_PER_BIT >= 2) else $error("CLKS_PER_BIT must be at least 2");

  logic [8:0]    shift;   // {data, start bit} still to go out, LSB first
  logic [3:0]    bits;    // bits left in the frame, stop bit included
  logic [CW-1:0] cnt;

  assign ready_o = (bits == '0) || ((bits == 4'd1) && (cnt == '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_o  <= 1'b1;
      shift <= '1;
      bits  <= '0;
      cnt   <= '0;
    end else if (ready_o && valid_i) begin
      tx_o  <= 1'b0;                      // start bit
      shift <= {1'b1, data_i};            // data bits, then the stop bit
      bits  <= 4'd10;
      cnt   <= CW'(CLKS_PER_BIT - 1);
    end else if (bits == '0) begin
      // idle
    end else if (cnt != '0) begin
      cnt <= cnt - 1'b1;
    end else begin
      bits <= bits - 1'b1;
      cnt  <= CW'(CLKS_PER_BIT - 1);
      if (bits != 4'd1) begin
        tx_o  <= shift[0];
        shift <= {1'b1, shift[8:1]};
      end else begin
        tx_o  <= 1'b1;                    // line idle after the stop bit
      end
    end
  end
endmodule
