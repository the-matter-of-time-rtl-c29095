// imu_model - behavioural model of an externally triggered IMU, for
// testbenches. DELAY clocks after each rising edge of trig it sends one
// sample of NBYTES bytes over an 8N1 serial line at CPB clocks per bit; byte i
// of sample n is (n * 16 + i) mod 256. samples counts the samples begun.
// It also receives command bytes on rx (8N1, same bit time, sampled at
// mid-bit): cmds counts the bytes with a good stop bit, cmd_last holds the
// latest one.
module imu_model #(
  parameter int unsigned CPB    = 5,
  parameter int unsigned DELAY  = 20,
  parameter int unsigned NBYTES = 12
) (
  input  logic clk,
  input  logic trig,
  output logic tx,
  output int   samples,
  input  logic rx,
  output int   cmds,
  output logic [7:0] cmd_last
);
  initial begin tx = 1'b1; samples = 0; cmds = 0; cmd_last = 8'h00; end

  initial begin
    logic [7:0] b;
    forever begin
      @(negedge rx);
      repeat (CPB / 2) @(posedge clk);
      if (rx == 1'b0) begin
        for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = rx; end
        repeat (CPB) @(posedge clk);
        if (rx == 1'b1) begin cmds++; cmd_last = b; end
      end
    end
  end

  task automatic send_byte(input logic [7:0] b);
    tx = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin tx = b[i]; repeat (CPB) @(negedge clk); end
    tx = 1'b1; repeat (CPB) @(negedge clk);
  endtask

  initial begin
    forever begin
      @(posedge trig);
      repeat (DELAY) @(negedge clk);
      samples++;
      for (int i = 0; i < NBYTES; i++) send_byte(8'((samples - 1) * 16 + i));
    end
  end
endmodule
