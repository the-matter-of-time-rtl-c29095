// camera_model - behavioural model of an externally triggered camera together
// with its MIPI CSI-2 receiver, for testbenches. DELAY clocks after each
// rising edge of trig it sends one frame of LINES x PPL beats as an AXI4-Stream
// (tuser on the first beat, tlast at each line end), honouring tready; beat
// data is {frame, line, pixel} in 16-bit fields. frames counts frames begun.
module camera_model #(
  parameter int unsigned W     = 64,
  parameter int unsigned DELAY = 50,
  parameter int unsigned LINES = 4,
  parameter int unsigned PPL   = 8
) (
  input  logic         clk,
  input  logic         trig,
  output logic [W-1:0] tdata,
  output logic         tuser,
  output logic         tlast,
  output logic         tvalid,
  input  logic         tready,
  output int           frames
);
  initial begin tdata = '0; tuser = 0; tlast = 0; tvalid = 0; frames = 0; end

  initial begin
    forever begin
      @(posedge trig);
      repeat (DELAY) @(negedge clk);
      for (int y = 0; y < LINES; y++)
        for (int x = 0; x < PPL; x++) begin
          tvalid = 1'b1;
          tdata  = W'({16'(frames), 16'(y), 16'(x)});
          tuser  = (x == 0 && y == 0);
          tlast  = (x == PPL - 1);
          @(posedge clk);
          while (!tready) @(posedge clk);
          @(negedge clk);
        end
      tvalid = 1'b0; tuser = 1'b0; tlast = 1'b0;
      frames++;
    end
  end
endmodule
