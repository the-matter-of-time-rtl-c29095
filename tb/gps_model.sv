// gps_model - behavioural model of a GPS receiver's timing outputs, for
// testbenches. After FIRST_PPS clocks it raises PPS for PPS_HIGH clocks and
// then every CLKS_PER_SEC clocks. Before each PPS edge (right after the
// previous one, and once at start-up) it sends the 6-byte time message
// {0xA5, second (LSB first), XOR checksum} announcing the second that begins
// at that edge, starting at START_SEC. pps_count counts the edges sent.
module gps_model #(
  parameter int unsigned CPB          = 10,
  parameter int unsigned CLKS_PER_SEC = 100_000,
  parameter int unsigned FIRST_PPS    = 5_000,
  parameter int unsigned PPS_HIGH     = 100,
  parameter int unsigned START_SEC    = 1_000
) (
  input  logic clk,
  output logic tx,
  output logic pps,
  output int   pps_count
);
  initial begin
    tx = 1'b1; pps = 1'b0; pps_count = 0;
  end

  task automatic send_byte(input logic [7:0] b);
    tx = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin tx = b[i]; repeat (CPB) @(negedge clk); end
    tx = 1'b1; repeat (CPB) @(negedge clk);
  endtask

  task automatic send_msg(input logic [31:0] s);
    send_byte(8'hA5);
    for (int i = 0; i < 4; i++) send_byte(s[8*i +: 8]);
    send_byte(s[7:0] ^ s[15:8] ^ s[23:16] ^ s[31:24]);
  endtask

  // message thread: announce the next second soon after each edge
  initial begin
    logic [31:0] s;
    s = START_SEC;
    repeat (20) @(negedge clk);
    forever begin
      send_msg(s);
      s++;
      @(posedge pps);
      repeat (PPS_HIGH + 10) @(negedge clk);
    end
  end

  // PPS thread
  initial begin
    repeat (FIRST_PPS) @(negedge clk);
    forever begin
      pps = 1'b1; pps_count++;
      repeat (PPS_HIGH) @(negedge clk);
      pps = 1'b0;
      repeat (CLKS_PER_SEC - PPS_HIGH) @(negedge clk);
    end
  end
endmodule
