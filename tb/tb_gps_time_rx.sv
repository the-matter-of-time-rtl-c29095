// tb_gps_time_rx - self-checking test of the GPS time port.
// Sends good time messages, a message with a bad checksum and a byte with a
// bad stop bit over the serial line, raises PPS, and checks the announced
// second, the error count, the one-clock PPS pulse and its 3-clock latency.
module tb_gps_time_rx;
  import sync_pkg::*;
  localparam int unsigned CPB = 16;

  logic clk = 0, rst_n = 1, rx = 1, pps = 0;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  logic pps_o, nsv, msg;
  logic [31:0] nsec;
  logic [15:0] err;
  int checks = 0, failures = 0;
  int msgs = 0;

  gps_time_rx #(.CLKS_PER_BIT(CPB)) dut (
    .clk, .rst_n, .uart_rx_i(rx), .pps_i(pps),
    .pps_o, .next_sec_o(nsec), .next_sec_valid_o(nsv), .msg_o(msg), .err_cnt_o(err)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (msg) msgs++;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_byte(input logic [7:0] b, input logic stop = 1'b1);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = stop; repeat (CPB) @(posedge clk);
    rx = 1; repeat (2) @(posedge clk);
  endtask

  task automatic send_msg(input logic [31:0] s, input logic corrupt = 1'b0);
    logic [7:0] x;
    x = s[7:0] ^ s[15:8] ^ s[23:16] ^ s[31:24];
    send_byte(8'hA5);
    for (int i = 0; i < 4; i++) send_byte(s[8*i +: 8]);
    send_byte(corrupt ? ~x : x);
    repeat (CPB) @(posedge clk);
  endtask

  task automatic pulse_pps(output int lat);
    int n = 0;
    @(negedge clk); pps = 1;
    while (!pps_o) begin @(posedge clk); #1; n++; end
    lat = n;
    @(posedge clk); #1;
    check(!pps_o, "pps_o lasts one clock");
    repeat (20) @(posedge clk);
    pps = 0;
    repeat (5) @(posedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    logic [31:0] s;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!nsv && err == 0, "idle after reset");

    // good message
    send_msg(32'h6543_2101);
    check(nsv && nsec == 32'h6543_2101, "second announced");
    check(msgs == 1, "one message strobe");
    pulse_pps(lat);
    check(lat == 3, $sformatf("PPS latency 3 clocks, got %0d", lat));
    check(!nsv, "PPS consumes the announced second");

    // bad checksum
    send_msg(32'h0000_1234, 1'b1);
    check(!nsv && err == 1, "bad checksum rejected and counted");

    // framing error in the middle of a message, then a good one
    send_byte(8'hA5);
    send_byte(8'h11, 1'b0);
    check(err == 2, "bad stop bit counted");
    for (int i = 0; i < 8; i++) begin
      s = $urandom;
      send_msg(s);
      check(nsv && nsec == s, $sformatf("random second %08h", s));
      pulse_pps(lat);
      check(lat == 3 && !nsv, "PPS after random message");
    end
    // garbage before the sync byte is skipped
    send_byte(8'h00); send_byte(8'h5A);
    send_msg(32'hCAFE_F00D);
    check(nsv && nsec == 32'hCAFE_F00D, "resync on sync byte");
    check(msgs == 10, "message strobes");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
