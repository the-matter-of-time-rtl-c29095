// tb_sync_csr - self-checking test of the APB register block.
// Checks reset values, read/write of every writable register, the one-clock
// ARM and time-set pulses with the loaded value, the TIME_SEC read that
// latches TIME_NS, the read-only status registers, the IMU_TX register (one
// pulse with the byte when the transmitter is ready, none when it is busy),
// and PSLVERR on addresses outside the map.
module tb_sync_csr;
  import sync_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  logic psel = 0, penable = 0, pwrite = 0;
  logic [7:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic pready, pslverr;
  logic [1:0] en, arm, armed = 2'b00;
  logic [NS_W-1:0] period [2];
  logic set;
  ts_t set_ts, now = '0;
  logic tvalid = 0, gvalid = 0;
  logic [NS_W-1:0] perr = 30'd777;
  logic [31:0] gsec = 32'h1234_5678;
  logic [15:0] ge = 16'd3, ie = 16'd5, ce = 16'd9;
  logic [7:0] txd;
  logic txv, txr = 1;

  sync_csr #(.NUM_TRIG(2), .NUM_START(2)) dut (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .en_o(en), .period_ns_o(period), .arm_o(arm), .armed_i(armed),
    .set_o(set), .set_ts_o(set_ts),
    .now_i(now), .time_valid_i(tvalid), .pps_err_ns_i(perr),
    .gps_sec_i(gsec), .gps_sec_valid_i(gvalid),
    .gps_err_i(ge), .imu_err_i(ie), .can_err_i(ce),
    .imu_tx_data_o(txd), .imu_tx_valid_o(txv), .imu_tx_ready_i(txr));

  always #5 clk = ~clk;
  always @(posedge clk) now.ns <= now.ns + 30'd10;

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int arm_pulses = 0, set_pulses = 0, tx_pulses = 0;
  ts_t set_seen;
  logic [7:0] tx_seen;
  always @(negedge clk) begin
    if (txv) begin tx_pulses++; tx_seen = txd; end
    if (arm != 0) arm_pulses++;
    if (set) begin set_pulses++; set_seen = set_ts; end
  end

  task automatic apb_write(input logic [7:0] a, input logic [31:0] d, output logic err);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    #1 err = pslverr;
    @(negedge clk); psel = 0; penable = 0;
    #1;
  endtask

  task automatic apb_read(input logic [7:0] a, output logic [31:0] d, output logic err);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1;
    #1 d = prdata; err = pslverr;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, ns_at_read;
    logic e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(pready, "no wait states");
    apb_read(8'h08, d, e); check(d == 32'd50_000_000 && !e, "camera period resets to 20 Hz");
    apb_read(8'h0C, d, e); check(d == 32'd5_000_000 && !e, "IMU period resets to 200 Hz");
    apb_read(8'h00, d, e); check(d == 0 && en == 0, "triggers disabled at reset");

    apb_write(8'h00, 32'h3, e); check(en == 2'b11 && !e, "CTRL enables");
    apb_write(8'h08, 32'd33_333_334, e); check(period[0] == 30'd33_333_334, "camera period written");
    apb_write(8'h0C, 32'd2_500_000, e);  check(period[1] == 30'd2_500_000, "IMU period written");
    apb_read(8'h08, d, e); check(d == 32'd33_333_334, "camera period read back");
    apb_read(8'h0C, d, e); check(d == 32'd2_500_000, "IMU period read back");
    apb_read(8'h10, d, e); check(e, "period of a channel that does not exist: PSLVERR");

    apb_write(8'h04, 32'h2, e);
    check(arm_pulses == 1, "ARM gives one pulse");
    armed = 2'b10;
    apb_read(8'h04, d, e); check(d == 32'h2, "armed flags readable");

    apb_write(8'h20, 32'd1_700_000_123, e);
    apb_write(8'h24, 32'd999_000_000, e);
    apb_read(8'h20, d, e); check(d == 32'd1_700_000_123, "SET_SEC read back");
    check(set_pulses == 0, "no set before CMD");
    apb_write(8'h28, 32'h1, e);
    check(set_pulses == 1 && set_seen.sec == 32'd1_700_000_123 && set_seen.ns == 30'd999_000_000,
          "CMD gives one set pulse with the set value");

    now.sec = 32'd77;
    apb_read(8'h30, d, e); ns_at_read = 32'(now.ns) - 32'd10;
    check(d == 32'd77, "TIME_SEC");
    apb_read(8'h34, d, e);
    check(d == ns_at_read, $sformatf("TIME_NS latched by the TIME_SEC read: %0d vs %0d", d, ns_at_read));

    tvalid = 1; gvalid = 1;
    apb_read(8'h38, d, e); check(d == 32'h7, "STATUS");
    txr = 0;
    apb_read(8'h38, d, e); check(d == 32'h3, "STATUS: IMU transmitter busy");
    apb_read(8'h3C, d, e); check(d == 32'd777, "PPS_ERR_NS");
    apb_read(8'h40, d, e); check(d == 32'h1234_5678, "GPS_SEC");
    apb_read(8'h44, d, e); check(d == 3, "GPS_ERR");
    apb_read(8'h48, d, e); check(d == 5, "IMU_ERR");
    apb_read(8'h4C, d, e); check(d == 9, "CAN_ERR");
    apb_write(8'h50, 32'h1A5, e);
    check(!e && tx_pulses == 0, "IMU_TX while the transmitter is busy: ignored");
    txr = 1;
    apb_write(8'h50, 32'h1C3, e);
    check(!e && tx_pulses == 1 && tx_seen == 8'hC3, "IMU_TX gives one pulse with the low byte");
    apb_read(8'h54, d, e); check(e, "unmapped read: PSLVERR");
    apb_write(8'h80, 32'h1, e); check(e && en == 2'b11, "unmapped write: PSLVERR, no effect");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
