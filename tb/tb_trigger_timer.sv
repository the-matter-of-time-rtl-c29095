// tb_trigger_timer - self-checking test of the machine timer and trigger unit.
// Runs at a 100 kHz clock (10 us per tick) so a second is 100,000 clocks.
// Checks: the timer rate and the second wrap; the GPS load on PPS (seconds
// from the message, nanoseconds = latency); that trigger channels first fire
// at a second boundary, fire only at multiples of their period, together when
// their instants coincide, the right number of times per second, with
// PULSE_CYC-wide pulses; start pulses at the boundary after arming; PPS
// corrections in both directions without a lost or doubled boundary trigger;
// and that a software set holds the channels until the next boundary.
module tb_trigger_timer;
  import sync_pkg::*;
  localparam int unsigned CLK_HZ = 100_000;
  localparam int unsigned NS_INC = 1_000_000_000 / CLK_HZ;   // 10_000
  localparam int unsigned TICKS  = CLK_HZ;
  localparam int unsigned PW     = 5;
  localparam logic [NS_W-1:0] P_CAM = 30'd100_000_000;   // 10 Hz
  localparam logic [NS_W-1:0] P_IMU = 30'd10_000_000;    // 100 Hz

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  logic pps = 0, nsv = 0, set = 0;
  logic [31:0] nsec = 0;
  ts_t set_ts = '0, now;
  logic sec_start, tvalid;
  logic [NS_W-1:0] pps_err;
  logic [1:0] en = 0, fire, trig, arm = 0, armed, start;
  logic [NS_W-1:0] period [2];

  assign period[0] = P_CAM;
  assign period[1] = P_IMU;

  trigger_timer #(.CLK_HZ(CLK_HZ), .NUM_TRIG(2), .NUM_START(2), .PULSE_CYC(PW), .PPS_LAT_CYC(3)) dut (
    .clk, .rst_n, .pps_i(pps), .next_sec_i(nsec), .next_sec_valid_i(nsv),
    .set_i(set), .set_ts_i(set_ts), .now_o(now), .sec_start_o(sec_start),
    .time_valid_o(tvalid), .pps_err_ns_o(pps_err),
    .en_i(en), .period_ns_i(period), .fire_o(fire), .trig_o(trig),
    .arm_i(arm), .armed_o(armed), .start_o(start)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- monitor: firing instants, pulse widths ----------------
  // At a clock edge the old fire_o belongs to the now_o value one edge back (ns_d1).
  logic [NS_W-1:0] ns_d1;
  logic            ss_d1;
  int fires [2] = '{0, 0};
  int together = 0, off_grid = 0, starts = 0, start_with_fire = 0;
  int hi_len [2] = '{0, 0};
  int bad_pw = 0;
  logic [1:0] trig_d = 0;
  always @(posedge clk) begin
    ns_d1 <= now.ns;
    ss_d1 <= sec_start;
    trig_d <= trig;
    for (int k = 0; k < 2; k++) begin
      if (fire[k]) begin
        fires[k]++;
        // a firing is on the grid: at a multiple of the period, or on the
        // first clock of a second entered by a PPS load
        check((ns_d1 % period[k]) == 0 || ss_d1,
              $sformatf("channel %0d fires on its grid (ns %0d)", k, ns_d1));
        if ((ns_d1 % period[k]) != 0 && !ss_d1) off_grid++;
      end
      if (trig[k]) hi_len[k]++;
      else if (trig_d[k]) begin
        check(hi_len[k] == PW, $sformatf("channel %0d pulse %0d clocks wide", k, hi_len[k]));
        if (hi_len[k] != PW) bad_pw++;
        hi_len[k] = 0;
      end
    end
    if (fire[0] && fire[1]) together++;
    if (start != 0 && !$past(|start)) begin
      starts++;
      if (fire[0] && fire[1]) start_with_fire++;
    end
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_sec_start();
    do @(negedge clk); while (!sec_start);
  endtask

  task automatic do_pps(input logic with_msg, input logic [31:0] s);
    @(negedge clk); nsec = s; nsv = with_msg; pps = 1;
    @(negedge clk); pps = 0;
    @(negedge clk); nsv = 0;
  endtask

  initial begin
    ts_t t0;
    int f0, f1, tg, st;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // ---- timer rate
    @(negedge clk); t0 = now;
    repeat (1234) @(negedge clk);
    check(now.ns == t0.ns + 1234 * NS_INC && now.sec == t0.sec, "timer advances NS_INC per clock");
    check(!tvalid, "time not valid before GPS");

    // ---- second wrap
    wait_sec_start();
    check(now.ns == 0 && now.sec == 1, $sformatf("wrap to 1 s, got %0d.%0d", now.sec, now.ns));

    // ---- GPS load in the middle of a second (timer fast: no new second)
    repeat (300) @(negedge clk);
    t0 = now;
    @(negedge clk); nsec = 32'd1; nsv = 1; pps = 1;
    @(negedge clk); pps = 0; nsv = 0;
    check(now.sec == 1 && now.ns == 3 * NS_INC, $sformatf("PPS load keeps sec, ns=latency; got %0d.%0d", now.sec, now.ns));
    check(pps_err == t0.ns - NS_INC, "PPS phase register holds the timer's own reading of the edge");
    check(tvalid, "time valid after GPS load");

    // ---- GPS load with a new second from the message
    repeat (50) @(negedge clk);
    do_pps(1'b1, 32'd1_700_000_000);
    check(now.sec == 32'd1_700_000_000, "PPS loads the announced second");

    // ---- enable triggers: nothing until the next boundary
    en = 2'b11;
    repeat (5000) @(posedge clk);
    check(fires[0] == 0 && fires[1] == 0, "channels wait for a second boundary");
    arm = 2'b01; @(posedge clk); arm = 0;
    check(armed == 2'b01, "LiDAR start armed");
    wait_sec_start();
    f0 = fires[0]; f1 = fires[1]; tg = together;
    repeat (3) @(posedge clk);
    check(fires[0] == f0 + 1 && fires[1] == f1 + 1 && together == tg + 1, "both fire at the boundary, together");
    check(starts == 1 && start_with_fire == 1, "start pulse with the boundary triggers");
    check(armed == 0, "start disarms");
    // one full second of triggers
    f0 = fires[0]; f1 = fires[1]; tg = together;
    wait_sec_start();
    repeat (3) @(posedge clk);
    check(fires[0] - f0 == 10 && fires[1] - f1 == 100,
          $sformatf("10 camera and 100 IMU triggers per second, got %0d %0d", fires[0] - f0, fires[1] - f1));
    check(together - tg == 10, "IMU fires with every camera trigger");

    // ---- PPS arriving while the timer is slow (at 0.9999 s): boundary fires once
    wait (now.ns == 30'(TICKS - 5) * NS_INC);
    f0 = fires[0];
    do_pps(1'b0, 32'd0);
    repeat (20) @(posedge clk);
    check(fires[0] == f0 + 1, $sformatf("slow timer: one boundary trigger at PPS, got %0d", fires[0] - f0));
    // PPS just after the boundary (timer fast): no second trigger
    wait (now.ns == 30'd2 * NS_INC);
    repeat (3) @(posedge clk);
    f0 = fires[0]; st = now.sec;
    do_pps(1'b0, 32'd0);
    repeat (20) @(posedge clk);
    check(fires[0] == f0 && now.sec == st, "fast timer: no doubled trigger, same second");

    // ---- software set mid-second: channels wait for the boundary
    repeat (1000) @(posedge clk);
    @(negedge clk); set_ts.sec = 32'd42; set_ts.ns = 30'd123_456_789 / NS_INC * NS_INC; set = 1;
    @(negedge clk); set = 0;
    check(now.sec == 42 && now.ns == set_ts.ns, "software set loads the timer");
    f0 = fires[0]; f1 = fires[1];
    repeat (TICKS * 87 / 100) @(posedge clk);   // just short of the next boundary
    check(fires[0] == f0 && fires[1] == f1, "no triggers after a software set before the boundary");
    wait_sec_start();
    repeat (3) @(posedge clk);
    check(fires[0] == f0 + 1 && fires[1] == f1 + 1 && now.sec == 43, "triggers resume at the boundary");

    // ---- disable
    en = 2'b00;
    f1 = fires[1];
    repeat (3000) @(posedge clk);
    check(fires[1] == f1, "disabled channel is silent");

    check(off_grid == 0, $sformatf("all firings on the grid (%0d off)", off_grid));
    check(bad_pw == 0, "trigger pulses are PULSE_CYC wide");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
