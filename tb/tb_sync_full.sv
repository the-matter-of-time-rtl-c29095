// tb_sync_full - the synchronization system at its default size and rates:
// 100 MHz clock (10 ns per tick), GPS at 9600 baud, IMU at 115200 baud, CAN at
// 500 kbit/s, camera at 20 Hz and IMU at 200 Hz (the reset periods), 10 us
// trigger pulses. The top is instantiated with no parameters.
//
// One complete operation: software enables the triggers and arms the LiDAR
// and Radar starts; the GPS model sends its time message and the first PPS;
// the timer takes the GPS second; camera, IMU, LiDAR and Radar start
// together at that edge; the IMU answers each trigger, the camera sends a
// frame, the Radar sends a frame every millisecond; every sample and frame
// comes back with a stamp at a fixed distance from its trigger (Radar: one
// period from the previous frame); a command byte reaches the IMU. The run covers 29 ms after the first PPS.
// The same monitors as in tb_sync_system_top check content and timing; the
// software time set is exercised only there.
module tb_sync_full;
  import sync_pkg::*;

  localparam int unsigned CLK_HZ    = 100_000_000;
  localparam int unsigned NS_INC    = 1_000_000_000 / CLK_HZ;
  localparam int unsigned GPS_BAUD  = 9600;
  localparam int unsigned IMU_BAUD  = 115_200;
  localparam int unsigned CAN_BPS   = 500_000;
  localparam int unsigned CAM_P_NS  = 50_000_000;      // reset value of the camera period
  localparam int unsigned IMU_P_NS  = 5_000_000;       // reset value of the IMU period
  localparam int unsigned RADAR_PER = 100_000;         // clocks between Radar frames (1 ms)
  localparam int unsigned IMU_BYTES = 12;
  localparam int unsigned CAM_LINES = 4, CAM_PPL = 8;
  localparam int unsigned FIRST_PPS = 700_000;
  localparam int unsigned RUN_CYC   = FIRST_PPS + 3_000_000;
  localparam longint      SEC0      = 1000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  // ---------------- DUT ----------------
  logic imu_cmd_tx;
  int imu_cmds;
  logic [7:0] imu_cmd_last;
  logic gps_tx, gps_pps, imu_tx, imu_trig, cam_trig, can_tx_dut, radar_tx, bus;
  logic radar_start, lidar_start;
  logic [63:0] cs_tdata, cm_tdata;
  logic cs_tuser, cs_tlast, cs_tvalid, cs_tready;
  logic [1:0] cm_tuser;
  logic cm_tlast, cm_tvalid, cm_tready = 1;
  logic psel = 0, penable = 0, pwrite = 0, pready, pslverr;
  logic [7:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic imu_v, can_v, cam_v, pps_o, sec_start;
  imu_rec_t imu_r;
  can_rec_t can_r;
  cam_rec_t cam_r;
  ts_t now;
  logic [1:0] fire;

  assign bus = radar_tx & can_tx_dut;

  sync_system_top dut (
    .clk, .rst_n,
    .gps_uart_rx_i(gps_tx), .gps_pps_i(gps_pps),
    .imu_uart_rx_i(imu_tx), .imu_uart_tx_o(imu_cmd_tx), .imu_trig_o(imu_trig),
    .cam_trig_o(cam_trig),
    .cam_s_tdata(cs_tdata), .cam_s_tuser(cs_tuser), .cam_s_tlast(cs_tlast),
    .cam_s_tvalid(cs_tvalid), .cam_s_tready(cs_tready),
    .cam_m_tdata(cm_tdata), .cam_m_tuser(cm_tuser), .cam_m_tlast(cm_tlast),
    .cam_m_tvalid(cm_tvalid), .cam_m_tready(cm_tready),
    .can_rx_i(bus), .can_tx_o(can_tx_dut), .radar_start_o(radar_start),
    .lidar_start_o(lidar_start),
    .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .imu_rec_valid_o(imu_v), .imu_rec_o(imu_r),
    .can_rec_valid_o(can_v), .can_rec_o(can_r),
    .cam_rec_valid_o(cam_v), .cam_rec_o(cam_r),
    .now_o(now), .pps_o, .sec_start_o(sec_start), .trig_fire_o(fire)
  );

  // ---------------- sensor models ----------------
  int pps_sent, imu_samples, cam_frames, radar_frames, radar_acks;
  gps_model #(.CPB(CLK_HZ / GPS_BAUD), .CLKS_PER_SEC(CLK_HZ), .FIRST_PPS(FIRST_PPS),
              .START_SEC(32'(SEC0))) u_gps (.clk, .tx(gps_tx), .pps(gps_pps), .pps_count(pps_sent));
  imu_model #(.CPB(CLK_HZ / IMU_BAUD), .DELAY(20), .NBYTES(IMU_BYTES))
    u_imu (.clk, .trig(imu_trig), .tx(imu_tx), .samples(imu_samples),
           .rx(imu_cmd_tx), .cmds(imu_cmds), .cmd_last(imu_cmd_last));
  camera_model #(.W(64), .DELAY(50), .LINES(CAM_LINES), .PPL(CAM_PPL))
    u_cam (.clk, .trig(cam_trig), .tdata(cs_tdata), .tuser(cs_tuser), .tlast(cs_tlast),
           .tvalid(cs_tvalid), .tready(cs_tready), .frames(cam_frames));
  radar_model #(.CPB(CLK_HZ / CAN_BPS), .PERIOD(RADAR_PER))
    u_radar (.clk, .start(radar_start), .bus, .tx(radar_tx), .frames(radar_frames), .acks(radar_acks));

  // ---------------- checking ----------------
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic longint abs_ns(ts_t t);
    return longint'(t.sec) * 1_000_000_000 + longint'(t.ns);
  endfunction

  // mechanism counters
  int n_gps_load = 0, n_cam_trig = 0, n_imu_trig = 0, n_together = 0;
  int n_lidar_start = 0, n_radar_start = 0, n_start_with_trig = 0;
  int n_imu_rec = 0, n_cam_rec = 0, n_can_rec = 0, n_cam_stall = 0, n_sw_set = 0;
  int n_off_grid = 0;

  ts_t    now_d1;
  logic   ss_d1;
  longint cam_trig_t = -1, imu_trig_t = -1;
  longint imu_delta = -1, cam_delta = -1, can_prev = -1;
  logic   lidar_d = 0, radar_d = 0;
  int     cam_beats = 0, can_seq = 0, imu_seq = 0;
  // a software set moves the time under samples in flight: their distance
  // checks are skipped once
  logic   skip_imu = 0, skip_cam = 0, skip_can = 0;

  always @(posedge clk) if (rst_n) begin
    now_d1 <= now;
    ss_d1  <= sec_start;
    lidar_d <= lidar_start;
    radar_d <= radar_start;
    // trigger instants: old fire belongs to the time value one edge back
    if (fire[0]) begin
      n_cam_trig++; cam_trig_t = abs_ns(now_d1);
      if (now_d1.ns % CAM_P_NS != 0 && !ss_d1) n_off_grid++;
    end
    if (fire[1]) begin
      n_imu_trig++; imu_trig_t = abs_ns(now_d1);
      if (now_d1.ns % IMU_P_NS != 0 && !ss_d1) n_off_grid++;
    end
    if (fire[0] && fire[1]) n_together++;
    if (fire[0] && !fire[1]) n_off_grid++;
    if (lidar_start && !lidar_d) begin n_lidar_start++; if (fire == 2'b11) n_start_with_trig++; end
    if (radar_start && !radar_d) begin n_radar_start++; if (fire == 2'b11) n_start_with_trig++; end
    if (pps_o) n_gps_load++;
    if (cm_tvalid && !cm_tready) n_cam_stall++;

    // IMU records: content and constant distance from the trigger
    if (imu_v) begin
      longint d;
      logic ok;
      n_imu_rec++;
      d = abs_ns(imu_r.ts) - imu_trig_t;
      if (imu_delta < 0) imu_delta = d;
      if (skip_imu) begin skip_imu = 0; d = imu_delta; end
      check(d == imu_delta && d > 0 && d < 100 * NS_INC,
            $sformatf("IMU stamp %0d ns after its trigger (first %0d)", d, imu_delta));
      ok = (imu_r.len == IMU_BYTES);
      for (int i = 0; i < IMU_BYTES; i++) ok &= (imu_r.data[8*i +: 8] == 8'(imu_seq * 16 + i));
      check(ok, $sformatf("IMU sample %0d content", imu_seq));
      imu_seq++;
    end
    // camera stamp records
    if (cam_v) begin
      longint d;
      n_cam_rec++;
      d = abs_ns(cam_r.ts) - cam_trig_t;
      if (cam_delta < 0) cam_delta = d;
      if (skip_cam) begin skip_cam = 0; d = cam_delta; end
      check(d == cam_delta && d > 0, $sformatf("camera stamp %0d ns after its trigger", d));
      check(cam_r.frame_no == 32'(n_cam_rec - 1), "camera frame number");
    end
    // camera stream: header then LINES*PPL beats
    if (cm_tvalid && cm_tready) begin
      if (cm_tuser[1]) begin
        check(cam_beats == 0 || cam_beats == CAM_LINES * CAM_PPL, "previous frame complete");
        check(cm_tdata == 64'(cam_r.ts) || cm_tdata == 64'(cam_r.ts), "header carries the stamp");
        cam_beats = 0;
      end else begin
        check(cm_tdata[15:0] == 16'(cam_beats % CAM_PPL) &&
              cm_tdata[31:16] == 16'(cam_beats / CAM_PPL) &&
              cm_tuser[0] == (cam_beats == 0) && cm_tlast == (cam_beats % CAM_PPL == CAM_PPL - 1),
              $sformatf("camera beat %0d", cam_beats));
        cam_beats++;
      end
    end
    // Radar frames: sequence, content, and exactly one period apart
    if (can_v) begin
      n_can_rec++;
      check(can_r.id == 11'h200 + 11'(can_seq % 256) && can_r.dlc == 8 &&
            can_r.data == {8{8'(can_seq)}}, $sformatf("Radar frame %0d content", can_seq));
      if (can_prev >= 0 && !skip_can)
        check(abs_ns(can_r.ts) - can_prev == longint'(RADAR_PER) * NS_INC,
              $sformatf("Radar frames %0d ns apart", abs_ns(can_r.ts) - can_prev));
      can_prev = abs_ns(can_r.ts);
      if (can_r.ts.sec >= 32'd5000) skip_can = 0;   // first frame stamped with the set time
      can_seq++;
    end
  end

  // camera output back-pressure in bursts
  always @(negedge clk) cm_tready <= ($urandom % 8 != 0);

  // ---------------- APB ----------------
  task automatic apb_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    #1 check(!pslverr, $sformatf("APB write %02h accepted", a));
    @(negedge clk); psel = 0; penable = 0;
  endtask
  task automatic apb_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1;
    #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  initial begin
    repeat (RUN_CYC + 50_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // reset periods are the default rates: only enable and arm
    apb_read(8'h08, d);
    check(d == CAM_P_NS, "camera period at reset");
    apb_write(8'h00, 32'h3);
    apb_write(8'h04, 32'h3);
    apb_read(8'h38, d);
    check(d[0] == 1'b0, "time not valid before the first PPS");
    // one configuration byte to the IMU before it is triggered
    check(d[2] == 1'b1, "IMU command transmitter ready");
    apb_write(8'h50, 32'h3C);

    wait (n_gps_load == 1);
    repeat (5) @(posedge clk);
    apb_read(8'h38, d);
    check(d[0] == 1'b1, "time valid after the first PPS");
    apb_read(8'h30, d);
    check(d == 32'(SEC0), $sformatf("timer took the GPS second: %0d", d));
    check(n_lidar_start == 1 && n_radar_start == 1 && n_start_with_trig == 2,
          "LiDAR and Radar started together with the first triggers");
    repeat (2_900_000) @(posedge clk);              // 29 ms
    check(n_cam_trig == 1 && n_imu_trig == 6,
          $sformatf("1 camera / 6 IMU triggers in 29 ms, got %0d / %0d", n_cam_trig, n_imu_trig));
    check(n_imu_rec == 6 && n_cam_rec == 1 && n_can_rec >= 28, "all samples and frames stamped");
    check(imu_cmds == 1 && imu_cmd_last == 8'h3C, "IMU received the command byte");
    // ---- summary of mechanisms
    check(n_off_grid == 0, $sformatf("%0d triggers off the grid or camera without IMU", n_off_grid));
    check(radar_acks == radar_frames || radar_acks == radar_frames - 1, "every finished Radar frame acknowledged");
    $display("mechanisms: gps_loads=%0d cam_trig=%0d imu_trig=%0d together=%0d lidar_start=%0d radar_start=%0d",
             n_gps_load, n_cam_trig, n_imu_trig, n_together, n_lidar_start, n_radar_start);
    $display("            imu_rec=%0d cam_rec=%0d can_rec=%0d can_ack=%0d cam_stall=%0d sw_set=%0d",
             n_imu_rec, n_cam_rec, n_can_rec, radar_acks, n_cam_stall, n_sw_set);
    check(n_gps_load > 0,    "mechanism: GPS time load on PPS");
    check(n_cam_trig > 0,    "mechanism: camera trigger");
    check(n_imu_trig > 0,    "mechanism: IMU trigger");
    check(n_together > 0,    "mechanism: simultaneous camera and IMU trigger");
    check(n_lidar_start > 0, "mechanism: LiDAR start");
    check(n_radar_start > 0, "mechanism: Radar start");
    check(n_imu_rec > 0,     "mechanism: IMU sample stamped");
    check(n_cam_rec > 0,     "mechanism: camera frame stamped");
    check(n_can_rec > 0,     "mechanism: Radar frame stamped");
    check(radar_acks > 0,    "mechanism: CAN acknowledge");
    check(n_cam_stall > 0,   "mechanism: camera stream back-pressure");
    check(imu_cmds > 0,      "mechanism: command byte to the IMU");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
