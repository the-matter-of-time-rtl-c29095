// tb_sync_system_top - end-to-end test of the synchronization system with
// sensor models, at a 100 kHz clock (10 us per tick) so that whole seconds
// can be simulated.
//
// Set-up: a GPS model (PPS every second plus time messages), an IMU and a
// camera that answer each trigger after a fixed delay, and a Radar that, once
// started, sends a CAN frame every 50 ms on its own clock. Software is
// played through the APB port: periods 100 ms (camera) and 10 ms (IMU),
// triggers enabled, LiDAR and Radar start armed, and later a software time
// set.
//
// Checked: the timer takes the GPS second at the first PPS and is found in
// step at the next one (phase register 0); camera and IMU triggers fire only
// on their grid, the camera ones always together with an IMU one, 10 and 100
// per second; the start pulses come with a trigger; every IMU sample, camera
// frame and Radar frame arrives with the right content and a stamp whose
// distance from its trigger (or from the previous Radar frame) is the same
// every time, to the clock; the camera stream survives output back-pressure;
// after a software set, triggers resume at the next second boundary; command
// bytes written to IMU_TX reach the IMU model intact.
// Each mechanism is counted and one that never happened is a failure.
module tb_sync_system_top;
  import sync_pkg::*;

  localparam int unsigned CLK_HZ    = 100_000;
  localparam int unsigned NS_INC    = 1_000_000_000 / CLK_HZ;
  localparam int unsigned GPS_BAUD  = 10_000;
  localparam int unsigned IMU_BAUD  = 20_000;
  localparam int unsigned CAN_BPS   = 5_000;
  localparam int unsigned PULSE_CYC = 5;
  localparam int unsigned CAM_P_NS  = 100_000_000;
  localparam int unsigned IMU_P_NS  = 10_000_000;
  localparam int unsigned RADAR_PER = 5_000;           // clocks between Radar frames
  localparam int unsigned IMU_BYTES = 12;
  localparam int unsigned CAM_LINES = 4, CAM_PPL = 8;
  localparam int unsigned RUN_CYC   = 260_000;         // 2.6 s
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

  sync_system_top #(
    .CLK_HZ(CLK_HZ), .GPS_BAUD(GPS_BAUD), .IMU_BAUD(IMU_BAUD), .CAN_BPS(CAN_BPS),
    .CAM_DATA_W(64), .PULSE_CYC(PULSE_CYC)
  ) dut (
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
  gps_model #(.CPB(CLK_HZ / GPS_BAUD), .CLKS_PER_SEC(CLK_HZ), .FIRST_PPS(5_000),
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
    int t_cam, t_imu;
    repeat (5) @(posedge clk);
    rst_n = 1;
    apb_write(8'h08, CAM_P_NS);
    apb_write(8'h0C, IMU_P_NS);
    apb_write(8'h00, 32'h3);
    apb_write(8'h04, 32'h3);
    apb_read(8'h38, d);
    check(d[0] == 1'b0, "time not valid before the first PPS");

    // first PPS at 5000 clocks, message sent before it
    wait (n_gps_load == 1);
    repeat (5) @(posedge clk);
    apb_read(8'h38, d);
    check(d[0] == 1'b1, "time valid after the first PPS");
    apb_read(8'h30, d);
    check(d == 32'(SEC0), $sformatf("timer took the GPS second: %0d", d));
    check(n_lidar_start == 1 && n_radar_start == 1 && n_start_with_trig == 2,
          "LiDAR and Radar started together with the first triggers");

    // second PPS: the timer should already be in step
    wait (n_gps_load == 2);
    repeat (5) @(posedge clk);
    apb_read(8'h3C, d);
    check(d == 0, $sformatf("timer in step at the second PPS (phase %0d ns)", d));
    apb_read(8'h30, d);
    check(d == 32'(SEC0 + 1), "second advanced to SEC0+1");
    // two command bytes to the IMU through IMU_TX, polling STATUS bit 2
    apb_read(8'h38, d);
    check(d[2], "IMU command transmitter ready");
    apb_write(8'h50, 32'h5A);
    apb_read(8'h38, d);
    check(!d[2], "IMU command transmitter busy while sending");
    do apb_read(8'h38, d); while (!d[2]);
    check(imu_cmds == 1 && imu_cmd_last == 8'h5A, "IMU received the first command byte");
    apb_write(8'h50, 32'hC3);
    do apb_read(8'h38, d); while (!d[2]);
    check(imu_cmds == 2 && imu_cmd_last == 8'hC3, "IMU received the second command byte");
    // one full second of triggers between PPS 2 and PPS 3
    t_cam = n_cam_trig; t_imu = n_imu_trig;
    wait (n_gps_load == 3);
    check(n_cam_trig - t_cam == 10 && n_imu_trig - t_imu == 100,
          $sformatf("10 camera / 100 IMU triggers in a second, got %0d / %0d",
                    n_cam_trig - t_cam, n_imu_trig - t_imu));

    // software set in the middle of a second: triggers wait for the boundary
    repeat (30_000) @(posedge clk);
    apb_write(8'h20, 32'd5000);
    apb_write(8'h24, 32'd500_000_000);
    t_cam = n_cam_trig; t_imu = n_imu_trig;
    skip_imu = 1; skip_cam = 1; skip_can = 1;
    apb_write(8'h28, 32'h1);
    n_sw_set++;
    apb_read(8'h30, d);
    check(d == 32'd5000, "software set took effect");
    repeat (CLK_HZ * 4 / 10) @(posedge clk);          // up to 0.9 s of the set time
    check(n_cam_trig == t_cam && n_imu_trig == t_imu, "no triggers between a software set and the boundary");
    repeat (CLK_HZ * 2 / 10) @(posedge clk);
    check(n_cam_trig > t_cam && n_imu_trig > t_imu, "triggers resume after the boundary");
    repeat (2_000) @(posedge clk);

    // ---- summary of mechanisms
    check(n_off_grid == 0, $sformatf("%0d triggers off the grid or camera without IMU", n_off_grid));
    check(radar_acks == radar_frames || radar_acks == radar_frames - 1, "every finished Radar frame acknowledged");
    check(n_imu_rec >= imu_samples - 1 && n_cam_rec == cam_frames + (cam_frames < n_cam_trig ? 1 : 0) ||
          n_cam_rec == cam_frames, "every sample and frame stamped");
    $display("mechanisms: gps_loads=%0d cam_trig=%0d imu_trig=%0d together=%0d lidar_start=%0d radar_start=%0d",
             n_gps_load, n_cam_trig, n_imu_trig, n_together, n_lidar_start, n_radar_start);
    $display("            imu_rec=%0d cam_rec=%0d can_rec=%0d can_ack=%0d cam_stall=%0d sw_set=%0d imu_cmd=%0d",
             n_imu_rec, n_cam_rec, n_can_rec, radar_acks, n_cam_stall, n_sw_set, imu_cmds);
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
    check(n_sw_set > 0,      "mechanism: software time set");
    check(imu_cmds > 0,      "mechanism: command byte to the IMU");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
