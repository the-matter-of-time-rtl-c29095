// sync_system_top - the custom sensor-synchronization circuits of the FPGA
// fabric, wired as one unit.
//
// One machine timer (in trigger_timer) is the only time base. The GPS port
// (gps_time_rx) keeps it on global time with the PPS edge and the time
// message. From that timer the trigger unit drives the camera and IMU
// trigger lines and the start lines of the LiDAR and Radar, and the three
// sensor ports stamp what comes back with the same timer: IMU samples at the
// IMU serial port (imu_serial_if), camera frames behind the MIPI CSI-2
// receiver (mipi_ts), Radar frames at the CAN port (can_rx_ts). The Arm cores
// reach all of it through the APB registers (sync_csr), and send command
// bytes to the IMU through them.
//
// Outside this module, and brought out as ports: the MIPI CSI-2 receiver core
// (camera stream in), the frame writer/DMA toward the memory interface (camera
// stream out and the IMU, Radar and camera stamp records), the Ethernet MAC
// that carries the PTP-stamped LiDAR frames (now_o and pps_o can feed its
// timestamp unit), and the Arm cores (APB port).
//
// Clock and rates: CLK_HZ must divide 1e9. Serial and CAN bit times are
// CLK_HZ / baud rounded down; the far end sees at most that rounding error.
// The defaults (100 MHz, GPS 9600 baud, IMU 115200 baud, CAN 500 kbit/s) are
// this design's choice; the paper gives none of them.
module sync_system_top
  import sync_pkg::*;
#(
  parameter int unsigned CLK_HZ     = 100_000_000,
  parameter int unsigned GPS_BAUD   = 9600,
  parameter int unsigned IMU_BAUD   = 115_200,
  parameter int unsigned CAN_BPS    = 500_000,
  parameter int unsigned CAM_DATA_W = 64,
  parameter int unsigned PULSE_CYC  = 1000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // GPS receiver
  input  logic                  gps_uart_rx_i,
  input  logic                  gps_pps_i,
  // IMU
  input  logic                  imu_uart_rx_i,
  output logic                  imu_uart_tx_o,
  output logic                  imu_trig_o,
  // camera: trigger line and the stream of the MIPI CSI-2 receiver core
  output logic                  cam_trig_o,
  input  logic [CAM_DATA_W-1:0] cam_s_tdata,
  input  logic                  cam_s_tuser,
  input  logic                  cam_s_tlast,
  input  logic                  cam_s_tvalid,
  output logic                  cam_s_tready,
  output logic [CAM_DATA_W-1:0] cam_m_tdata,
  output logic [1:0]            cam_m_tuser,
  output logic                  cam_m_tlast,
  output logic                  cam_m_tvalid,
  input  logic                  cam_m_tready,
  // Radar on CAN
  input  logic                  can_rx_i,
  output logic                  can_tx_o,
  output logic                  radar_start_o,
  // LiDAR (its frames come through the Ethernet MAC)
  output logic                  lidar_start_o,
  // Arm cores
  input  logic                  psel,
  input  logic                  penable,
  input  logic                  pwrite,
  input  logic [7:0]            paddr,
  input  logic [31:0]           pwdata,
  output logic [31:0]           prdata,
  output logic                  pready,
  output logic                  pslverr,
  // stamped records toward memory
  output logic                  imu_rec_valid_o,
  output imu_rec_t              imu_rec_o,
  output logic                  can_rec_valid_o,
  output can_rec_t              can_rec_o,
  output logic                  cam_rec_valid_o,
  output cam_rec_t              cam_rec_o,
  // machine time
  output ts_t                   now_o,
  output logic                  pps_o,
  output logic                  sec_start_o,
  output logic [1:0]            trig_fire_o   // 0: camera, 1: IMU, one clock per trigger
);
  localparam int unsigned NUM_TRIG  = 2;
  localparam int unsigned NUM_START = 2;

  // ---------------------------------------------------------------- GPS port
  logic [SEC_W-1:0] gps_sec;
  logic             gps_sec_valid, gps_msg;
  logic [15:0]      gps_err, imu_err, can_err;

  gps_time_rx #(.CLKS_PER_BIT(CLK_HZ / GPS_BAUD)) u_gps (
    .clk, .rst_n,
    .uart_rx_i(gps_uart_rx_i), .pps_i(gps_pps_i),
    .pps_o, .next_sec_o(gps_sec), .next_sec_valid_o(gps_sec_valid),
    .msg_o(gps_msg), .err_cnt_o(gps_err)
  );

  // --------------------------------------------------------------- registers
  logic [NUM_TRIG-1:0]  trig_en;
  logic [NS_W-1:0]      period_ns [NUM_TRIG];
  logic [NUM_START-1:0] arm, armed;
  logic                 set;
  ts_t                  set_ts;
  logic                 time_valid;
  logic [NS_W-1:0]      pps_err_ns;
  logic [7:0]           imu_tx_data;
  logic                 imu_tx_valid, imu_tx_ready;

  sync_csr #(.NUM_TRIG(NUM_TRIG), .NUM_START(NUM_START)) u_csr (
    .clk, .rst_n,
    .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .en_o(trig_en), .period_ns_o(period_ns), .arm_o(arm), .armed_i(armed),
    .set_o(set), .set_ts_o(set_ts),
    .now_i(now_o), .time_valid_i(time_valid), .pps_err_ns_i(pps_err_ns),
    .gps_sec_i(gps_sec), .gps_sec_valid_i(gps_sec_valid),
    .gps_err_i(gps_err), .imu_err_i(imu_err), .can_err_i(can_err),
    .imu_tx_data_o(imu_tx_data), .imu_tx_valid_o(imu_tx_valid), .imu_tx_ready_i(imu_tx_ready)
  );

  // ---------------------------------------------------------- trigger/timer
  logic [NUM_TRIG-1:0]  trig;
  logic [NUM_START-1:0] start;

  trigger_timer #(
    .CLK_HZ(CLK_HZ), .NUM_TRIG(NUM_TRIG), .NUM_START(NUM_START),
    .PULSE_CYC(PULSE_CYC), .PPS_LAT_CYC(3)
  ) u_tt (
    .clk, .rst_n,
    .pps_i(pps_o), .next_sec_i(gps_sec), .next_sec_valid_i(gps_sec_valid),
    .set_i(set), .set_ts_i(set_ts),
    .now_o, .sec_start_o, .time_valid_o(time_valid), .pps_err_ns_o(pps_err_ns),
    .en_i(trig_en), .period_ns_i(period_ns), .fire_o(trig_fire_o), .trig_o(trig),
    .arm_i(arm), .armed_o(armed), .start_o(start)
  );

  assign cam_trig_o    = trig[0];
  assign imu_trig_o    = trig[1];
  assign lidar_start_o = start[0];
  assign radar_start_o = start[1];

  // ------------------------------------------------------------ sensor ports
  imu_serial_if #(.CLKS_PER_BIT(CLK_HZ / IMU_BAUD)) u_imu (
    .clk, .rst_n, .uart_rx_i(imu_uart_rx_i), .now_i(now_o),
    .rec_valid_o(imu_rec_valid_o), .rec_o(imu_rec_o), .err_cnt_o(imu_err),
    .tx_data_i(imu_tx_data), .tx_valid_i(imu_tx_valid), .tx_ready_o(imu_tx_ready),
    .uart_tx_o(imu_uart_tx_o)
  );

  can_rx_ts #(.CLKS_PER_BIT(CLK_HZ / CAN_BPS)) u_can (
    .clk, .rst_n, .can_rx_i, .can_tx_o, .now_i(now_o),
    .rec_valid_o(can_rec_valid_o), .rec_o(can_rec_o), .err_cnt_o(can_err)
  );

  mipi_ts #(.DATA_W(CAM_DATA_W)) u_cam (
    .clk, .rst_n, .now_i(now_o),
    .s_tdata(cam_s_tdata), .s_tuser(cam_s_tuser), .s_tlast(cam_s_tlast),
    .s_tvalid(cam_s_tvalid), .s_tready(cam_s_tready),
    .m_tdata(cam_m_tdata), .m_tuser(cam_m_tuser), .m_tlast(cam_m_tlast),
    .m_tvalid(cam_m_tvalid), .m_tready(cam_m_tready),
    .rec_valid_o(cam_rec_valid_o), .rec_o(cam_rec_o)
  );

  // the GPS message strobe is for software polling through STATUS only
  logic unused;
  assign unused = gps_msg;
endmodule
