// sync_pkg - types and constants shared by the sensor synchronization circuits.
//
// The whole design keeps time in one format, a PTP-style timestamp: whole
// seconds of global (GPS/UTC) time plus nanoseconds within the second. Every
// sensor timestamp, trigger instant and configuration value uses it, so a
// camera frame, an IMU sample and a Radar frame stamped by this hardware can be
// compared directly with each other and with LiDAR frames stamped by PTP.
// The field widths (32-bit seconds, 30-bit nanoseconds) are this design's own
// choice; they follow the PTP timestamp layout with the seconds field cut to
// 32 bits.
package sync_pkg;

  localparam int unsigned SEC_W = 32;
  localparam int unsigned NS_W  = 30;                 // 0 .. 999_999_999 fits in 30 bits
  localparam int unsigned NS_PER_SEC = 1_000_000_000;

  typedef struct packed {
    logic [SEC_W-1:0] sec;
    logic [NS_W-1:0]  ns;
  } ts_t;

  // One IMU sample as received on its serial port, with its arrival time.
  localparam int unsigned IMU_MAX_BYTES = 32;
  typedef struct packed {
    ts_t                          ts;
    logic [5:0]                   len;     // bytes received, 1 .. IMU_MAX_BYTES
    logic [IMU_MAX_BYTES*8-1:0]   data;    // byte 0 in bits [7:0]
  } imu_rec_t;

  // One standard-format CAN data frame, with the time of its start-of-frame bit.
  typedef struct packed {
    ts_t         ts;
    logic [10:0] id;
    logic        rtr;
    logic [3:0]  dlc;
    logic [63:0] data;                     // byte 0 in bits [7:0]
  } can_rec_t;

  // One camera frame-start stamp.
  typedef struct packed {
    ts_t         ts;
    logic [31:0] frame_no;
  } cam_rec_t;

endpackage
