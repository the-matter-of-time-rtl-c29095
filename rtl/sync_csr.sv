// sync_csr - configuration and status registers for the Arm cores.
//
// Software on the Arm cores runs the time protocol (PTP) and configures the
// synchronization hardware through this APB3 slave. It sets which trigger
// channels run and at what period, arms the start pulses of the free-running
// sensors, sets the timer, and reads the time, the GPS state and the error
// counters of the sensor ports.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CTRL        rw  [NUM_TRIG-1:0] trigger channel enables (0: camera, 1: IMU)
//   0x04 ARM         w   [NUM_START-1:0] 1 arms a start pulse (0: LiDAR, 1: Radar)
//                    r   armed flags (cleared by the hardware when the pulse goes out)
//   0x08+4k PERIOD_k rw  period of trigger channel k in ns, k < NUM_TRIG (at most 4)
//   0x20 SET_SEC     rw  seconds to load
//   0x24 SET_NS      rw  nanoseconds to load
//   0x28 CMD         w   bit 0: load {SET_SEC, SET_NS} into the timer now
//   0x30 TIME_SEC    r   timer seconds; the read also latches the nanoseconds
//   0x34 TIME_NS     r   nanoseconds latched by the last TIME_SEC read
//   0x38 STATUS      r   bit 0 time valid, bit 1 GPS second announced for next PPS,
//                        bit 2 IMU command transmitter ready
//   0x3C PPS_ERR_NS  r   timer nanoseconds seen just before the last PPS
//   0x40 GPS_SEC     r   last second announced by the GPS message
//   0x44 GPS_ERR     r   GPS message errors
//   0x48 IMU_ERR     r   IMU serial errors
//   0x4C CAN_ERR     r   CAN frame errors
//   0x50 IMU_TX      w   [7:0] byte to send to the IMU; ignored unless STATUS bit 2 is set
// Other addresses answer with PSLVERR. PREADY is always high (no wait states).
//
// Timing: a write takes effect at the clock edge that ends its access phase;
// arm_o, set_o and imu_tx_valid_o are one-clock pulses at that edge.
//
// From the paper: only that the Arm cores configure the system and run the
// synchronization protocol. The bus (APB3), the register map and the reset
// periods (camera 20 Hz, IMU 200 Hz) are this design's choices.
module sync_csr
  import sync_pkg::*;
#(
  parameter int unsigned NUM_TRIG  = 2,
  parameter int unsigned NUM_START = 2,
  parameter logic [NS_W-1:0] PERIOD_RST [4] = '{30'd50_000_000, 30'd5_000_000,
                                                30'd50_000_000, 30'd5_000_000}
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // APB3
  input  logic                 psel,
  input  logic                 penable,
  input  logic                 pwrite,
  input  logic [7:0]           paddr,
  input  logic [31:0]          pwdata,
  output logic [31:0]          prdata,
  output logic                 pready,
  output logic                 pslverr,
  // to trigger_timer
  output logic [NUM_TRIG-1:0]  en_o,
  output logic [NS_W-1:0]      period_ns_o [NUM_TRIG],
  output logic [NUM_START-1:0] arm_o,
  input  logic [NUM_START-1:0] armed_i,
  output logic                 set_o,
  output ts_t                  set_ts_o,
  // status
  input  ts_t                  now_i,
  input  logic                 time_valid_i,
  input  logic [NS_W-1:0]      pps_err_ns_i,
  input  logic [SEC_W-1:0]     gps_sec_i,
  input  logic                 gps_sec_valid_i,
  input  logic [15:0]          gps_err_i,
  input  logic [15:0]          imu_err_i,
  input  logic [15:0]          can_err_i,
  // command bytes to the IMU
  output logic [7:0]           imu_tx_data_o,
  output logic                 imu_tx_valid_o,
  input  logic                 imu_tx_ready_i
);
  initial assert (NUM_TRIG <= 4 && NUM_TRIG >= 1 && NUM_START <= 32)
    else $error("register map holds 1..4 trigger channels and up to 32 start channels");

  logic          wr, rd;
  logic [NS_W-1:0] ns_shadow;
  logic          addr_ok;
  localparam int unsigned PIW = (NUM_TRIG > 1) ? $clog2(NUM_TRIG) : 1;
  logic [2:0]     pidx;       // trigger channel addressed by 0x08..0x14
  logic [PIW-1:0] pidx_w;
  assign pidx   = paddr[4:2] - 3'd2;
  assign pidx_w = pidx[PIW-1:0];

  assign wr     = psel && penable && pwrite;
  assign rd     = psel && penable && !pwrite;
  assign pready = 1'b1;

  always_comb begin
    prdata  = '0;
    addr_ok = 1'b1;
    unique casez (paddr)
      8'h00: prdata = 32'(en_o);
      8'h04: prdata = 32'(armed_i);
      8'h08, 8'h0C, 8'h10, 8'h14: begin
        if (32'(pidx) < NUM_TRIG) prdata = 32'(period_ns_o[pidx_w]);
        else addr_ok = 1'b0;
      end
      8'h20: prdata = set_ts_o.sec;
      8'h24: prdata = 32'(set_ts_o.ns);
      8'h28: prdata = '0;
      8'h30: prdata = now_i.sec;
      8'h34: prdata = 32'(ns_shadow);
      8'h38: prdata = {29'd0, imu_tx_ready_i, gps_sec_valid_i, time_valid_i};
      8'h3C: prdata = 32'(pps_err_ns_i);
      8'h40: prdata = gps_sec_i;
      8'h44: prdata = 32'(gps_err_i);
      8'h48: prdata = 32'(imu_err_i);
      8'h4C: prdata = 32'(can_err_i);
      8'h50: prdata = '0;
      default: addr_ok = 1'b0;
    endcase
  end
  assign pslverr = psel && penable && !addr_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_o      <= '0;
      arm_o     <= '0;
      set_o     <= 1'b0;
      set_ts_o  <= '0;
      ns_shadow <= '0;
      imu_tx_data_o  <= '0;
      imu_tx_valid_o <= 1'b0;
      for (int k = 0; k < NUM_TRIG; k++) period_ns_o[k] <= PERIOD_RST[k];
    end else begin
      arm_o <= '0;
      set_o <= 1'b0;
      imu_tx_valid_o <= 1'b0;
      if (rd && paddr == 8'h30) ns_shadow <= now_i.ns;
      if (wr && addr_ok) begin
        unique casez (paddr)
          8'h00: en_o  <= pwdata[NUM_TRIG-1:0];
          8'h04: arm_o <= pwdata[NUM_START-1:0];
          8'h08, 8'h0C, 8'h10, 8'h14:
                 period_ns_o[pidx_w] <= pwdata[NS_W-1:0];
          8'h20: set_ts_o.sec <= pwdata;
          8'h24: set_ts_o.ns  <= pwdata[NS_W-1:0];
          8'h28: set_o <= pwdata[0];
          8'h50: begin
                   imu_tx_data_o  <= pwdata[7:0];
                   imu_tx_valid_o <= imu_tx_ready_i;
                 end
          default: ;
        endcase
      end
    end
  end

  // APB3: the access phase follows a setup phase with the same address
  a_apb_setup: assert property (@(posedge clk) disable iff (!rst_n)
    psel && !penable |=> psel && penable && $stable(paddr) && $stable(pwrite));
endmodule
