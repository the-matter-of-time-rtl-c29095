// trigger_timer - the machine's common timer and the sensor trigger generator
// ("Trigger and timer" unit).
//
// Timer. One counter holds global time as {seconds, nanoseconds} and advances
// by NS_INC = 1e9 / CLK_HZ nanoseconds every clock. It is the single time base
// of the machine: every trigger pulse below and every timestamp taken at the
// sensor interfaces is read from it, so all of them agree to the clock cycle.
// It is disciplined to global time in two ways:
//   * GPS: on each PPS pulse the nanoseconds are set to PPS_LAT_CYC*NS_INC
//     (the PPS synchronizer latency added back) and the seconds to the value
//     the GPS time message announced for that edge. If no message came, the
//     seconds are rounded to the nearest second instead (the PPS alone still
//     fixes the phase). pps_err_ns_o keeps the timer's own reading of the
//     last PPS edge, in nanoseconds within the second: 0 when the timer was
//     in step, a small number when it ran fast, close to 1e9 when it ran
//     slow, so software can watch the drift.
//   * Software (the Arm cores running PTP or a manual set): set_i loads
//     set_ts_i at once.
// time_valid_o rises after the first GPS load with a message, or a software set.
//
// Trigger channels (cameras, IMUs). NUM_TRIG periodic channels. Channel k,
// when enabled, fires at every instant of the second that is a whole multiple
// of period_ns_i[k] counted from the start of the second, so a channel always
// fires at the second boundary itself. Because every machine's timer starts
// its seconds at the same GPS PPS edge, channels with the same period fire at
// the same moment on every machine, and channels whose rates divide each other
// fire together within one machine. A channel that is enabled, or whose timer
// was set by software, first waits for the next second boundary, so it never
// starts off the grid. Each firing gives a one-clock fire_o[k] pulse and a
// trig_o[k] pulse PULSE_CYC clocks wide to the sensor.
//
// Start channels (LiDAR, Radar: sensors that run on their own once started).
// A one-clock arm_i[k] pulse makes start_o[k] give one PULSE_CYC-wide pulse at
// the next second boundary, the same instant the periodic channels fire, so the
// free-running sensors start in step with the triggered ones.
//
// Timing: now_o and sec_start_o are registered; sec_start_o is high in the
// first clock of each new second. fire_o/trig_o/start_o rise one clock after
// the clock in which now_o shows the firing instant. At a PPS that finds the
// timer slow (past half a second), the boundary firing comes PPS_LAT_CYC
// clocks after the true edge, once.
//
// From the paper: a shared timer synchronized to GPS time, periodic hardware
// trigger pulses for cameras and IMUs, start signals for LiDAR and Radar,
// divisible rates. This design's choices: the time format, alignment of the
// trigger grid to the second boundary, the PPS handling, the pulse width.
module trigger_timer
  import sync_pkg::*;
#(
  parameter int unsigned CLK_HZ      = 100_000_000,
  parameter int unsigned NUM_TRIG    = 2,
  parameter int unsigned NUM_START   = 2,
  parameter int unsigned PULSE_CYC   = 1000,
  parameter int unsigned PPS_LAT_CYC = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // global time from the GPS port
  input  logic                 pps_i,
  input  logic [SEC_W-1:0]     next_sec_i,
  input  logic                 next_sec_valid_i,
  // software set
  input  logic                 set_i,
  input  ts_t                  set_ts_i,
  // time out
  output ts_t                  now_o,
  output logic                 sec_start_o,
  output logic                 time_valid_o,
  output logic [NS_W-1:0]      pps_err_ns_o,
  // periodic trigger channels
  input  logic [NUM_TRIG-1:0]  en_i,
  input  logic [NS_W-1:0]      period_ns_i [NUM_TRIG],
  output logic [NUM_TRIG-1:0]  fire_o,
  output logic [NUM_TRIG-1:0]  trig_o,
  // start channels
  input  logic [NUM_START-1:0] arm_i,
  output logic [NUM_START-1:0] armed_o,
  output logic [NUM_START-1:0] start_o
);
  localparam int unsigned NS_INC = NS_PER_SEC / CLK_HZ;
  localparam int unsigned HALF   = NS_PER_SEC / 2;
  localparam int unsigned PW     = $clog2(PULSE_CYC + 1);

  initial begin
    assert (NS_PER_SEC % CLK_HZ == 0)
      else $error("CLK_HZ must divide 1e9 so that a second is a whole number of clocks");
    assert (PULSE_CYC >= 1) else $error("PULSE_CYC must be at least 1");
  end

  // ------------------------------------------------------------------ timer
  ts_t  now_n;
  logic sec_start_n;
  logic [NS_W:0] ns_sum;

  assign ns_sum = {1'b0, now_o.ns} + (NS_W+1)'(NS_INC);

  // free-running reading of this clock edge, and of the PPS edge behind it
  localparam int unsigned PPS_LAT_NS = PPS_LAT_CYC * NS_INC;
  logic [NS_W-1:0] ns_free, pps_phase;
  assign ns_free   = (ns_sum >= (NS_W+1)'(NS_PER_SEC)) ? NS_W'(ns_sum - (NS_W+1)'(NS_PER_SEC))
                                                        : ns_sum[NS_W-1:0];
  assign pps_phase = (ns_free >= NS_W'(PPS_LAT_NS)) ? ns_free - NS_W'(PPS_LAT_NS)
                                                    : ns_free + NS_W'(NS_PER_SEC - PPS_LAT_NS);

  always_comb begin
    now_n       = now_o;
    sec_start_n = 1'b0;
    if (set_i) begin
      now_n = set_ts_i;
    end else if (pps_i) begin
      now_n.ns = NS_W'(PPS_LAT_NS);
      if (next_sec_valid_i)            now_n.sec = next_sec_i;
      else if (now_o.ns >= NS_W'(HALF)) now_n.sec = now_o.sec + 1'b1;
      sec_start_n = (now_n.sec != now_o.sec);
    end else if (ns_sum >= (NS_W+1)'(NS_PER_SEC)) begin
      now_n.ns    = ns_free;
      now_n.sec   = now_o.sec + 1'b1;
      sec_start_n = 1'b1;
    end else begin
      now_n.ns = ns_free;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now_o        <= '0;
      sec_start_o  <= 1'b0;
      time_valid_o <= 1'b0;
      pps_err_ns_o <= '0;
    end else begin
      now_o       <= now_n;
      sec_start_o <= sec_start_n;
      if (set_i || (pps_i && next_sec_valid_i)) time_valid_o <= 1'b1;
      if (pps_i && !set_i) pps_err_ns_o <= pps_phase;
    end
  end

  // A software set moves the timer off the trigger grid: channels wait for
  // the next second boundary. set_q marks the clock in which the set value
  // shows on now_o.
  logic set_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) set_q <= 1'b0;
    else        set_q <= set_i;
  end

  // --------------------------------------------------------- trigger channels
  for (genvar k = 0; k < NUM_TRIG; k++) begin : g_trig
    logic [NS_W:0]  next_ns;     // next firing instant within the second
    logic [NS_W:0]  eff_next;
    logic           waiting;     // waiting for a second boundary
    logic           due;
    logic [PW-1:0]  hi_cnt;

    assign eff_next = sec_start_o ? '0 : next_ns;
    assign due = en_i[k] && (period_ns_i[k] != '0) && !set_q &&
                 (sec_start_o || !waiting) && ({1'b0, now_o.ns} >= eff_next);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        next_ns   <= '0;
        waiting   <= 1'b1;
        hi_cnt    <= '0;
        fire_o[k] <= 1'b0;
      end else begin
        fire_o[k] <= due;
        if (due) begin
          next_ns <= eff_next + {1'b0, period_ns_i[k]};
          waiting <= 1'b0;
          hi_cnt  <= PW'(PULSE_CYC);
        end else if (hi_cnt != '0) begin
          hi_cnt  <= hi_cnt - 1'b1;
        end
        if (!en_i[k] || set_q) waiting <= 1'b1;
      end
    end
    assign trig_o[k] = (hi_cnt != '0);
  end

  // ----------------------------------------------------------- start channels
  for (genvar k = 0; k < NUM_START; k++) begin : g_start
    logic [PW-1:0] hi_cnt;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        armed_o[k] <= 1'b0;
        hi_cnt     <= '0;
      end else begin
        if (arm_i[k]) armed_o[k] <= 1'b1;
        if (sec_start_o && armed_o[k] && !set_q) begin
          armed_o[k] <= 1'b0;
          hi_cnt     <= PW'(PULSE_CYC);
        end else if (hi_cnt != '0) begin
          hi_cnt <= hi_cnt - 1'b1;
        end
      end
    end
    assign start_o[k] = (hi_cnt != '0);
  end
endmodule
