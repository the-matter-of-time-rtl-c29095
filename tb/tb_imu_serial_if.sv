// tb_imu_serial_if - self-checking test of the IMU serial port.
// Sends bursts of random length and content, each byte with a random short
// pause, and checks every record: its length, bytes and a timestamp exactly
// three clocks after the first start bit fell (the tb counts time in clocks).
// Also checks splitting at IMU_MAX_BYTES, a framing error, and a second
// instance that frames by fixed length (PKT_BYTES = 4) on back-to-back bytes.
// In parallel, the command direction: random bytes, some back to back, some
// offered while the transmitter is busy (must be ignored), are decoded from
// the transmit line at every clock, so each bit must last exactly one bit
// time and each start bit must begin one clock after its byte was taken.
module tb_imu_serial_if;
  import sync_pkg::*;
  localparam int unsigned CPB = 16;
  localparam int unsigned GAP = 20;

  logic clk = 0, rst_n = 1, rx = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  ts_t now = '0;
  logic v1, v2;
  imu_rec_t r1, r2;
  logic [15:0] e1, e2;
  logic [7:0] txd = 8'h00;
  logic txv = 0, txr1, txr2, utx1, utx2;

  imu_serial_if #(.CLKS_PER_BIT(CPB), .PKT_BYTES(0), .GAP_BITS(GAP)) dut (
    .clk, .rst_n, .uart_rx_i(rx), .now_i(now), .rec_valid_o(v1), .rec_o(r1), .err_cnt_o(e1),
    .tx_data_i(txd), .tx_valid_i(txv), .tx_ready_o(txr1), .uart_tx_o(utx1));
  imu_serial_if #(.CLKS_PER_BIT(CPB), .PKT_BYTES(4), .GAP_BITS(GAP)) dut4 (
    .clk, .rst_n, .uart_rx_i(rx), .now_i(now), .rec_valid_o(v2), .rec_o(r2), .err_cnt_o(e2),
    .tx_data_i(8'h00), .tx_valid_i(1'b0), .tx_ready_o(txr2), .uart_tx_o(utx2));

  always #5 clk = ~clk;
  always @(posedge clk) now.ns <= now.ns + 1'b1;   // one "ns" per clock

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // captured records
  imu_rec_t q1[$], q2[$];
  always @(posedge clk) begin
    if (v1) q1.push_back(r1);
    if (v2) q2.push_back(r2);
  end

  // ---- command direction: acceptance log and line decoder, all at negedge
  localparam int unsigned TX_N = 24;
  int ncyc = 0, tx_pos = -1, tx_done = 0, tx_bad = 0, tx_late = 0, tx_idle2 = 0;
  logic [9:0] tx_frame = '1;
  int acc_cyc[$];
  logic [7:0] acc_dat[$];
  always @(negedge clk) begin
    ncyc++;
    if (rst_n && txv && txr1) begin acc_cyc.push_back(ncyc); acc_dat.push_back(txd); end
    if (rst_n && !utx2) tx_idle2++;
    if (tx_pos < 0 && rst_n && !utx1) begin
      if (acc_cyc.size() == 0) tx_late++;
      else begin
        if (ncyc != acc_cyc[0] + 1) tx_late++;
        tx_frame = {1'b1, acc_dat[0], 1'b0};
        void'(acc_cyc.pop_front());
        void'(acc_dat.pop_front());
      end
      tx_pos = 0;
    end
    if (tx_pos >= 0) begin
      if (utx1 != tx_frame[tx_pos / CPB]) tx_bad++;
      tx_pos++;
      if (tx_pos == 10 * CPB) begin tx_pos = -1; tx_done++; end
    end
  end

  task automatic tx_send(input logic [7:0] b);
    txd = b; txv = 1;
    forever begin @(negedge clk); if (txr1) break; end
    @(posedge clk); #1;
  endtask

  initial begin : tx_drv
    @(posedge rst_n);
    repeat (10) @(posedge clk);
    #1;
    for (int i = 0; i < TX_N; i++) begin
      tx_send(8'($urandom));
      if (i % 4 != 1) begin              // i % 4 == 1: next byte back to back
        txv = 0;
        repeat ($urandom % (12 * CPB)) @(posedge clk);
        #1;
        if (i % 5 == 2 && !txr1) begin   // a byte offered while busy is ignored
          txd = 8'hEE; txv = 1;
          @(posedge clk); #1;
          txv = 0;
        end
      end
    end
    txv = 0;
  end

  // send one byte; returns the time value at the falling start edge
  task automatic send_byte(input logic [7:0] b, output logic [NS_W-1:0] t, input logic stop = 1);
    @(negedge clk); rx = 0; t = now.ns;
    repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(negedge clk); end
    rx = stop; repeat (CPB) @(negedge clk);
    rx = 1;
  endtask

  task automatic idle(input int bits);
    repeat (bits * CPB) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NS_W-1:0] t, t0;
    logic [7:0] bytes [64];
    int n;
    imu_rec_t r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    idle(30);

    // ---- random bursts, gap framing
    for (int p = 0; p < 12; p++) begin
      n = (p == 0) ? 1 : (p == 1) ? 32 : 1 + ($urandom % 31);
      for (int i = 0; i < n; i++) begin
        bytes[i] = 8'($urandom);
        send_byte(bytes[i], t);
        if (i == 0) t0 = t;
        repeat ($urandom % (3 * CPB)) @(negedge clk);   // pause below the gap
      end
      idle(GAP + 15);
      check(q1.size() == 1, $sformatf("burst %0d gives one record, got %0d", p, q1.size()));
      if (q1.size() >= 1) begin
        r = q1.pop_front();
        check(r.len == 6'(n), $sformatf("burst %0d length %0d, got %0d", p, n, r.len));
        check(r.ts.ns == t0 + 3, $sformatf("burst %0d stamp %0d, got %0d", p, t0 + 3, r.ts.ns));
        for (int i = 0; i < n; i++)
          check(r.data[8*i +: 8] == bytes[i], $sformatf("burst %0d byte %0d", p, i));
      end
      q1.delete();
      q2.delete();
    end

    // ---- 40 back-to-back bytes split at 32
    for (int i = 0; i < 40; i++) begin
      bytes[i] = 8'(i * 7 + 1);
      send_byte(bytes[i], t);
      if (i == 0) t0 = t;
    end
    idle(GAP + 15);
    check(q1.size() == 2, "40 bytes give two records");
    if (q1.size() == 2) begin
      check(q1[0].len == 32 && q1[1].len == 8, "split 32 + 8");
      check(q1[0].ts.ns == t0 + 3, "first part stamp");
      check(q1[1].data[7:0] == bytes[32], "second part starts at byte 32");
    end
    // fixed-length instance: 10 records of 4
    check(q2.size() == 10, $sformatf("fixed length: 10 records, got %0d", q2.size()));
    if (q2.size() == 10)
      for (int k = 0; k < 10; k++)
        check(q2[k].len == 4 && q2[k].data[31:0] ==
              {bytes[4*k+3], bytes[4*k+2], bytes[4*k+1], bytes[4*k]}, $sformatf("fixed record %0d", k));
    q1.delete(); q2.delete();

    // ---- framing error drops the sample
    send_byte(8'h55, t);
    send_byte(8'hAA, t, 1'b0);
    idle(GAP + 15);
    check(e1 == 1 && q1.size() == 0, "bad stop bit: sample dropped and counted");
    // and the port recovers
    send_byte(8'h3C, t);
    idle(GAP + 15);
    check(q1.size() == 1 && q1[0].len == 1 && q1[0].data[7:0] == 8'h3C && q1[0].ts.ns == t + 3,
          "recovers after an error");

    // command direction
    check(tx_done == TX_N, $sformatf("tx: %0d bytes sent, expected %0d", tx_done, TX_N));
    check(tx_bad == 0, $sformatf("tx: %0d line samples wrong", tx_bad));
    check(tx_late == 0, $sformatf("tx: %0d start bits not one clock after the byte was taken", tx_late));
    check(acc_cyc.size() == 0, "tx: every byte taken was sent");
    check(tx_idle2 == 0, "tx: unused transmitter keeps the line idle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
