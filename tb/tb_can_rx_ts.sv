// tb_can_rx_ts - self-checking test of the CAN (Radar) port.
// A transmitter model in this testbench builds CAN 2.0A frames bit by bit
// (header, data, CRC-15, bit stuffing) and drives them on a wired-AND bus
// with the receiver's ACK output. Checks: every good frame is received with
// its identifier, RTR, DLC, data, and a stamp exactly two clocks after the
// SOF edge; the receiver pulls the ACK slot low for good frames only; frames
// with a CRC error or a stuff error are dropped and counted; extended frames
// are dropped; frames sent with a bit time 2.5 % off either way still decode.
module tb_can_rx_ts;
  import sync_pkg::*;
  localparam int unsigned CPB = 40;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  logic tx_tb = 1, tx_dut, bus;
  ts_t now = '0;
  logic v;
  can_rec_t r;
  logic [15:0] err;

  assign bus = tx_tb & tx_dut;

  can_rx_ts #(.CLKS_PER_BIT(CPB)) dut (
    .clk, .rst_n, .can_rx_i(bus), .can_tx_o(tx_dut), .now_i(now),
    .rec_valid_o(v), .rec_o(r), .err_cnt_o(err));

  always #5 clk = ~clk;
  always @(posedge clk) now.ns <= now.ns + 1'b1;

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  can_rec_t q[$];
  always @(posedge clk) if (v) q.push_back(r);

  // ---------------- frame builder ----------------
  typedef logic bits_t [$];

  function automatic logic [14:0] crc15(bits_t b);
    logic [14:0] c = '0;
    foreach (b[i]) begin
      logic nx = b[i] ^ c[14];
      c = {c[13:0], 1'b0};
      if (nx) c ^= 15'h4599;
    end
    return c;
  endfunction

  // flags: bit0 corrupt CRC, bit1 insert stuff error, bit2 extended (IDE=1)
  task automatic send_frame(input logic [10:0] id, input logic rtr, input logic [3:0] dlc,
                            input logic [63:0] data, input int bt, input int flags,
                            output logic [NS_W-1:0] t_sof, output logic acked);
    bits_t raw, st;
    logic [14:0] crc;
    int nb, same;
    logic last;
    raw.push_back(1'b0);
    for (int i = 10; i >= 0; i--) raw.push_back(id[i]);
    raw.push_back(rtr);
    raw.push_back(flags[2]);      // IDE
    raw.push_back(1'b0);          // r0
    for (int i = 3; i >= 0; i--) raw.push_back(dlc[i]);
    nb = rtr ? 0 : (dlc > 8 ? 8 : dlc);
    for (int B = 0; B < nb; B++)
      for (int i = 7; i >= 0; i--) raw.push_back(data[8*B + i]);
    crc = crc15(raw);
    if (flags[0]) crc[0] = ~crc[0];
    for (int i = 14; i >= 0; i--) raw.push_back(crc[i]);
    // stuffing
    same = 0; last = 1'b1;
    foreach (raw[i]) begin
      st.push_back(raw[i]);
      if (raw[i] == last) same++; else begin same = 1; last = raw[i]; end
      if (same == 5) begin
        st.push_back(flags[1] ? last : ~last);
        if (!flags[1]) begin last = ~last; same = 1; end
        else same++;
      end
    end
    st.push_back(1'b1);                       // CRC delimiter
    // drive
    acked = 1'b0;
    foreach (st[i]) begin
      @(negedge clk); tx_tb = st[i];
      if (i == 0) t_sof = now.ns;
      repeat (bt - 1) @(negedge clk);
    end
    // ACK slot: recessive from us; look at the middle of it
    @(negedge clk); tx_tb = 1'b1;
    repeat (bt / 2) @(negedge clk);
    acked = !bus;
    repeat (bt - bt / 2 - 1) @(negedge clk);
    // ACK delimiter, EOF, intermission
    repeat (11 * bt) @(negedge clk);
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [10:0] id;
    logic [3:0]  dlc;
    logic [63:0] d, dm;
    logic        rtr, ack;
    logic [NS_W-1:0] t;
    int nb, bt, e0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (12 * CPB) @(posedge clk);          // bus idle

    for (int n = 0; n < 40; n++) begin
      id  = 11'($urandom);
      dlc = (n < 9) ? 4'(n) : 4'($urandom);
      rtr = (n % 13 == 12);
      d   = {$urandom, $urandom};
      if (n == 1) begin id = 11'h000; d = '0; end          // long runs of zeros: stuffing
      if (n == 2) begin id = 11'h7FF; d = '1; end          // long runs of ones
      bt  = (n % 3 == 0) ? CPB : (n % 3 == 1) ? CPB + 1 : CPB - 1;
      send_frame(id, rtr, dlc, d, bt, 0, t, ack);
      nb = rtr ? 0 : (dlc > 8 ? 8 : dlc);
      dm = '0;
      for (int B = 0; B < nb; B++) dm[8*B +: 8] = d[8*B +: 8];
      check(ack, $sformatf("frame %0d acknowledged", n));
      check(q.size() == 1, $sformatf("frame %0d received", n));
      if (q.size() == 1) begin
        check(q[0].id == id && q[0].rtr == rtr && q[0].dlc == dlc,
              $sformatf("frame %0d header: id %03h/%03h dlc %0d/%0d", n, id, q[0].id, dlc, q[0].dlc));
        check(q[0].data == dm, $sformatf("frame %0d data", n));
        check(q[0].ts.ns == t + 2, $sformatf("frame %0d stamp %0d, got %0d", n, t + 2, q[0].ts.ns));
      end
      q.delete();
    end
    check(err == 0, "no errors on good frames");

    // CRC error: no ACK, no record, counted
    e0 = err;
    send_frame(11'h123, 1'b0, 4'd4, 64'h0000_0000_DEAD_BEEF, CPB, 1, t, ack);
    check(!ack && q.size() == 0 && err == e0 + 1, "CRC error: no ACK, dropped, counted");
    // stuff error
    send_frame(11'h000, 1'b0, 4'd1, 64'h0, CPB, 2, t, ack);
    repeat (12 * CPB) @(posedge clk);
    check(!ack && q.size() == 0 && err == e0 + 2, "stuff error: dropped, counted");
    // extended frame is ignored
    send_frame(11'h555, 1'b0, 4'd2, 64'h1234, CPB, 4, t, ack);
    check(!ack && q.size() == 0 && err == e0 + 2, "extended frame ignored");
    // and a good frame again
    send_frame(11'h2A5, 1'b0, 4'd8, 64'h0123_4567_89AB_CDEF, CPB, 0, t, ack);
    check(ack && q.size() == 1 && q[0].id == 11'h2A5 && q[0].data == 64'h0123_4567_89AB_CDEF,
          "recovers after errors");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
