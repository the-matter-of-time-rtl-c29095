// tb_mipi_ts - self-checking test of the camera frame stamper.
// Sends frames of random size as an AXI4-Stream (start-of-frame on the first
// beat, tlast at each line end) with random input gaps and random output
// back-pressure. Checks that every frame leaves as one header beat carrying
// the timer value of the clock its start-of-frame beat first became valid,
// followed by all pixel beats unchanged and in order; that the stamp record
// and frame number match; and that the header costs exactly one clock.
module tb_mipi_ts;
  import sync_pkg::*;
  localparam int unsigned W = 64;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  ts_t now = '0;
  logic [W-1:0] s_tdata = '0, m_tdata;
  logic s_tuser = 0, s_tlast = 0, s_tvalid = 0, s_tready;
  logic [1:0] m_tuser;
  logic m_tlast, m_tvalid, m_tready = 0;
  logic rv;
  cam_rec_t rec;

  mipi_ts #(.DATA_W(W)) dut (
    .clk, .rst_n, .now_i(now),
    .s_tdata, .s_tuser, .s_tlast, .s_tvalid, .s_tready,
    .m_tdata, .m_tuser, .m_tlast, .m_tvalid, .m_tready,
    .rec_valid_o(rv), .rec_o(rec));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    now.ns <= now.ns + 1'b1;
    if (now.ns == 30'd999_999_999) begin now.ns <= '0; now.sec <= now.sec + 1'b1; end
  end

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  typedef struct packed { logic [W-1:0] d; logic [1:0] u; logic l; } beat_t;
  beat_t exp_q[$];
  cam_rec_t rec_q[$];
  int out_beats = 0, mism = 0, recs = 0, bad_rec = 0;
  logic bp_on = 1;

  // output side: random ready, compare with expected
  always @(negedge clk) m_tready <= bp_on ? ($urandom % 4 != 0) : 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin
      out_beats++;
      checks++;
      if (exp_q.size() == 0) mism++;
      else begin
        beat_t e;
        e = exp_q.pop_front();
        if (e.d != m_tdata || e.u != m_tuser || e.l != m_tlast) begin
          mism++;
          if (mism < 5) $display("mismatch: exp %h/%b/%b got %h/%b/%b", e.d, e.u, e.l, m_tdata, m_tuser, m_tlast);
        end
      end
    end
    if (rv) begin
      recs++;
      checks++;
      if (rec_q.size() == 0 || rec_q[0] != rec) bad_rec++;
      if (rec_q.size() != 0) void'(rec_q.pop_front());
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lines, ppl, beats_in = 0, t0, t1;
    cam_rec_t cr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      lines = 1 + $urandom % 6;
      ppl   = 1 + $urandom % 9;
      for (int y = 0; y < lines; y++)
        for (int x = 0; x < ppl; x++) begin
          @(negedge clk);
          while ($urandom % 3 == 0) begin s_tvalid = 0; @(negedge clk); end
          s_tvalid = 1;
          s_tdata  = {$urandom, $urandom};
          s_tuser  = (x == 0 && y == 0);
          s_tlast  = (x == ppl - 1);
          if (s_tuser) begin
            cr.ts = now; cr.frame_no = 32'(f);
            rec_q.push_back(cr);
            exp_q.push_back('{d: W'(now), u: 2'b10, l: 1'b0});
          end
          exp_q.push_back('{d: s_tdata, u: {1'b0, s_tuser}, l: s_tlast});
          beats_in++;
          @(posedge clk);
          while (!s_tready) @(posedge clk);
        end
      @(negedge clk); s_tvalid = 0;
    end
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, "all beats delivered");
    check(mism == 0, $sformatf("output stream matches (%0d mismatches)", mism));
    check(out_beats == beats_in + 20, "one header beat per frame");
    check(recs == 20 && bad_rec == 0, $sformatf("stamp records %0d, bad %0d", recs, bad_rec));

    // throughput: a 16-beat frame with no stalls takes 17 clocks at the output
    bp_on = 0;
    repeat (3) @(posedge clk);
    t0 = out_beats;
    @(negedge clk);
    for (int x = 0; x < 16; x++) begin
      s_tvalid = 1; s_tdata = W'(x); s_tuser = (x == 0); s_tlast = (x == 15);
      if (x == 0) begin
        cr.ts = now; cr.frame_no = 32'd20; rec_q.push_back(cr);
        exp_q.push_back('{d: W'(now), u: 2'b10, l: 1'b0});
      end
      exp_q.push_back('{d: s_tdata, u: {1'b0, s_tuser}, l: s_tlast});
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      @(negedge clk);
    end
    s_tvalid = 0;
    t1 = out_beats;
    check(t1 - t0 == 17, $sformatf("16 beats + header in 17 clocks, got %0d", t1 - t0));
    repeat (5) @(posedge clk);
    check(mism == 0 && exp_q.size() == 0 && bad_rec == 0, "back-to-back frame intact");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
