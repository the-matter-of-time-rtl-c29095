// mipi_ts - camera frame timestamping at the MIPI interface.
//
// The MIPI CSI-2 receiver (a vendor IP core, not part of this RTL) delivers
// camera frames as an AXI4-Stream video stream: tuser[0] marks the first beat
// of a frame (start of frame), tlast the last beat of each line. This block
// sits right behind that core. When the first beat of a frame shows up on the
// input, it latches the machine timer and holds the frame back for one beat
// while it inserts a header beat carrying the stamp; the frame then passes
// unchanged. Downstream (DMA to memory) thus gets every frame with its time
// packed in front of it.
//
// Output stream: m_tuser[1] = 1 marks the header beat, whose m_tdata holds
// {seconds, nanoseconds} right-aligned and zero-extended;
// m_tuser[0] is the frame-start flag of the first pixel beat as received.
// For the Arm cores the same stamp also goes out on rec_o with a one-clock
// rec_valid_o.
//
// Timing: the stamp is the timer value in the first clock the start-of-frame
// beat is valid at the input. The header costs one clock per frame; no other
// bubbles. The AXI4-Stream rules (valid held and data stable until ready) are
// checked by assertions on both sides.
//
// From the paper: camera frames are timestamped and packed at the MIPI
// interface, and the MIPI interface itself is a vendor IP core. The header
// beat format and the frame counter are this design's choices.
module mipi_ts
  import sync_pkg::*;
#(
  parameter int unsigned DATA_W = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ts_t               now_i,
  // from the CSI-2 receiver
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tuser,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  // to the frame writer
  output logic [DATA_W-1:0] m_tdata,
  output logic [1:0]        m_tuser,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready,
  // stamp record for software
  output logic              rec_valid_o,
  output cam_rec_t          rec_o
);
  initial assert (DATA_W >= $bits(ts_t)) else $error("DATA_W must hold a timestamp");

  typedef enum logic [1:0] {S_PASS, S_HDR} state_t;
  state_t      state;
  logic        hdr_sent;      // header of the frame at the input already sent
  logic [31:0] frame_no;
  logic        sof_wait;

  assign sof_wait = (state == S_PASS) && s_tvalid && s_tuser && !hdr_sent;

  always_comb begin
    if (state == S_HDR) begin
      m_tvalid = 1'b1;
      m_tdata  = DATA_W'(rec_o.ts);
      m_tuser  = 2'b10;
      m_tlast  = 1'b0;
      s_tready = 1'b0;
    end else begin
      m_tvalid = s_tvalid && !sof_wait;
      m_tdata  = s_tdata;
      m_tuser  = {1'b0, s_tuser};
      m_tlast  = s_tlast;
      s_tready = m_tready && !sof_wait;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_PASS;
      hdr_sent    <= 1'b0;
      frame_no    <= '0;
      rec_valid_o <= 1'b0;
      rec_o       <= '0;
    end else begin
      rec_valid_o <= 1'b0;
      unique case (state)
        S_PASS: begin
          if (sof_wait) begin
            rec_o.ts       <= now_i;
            rec_o.frame_no <= frame_no;
            frame_no       <= frame_no + 1'b1;
            rec_valid_o    <= 1'b1;
            state          <= S_HDR;
          end else if (s_tvalid && s_tready && s_tuser) begin
            hdr_sent <= 1'b0;        // start-of-frame beat has passed
          end
        end
        S_HDR: begin
          if (m_tready) begin
            hdr_sent <= 1'b1;
            state    <= S_PASS;
          end
        end
        default: state <= S_PASS;
      endcase
    end
  end

  // AXI4-Stream handshake rules
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_tvalid && !s_tready |=> s_tvalid && $stable(s_tdata) && $stable(s_tuser) && $stable(s_tlast));
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tuser) && $stable(m_tlast));
endmodule
