// can_rx_ts - CAN interface for the Radar, with timestamping at the interface
// ("CAN Interf. & Timer").
//
// The Radar runs on its own clock and sends its detections as CAN frames. This
// block receives the frames from the bus and packs each with the value of the
// machine timer at the falling edge of its start-of-frame bit, so the stamp is
// taken where the data enters the chip.
//
// How it works. The bus line is synchronized by two flops. After reset the
// receiver waits until the bus has been recessive for 11 bit times. A falling
// edge on the idle bus is a start of frame: the timer value is latched and bit
// timing starts. Every recessive-to-dominant edge in a frame re-aligns the bit
// phase to zero (hard resynchronization on every edge, a simplification of
// CAN's limited resynchronization jump); a bit is sampled SAMPLE_CYC clocks into
// it. Stuff bits (one after five equal bits, SOF through CRC) are removed and
// checked. The destuffed header (SOF, 11-bit identifier, RTR, IDE, r0, DLC),
// the data bytes and the 15-bit CRC are parsed; the CRC-15 (polynomial 0x4599)
// is computed over SOF to the end of data and compared. On a good CRC the block
// drives the ACK slot dominant on can_tx_o for one bit time. After the ACK
// delimiter and the seven end-of-frame bits, a good frame is presented on rec_o
// with a one-clock rec_valid_o. A stuff, form or CRC error, or an extended
// (29-bit identifier) frame, drops the frame, counts in err_cnt_o (errors
// only), and the receiver waits for the bus to be idle again.
// The block never transmits anything but the ACK bit: it sends no error
// frames and keeps no error counters in the CAN sense.
//
// Timing: the stamp is the timer value two clocks after the SOF edge reaches the pin
// (synchronizer); the fixed offset is left for software. CLKS_PER_BIT = clock
// frequency / bit rate.
//
// From the paper: Radar frames arrive over CAN and are timestamped at the CAN
// interface in the fabric (Table 2, Fig. 7). Everything about the CAN framing
// follows the CAN 2.0A standard; the bit rate, sample point, listen-and-ACK
// behaviour and record layout are this design's choices.
module can_rx_ts
  import sync_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 200,                   // 100 MHz / 500 kbit/s
  parameter int unsigned SAMPLE_CYC   = CLKS_PER_BIT * 7 / 10  // 70 % sample point
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        can_rx_i,
  output logic        can_tx_o,
  input  ts_t         now_i,
  output logic        rec_valid_o,
  output can_rec_t    rec_o,
  output logic [15:0] err_cnt_o
);
  localparam int unsigned PHW  = $clog2(CLKS_PER_BIT);
  localparam int unsigned IDLE_CYC = 11 * CLKS_PER_BIT;
  localparam int unsigned IW   = $clog2(IDLE_CYC + 1);
  localparam logic [14:0] CRC_POLY = 15'h4599;

  initial assert (SAMPLE_CYC > 3 && SAMPLE_CYC < CLKS_PER_BIT - 1)
    else $error("SAMPLE_CYC must lie inside the bit");

  typedef enum logic [1:0] {S_WAIT_IDLE, S_IDLE, S_FRAME} state_t;
  typedef enum logic [2:0] {F_HDR, F_DATA, F_CRC, F_CRCDEL, F_ACK, F_ACKDEL, F_EOF} field_t;

  state_t         state;
  field_t         field;
  logic [2:0]     sync;
  logic           rx_s, fall;
  logic [PHW-1:0] phase;
  logic [IW-1:0]  idle_cnt;
  logic           sample;

  logic [2:0]     stuff_cnt;
  logic           last_bit;
  logic [6:0]     pos;          // bit position within the current field
  logic [14:0]    crc_calc, crc_rx;
  logic [6:0]     data_bits;    // number of data bits in this frame
  logic           ack_on;

  assign rx_s   = sync[1];
  assign fall   = sync[2] & ~sync[1];
  assign sample = (phase == PHW'(SAMPLE_CYC));
  assign can_tx_o = ~ack_on;

  // destuffing, evaluated at the sample point
  logic stuff_active, is_stuff;
  assign stuff_active = (field == F_HDR) || (field == F_DATA) || (field == F_CRC) ||
                        (field == F_CRCDEL);
  assign is_stuff     = stuff_active && (stuff_cnt == 3'd5);

  logic [14:0] crc_next;
  always_comb begin
    crc_next = {crc_calc[13:0], 1'b0};
    if (rx_s ^ crc_calc[14]) crc_next = crc_next ^ CRC_POLY;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync        <= '1;
      state       <= S_WAIT_IDLE;
      field       <= F_HDR;
      phase       <= '0;
      idle_cnt    <= '0;
      stuff_cnt   <= '0;
      last_bit    <= 1'b1;
      pos         <= '0;
      crc_calc    <= '0;
      crc_rx      <= '0;
      data_bits   <= '0;
      ack_on      <= 1'b0;
      rec_valid_o <= 1'b0;
      rec_o       <= '0;
      err_cnt_o   <= '0;
    end else begin
      sync        <= {sync[1:0], can_rx_i};
      rec_valid_o <= 1'b0;

      // bit phase: hard resync on every falling edge
      if (fall) phase <= '0;
      else      phase <= (phase == PHW'(CLKS_PER_BIT - 1)) ? '0 : phase + 1'b1;

      unique case (state)
        S_WAIT_IDLE: begin
          ack_on <= 1'b0;
          if (!rx_s) idle_cnt <= '0;
          else if (idle_cnt == IW'(IDLE_CYC)) state <= S_IDLE;
          else idle_cnt <= idle_cnt + 1'b1;
        end

        S_IDLE: begin
          if (fall) begin
            state     <= S_FRAME;
            field     <= F_HDR;
            pos       <= '0;
            stuff_cnt <= '0;
            last_bit  <= 1'b1;
            crc_calc  <= '0;
            rec_o     <= '0;
            rec_o.ts  <= now_i;
          end
        end

        S_FRAME: begin
          // ACK slot: dominant for the bit after the CRC delimiter
          if (field == F_ACK && phase == PHW'(CLKS_PER_BIT - 1) && !ack_on && pos == 0)
            ack_on <= 1'b1;
          if (sample) begin
            if (is_stuff) begin
              if (rx_s == last_bit) begin     // stuff error
                state     <= S_WAIT_IDLE;
                idle_cnt  <= '0;
                err_cnt_o <= err_cnt_o + 1'b1;
              end
              last_bit  <= rx_s;
              stuff_cnt <= 3'd1;
            end else begin
              if (stuff_active) begin
                if (rx_s == last_bit) stuff_cnt <= stuff_cnt + 1'b1;
                else                  stuff_cnt <= 3'd1;
                last_bit <= rx_s;
              end
              pos <= pos + 1'b1;
              unique case (field)
                F_HDR: begin
                  crc_calc <= crc_next;
                  if (pos >= 7'd1 && pos <= 7'd11) rec_o.id  <= {rec_o.id[9:0], rx_s};
                  if (pos == 7'd12)                rec_o.rtr <= rx_s;
                  if (pos >= 7'd15)                rec_o.dlc <= {rec_o.dlc[2:0], rx_s};
                  if ((pos == 7'd0 && rx_s) || (pos == 7'd13 && rx_s)) begin
                    // not a start bit, or an extended frame: drop it
                    state    <= S_WAIT_IDLE;
                    idle_cnt <= '0;
                  end
                  if (pos == 7'd18) begin
                    pos <= '0;
                    // DLC above 8 still means 8 bytes
                    if (rec_o.rtr) data_bits <= '0;
                    else if (rec_o.dlc[2] | rec_o.dlc[1] | rec_o.dlc[0] | rx_s)
                      data_bits <= {rec_o.dlc[2:0], rx_s} > 4'd8 ? 7'd64
                                 : 7'({rec_o.dlc[2:0], rx_s}) << 3;
                    else data_bits <= '0;
                    if (rec_o.rtr || {rec_o.dlc[2:0], rx_s} == 4'd0) field <= F_CRC;
                    else                                             field <= F_DATA;
                  end
                end
                F_DATA: begin
                  crc_calc <= crc_next;
                  // byte i of the frame goes to bits [8i+7:8i], MSB first on the bus
                  rec_o.data[{pos[5:3], 3'd7 - pos[2:0]}] <= rx_s;
                  if (pos == data_bits - 1'b1) begin
                    pos   <= '0;
                    field <= F_CRC;
                  end
                end
                F_CRC: begin
                  crc_rx <= {crc_rx[13:0], rx_s};
                  if (pos == 7'd14) begin
                    pos   <= '0;
                    field <= F_CRCDEL;
                  end
                end
                F_CRCDEL: begin
                  pos <= '0;
                  if (!rx_s) begin                       // form error
                    state     <= S_WAIT_IDLE;
                    idle_cnt  <= '0;
                    err_cnt_o <= err_cnt_o + 1'b1;
                  end else if (crc_rx != crc_calc) begin // CRC error: no ACK
                    state     <= S_WAIT_IDLE;
                    idle_cnt  <= '0;
                    err_cnt_o <= err_cnt_o + 1'b1;
                  end else begin
                    field <= F_ACK;
                  end
                end
                F_ACK: begin
                  pos    <= '0;
                  field  <= F_ACKDEL;
                end
                F_ACKDEL: begin
                  ack_on <= 1'b0;
                  pos    <= '0;
                  field  <= F_EOF;
                  if (!rx_s) begin
                    state     <= S_WAIT_IDLE;
                    idle_cnt  <= '0;
                    err_cnt_o <= err_cnt_o + 1'b1;
                  end
                end
                F_EOF: begin
                  if (!rx_s) begin
                    state     <= S_WAIT_IDLE;
                    idle_cnt  <= '0;
                    err_cnt_o <= err_cnt_o + 1'b1;
                  end else if (pos == 7'd6) begin
                    rec_valid_o <= 1'b1;
                    state       <= S_IDLE;
                  end
                end
                default: ;
              endcase
            end
          end
          // the ACK bit ends at the next bit boundary after its sample
          if (ack_on && field == F_ACKDEL && phase == PHW'(CLKS_PER_BIT - 1))
            ack_on <= 1'b0;
        end

        default: state <= S_WAIT_IDLE;
      endcase
    end
  end
endmodule
