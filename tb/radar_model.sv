// radar_model - behavioural model of an internally triggered Radar on a CAN
// bus, for testbenches. After the first rising edge of start it sends one
// standard data frame every PERIOD clocks (identifier 0x200 + n mod 256,
// 8 bytes, data = n replicated), with CRC-15 and bit stuffing, at CPB clocks
// per bit. It leaves the ACK slot recessive and counts frames that someone
// acknowledged. The bus is wired-AND: bus = tx & (other nodes).
module radar_model #(
  parameter int unsigned CPB    = 20,
  parameter int unsigned PERIOD = 5_000
) (
  input  logic clk,
  input  logic start,
  input  logic bus,
  output logic tx,
  output int   frames,
  output int   acks
);
  initial begin tx = 1'b1; frames = 0; acks = 0; end

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

  task automatic send(input logic [10:0] id, input logic [63:0] data);
    bits_t raw, st;
    logic [14:0] crc;
    int same;
    logic last;
    raw.push_back(1'b0);
    for (int i = 10; i >= 0; i--) raw.push_back(id[i]);
    raw.push_back(1'b0); raw.push_back(1'b0); raw.push_back(1'b0);   // RTR, IDE, r0
    for (int i = 3; i >= 0; i--) raw.push_back(4'd8 >> i);
    for (int B = 0; B < 8; B++) for (int i = 7; i >= 0; i--) raw.push_back(data[8*B + i]);
    crc = crc15(raw);
    for (int i = 14; i >= 0; i--) raw.push_back(crc[i]);
    same = 0; last = 1'b1;
    foreach (raw[i]) begin
      st.push_back(raw[i]);
      if (raw[i] == last) same++; else begin same = 1; last = raw[i]; end
      if (same == 5) begin st.push_back(~last); last = ~last; same = 1; end
    end
    st.push_back(1'b1);
    foreach (st[i]) begin tx = st[i]; repeat (CPB) @(negedge clk); end
    tx = 1'b1;
    repeat (CPB / 2) @(negedge clk);
    if (!bus) acks++;
    repeat (CPB - CPB / 2 + 10 * CPB) @(negedge clk);
  endtask

  initial begin
    @(posedge start);
    @(negedge clk);
    forever begin
      fork
        begin
          send(11'h200 + 11'(frames % 256), {8{8'(frames)}});
          frames++;
        end
        begin repeat (PERIOD) @(negedge clk); end
      join
    end
  end
endmodule
