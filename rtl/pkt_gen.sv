// pkt_gen -- test packet generator feeding the streaming data framer.
//
// While gen_en is set it sends packets of gen_len payload bytes (at least 2) and
// then waits gen_gap idle cycles before the next, which sets the packet rate: at one
// 1024-bit beat per cycle an n-beat packet plus its gap g gives a share n/(n+1+g) of
// the 400 Gb/s bus (the framer adds one cycle per packet). The first two payload
// bytes carry a 16-bit packet sequence counter (most significant byte first) that a
// receiver uses to detect lost packets; the other bytes hold byte i of beat b =
// {b[0], i[6:0]} XOR the low sequence byte, a pattern that shows misaligned data
// and differs from packet to packet. With gen_alt set, even and
// odd packets select port pair A and B on m_sel (the two kinds of packet sent one
// after the other in the two-GPU test). gen_count packets are sent, or packets
// without limit if it is 0; clearing gen_en stops after the current packet and
// restarts the counter at 0. The output obeys AXI-Stream: data hold while m_ready is
// low. The 16-bit counter and the adjustable rate follow the design this RTL
// follows; the fill pattern, byte order and register meanings are choices made here.
module pkt_gen
  import eth400g_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gen_en,
  input  logic        gen_alt,
  input  logic [15:0] gen_len,
  input  logic [15:0] gen_gap,
  input  logic [31:0] gen_count,
  output logic        m_valid,
  input  logic        m_ready,
  output axis_t       m_axis,
  output logic        m_sel,
  output logic        pkt_done,
  output logic [15:0] seq
);
  typedef enum logic [1:0] {S_IDLE, S_SEND, S_GAP} state_e;
  state_e state;

  logic [15:0] beat, nbeats, gap_cnt, len_q;
  logic [31:0] sent;

  wire [15:0] len    = (gen_len < 16'd2) ? 16'd2 : gen_len;
  wire        more   = (gen_count == 32'd0) || (sent < gen_count);
  wire        last   = (beat == nbeats - 16'd1);
  wire [15:0] lastb  = len_q - ((nbeats - 16'd1) << $clog2(BYTES));

  always_comb begin
    for (int i = 0; i < BYTES; i++) m_axis.tdata[8*i +: 8] = {beat[0], 7'(i)} ^ seq[7:0];
    if (beat == 16'd0) begin
      m_axis.tdata[7:0]  = seq[15:8];
      m_axis.tdata[15:8] = seq[7:0];
    end
    m_axis.tlast = last;
    m_axis.tkeep = last ? keep_of(CNT_W'(lastb)) : '1;
  end
  assign m_valid  = (state == S_SEND);
  assign m_sel    = gen_alt && seq[0];
  wire   take     = m_valid && m_ready;
  assign pkt_done = take && last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; beat <= '0; nbeats <= 16'd1; gap_cnt <= '0; len_q <= 16'd2;
      sent <= '0; seq <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (!gen_en) begin
            sent <= '0; seq <= '0;
          end else if (more) begin
            state  <= S_SEND;
            beat   <= '0;
            len_q  <= len;
            nbeats <= (len + 16'(BYTES - 1)) >> $clog2(BYTES);
          end
        end
        S_SEND: if (take) begin
          if (last) begin
            sent    <= sent + 1'b1;
            seq     <= seq + 1'b1;
            gap_cnt <= gen_gap;
            state   <= (gen_gap == 16'd0) ? S_IDLE : S_GAP;
          end else beat <= beat + 1'b1;
        end
        S_GAP: begin
          gap_cnt <= gap_cnt - 1'b1;
          if (gap_cnt == 16'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
