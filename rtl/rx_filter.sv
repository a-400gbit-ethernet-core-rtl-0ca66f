// rx_filter -- drops received frames that are not for this node and passes the rest.
//
// Frames arrive whole from an RX ring buffer. The decision is made on the first beat,
// which holds all 42 header bytes. A frame is a "stream match" when its destination
// MAC and IP are this node's, its Ethertype is IPv4 with a 20-byte header, its
// protocol is UDP and its destination port is rx_port.
//
// STREAM = 1 (streaming data path): stream matches are passed with the 42 header
// bytes stripped, so m_axis carries only the UDP payload, cut to the length in the
// UDP header (which removes the MAC's minimum-size padding). Output beat k is bytes
// 42..127 of frame beat k followed by bytes 0..41 of frame beat k+1; if the last
// frame beat holds more than 42 bytes, one extra output beat follows it, during which
// the input is held off.
// STREAM = 0 (CPU data path): frames addressed to this node's MAC or to broadcast that
// are not stream matches (ARP, ICMP, other ports...) are passed unchanged.
// All other frames are read and discarded. One pulse on passed or dropped per frame.
//
// The filtering on MAC, IP and port follows the design this RTL follows; the exact
// match rules, the header stripping and the split of traffic between the two paths
// are choices of this design.
module rx_filter
  import eth400g_pkg::*;
#(
  parameter bit STREAM = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_en,
  input  logic [47:0] my_mac,
  input  logic [31:0] my_ip,
  input  logic [15:0] rx_port,
  input  logic        s_valid,
  output logic        s_ready,
  input  axis_t       s_axis,
  output logic        m_valid,
  input  logic        m_ready,
  output axis_t       m_axis,
  output logic        passed,
  output logic        dropped
);
  localparam int HB = HDR_BYTES * 8;          // 336 header bits
  localparam int KB = DATA_W - HB;            // 688 payload bits kept from a beat

  typedef enum logic [1:0] {S_IDLE, S_PASS, S_FLUSH, S_DROP} state_e;
  state_e state;

  // -------- header fields of the first beat (byte 0 in bits [7:0]) --------
  function automatic logic [7:0] byte_at(input logic [DATA_W-1:0] d, input int i);
    return d[8*i +: 8];
  endfunction
  logic [47:0] f_dmac;
  logic [15:0] f_etype, f_dport, f_ulen;
  logic [7:0]  f_verihl, f_proto;
  logic [31:0] f_dip;
  always_comb begin
    for (int i = 0; i < 6; i++) f_dmac[47-8*i -: 8] = byte_at(s_axis.tdata, i);
    f_etype  = {byte_at(s_axis.tdata, 12), byte_at(s_axis.tdata, 13)};
    f_verihl = byte_at(s_axis.tdata, 14);
    f_proto  = byte_at(s_axis.tdata, 23);
    f_dip    = {byte_at(s_axis.tdata, 30), byte_at(s_axis.tdata, 31),
                byte_at(s_axis.tdata, 32), byte_at(s_axis.tdata, 33)};
    f_dport  = {byte_at(s_axis.tdata, 36), byte_at(s_axis.tdata, 37)};
    f_ulen   = {byte_at(s_axis.tdata, 38), byte_at(s_axis.tdata, 39)};
  end

  wire mac_ok       = (f_dmac == my_mac);
  wire stream_match = rx_en && mac_ok && f_etype == ETHERTYPE_IPV4 && f_verihl == 8'h45 &&
                      f_proto == IP_PROTO_UDP && f_dip == my_ip && f_dport == rx_port;
  wire cpu_match    = rx_en && (mac_ok || f_dmac == MAC_BROADCAST) && !stream_match;
  wire accept       = STREAM ? stream_match : cpu_match;

  logic [KB-1:0] held;       // bytes 42..127 of the previous beat
  logic [15:0]   rem;        // payload bytes still to send

  wire [15:0] ulen_pay = (f_ulen > 16'd8) ? f_ulen - 16'd8 : 16'd0;
  wire [CNT_W-1:0] rem_cnt = (rem >= 16'(BYTES)) ? CNT_W'(BYTES) : CNT_W'(rem);

  always_comb begin
    s_ready = 1'b0;
    m_valid = 1'b0;
    m_axis  = s_axis;
    unique case (state)
      S_IDLE: begin
        if (STREAM) s_ready = 1'b1;
        else begin
          s_ready = !accept || m_ready;
          m_valid = s_valid && accept;
        end
      end
      S_PASS: begin
        m_valid = s_valid;
        s_ready = m_ready;
        if (STREAM) begin
          m_axis.tdata = {s_axis.tdata[HB-1:0], held};
          m_axis.tkeep = keep_of(rem_cnt);
          m_axis.tlast = (rem <= 16'(BYTES)) || (s_axis.tlast && s_axis.tkeep[HDR_BYTES] == 1'b0);
        end
      end
      S_FLUSH: begin
        m_valid      = 1'b1;
        m_axis.tdata = {{HB{1'b0}}, held};
        m_axis.tkeep = keep_of(rem_cnt);
        m_axis.tlast = 1'b1;
      end
      S_DROP: s_ready = 1'b1;
      default: ;
    endcase
  end

  wire s_take = s_valid && s_ready;
  wire m_take = m_valid && m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; held <= '0; rem <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (s_take) begin
          held <= s_axis.tdata[DATA_W-1:HB];
          rem  <= ulen_pay;
          if (!accept)                      state <= s_axis.tlast ? S_IDLE : S_DROP;
          else if (!STREAM)                 state <= s_axis.tlast ? S_IDLE : S_PASS;
          else if (ulen_pay == 16'd0)       state <= s_axis.tlast ? S_IDLE : S_DROP;
          else                              state <= s_axis.tlast ? S_FLUSH : S_PASS;
        end
        S_PASS: if (s_take) begin
          if (!STREAM) begin
            if (s_axis.tlast) state <= S_IDLE;
          end else begin
            held <= s_axis.tdata[DATA_W-1:HB];
            if (m_axis.tlast)      state <= s_axis.tlast ? S_IDLE : S_DROP;
            else begin
              rem <= rem - 16'(BYTES);
              if (s_axis.tlast)    state <= S_FLUSH;
            end
          end
        end
        S_FLUSH: if (m_take) state <= S_IDLE;
        S_DROP:  if (s_take && s_axis.tlast) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign passed  = (state == S_IDLE) && s_take && accept &&
                   (!STREAM || ulen_pay != 16'd0);
  assign dropped = (state == S_IDLE) && s_take && !(accept && (!STREAM || ulen_pay != 16'd0));
endmodule
