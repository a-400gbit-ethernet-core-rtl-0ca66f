// udp_tx_framer -- the streaming data framer: turns a user AXI-Stream payload into
// a complete Ethernet/IPv4/UDP frame inside the TX ring buffer.
//
// Each packet on s_axis (tlast ends it) becomes one UDP datagram. Source MAC, source
// and destination IP come from the control registers, the destination MAC from the
// ARP cache (looked up with the low byte of the destination IP), and the UDP ports
// from one of two port pairs chosen per packet by s_sel (pair A or B, so that two
// kinds of packet can be interleaved and steered to two receive queues).
//
// The header holds the IP and UDP lengths, which are known only at the end of the
// packet, so the frame is assembled in place: every payload beat k >= 1 is written,
// shifted by the 42 header bytes, into frame beat k of the ring slot (its low 42
// bytes are the top 42 bytes of payload beat k-1); the low 86 bytes of payload beat 0
// are held back. One cycle after the last payload beat the framer writes the header
// beat (header + the held 86 bytes) through the ring's beat-0 port, writes a final
// spill beat if the last payload beat had more than 86 bytes, and commits the frame.
//
// Timing: s_ready is high while a ring slot is free and tx_en is set; an n-beat
// payload is taken in n+1 cycles (one idle cycle for the header), so 1024-bit beats
// at 390.625 MHz carry the 400 Gb/s line rate. Only the last beat may be partial.
// The IP identification field counts packets; the UDP checksum is sent as zero,
// which IPv4 allows. Filling the header from registers and the ARP cache follows
// the design this RTL follows; the in-place assembly and the two port pairs are
// choices of this design.
module udp_tx_framer
  import eth400g_pkg::*;
#(
  parameter int SLOT_BEATS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          tx_en,
  input  udp_cfg_t                      cfg,       // ports of pair A
  input  logic [31:0]                   ports_b,   // [31:16] src, [15:0] dst of pair B
  output logic [7:0]                    arp_idx,
  input  logic [47:0]                   arp_mac,
  // payload in
  input  logic                          s_valid,
  output logic                          s_ready,
  input  axis_t                         s_axis,
  input  logic                          s_sel,
  // TX ring buffer write port
  input  logic                          wr_ready,
  output logic                          wr_en,
  output logic [$clog2(SLOT_BEATS)-1:0] wr_beat,
  output logic [DATA_W-1:0]             wr_data,
  output logic                          hdr_en,
  output logic [DATA_W-1:0]             hdr_data,
  output logic                          commit,
  output logic [$clog2(SLOT_BEATS):0]   commit_beats,
  output logic [CNT_W-1:0]              commit_last_bytes,
  // events
  output logic                          stall,
  output logic                          frame_done
);
  localparam int BW    = $clog2(SLOT_BEATS);
  localparam int HEADW = (BYTES - HDR_BYTES) * 8;  // 86 bytes kept from beat 0
  localparam int TAILW = HDR_BYTES * 8;            // 42 bytes carried to the next beat

  typedef enum logic {S_DATA, S_FINISH} state_e;
  state_e state;

  logic [BW:0]        k;
  logic [HEADW-1:0]   head0;
  logic [TAILW-1:0]   tail;
  logic [15:0]        len, ip_id;
  logic [CNT_W-1:0]   lastc;
  logic               sel_q;

  assign arp_idx = cfg.dst_ip[7:0];
  assign s_ready = (state == S_DATA) && tx_en && wr_ready;
  wire   take    = s_valid && s_ready;
  wire [CNT_W-1:0] c = s_axis.tlast ? count_of(s_axis.tkeep) : CNT_W'(BYTES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_DATA; k <= '0; len <= '0; ip_id <= '0; lastc <= '0; sel_q <= 1'b0;
      head0 <= '0; tail <= '0;
    end else if (state == S_DATA) begin
      if (take) begin
        if (k == '0) begin
          head0 <= s_axis.tdata[HEADW-1:0];
          sel_q <= s_sel;
        end
        tail  <= s_axis.tdata[DATA_W-1 -: TAILW];
        len   <= len + 16'(c);
        k     <= k + 1'b1;
        lastc <= c;
        if (s_axis.tlast) state <= S_FINISH;
      end
    end else begin
      state <= S_DATA;
      k     <= '0;
      len   <= '0;
      ip_id <= ip_id + 1'b1;
    end
  end

  // frame geometry, valid in S_FINISH
  wire [15:0] flen   = len + 16'(HDR_BYTES);
  wire [15:0] nbeats = (flen + 16'(BYTES - 1)) >> $clog2(BYTES);
  wire        spill  = lastc > CNT_W'(BYTES - HDR_BYTES);

  udp_cfg_t hcfg;
  always_comb begin
    hcfg = cfg;
    if (sel_q) {hcfg.src_port, hcfg.dst_port} = ports_b;
  end

  always_comb begin
    wr_en   = 1'b0;
    wr_beat = k[BW-1:0];
    wr_data = {s_axis.tdata[HEADW-1:0], tail};
    if (state == S_DATA) wr_en = take && (k != '0);
    else begin
      wr_en   = spill;
      wr_data = {{HEADW{1'b0}}, tail};
    end
  end

  assign hdr_en            = (state == S_FINISH);
  assign hdr_data          = {head0, udp_header(arp_mac, hcfg, len, ip_id)};
  assign commit            = (state == S_FINISH);
  assign commit_beats      = (BW+1)'(nbeats);
  assign commit_last_bytes = CNT_W'(flen - ((nbeats - 16'd1) << $clog2(BYTES)));
  assign stall             = s_valid && !s_ready;
  assign frame_done        = commit;

  assert property (@(posedge clk) disable iff (!rst_n)
                   commit |-> nbeats <= 16'(SLOT_BEATS))
    else $error("udp_tx_framer: packet longer than a ring slot");
endmodule
