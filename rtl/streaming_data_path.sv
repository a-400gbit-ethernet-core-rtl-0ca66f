// streaming_data_path -- the high-rate half of the UDP core.
//
// TX: the streaming data framer (udp_tx_framer) wraps each payload packet from
// s_axis into an Ethernet/IPv4/UDP frame inside a TX ring buffer (pkt_ring_buffer),
// which hands whole frames to the arbiter on m_tx. RX: every frame from the MAC is
// stored in an RX ring buffer (rx_ring_buffer); the RX filter (rx_filter, streaming
// mode) drops frames with an unexpected MAC, IP or port and delivers the UDP payload
// of the others on m_rx. Both directions move one 1024-bit beat per clock. The
// address settings come from eth_regs; the destination MAC from the ARP cache.
// The split into framer, ring buffers and filter follows the design this RTL
// follows; ring sizes are choices of this design.
module streaming_data_path
  import eth400g_pkg::*;
#(
  parameter int TX_SLOTS   = 8,
  parameter int RX_SLOTS   = 8,
  parameter int SLOT_BEATS = 128     // 16 KiB per frame slot
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tx_en,
  input  logic        rx_en,
  input  udp_cfg_t    cfg,
  input  logic [31:0] ports_b,
  input  logic [15:0] rx_port,
  output logic [7:0]  arp_idx,
  input  logic [47:0] arp_mac,
  // user TX payload
  input  logic        s_valid,
  output logic        s_ready,
  input  axis_t       s_axis,
  input  logic        s_sel,
  // frames to the arbiter
  output logic        m_tx_valid,
  input  logic        m_tx_ready,
  output axis_t       m_tx_axis,
  // from the MAC
  input  logic        mac_rx_valid,
  input  axis_t       mac_rx_axis,
  input  logic        mac_rx_err,
  // user RX payload
  output logic        m_rx_valid,
  input  logic        m_rx_ready,
  output axis_t       m_rx_axis,
  // events
  output logic        tx_stall,
  output logic        rx_frame,
  output logic        rx_pass,
  output logic        rx_drop,      // filtered out, or bad/oversize
  output logic        rx_overflow
);
  localparam int BW = $clog2(SLOT_BEATS);

  logic                 wr_ready, wr_en, hdr_en, commit;
  logic [BW-1:0]        wr_beat;
  logic [DATA_W-1:0]    wr_data, hdr_data;
  logic [BW:0]          commit_beats;
  logic [CNT_W-1:0]     commit_last_bytes;

  udp_tx_framer #(.SLOT_BEATS(SLOT_BEATS)) u_framer (
    .clk, .rst_n, .tx_en, .cfg, .ports_b, .arp_idx, .arp_mac,
    .s_valid, .s_ready, .s_axis, .s_sel,
    .wr_ready, .wr_en, .wr_beat, .wr_data, .hdr_en, .hdr_data,
    .commit, .commit_beats, .commit_last_bytes,
    .stall(tx_stall), .frame_done()
  );

  pkt_ring_buffer #(.NSLOTS(TX_SLOTS), .SLOT_BEATS(SLOT_BEATS)) u_tx_ring (
    .clk, .rst_n,
    .wr_ready, .wr_en, .wr_beat, .wr_data, .wr_wmask('1), .hdr_en, .hdr_data,
    .commit, .commit_beats, .commit_last_bytes,
    .m_valid(m_tx_valid), .m_ready(m_tx_ready), .m_axis(m_tx_axis),
    .used()
  );

  logic  rr_valid, rr_ready, rr_err, f_drop;
  axis_t rr_axis;

  rx_ring_buffer #(.NSLOTS(RX_SLOTS), .SLOT_BEATS(SLOT_BEATS)) u_rx_ring (
    .clk, .rst_n,
    .s_valid(mac_rx_valid), .s_axis(mac_rx_axis), .s_err(mac_rx_err),
    .m_valid(rr_valid), .m_ready(rr_ready), .m_axis(rr_axis),
    .frame_in(rx_frame), .drop_overflow(rx_overflow), .drop_error(rr_err)
  );

  rx_filter #(.STREAM(1'b1)) u_filter (
    .clk, .rst_n, .rx_en, .my_mac(cfg.src_mac), .my_ip(cfg.src_ip), .rx_port,
    .s_valid(rr_valid), .s_ready(rr_ready), .s_axis(rr_axis),
    .m_valid(m_rx_valid), .m_ready(m_rx_ready), .m_axis(m_rx_axis),
    .passed(rx_pass), .dropped(f_drop)
  );

  // frames the filter discards and frames the ring buffer discards as bad
  assign rx_drop = f_drop || rr_err;
endmodule
