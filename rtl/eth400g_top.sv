// eth400g_top -- 400 Gb/s UDP/IPv4 Ethernet core: everything between user AXI-Stream
// data and the MAC/PHY's 1024-bit AXI-Stream interface.
//
// Blocks: eth_regs (control/statistics registers and ARP cache, AXI4-Lite port
// regs_axil_*), streaming_data_path (framer, TX/RX ring buffers, streaming RX filter),
// cpu_data_path (memory-mapped frame buffers for the microcontroller, AXI4-Lite port
// cpu_axil_*), tx_arbiter (frame-level arbitration and FIFO to the MAC) and pkt_gen
// (test packet generator). The MAC/PHY itself (a hard MAC with PCS/FEC and 112 Gb/s
// transceivers) is outside: its transmit stream is mac_tx_* and its receive stream
// mac_rx_*, both 1024 bits wide. The MAC adds preamble, FCS and padding on transmit
// and delivers frames without FCS on receive, flagging bad ones on mac_rx_err.
//
// The payload source of the framer is the user stream s_tx_* or, while the register
// bit gen_en is set, the test generator (s_tx_ready is then low). Received UDP
// payload for rx_port leaves on m_rx_*. One clock runs everything; at 390.625 MHz
// the 1024-bit buses carry 400 Gb/s. The block structure follows the design this RTL
// follows; the user-side ports, the generator multiplexer and all sizes are choices
// of this design.
module eth400g_top
  import eth400g_pkg::*;
#(
  parameter int TX_SLOTS       = 8,
  parameter int RX_SLOTS       = 8,
  parameter int SLOT_BEATS     = 128,
  parameter int CPU_SLOTS      = 4,
  parameter int CPU_SLOT_BEATS = 16,
  parameter int ARB_FIFO_DEPTH = 16,
  parameter int ARP_ENTRIES    = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  // control bus of the registers and ARP cache
  input  axil_req_t regs_axil_req,
  output axil_rsp_t regs_axil_rsp,
  // CPU frame buffers
  input  axil_req_t cpu_axil_req,
  output axil_rsp_t cpu_axil_rsp,
  // user payload to send
  input  logic      s_tx_valid,
  output logic      s_tx_ready,
  input  axis_t     s_tx_axis,
  input  logic      s_tx_sel,        // 0: port pair A, 1: port pair B
  // user payload received
  output logic      m_rx_valid,
  input  logic      m_rx_ready,
  output axis_t     m_rx_axis,
  // MAC transmit stream
  output logic      mac_tx_valid,
  input  logic      mac_tx_ready,
  output axis_t     mac_tx_axis,
  // MAC receive stream
  input  logic      mac_rx_valid,
  input  axis_t     mac_rx_axis,
  input  logic      mac_rx_err
);
  logic        tx_en, gen_en, gen_alt, rx_en;
  udp_cfg_t    cfg;
  logic [31:0] ports_b, gen_count;
  logic [15:0] rx_port, gen_len, gen_gap, gen_seq;
  logic [7:0]  arp_idx;
  logic [47:0] arp_mac;
  logic [NSTAT-1:0] stat_evt;

  eth_regs #(.ARP_ENTRIES(ARP_ENTRIES)) u_regs (
    .clk, .rst_n, .axil_req(regs_axil_req), .axil_rsp(regs_axil_rsp),
    .tx_en, .gen_en, .gen_alt, .rx_en, .cfg, .ports_b, .rx_port,
    .gen_len, .gen_gap, .gen_count, .arp_idx, .arp_mac, .stat_evt
  );

  // ---------------- payload source: user stream or test generator ----------------
  logic  g_valid, g_sel, g_done, p_valid, p_ready, p_sel;
  axis_t g_axis, p_axis;

  pkt_gen u_gen (
    .clk, .rst_n, .gen_en, .gen_alt, .gen_len, .gen_gap, .gen_count,
    .m_valid(g_valid), .m_ready(p_ready && gen_en), .m_axis(g_axis), .m_sel(g_sel),
    .pkt_done(g_done), .seq(gen_seq)
  );

  // the source changes only between packets: the generator finishes its packet
  // before it stops, and user data are refused while the generator is enabled
  logic gen_active;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gen_active <= 1'b0;
    else if (g_valid) gen_active <= 1'b1;
    else if (!gen_en) gen_active <= 1'b0;
  end
  wire use_gen = gen_en || gen_active;

  assign p_valid    = use_gen ? g_valid : s_tx_valid;
  assign p_axis     = use_gen ? g_axis  : s_tx_axis;
  assign p_sel      = use_gen ? g_sel   : s_tx_sel;
  assign s_tx_ready = p_ready && !use_gen;

  // ---------------- data paths ----------------
  logic  st_valid, st_ready, cp_valid, cp_ready;
  axis_t st_axis, cp_axis;
  logic  tx_stall, rx_frame, rx_pass, rx_drop, rx_ovf_s, rx_ovf_c;
  logic  cpu_tx, cpu_rx, tx_frame;

  streaming_data_path #(.TX_SLOTS(TX_SLOTS), .RX_SLOTS(RX_SLOTS), .SLOT_BEATS(SLOT_BEATS)) u_stream (
    .clk, .rst_n, .tx_en, .rx_en, .cfg, .ports_b, .rx_port, .arp_idx, .arp_mac,
    .s_valid(p_valid), .s_ready(p_ready), .s_axis(p_axis), .s_sel(p_sel),
    .m_tx_valid(st_valid), .m_tx_ready(st_ready), .m_tx_axis(st_axis),
    .mac_rx_valid, .mac_rx_axis, .mac_rx_err,
    .m_rx_valid, .m_rx_ready, .m_rx_axis,
    .tx_stall, .rx_frame, .rx_pass, .rx_drop, .rx_overflow(rx_ovf_s)
  );

  cpu_data_path #(.SLOTS(CPU_SLOTS), .SLOT_BEATS(CPU_SLOT_BEATS)) u_cpu (
    .clk, .rst_n, .axil_req(cpu_axil_req), .axil_rsp(cpu_axil_rsp),
    .rx_en, .my_mac(cfg.src_mac), .my_ip(cfg.src_ip), .rx_port,
    .mac_rx_valid, .mac_rx_axis, .mac_rx_err,
    .m_valid(cp_valid), .m_ready(cp_ready), .m_axis(cp_axis),
    .tx_sent(cpu_tx), .rx_got(cpu_rx), .rx_overflow(rx_ovf_c)
  );

  tx_arbiter #(.FIFO_DEPTH(ARB_FIFO_DEPTH)) u_arb (
    .clk, .rst_n,
    .s0_valid(st_valid), .s0_ready(st_ready), .s0_axis(st_axis),
    .s1_valid(cp_valid), .s1_ready(cp_ready), .s1_axis(cp_axis),
    .m_valid(mac_tx_valid), .m_ready(mac_tx_ready), .m_axis(mac_tx_axis),
    .frame_out(tx_frame)
  );

  // ---------------- statistics ----------------
  always_comb begin
    stat_evt                 = '0;
    stat_evt[ST_TX_FRAMES]   = tx_frame;
    stat_evt[ST_RX_FRAMES]   = rx_frame;
    stat_evt[ST_RX_STREAM]   = rx_pass;
    stat_evt[ST_RX_DROP]     = rx_drop;
    stat_evt[ST_RX_OVERFLOW] = rx_ovf_s || rx_ovf_c;
    stat_evt[ST_TX_STALL]    = tx_stall;
    stat_evt[ST_CPU_TX]      = cpu_tx;
    stat_evt[ST_CPU_RX]      = cpu_rx;
    stat_evt[ST_GEN_PKTS]    = g_done;
  end
endmodule
