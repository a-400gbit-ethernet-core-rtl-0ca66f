// cpu_data_path -- lets the on-chip microcontroller send and receive raw Ethernet
// frames (ARP, ICMP and the like) through the same MAC as the streaming data.
//
// It is a memory-mapped window on its own AXI4-Lite port (byte addresses):
//   0x0000-0x07FF  TX frame buffer, write only. Word w is bytes 4w..4w+3 of the frame
//                  (byte 4w in bits [7:0]); it is written straight into the head slot
//                  of a TX ring buffer. Writes while no slot is free are ignored.
//   0x0800-0x0FFF  RX frame buffer, read only, same layout.
//   0x1000         TX_SEND: writing n (1..TX length limit) commits the n-byte frame
//                  to the TX ring buffer; reading gives bit 0 = a TX slot is free.
//   0x1004         RX_STATUS: reading gives bit 31 = a frame is waiting, [15:0] its
//                  length in bytes; writing anything frees the buffer for the next.
// Received frames come from the MAC through an RX ring buffer and an rx_filter in
// its CPU mode (frames for this MAC or broadcast that are not the UDP stream). The
// RX frame buffer holds one frame; while it is full the filter is held off and the
// ring buffer absorbs, then drops, further frames. Frames longer than the buffer are
// cut to it. TX frames leave on m_axis towards the arbiter at one beat per clock.
// Word writes use the whole word (wstrb is not used).
//
// The CPU data module with its own TX and RX ring buffers and RX filter follows the
// design this RTL follows; the memory map and the buffer sizes are choices of this
// design.
module cpu_data_path
  import eth400g_pkg::*;
#(
  parameter int SLOTS      = 4,
  parameter int SLOT_BEATS = 16       // 2048-byte frames
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   axil_req,
  output axil_rsp_t   axil_rsp,
  input  logic        rx_en,
  input  logic [47:0] my_mac,
  input  logic [31:0] my_ip,
  input  logic [15:0] rx_port,
  // from the MAC (shared with the streaming path)
  input  logic        mac_rx_valid,
  input  axis_t       mac_rx_axis,
  input  logic        mac_rx_err,
  // to the arbiter
  output logic        m_valid,
  input  logic        m_ready,
  output axis_t       m_axis,
  // events
  output logic        tx_sent,
  output logic        rx_got,
  output logic        rx_overflow
);
  localparam int BW = $clog2(SLOT_BEATS);
  localparam int WW = $clog2(DATA_W / 32);          // word within a beat
  localparam int MAXB = SLOT_BEATS * BYTES;

  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [3:0]  wr_strb;

  axil_slave u_axil (
    .clk, .rst_n, .req(axil_req), .rsp(axil_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  // ---------------- TX ----------------
  logic tx_ready;
  wire  tx_win  = wr_en && wr_addr[12:11] == 2'b00;
  wire  tx_send = wr_en && wr_addr[12:0] == 13'h1000;
  wire [15:0] n = wr_data[15:0];
  wire  n_ok    = n != 16'd0 && n <= 16'(MAXB);
  wire [15:0] nb = (n + 16'(BYTES - 1)) >> $clog2(BYTES);

  pkt_ring_buffer #(.NSLOTS(SLOTS), .SLOT_BEATS(SLOT_BEATS)) u_tx_ring (
    .clk, .rst_n,
    .wr_ready         (tx_ready),
    .wr_en            (tx_win && tx_ready),
    .wr_beat          (wr_addr[WW+2 +: BW]),
    .wr_data          ({(DATA_W/32){wr_data}}),
    .wr_wmask         ((DATA_W/32)'(1) << wr_addr[2 +: WW]),
    .hdr_en           (1'b0),
    .hdr_data         ('0),
    .commit           (tx_send && n_ok && tx_ready),
    .commit_beats     ((BW+1)'(nb)),
    .commit_last_bytes(CNT_W'(n - ((nb - 16'd1) << $clog2(BYTES)))),
    .m_valid, .m_ready, .m_axis,
    .used             ()
  );
  assign tx_sent = tx_send && n_ok && tx_ready;

  // ---------------- RX ----------------
  logic  rr_valid, rr_ready, f_valid, f_ready;
  axis_t rr_axis, f_axis;
  logic  f_pass, f_drop, rr_frame, rr_err;

  rx_ring_buffer #(.NSLOTS(SLOTS), .SLOT_BEATS(SLOT_BEATS)) u_rx_ring (
    .clk, .rst_n,
    .s_valid(mac_rx_valid), .s_axis(mac_rx_axis), .s_err(mac_rx_err),
    .m_valid(rr_valid), .m_ready(rr_ready), .m_axis(rr_axis),
    .frame_in(rr_frame), .drop_overflow(rx_overflow), .drop_error(rr_err)
  );

  rx_filter #(.STREAM(1'b0)) u_filter (
    .clk, .rst_n, .rx_en, .my_mac, .my_ip, .rx_port,
    .s_valid(rr_valid), .s_ready(rr_ready), .s_axis(rr_axis),
    .m_valid(f_valid), .m_ready(f_ready), .m_axis(f_axis),
    .passed(f_pass), .dropped(f_drop)
  );

  logic [DATA_W-1:0] rxbuf [SLOT_BEATS];
  logic              rx_full;
  logic [BW:0]       rx_beat;
  logic [15:0]       rx_len;

  assign f_ready = !rx_full;
  wire   f_take  = f_valid && f_ready;
  wire   rx_free = wr_en && wr_addr[12:0] == 13'h1004;

  always_ff @(posedge clk) begin
    if (f_take && rx_beat < (BW+1)'(SLOT_BEATS)) rxbuf[rx_beat[BW-1:0]] <= f_axis.tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_full <= 1'b0; rx_beat <= '0; rx_len <= '0;
    end else begin
      if (f_take) begin
        if (rx_beat < (BW+1)'(SLOT_BEATS)) begin
          rx_len  <= rx_len + 16'(count_of(f_axis.tkeep));
          rx_beat <= rx_beat + 1'b1;
        end
        if (f_axis.tlast) rx_full <= 1'b1;
      end
      if (rx_free && rx_full) begin
        rx_full <= 1'b0; rx_beat <= '0; rx_len <= '0;
      end
    end
  end
  assign rx_got = f_take && f_axis.tlast;

  // ---------------- register reads ----------------
  always_ff @(posedge clk) begin
    if (rd_en) begin
      if (rd_addr[12:11] == 2'b01)
        rd_data <= rxbuf[rd_addr[WW+2 +: BW]][32*rd_addr[2 +: WW] +: 32];
      else if (rd_addr[12:0] == 13'h1000) rd_data <= {31'd0, tx_ready};
      else if (rd_addr[12:0] == 13'h1004) rd_data <= {rx_full, 15'd0, rx_len};
      else rd_data <= 32'd0;
    end
  end
endmodule
