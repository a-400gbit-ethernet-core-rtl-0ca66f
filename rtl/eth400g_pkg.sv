// eth400g_pkg -- types, constants and header helpers shared by the 400GbE UDP core.
//
// The whole core moves data on one 1024-bit AXI-Stream bus clocked at 390.625 MHz,
// which gives the 400 Gb/s of one 400GbE port; both numbers come from the design
// this RTL follows. Byte 0 of a beat is tdata[7:0] and goes first on the wire; only
// the last beat of a frame may be partial, and its valid bytes are the low ones
// (tkeep is a run of ones from bit 0). That byte ordering, the AXI4-Lite structs
// used for the control bus and the register map below are choices of this design.
//
// A UDP/IPv4 frame as built here has a 42-byte header: Ethernet (14), IPv4 without
// options (20) and UDP (8). The MAC appends the FCS and any minimum-size padding.
package eth400g_pkg;

  localparam int DATA_W     = 1024;          // AXI-Stream data width (bits)
  localparam int BYTES      = DATA_W / 8;    // 128 bytes per beat
  localparam int HDR_BYTES  = 42;            // Ethernet + IPv4 + UDP header
  localparam int CNT_W      = $clog2(BYTES + 1);

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;
  localparam logic [47:0] MAC_BROADCAST  = 48'hFFFF_FFFF_FFFF;

  // One AXI-Stream beat.
  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic [BYTES-1:0]  tkeep;
    logic              tlast;
  } axis_t;

  // AXI4-Lite, master to slave.
  typedef struct packed {
    logic [31:0] awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [31:0] araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  // AXI4-Lite, slave to master.
  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rvalid;
  } axil_rsp_t;

  // Addressing of one UDP stream, as held in the control registers.
  typedef struct packed {
    logic [47:0] src_mac;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
  } udp_cfg_t;

  // ---------------- register map of eth_regs (byte addresses) ----------------
  localparam logic [11:0] REG_CTRL        = 12'h000; // [0] tx_en [1] gen_en [2] gen_alt [3] rx_en
  localparam logic [11:0] REG_SRC_MAC_LO  = 12'h004;
  localparam logic [11:0] REG_SRC_MAC_HI  = 12'h008;
  localparam logic [11:0] REG_SRC_IP      = 12'h00C;
  localparam logic [11:0] REG_DST_IP      = 12'h010;
  localparam logic [11:0] REG_PORTS_A     = 12'h014; // [31:16] src port, [15:0] dst port
  localparam logic [11:0] REG_PORTS_B     = 12'h018;
  localparam logic [11:0] REG_RX_PORT     = 12'h01C;
  localparam logic [11:0] REG_GEN_LEN     = 12'h020; // payload bytes per generated packet
  localparam logic [11:0] REG_GEN_GAP     = 12'h024; // idle cycles between generated packets
  localparam logic [11:0] REG_GEN_COUNT   = 12'h028; // packets to generate, 0 = no limit
  localparam logic [11:0] REG_STAT_BASE   = 12'h040; // NSTAT read-only counters from here
  localparam logic [11:0] REG_ARP_BASE    = 12'h800; // 256 entries x 8 bytes: lo word, hi word

  localparam int NSTAT = 9;
  typedef enum logic [3:0] {
    ST_TX_FRAMES    = 4'd0,  // frames handed to the MAC
    ST_RX_FRAMES    = 4'd1,  // frames received from the MAC
    ST_RX_STREAM    = 4'd2,  // frames passed by the streaming RX filter
    ST_RX_DROP      = 4'd3,  // frames dropped by the streaming RX filter
    ST_RX_OVERFLOW  = 4'd4,  // frames lost because an RX ring buffer was full
    ST_TX_STALL     = 4'd5,  // cycles the framer held off its source
    ST_CPU_TX       = 4'd6,  // frames sent by the CPU
    ST_CPU_RX       = 4'd7,  // frames delivered to the CPU
    ST_GEN_PKTS     = 4'd8   // packets made by the test generator
  } stat_e;

  // ---------------- helpers ----------------

  // tkeep with the low n bits set (n = 0..BYTES).
  function automatic logic [BYTES-1:0] keep_of(input logic [CNT_W-1:0] n);
    logic [BYTES-1:0] k;
    for (int i = 0; i < BYTES; i++) k[i] = (i < int'(n));
    return k;
  endfunction

  // Number of valid bytes in a contiguous tkeep.
  function automatic logic [CNT_W-1:0] count_of(input logic [BYTES-1:0] keep);
    logic [CNT_W-1:0] c;
    c = '0;
    for (int i = 0; i < BYTES; i++) c = c + CNT_W'(keep[i]);
    return c;
  endfunction

  // One's-complement checksum of a 20-byte IPv4 header given as 10 words.
  function automatic logic [15:0] ip_checksum(input logic [9:0][15:0] w);
    logic [19:0] s;
    s = '0;
    for (int i = 0; i < 10; i++) s = s + 20'(w[i]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return ~s[15:0];
  endfunction

  // The 42 header bytes of a UDP/IPv4 frame, byte 0 in bits [7:0].
  // payload_len is the UDP payload in bytes; the UDP checksum is sent as 0.
  function automatic logic [HDR_BYTES*8-1:0] udp_header(
      input logic [47:0] dst_mac, input udp_cfg_t c,
      input logic [15:0] payload_len, input logic [15:0] ip_id);
    logic [HDR_BYTES-1:0][7:0] b;
    logic [15:0] ip_len, udp_len;
    logic [9:0][15:0] w;
    ip_len  = payload_len + 16'd28;
    udp_len = payload_len + 16'd8;
    w[0] = 16'h4500;            w[1] = ip_len;
    w[2] = ip_id;               w[3] = 16'h4000;           // DF, no fragment
    w[4] = {8'd64, IP_PROTO_UDP}; w[5] = 16'h0000;
    w[6] = c.src_ip[31:16];     w[7] = c.src_ip[15:0];
    w[8] = c.dst_ip[31:16];     w[9] = c.dst_ip[15:0];
    w[5] = ip_checksum(w);
    for (int i = 0; i < 6; i++) begin
      b[i]     = dst_mac[47-8*i -: 8];
      b[6 + i] = c.src_mac[47-8*i -: 8];
    end
    b[12] = ETHERTYPE_IPV4[15:8]; b[13] = ETHERTYPE_IPV4[7:0];
    for (int i = 0; i < 10; i++) begin
      b[14 + 2*i] = w[i][15:8];
      b[15 + 2*i] = w[i][7:0];
    end
    b[34] = c.src_port[15:8]; b[35] = c.src_port[7:0];
    b[36] = c.dst_port[15:8]; b[37] = c.dst_port[7:0];
    b[38] = udp_len[15:8];    b[39] = udp_len[7:0];
    b[40] = 8'h00;            b[41] = 8'h00;
    return b;
  endfunction

endpackage
