// eth_regs -- control and statistics registers of the UDP core, with the ARP cache,
// on an AXI4-Lite port.
//
// The CPU sets here this node's MAC and IP address, the destination IP, two UDP
// port pairs for transmit (A and B), the UDP port accepted on receive, the enables
// and the test generator's length, gap and count; the framer and the RX filters read
// them continuously. NSTAT 32-bit counters, one per event input, count frames sent
// and received, filter drops, ring-buffer overflows and stall cycles; they wrap and
// are read only. The ARP cache (arp_cache) sits in the same address space. The
// address map is in eth400g_pkg (REG_*). All registers reset to 0. A read returns
// data one cycle after the register port's rd_en, through axil_slave. Keeping MAC,
// IP and port settings in registers beside an ARP cache follows the design this RTL
// follows; the map, the reset values and the counter set are choices of this design.
module eth_regs
  import eth400g_pkg::*;
#(
  parameter int ARP_ENTRIES = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  axil_req_t        axil_req,
  output axil_rsp_t        axil_rsp,
  // control outputs
  output logic             tx_en,
  output logic             gen_en,
  output logic             gen_alt,
  output logic             rx_en,
  output udp_cfg_t         cfg,        // ports of pair A
  output logic [31:0]      ports_b,
  output logic [15:0]      rx_port,
  output logic [15:0]      gen_len,
  output logic [15:0]      gen_gap,
  output logic [31:0]      gen_count,
  // ARP lookup for the framer
  input  logic [7:0]       arp_idx,
  output logic [47:0]      arp_mac,
  // statistics events, one pulse per event
  input  logic [NSTAT-1:0] stat_evt
);
  localparam int AIW = $clog2(ARP_ENTRIES);

  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [3:0]  wr_strb;

  axil_slave u_axil (
    .clk, .rst_n, .req(axil_req), .rsp(axil_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data
  );

  logic [31:0] stat_q [NSTAT];
  logic [3:0]  ctrl_q;

  wire [11:0] wa = wr_addr[11:0];
  wire [11:0] ra = rd_addr[11:0];
  wire        arp_wr = wr_en && wa[11];
  wire        arp_rd = ra[11];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_q <= '0; cfg <= '0; ports_b <= '0; rx_port <= '0;
      gen_len <= '0; gen_gap <= '0; gen_count <= '0;
    end else if (wr_en && !wa[11]) begin
      unique case (wa)
        REG_CTRL:       ctrl_q          <= wr_data[3:0];
        REG_SRC_MAC_LO: cfg.src_mac[31:0]  <= wr_data;
        REG_SRC_MAC_HI: cfg.src_mac[47:32] <= wr_data[15:0];
        REG_SRC_IP:     cfg.src_ip      <= wr_data;
        REG_DST_IP:     cfg.dst_ip      <= wr_data;
        REG_PORTS_A:    {cfg.src_port, cfg.dst_port} <= wr_data;
        REG_PORTS_B:    ports_b         <= wr_data;
        REG_RX_PORT:    rx_port         <= wr_data[15:0];
        REG_GEN_LEN:    gen_len         <= wr_data[15:0];
        REG_GEN_GAP:    gen_gap         <= wr_data[15:0];
        REG_GEN_COUNT:  gen_count       <= wr_data;
        default: ;
      endcase
    end
  end
  assign tx_en   = ctrl_q[0];
  assign gen_en  = ctrl_q[1];
  assign gen_alt = ctrl_q[2];
  assign rx_en   = ctrl_q[3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSTAT; i++) stat_q[i] <= '0;
    end else begin
      for (int i = 0; i < NSTAT; i++) if (stat_evt[i]) stat_q[i] <= stat_q[i] + 1'b1;
    end
  end

  logic [47:0] arp_mac_a;
  arp_cache #(.ENTRIES(ARP_ENTRIES)) u_arp (
    .clk,
    .wr_en   (arp_wr),
    .wr_idx  (wa[3 +: AIW]),
    .wr_hi   (wa[2]),
    .wr_data (wr_data),
    .rd_idx_a(ra[3 +: AIW]),
    .rd_mac_a(arp_mac_a),
    .rd_idx_b(arp_idx[AIW-1:0]),
    .rd_mac_b(arp_mac)
  );

  // register reads: data one cycle after rd_en; ARP reads take their data from the
  // cache's registered port, which is addressed by rd_addr as soon as it is set
  logic        rd_arp_q, rd_hi_q;
  logic [31:0] rd_reg_q;
  always_ff @(posedge clk) begin
    rd_arp_q <= arp_rd;
    rd_hi_q  <= ra[2];
    rd_reg_q <= '0;
    if (rd_en) begin
      unique casez (ra)
        REG_CTRL:       rd_reg_q <= {28'd0, ctrl_q};
        REG_SRC_MAC_LO: rd_reg_q <= cfg.src_mac[31:0];
        REG_SRC_MAC_HI: rd_reg_q <= {16'd0, cfg.src_mac[47:32]};
        REG_SRC_IP:     rd_reg_q <= cfg.src_ip;
        REG_DST_IP:     rd_reg_q <= cfg.dst_ip;
        REG_PORTS_A:    rd_reg_q <= {cfg.src_port, cfg.dst_port};
        REG_PORTS_B:    rd_reg_q <= ports_b;
        REG_RX_PORT:    rd_reg_q <= {16'd0, rx_port};
        REG_GEN_LEN:    rd_reg_q <= {16'd0, gen_len};
        REG_GEN_GAP:    rd_reg_q <= {16'd0, gen_gap};
        REG_GEN_COUNT:  rd_reg_q <= gen_count;
        default:
          if (ra >= REG_STAT_BASE && ra < REG_STAT_BASE + 12'(4*NSTAT))
            rd_reg_q <= stat_q[4'((ra - REG_STAT_BASE) >> 2)];
      endcase
    end
  end
  assign rd_data = rd_arp_q ? (rd_hi_q ? {16'd0, arp_mac_a[47:32]} : arp_mac_a[31:0])
                            : rd_reg_q;
endmodule
