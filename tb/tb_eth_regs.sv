// tb_eth_regs -- self-checking test of the control/statistics registers over
// AXI4-Lite: every control register is written and read back and its output
// checked, random numbers of statistics events are counted and read, and ARP cache
// entries written over the bus are read back over the bus and through the framer's
// lookup port.
module tb_eth_regs;
  import eth400g_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  axil_req_t axil_req;
  axil_rsp_t axil_rsp;
  logic tx_en, gen_en, gen_alt, rx_en;
  udp_cfg_t cfg;
  logic [31:0] ports_b, gen_count;
  logic [15:0] rx_port, gen_len, gen_gap;
  logic [7:0] arp_idx;
  logic [47:0] arp_mac;
  logic [NSTAT-1:0] stat_evt;

  eth_regs dut (.*);
  axil_bfm bfm (.clk, .req(axil_req), .rsp(axil_rsp));

  int checks = 0, failures = 0;
  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %0h exp %0h", what, got, exp); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned nev [NSTAT];
  bit count_on = 0;
  always @(negedge clk) begin
    for (int i = 0; i < NSTAT; i++) stat_evt[i] = count_on && ($urandom % (i + 2) == 0);
  end
  always @(posedge clk) if (rst_n) for (int i = 0; i < NSTAT; i++) nev[i] += stat_evt[i];

  logic [31:0] v, arp_lo [16], arp_hi [16];
  logic [11:0] addrs [11] = '{REG_CTRL, REG_SRC_MAC_LO, REG_SRC_MAC_HI, REG_SRC_IP, REG_DST_IP,
                              REG_PORTS_A, REG_PORTS_B, REG_RX_PORT, REG_GEN_LEN, REG_GEN_GAP,
                              REG_GEN_COUNT};
  logic [31:0] vals [11];
  logic [31:0] masks [11] = '{32'hf, 32'hffffffff, 32'hffff, 32'hffffffff, 32'hffffffff,
                              32'hffffffff, 32'hffffffff, 32'hffff, 32'hffff, 32'hffff, 32'hffffffff};
  initial begin
    arp_idx = 0; stat_evt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (addrs[i]) begin vals[i] = $urandom; bfm.write({20'd0, addrs[i]}, vals[i]); end
    foreach (addrs[i]) begin
      bfm.read({20'd0, addrs[i]}, v);
      expect_eq($sformatf("reg %0h", addrs[i]), v, vals[i] & masks[i]);
    end
    expect_eq("tx_en",   tx_en,   vals[0][0]);
    expect_eq("gen_en",  gen_en,  vals[0][1]);
    expect_eq("gen_alt", gen_alt, vals[0][2]);
    expect_eq("rx_en",   rx_en,   vals[0][3]);
    expect_eq("src_mac", cfg.src_mac, {vals[2][15:0], vals[1]});
    expect_eq("src_ip",  cfg.src_ip,  vals[3]);
    expect_eq("dst_ip",  cfg.dst_ip,  vals[4]);
    expect_eq("ports_a", {cfg.src_port, cfg.dst_port}, vals[5]);
    expect_eq("ports_b", ports_b, vals[6]);
    expect_eq("rx_port", rx_port, vals[7][15:0]);
    expect_eq("gen_len", gen_len, vals[8][15:0]);
    expect_eq("gen_gap", gen_gap, vals[9][15:0]);
    expect_eq("gen_count", gen_count, vals[10]);
    // statistics
    count_on = 1;
    repeat (500) @(negedge clk);
    count_on = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < NSTAT; i++) begin
      bfm.read(32'(REG_STAT_BASE) + 32'(4*i), v);
      expect_eq($sformatf("stat %0d", i), v, nev[i]);
    end
    // ARP cache
    for (int i = 0; i < 16; i++) begin
      int idx; idx = 16 * i + 3;
      arp_lo[i] = $urandom; arp_hi[i] = $urandom & 32'hffff;
      bfm.write(32'(REG_ARP_BASE) + 32'(8*idx), arp_lo[i]);
      bfm.write(32'(REG_ARP_BASE) + 32'(8*idx + 4), arp_hi[i]);
    end
    for (int i = 0; i < 16; i++) begin
      int idx; idx = 16 * i + 3;
      bfm.read(32'(REG_ARP_BASE) + 32'(8*idx), v);     expect_eq("arp lo", v, arp_lo[i]);
      bfm.read(32'(REG_ARP_BASE) + 32'(8*idx + 4), v); expect_eq("arp hi", v, arp_hi[i]);
      @(negedge clk); arp_idx = 8'(idx);
      @(negedge clk);
      expect_eq("arp lookup", arp_mac, {arp_hi[i][15:0], arp_lo[i]});
    end
    expect_eq("bus time-outs", bfm.errors, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
