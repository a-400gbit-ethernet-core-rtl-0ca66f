// tb_eth400g_top -- end-to-end test of the 400GbE UDP core at its default sizes.
//
// The MAC/PHY is replaced by a loopback model, and the core is set up to send to its
// own MAC and IP, so every frame it transmits comes back to its receive side. The
// test goes through:
//  1. user payloads on port pair A (must return on m_rx unchanged) alternating with
//     short payloads on pair B (dropped by the streaming filter, delivered to the CPU
//     data path, read by the CPU over the bus and compared with reference frames);
//  2. CPU-sent broadcast frames while streaming traffic flows (arbitration), read
//     back by the CPU;
//  3. the MAC holding off transmission (back-pressure up to the framer: stall);
//  4. a frame received with a bad FCS (dropped by the RX ring buffer);
//  5. the test generator with 8192-byte packets back to back: sequence counters and
//     payload checked, packet rate checked against 1024 bits x 390.625 MHz;
//  6. the generator with alternating A/B packets while the receiver is stopped, so
//     the RX ring overflows; lost packets must show up as gaps in the sequence
//     counter and match the overflow statistics.
// Finally the statistics registers are compared with what the testbench counted,
// and each mechanism above must have occurred at least once.
module tb_eth400g_top;
  import eth400g_pkg::*;
  import tb_eth_util::*;

  logic clk = 0, rst_n = 0;
  always #1.28 clk = ~clk;    // 2.56 ns: 390.625 MHz

  localparam logic [47:0] MY_MAC = 48'h0A0B_0C0D_0E0F;
  localparam logic [31:0] MY_IP  = 32'hC0A8_0A21;

  axil_req_t regs_req, cpu_req;
  axil_rsp_t regs_rsp, cpu_rsp;
  logic s_tx_valid, s_tx_ready, s_tx_sel, m_rx_valid, m_rx_ready;
  axis_t s_tx_axis, m_rx_axis, mac_tx_axis, mac_rx_axis;
  logic mac_tx_valid, mac_tx_ready, mac_rx_valid, mac_rx_err;
  logic hold, corrupt;

  eth400g_top dut (
    .clk, .rst_n,
    .regs_axil_req(regs_req), .regs_axil_rsp(regs_rsp),
    .cpu_axil_req(cpu_req), .cpu_axil_rsp(cpu_rsp),
    .s_tx_valid, .s_tx_ready, .s_tx_axis, .s_tx_sel,
    .m_rx_valid, .m_rx_ready, .m_rx_axis,
    .mac_tx_valid, .mac_tx_ready, .mac_tx_axis,
    .mac_rx_valid, .mac_rx_axis, .mac_rx_err);

  dcmac_loopback_model #(.LAT(8)) mac (
    .clk, .rst_n, .hold, .corrupt,
    .tx_valid(mac_tx_valid), .tx_ready(mac_tx_ready), .tx_axis(mac_tx_axis),
    .rx_valid(mac_rx_valid), .rx_axis(mac_rx_axis), .rx_err(mac_rx_err));

  axil_bfm regs (.clk, .req(regs_req), .rsp(regs_rsp));
  axil_bfm cpu  (.clk, .req(cpu_req),  .rsp(cpu_rsp));

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- observation ----------------
  int n_fcs_hw = 0;
  int n_mac_tx = 0, n_stall = 0, n_arb_both = 0, n_spill = 0, n_flush = 0;
  int gen_mode = 0;            // 0: payloads from pay_exp; 1: generator payloads
  bq_t pay_exp[$];
  beats_t cur;
  int gen_seqs[$];
  int gen_bad = 0, n_rx_pay = 0;

  always @(posedge clk) if (rst_n) begin
    if (mac_tx_valid && mac_tx_ready && mac_tx_axis.tlast) n_mac_tx++;
    if (dut.u_stream.tx_stall) n_stall++;
    if (dut.u_stream.rr_err) n_fcs_hw++;
    if (dut.u_arb.s0_valid && dut.u_arb.s1_valid) n_arb_both++;
    if (dut.u_stream.u_framer.wr_en && dut.u_stream.u_framer.state == 1'b1) n_spill++;
    if (dut.u_stream.u_filter.state == 2'd2 && m_rx_ready) n_flush++;
    if (m_rx_valid && m_rx_ready) begin
      cur.push_back(m_rx_axis);
      if (m_rx_axis.tlast) begin
        bq_t got;
        got = from_beats(cur); cur = {};
        n_rx_pay++;
        if (gen_mode == 0) begin
          bq_t e;
          e = pay_exp.pop_front();
          check("user payload returned", first_diff(got, e) == -1);
          if (first_diff(got, e) != -1)
            $display("  got %0d bytes, expected %0d, first difference %0d, at %0t", got.size(), e.size(), first_diff(got, e), $time);
        end else begin
          bit ok;
          ok = (got.size() == 8192);
          for (int j = 2; j < got.size(); j++)
            if (got[j] != (8'(((j / BYTES) % 2) * 128 + (j % BYTES)) ^ got[1])) ok = 0;
          if (!ok) gen_bad++;
          gen_seqs.push_back({got[0], got[1]});
        end
      end
    end
  end

  // ---------------- stimulus helpers ----------------
  bit taken;
  always @(posedge clk) if (s_tx_valid && s_tx_ready) taken <= 1;

  task automatic user_send(input bq_t p, input bit sel);
    beats_t b;
    b = to_beats(p);
    @(negedge clk);
    foreach (b[i]) begin
      s_tx_valid = 1; s_tx_axis = b[i]; s_tx_sel = sel; taken = 0;
      do @(negedge clk); while (!taken);
    end
    s_tx_valid = 0;
  endtask

  task automatic cpu_recv(output bq_t f, output bit ok);
    logic [31:0] st, d;
    int t = 0;
    f = {};
    do begin cpu.read(32'h1004, st); t++; end while (!st[31] && t < 200);
    ok = st[31];
    if (!ok) return;
    for (int w = 0; w < (int'(st[15:0]) + 3) / 4; w++) begin
      cpu.read(32'h0800 + 32'(4*w), d);
      for (int k = 0; k < 4; k++) if (4*w + k < int'(st[15:0])) f.push_back(d[8*k +: 8]);
    end
    cpu.write(32'h1004, 0);
  endtask

  task automatic cpu_send(input bq_t f);
    for (int w = 0; w < (f.size() + 3) / 4; w++) begin
      logic [31:0] d;
      d = '0;
      for (int k = 0; k < 4; k++) if (4*w + k < f.size()) d[8*k +: 8] = f[4*w + k];
      cpu.write(32'(4*w), d);
    end
    cpu.write(32'h1000, f.size());
  endtask

  function automatic bq_t arp_frame(input int n);
    bq_t f;
    for (int i = 0; i < 6; i++) f.push_back(8'hff);
    for (int i = 5; i >= 0; i--) f.push_back(8'((MY_MAC >> (8*i)) & 'hff));
    f.push_back(8'h08); f.push_back(8'h06);
    for (int i = 0; i < 46; i++) f.push_back(8'(n + i));
    return f;
  endfunction

  function automatic int stat_addr(input stat_e s);
    return int'(REG_STAT_BASE) + 4 * int'(s);
  endfunction

  // ---------------- the test ----------------
  int ipid = 0;
  logic [31:0] v, st0 [NSTAT], st1 [NSTAT];
  int n_cpu_tx = 0, n_cpu_rx = 0, n_fcs = 0;
  int cyc = 0, c_first, c_last;
  int done_cyc[$];
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.u_gen.pkt_done) done_cyc.push_back(cyc);
  end

  initial begin
    s_tx_valid = 0; s_tx_axis = '0; s_tx_sel = 0; m_rx_ready = 1; hold = 0; corrupt = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    regs.write(32'(REG_SRC_MAC_LO), MY_MAC[31:0]);
    regs.write(32'(REG_SRC_MAC_HI), {16'd0, MY_MAC[47:32]});
    regs.write(32'(REG_SRC_IP), MY_IP);
    regs.write(32'(REG_DST_IP), MY_IP);
    regs.write(32'(REG_PORTS_A), {16'd4000, 16'd7000});
    regs.write(32'(REG_PORTS_B), {16'd4001, 16'd7001});
    regs.write(32'(REG_RX_PORT), 32'd7000);
    regs.write(32'(REG_ARP_BASE) + 32'(8 * MY_IP[7:0]), MY_MAC[31:0]);
    regs.write(32'(REG_ARP_BASE) + 32'(8 * MY_IP[7:0]) + 4, {16'd0, MY_MAC[47:32]});
    regs.write(32'(REG_CTRL), 32'h9);   // tx_en, rx_en

    // 1. user stream, pairs A and B
    for (int n = 0; n < 8; n++) begin
      bq_t p, q, g;
      bit ok;
      p = rand_bytes(1 + $urandom % 9000);
      pay_exp.push_back(p);
      user_send(p, 0);
      ipid++;
      q = rand_bytes(18 + $urandom % 150);
      user_send(q, 1);
      cpu_recv(g, ok);
      check("pair-B frame delivered to the CPU",
            ok && first_diff(g, exp_udp_frame(MY_MAC, MY_MAC, MY_IP, MY_IP, 4001, 7001, ipid, q)) == -1);
      ipid++;
      n_cpu_rx++;
    end
    wait (pay_exp.size() == 0);

    // 2. CPU frames while the stream is busy
    fork
      for (int n = 0; n < 4; n++) begin
        bq_t p;
        p = rand_bytes(8000);
        pay_exp.push_back(p);
        user_send(p, 1'b0);
        ipid++;
      end
      for (int n = 0; n < 3; n++) begin cpu_send(arp_frame(n)); n_cpu_tx++; end
    join_none
    for (int n = 0; n < 3; n++) begin
      bq_t g;
      bit ok;
      cpu_recv(g, ok);
      check("CPU broadcast frame looped back", ok && first_diff(g, arp_frame(n)) == -1);
      n_cpu_rx++;
    end
    wait fork;
    wait (pay_exp.size() == 0);

    // 3. MAC holds off: the framer must stall its source
    hold = 1;
    fork
      for (int n = 0; n < 12; n++) begin
        bq_t p;
        p = rand_bytes(4000 + $urandom % 4000);
        pay_exp.push_back(p);
        user_send(p, 0);
        ipid++;
      end
    join_none
    repeat (3000) @(negedge clk);
    hold = 0;
    wait fork;
    wait (pay_exp.size() == 0);

    // 4. one frame with a bad FCS
    @(negedge clk);
    corrupt = 1; @(negedge clk); corrupt = 0;
    user_send(rand_bytes(500), 0);   // lost
    ipid++; n_fcs++;
    begin
      bq_t p;
      p = rand_bytes(700);
      pay_exp.push_back(p);
      user_send(p, 0);
      ipid++;
    end
    wait (pay_exp.size() == 0);
    repeat (50) @(negedge clk);
    for (int i = 0; i < NSTAT; i++) regs.read(32'(stat_addr(stat_e'(i))), st0[i]);

    // 5. generator: 8192-byte packets, back to back, pair A only
    gen_mode = 1;
    regs.write(32'(REG_GEN_LEN), 32'd8192);
    regs.write(32'(REG_GEN_GAP), 32'd0);
    regs.write(32'(REG_GEN_COUNT), 32'd30);
    regs.write(32'(REG_CTRL), 32'hB);   // + gen_en
    wait (done_cyc.size() == 30);
    c_first = done_cyc[0]; c_last = done_cyc[29];
    wait (n_rx_pay >= 0 && gen_seqs.size() == 30);
    begin
      real gbps;
      // 2.56 ns per cycle at 390.625 MHz
      gbps = 29.0 * 8192 * 8 / (real'(c_last - c_first) * 2.56);
      $display("generator payload rate %0.1f Gb/s over 29 packets (%0d cycles)", gbps, c_last - c_first);
      check("payload rate of 8192-byte packets above 380 Gb/s", gbps > 380.0);
    end
    check("generated payloads intact", gen_bad == 0);
    begin
      bit ok = 1;
      foreach (gen_seqs[i]) if (gen_seqs[i] != i) ok = 0;
      check("sequence counters 0..29 without loss", ok);
    end
    regs.write(32'(REG_CTRL), 32'h9);
    repeat (100) @(negedge clk);

    // 6. generator with pairs A/B while the receiver is stopped
    gen_seqs = {};
    regs.write(32'(REG_GEN_COUNT), 32'd40);
    m_rx_ready = 0;
    regs.write(32'(REG_CTRL), 32'hF);   // + gen_alt
    repeat (40 * 66 + 200) @(negedge clk);
    m_rx_ready = 1;
    repeat (2000) @(negedge clk);
    regs.write(32'(REG_CTRL), 32'h9);
    repeat (100) @(negedge clk);
    for (int i = 0; i < NSTAT; i++) regs.read(32'(stat_addr(stat_e'(i))), st1[i]);
    begin
      int lost_a = 0, prev = -2;
      bit even = 1;
      foreach (gen_seqs[i]) begin
        if (gen_seqs[i] % 2 != 0) even = 0;
        lost_a += (gen_seqs[i] - prev) / 2 - 1;
        prev = gen_seqs[i];
      end
      lost_a += (38 - prev) / 2;
      $display("phase 6: %0d pair-A packets received, %0d lost; ring overflows %0d, filter drops %0d",
               gen_seqs.size(), lost_a, st1[ST_RX_OVERFLOW] - st0[ST_RX_OVERFLOW],
               st1[ST_RX_DROP] - st0[ST_RX_DROP]);
      check("only pair-A packets reach the stream output", even);
      check("loss visible in the sequence counter", lost_a > 0);
      check("every packet received, filtered or counted as overflow",
            gen_seqs.size() + (st1[ST_RX_DROP] - st0[ST_RX_DROP]) +
            (st1[ST_RX_OVERFLOW] - st0[ST_RX_OVERFLOW]) == 40);
      check("generated payloads intact (phase 6)", gen_bad == 0);
    end

    // statistics against the testbench's own counts
    check("TX_FRAMES statistic", st1[ST_TX_FRAMES] == n_mac_tx);
    check("RX_FRAMES statistic", st1[ST_RX_FRAMES] == n_mac_tx);
    check("GEN_PKTS statistic",  st1[ST_GEN_PKTS] == 70);
    check("CPU_TX statistic",    st1[ST_CPU_TX] == n_cpu_tx);
    check("CPU_RX statistic",    st1[ST_CPU_RX] == n_cpu_rx);
    check("TX_STALL statistic",  st1[ST_TX_STALL] == n_stall);

    // every mechanism happened
    $display("mechanisms: stall cycles %0d, arbitration contention %0d, spill beats %0d, flush beats %0d",
             n_stall, n_arb_both, n_spill, n_flush);
    $display("            filter drops %0d, ring overflows %0d, FCS drops %0d, CPU tx %0d rx %0d",
             st1[ST_RX_DROP], st1[ST_RX_OVERFLOW], n_fcs, n_cpu_tx, n_cpu_rx);
    check("stall happened",            n_stall > 0);
    check("arbitration contention",    n_arb_both > 0);
    check("framer spill beat",         n_spill > 0);
    check("filter flush beat",         n_flush > 0);
    check("filter drop happened",      st1[ST_RX_DROP] > 0);
    check("RX ring overflow happened", st1[ST_RX_OVERFLOW] > 0);
    check("bad-FCS frame dropped",     n_fcs_hw == n_fcs);
    check("CPU TX and RX happened",    n_cpu_tx > 0 && n_cpu_rx > 0);
    check("bus time-outs",             regs.errors == 0 && cpu.errors == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
