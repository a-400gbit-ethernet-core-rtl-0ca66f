// tb_streaming_data_path -- self-checking loopback test of the streaming data path.
// The TX frames it produces are fed straight back into its MAC receive input (the
// node's own IP and MAC as destination). Payloads sent on port pair A (destination
// port = rx_port) must come back unchanged on m_rx; those on pair B must be dropped
// by the filter; every frame must also match the reference frame builder.
module tb_streaming_data_path;
  import eth400g_pkg::*;
  import tb_eth_util::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  udp_cfg_t cfg;
  logic [31:0] ports_b;
  logic [15:0] rx_port;
  logic [7:0] arp_idx;
  logic [47:0] arp_mac;
  logic s_valid, s_ready, s_sel, m_tx_valid, m_tx_ready, m_rx_valid, m_rx_ready;
  axis_t s_axis, m_tx_axis, m_rx_axis;
  logic tx_stall, rx_frame, rx_pass, rx_drop, rx_overflow;

  streaming_data_path #(.TX_SLOTS(4), .RX_SLOTS(4), .SLOT_BEATS(16)) dut (
    .clk, .rst_n, .tx_en(1'b1), .rx_en(1'b1), .cfg, .ports_b, .rx_port, .arp_idx, .arp_mac,
    .s_valid, .s_ready, .s_axis, .s_sel, .m_tx_valid, .m_tx_ready, .m_tx_axis,
    .mac_rx_valid(m_tx_valid && m_tx_ready), .mac_rx_axis(m_tx_axis), .mac_rx_err(1'b0),
    .m_rx_valid, .m_rx_ready, .m_rx_axis, .tx_stall, .rx_frame, .rx_pass, .rx_drop, .rx_overflow);

  always_ff @(posedge clk) arp_mac <= (arp_idx == cfg.src_ip[7:0]) ? cfg.src_mac : 48'h0;

  int checks = 0, failures = 0;
  bq_t frames_exp[$], pay_exp[$];
  beats_t cur_f, cur_p;
  int npass = 0, ndrop = 0, ipid = 0;

  always @(negedge clk) begin m_tx_ready = ($urandom % 5 != 0); m_rx_ready = ($urandom % 50 != 0); end

  always @(posedge clk) if (rst_n) begin
    npass += int'(rx_pass); ndrop += int'(rx_drop);
    if (rx_overflow) begin failures++; $display("RX ring overflow"); end
    if (rx_drop && dut.rr_err) $display("%0t ring error drop", $time);
    if (m_tx_valid && m_tx_ready) begin
      cur_f.push_back(m_tx_axis);
      if (m_tx_axis.tlast) begin
        bq_t e; e = frames_exp.pop_front(); checks++;
        if (first_diff(from_beats(cur_f), e) != -1) begin failures++; $display("TX frame mismatch"); end
        cur_f = {};
      end
    end
    if (m_rx_valid && m_rx_ready) begin
      cur_p.push_back(m_rx_axis);
      if (m_rx_axis.tlast) begin
        bq_t e; e = pay_exp.pop_front(); checks++;
        if (first_diff(from_beats(cur_p), e) != -1) begin failures++; $display("RX payload mismatch %0d vs %0d at %0d", from_beats(cur_p).size(), e.size(), first_diff(from_beats(cur_p), e)); end
        cur_p = {};
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit taken;
  always @(posedge clk) if (s_valid && s_ready) taken <= 1;

  initial begin
    int na = 0;
    s_valid = 0; s_axis = '0; s_sel = 0;
    cfg.src_mac = 48'h0A0B_0C0D_0E0F; cfg.src_ip = 32'hC0A8_0A01; cfg.dst_ip = 32'hC0A8_0A01;
    cfg.src_port = 16'd4000; cfg.dst_port = 16'd7000; ports_b = {16'd4001, 16'd7001};
    rx_port = 16'd7000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      bq_t p;
      beats_t b;
      bit sel;
      p = rand_bytes(1 + $urandom % (16*BYTES - 42));
      sel = ($urandom % 3 == 0);
      frames_exp.push_back(exp_udp_frame(cfg.src_mac, cfg.src_mac, cfg.src_ip, cfg.dst_ip,
          sel ? 4001 : 4000, sel ? 7001 : 7000, ipid, p));
      ipid++;
      if (!sel) begin pay_exp.push_back(p); na++; end
      b = to_beats(p);
      @(negedge clk);
      foreach (b[i]) begin
        s_valid = 1; s_axis = b[i]; s_sel = sel; taken = 0;
        do @(negedge clk); while (!taken);
      end
      s_valid = 0;
    end
    wait (frames_exp.size() == 0 && pay_exp.size() == 0);
    repeat (20) @(negedge clk);
    checks++;
    if (npass != na || ndrop != 60 - na) begin
      failures++; $display("filter passed %0d dropped %0d, expected %0d and %0d", npass, ndrop, na, 60 - na);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
