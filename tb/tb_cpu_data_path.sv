// tb_cpu_data_path -- self-checking test of the CPU data path over its AXI4-Lite
// memory map. TX: frames written word by word and sent with TX_SEND must leave on
// m_axis unchanged, with the TX-slot-free bit dropping when all slots hold frames.
// RX: broadcast and unicast non-stream frames must be readable through RX_STATUS
// and the RX window; UDP stream frames and frames for other MACs must not appear;
// frames arriving while the buffer and ring are full must be counted as overflow.
module tb_cpu_data_path;
  import eth400g_pkg::*;
  import tb_eth_util::*;
  localparam int SL = 2, SB = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam logic [47:0] MY_MAC = 48'h0A0B_0C0D_0E0F;
  localparam logic [31:0] MY_IP  = 32'hC0A8_0A01;
  localparam logic [15:0] PORT   = 16'd7000;

  axil_req_t axil_req;
  axil_rsp_t axil_rsp;
  logic mac_rx_valid, mac_rx_err, m_valid, m_ready, tx_sent, rx_got, rx_overflow;
  axis_t mac_rx_axis, m_axis;

  cpu_data_path #(.SLOTS(SL), .SLOT_BEATS(SB)) dut (
    .clk, .rst_n, .axil_req, .axil_rsp, .rx_en(1'b1), .my_mac(MY_MAC), .my_ip(MY_IP),
    .rx_port(PORT), .mac_rx_valid, .mac_rx_axis, .mac_rx_err, .m_valid, .m_ready, .m_axis,
    .tx_sent, .rx_got, .rx_overflow);
  axil_bfm bfm (.clk, .req(axil_req), .rsp(axil_rsp));

  int checks = 0, failures = 0;
  bq_t tx_exp[$];
  beats_t cur;
  int n_ovf = 0;

  always @(posedge clk) if (rst_n) begin
    n_ovf += int'(rx_overflow);
    if (m_valid && m_ready) begin
      cur.push_back(m_axis);
      if (m_axis.tlast) begin
        bq_t e; e = tx_exp.pop_front(); checks++;
        if (first_diff(from_beats(cur), e) != -1) begin failures++; $display("TX frame mismatch"); end
        cur = {};
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cpu_send(input bq_t f);
    for (int w = 0; w < (f.size() + 3) / 4; w++) begin
      logic [31:0] d = '0;
      for (int b = 0; b < 4; b++) if (4*w + b < f.size()) d[8*b +: 8] = f[4*w + b];
      bfm.write(32'(4*w), d);
    end
    bfm.write(32'h1000, f.size());
    tx_exp.push_back(f);
  endtask

  task automatic mac_push(input bq_t f);
    beats_t b;
    b = to_beats(f);
    foreach (b[i]) begin
      @(negedge clk);
      mac_rx_valid = 1; mac_rx_axis = b[i];
    end
    @(negedge clk);
    mac_rx_valid = 0;
  endtask

  task automatic cpu_recv(output bq_t f, output bit ok);
    logic [31:0] st, d;
    int t = 0;
    f = {};
    do begin bfm.read(32'h1004, st); t++; end while (!st[31] && t < 50);
    ok = st[31];
    if (!ok) return;
    for (int w = 0; w < (int'(st[15:0]) + 3) / 4; w++) begin
      bfm.read(32'h0800 + 32'(4*w), d);
      for (int b = 0; b < 4; b++) if (4*w + b < int'(st[15:0])) f.push_back(d[8*b +: 8]);
    end
    bfm.write(32'h1004, 0);
  endtask

  bq_t rx_exp[$];
  initial begin
    logic [31:0] st;
    mac_rx_valid = 0; mac_rx_err = 0; mac_rx_axis = '0; m_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // TX: a few frames of random length
    for (int n = 0; n < 5; n++) cpu_send(rand_bytes(60 + $urandom % (SB*BYTES - 60)));
    // TX slots fill while the MAC side is stopped
    wait (tx_exp.size() == 0);
    m_ready = 0;
    // one single-beat frame waits in the output register, SL more fill the ring
    for (int n = 0; n < SL + 1; n++) cpu_send(rand_bytes(64));
    bfm.read(32'h1000, st);
    checks++;
    if (st[0] !== 1'b0) begin failures++; $display("TX slot-free bit still set with ring full"); end
    m_ready = 1;
    wait (tx_exp.size() == 0);
    // RX
    for (int n = 0; n < 12; n++) begin
      bq_t f, g;
      bit ok;
      int kind = n % 4;
      f = exp_udp_frame(kind == 0 ? 48'hFFFF_FFFF_FFFF : MY_MAC, 48'h1122_3344_5566,
                        32'hC0A8_0A02, MY_IP, 1234, kind == 2 ? PORT : PORT + 5, n,
                        rand_bytes(20 + $urandom % 300));
      if (kind == 3) f[5] = 8'h99;     // another node's MAC
      mac_push(f);
      if (kind == 0 || kind == 1) begin
        cpu_recv(g, ok);
        checks++;
        if (!ok || first_diff(g, f) != -1) begin failures++; $display("RX frame %0d wrong (ok=%0d)", n, ok); end
      end
    end
    repeat (20) @(negedge clk);
    bfm.read(32'h1004, st);
    checks++;
    if (st[31] !== 1'b0) begin failures++; $display("stream or foreign frame reached the CPU"); end
    // overflow: one frame in the buffer, SL in the ring, the rest dropped
    for (int n = 0; n < SL + 4; n++) begin
      bq_t f;
      f = exp_udp_frame(48'hFFFF_FFFF_FFFF, 48'h1122_3344_5566, 32'hC0A8_0A02, MY_IP, 1, 2, n,
                        rand_bytes(300));
      mac_push(f);
      if (n < SL + 1) rx_exp.push_back(f);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (n_ovf != 3) begin failures++; $display("overflow count %0d, expected 3", n_ovf); end
    while (rx_exp.size() > 0) begin
      bq_t g, e;
      bit ok;
      cpu_recv(g, ok);
      e = rx_exp.pop_front();
      checks++;
      if (!ok || first_diff(g, e) != -1) begin failures++; $display("queued RX frame wrong"); end
    end
    checks++;
    if (bfm.errors != 0) begin failures++; $display("bus time-outs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
