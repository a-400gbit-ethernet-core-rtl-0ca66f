// tb_rx_filter -- self-checking test of the RX filter in both modes.
// The same random mix of frames (for this node's UDP port, with a wrong MAC, IP,
// port, protocol or Ethertype, broadcast, and short frames padded to 60 bytes) is
// fed to a streaming-mode and a CPU-mode filter. The streaming output must be exactly
// the UDP payloads of the matching frames; the CPU output exactly the other frames
// addressed to this MAC or to broadcast; the pass/drop pulses are counted.
module tb_rx_filter;
  import eth400g_pkg::*;
  import tb_eth_util::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam logic [47:0] MY_MAC = 48'h0A0B_0C0D_0E0F;
  localparam logic [31:0] MY_IP  = 32'hC0A8_0A01;
  localparam logic [15:0] PORT   = 16'd7000;

  bit ts, tc;   // beat already taken by the streaming / CPU filter
  logic s_valid, s_ready_s, s_ready_c, mv_s, mv_c, mr_s, mr_c;
  logic pass_s, drop_s, pass_c, drop_c;
  axis_t s_axis, ma_s, ma_c;

  rx_filter #(.STREAM(1'b1)) dut_s (.clk, .rst_n, .rx_en(1'b1), .my_mac(MY_MAC), .my_ip(MY_IP),
    .rx_port(PORT), .s_valid(s_valid && !ts), .s_ready(s_ready_s), .s_axis, .m_valid(mv_s),
    .m_ready(mr_s), .m_axis(ma_s), .passed(pass_s), .dropped(drop_s));
  rx_filter #(.STREAM(1'b0)) dut_c (.clk, .rst_n, .rx_en(1'b1), .my_mac(MY_MAC), .my_ip(MY_IP),
    .rx_port(PORT), .s_valid(s_valid && !tc), .s_ready(s_ready_c), .s_axis, .m_valid(mv_c),
    .m_ready(mr_c), .m_axis(ma_c), .passed(pass_c), .dropped(drop_c));

  int checks = 0, failures = 0;
  bq_t exp_s[$], exp_c[$];
  beats_t cur_s, cur_c;
  int npass_s = 0, ndrop_s = 0, npass_c = 0, ndrop_c = 0, nframes = 0;

  always @(negedge clk) begin mr_s = ($urandom % 4 != 0); mr_c = ($urandom % 4 != 0); end

  always @(posedge clk) if (rst_n) begin
    npass_s += int'(pass_s); ndrop_s += int'(drop_s);
    npass_c += int'(pass_c); ndrop_c += int'(drop_c);
    if (mv_s && mr_s) begin
      cur_s.push_back(ma_s);
      if (ma_s.tlast) begin
        bq_t e; e = exp_s.pop_front(); checks++;
        if (first_diff(from_beats(cur_s), e) != -1) begin
          failures++; $display("stream payload mismatch (%0d vs %0d bytes)", from_beats(cur_s).size(), e.size());
        end
        cur_s = {};
      end
    end
    if (mv_c && mr_c) begin
      cur_c.push_back(ma_c);
      if (ma_c.tlast) begin
        bq_t e; e = exp_c.pop_front(); checks++;
        if (first_diff(from_beats(cur_c), e) != -1) begin failures++; $display("cpu frame mismatch"); end
        cur_c = {};
      end
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // handshakes, sampled at the clock edge
  always @(posedge clk) if (s_valid) begin
    if (!ts && s_ready_s) ts <= 1;
    if (!tc && s_ready_c) tc <= 1;
  end

  // one frame into both filters; each beat is offered to each filter until it took it
  task automatic feed(input bq_t f);
    beats_t b;
    b = to_beats(f);
    foreach (b[i]) begin
      @(negedge clk);
      s_axis = b[i]; s_valid = 1; ts = 0; tc = 0;
      do @(negedge clk); while (!(ts && tc));
    end
    s_valid = 0; ts = 0; tc = 0;
    nframes++;
  endtask

  initial begin
    s_valid = 0; s_axis = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      int kind, plen;
      longint dmac; int unsigned dip; int dport;
      bq_t p, f;
      kind = $urandom % 8;
      plen = (n % 5 == 0) ? 1 + $urandom % 17 : 1 + $urandom % 1500;
      p = rand_bytes(plen);
      dmac = MY_MAC; dip = MY_IP; dport = PORT;
      case (kind)
        1: dmac = 48'h0A0B_0C0D_0E10;
        2: dip = MY_IP + 1;
        3: dport = PORT + 1;
        4: dmac = 48'hFFFF_FFFF_FFFF;
        default: ;
      endcase
      f = exp_udp_frame(dmac, 48'h1122_3344_5566, 32'hC0A8_0A02, dip, 1234, dport, n, p);
      if (kind == 5) f[23] = 8'd6;          // TCP
      if (kind == 6) begin f[12] = 8'h08; f[13] = 8'h06; end  // ARP Ethertype
      while (f.size() < 60) f.push_back(8'h00);   // minimum frame padding
      if (kind == 0 || kind == 7) exp_s.push_back(p);
      else if (kind != 1) exp_c.push_back(f);
      // the two filters must finish each frame before the next so that the
      // shared input stays aligned
      fork
        feed(f);
      join
    end
    wait (exp_s.size() == 0 && exp_c.size() == 0);
    repeat (10) @(negedge clk);
    checks++;
    if (npass_s + ndrop_s != nframes || npass_c + ndrop_c != nframes) begin
      failures++; $display("pass/drop pulses: %0d+%0d, %0d+%0d for %0d frames", npass_s, ndrop_s, npass_c, ndrop_c, nframes);
    end
    $display("stream passed %0d dropped %0d; cpu passed %0d dropped %0d", npass_s, ndrop_s, npass_c, ndrop_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
