// tb_udp_tx_framer -- self-checking test of the streaming data framer.
// Random payloads (1 byte to a full slot, random port pair) are framed into a small
// ring buffer; every frame read back is compared byte for byte with a frame built by
// the reference model (header, checksum, lengths, IP id, destination MAC from the
// ARP table model). Also checked: an n-beat payload with no gaps is taken in n+1
// cycles, and the framer holds its source off while the ring is full.
module tb_udp_tx_framer;
  import eth400g_pkg::*;
  import tb_eth_util::*;
  localparam int NS = 2, SB = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic tx_en, s_valid, s_ready, s_sel;
  udp_cfg_t cfg;
  logic [31:0] ports_b;
  logic [7:0] arp_idx;
  logic [47:0] arp_mac;
  axis_t s_axis;
  logic wr_ready, wr_en, hdr_en, commit, stall, frame_done;
  logic [$clog2(SB)-1:0] wr_beat;
  logic [DATA_W-1:0] wr_data, hdr_data;
  logic [$clog2(SB):0] commit_beats;
  logic [CNT_W-1:0] commit_last_bytes;
  logic m_valid, m_ready;
  axis_t m_axis;

  udp_tx_framer #(.SLOT_BEATS(SB)) dut (.*);
  pkt_ring_buffer #(.NSLOTS(NS), .SLOT_BEATS(SB)) ring (
    .clk, .rst_n, .wr_ready, .wr_en, .wr_beat, .wr_data, .wr_wmask('1), .hdr_en, .hdr_data,
    .commit, .commit_beats, .commit_last_bytes, .m_valid, .m_ready, .m_axis, .used());

  // ARP table model: MAC = 02:00:00:00:00:<index> + 0x1000
  always_ff @(posedge clk) arp_mac <= 48'h0200_0000_1000 + 48'(arp_idx);

  int checks = 0, failures = 0;
  bq_t exp_q[$];
  beats_t cur;
  int ipid = 0;

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    cur.push_back(m_axis);
    if (m_axis.tlast) begin
      bq_t got, e;
      int d;
      got = from_beats(cur);
      cur = {};
      e = exp_q.pop_front();
      d = first_diff(got, e);
      checks++;
      if (d != -1) begin
        failures++;
        $display("frame mismatch: size %0d exp %0d first diff %0d", got.size(), e.size(), d);
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

  bit taken;
  always @(posedge clk) if (s_valid && s_ready) taken <= 1;

  task automatic send(input bq_t p, input bit sel, input bit gaps);
    beats_t b;
    b = to_beats(p);
    @(negedge clk);
    foreach (b[i]) begin
      while (gaps && $urandom % 4 == 0) begin s_valid = 0; @(negedge clk); end
      s_valid = 1; s_axis = b[i]; s_sel = sel; taken = 0;
      do @(negedge clk); while (!taken);
    end
    s_valid = 0;
    begin
      int sp, dp;
      sp = sel ? int'(ports_b[31:16]) : int'(cfg.src_port);
      dp = sel ? int'(ports_b[15:0])  : int'(cfg.dst_port);
      exp_q.push_back(exp_udp_frame(48'h0200_0000_1000 + 48'(cfg.dst_ip[7:0]), cfg.src_mac,
                                    cfg.src_ip, cfg.dst_ip, sp, dp, ipid, p));
      ipid++;
    end
  endtask

  int lens[$] = '{1, 2, 85, 86, 87, 128, 129, 170, 213, 214, 256, 8*128-42};
  int t0, t1, st;
  initial begin
    tx_en = 0; s_valid = 0; s_axis = '0; s_sel = 0; m_ready = 1;
    cfg.src_mac = 48'h0A0B_0C0D_0E0F; cfg.src_ip = 32'hC0A8_0A01; cfg.dst_ip = 32'hC0A8_0A37;
    cfg.src_port = 16'd4000; cfg.dst_port = 16'd5000; ports_b = {16'd4001, 16'd5001};
    repeat (3) @(negedge clk);
    rst_n = 1; tx_en = 1;
    foreach (lens[i]) send(rand_bytes(lens[i]), i[0], 1'b0);
    for (int i = 0; i < 40; i++) send(rand_bytes(1 + $urandom % (SB*128 - 42)), $urandom % 2, 1'b1);
    wait (exp_q.size() == 0);
    // rate: a 6-beat payload with no gaps is taken in 7 cycles
    @(negedge clk);
    t0 = $time;
    send(rand_bytes(6*128), 0, 1'b0);
    @(negedge clk);
    wait (s_ready);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 2 > 6 + 2) begin failures++; $display("framer rate: %0d cycles", (t1 - t0) / 2); end
    wait (exp_q.size() == 0);
    // stall: reader stopped, ring fills, framer holds off
    m_ready = 0;
    for (int i = 0; i < NS; i++) send(rand_bytes(200), 0, 1'b0);
    @(negedge clk); s_valid = 1; s_axis = to_beats(rand_bytes(10))[0];
    repeat (3) @(negedge clk);
    checks++;
    if (s_ready !== 1'b0 || stall !== 1'b1) begin failures++; $display("no stall when ring full"); end
    s_valid = 0;
    m_ready = 1;
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
