// tb_pkt_gen -- self-checking test of the test packet generator.
// For several lengths, gaps and counts it checks every payload byte (sequence
// number in bytes 0-1, pattern {beat[0], byte[6:0]} XOR the low sequence byte elsewhere), the sequence
// increment, the A/B alternation, that exactly gen_count packets are sent, and, with
// the sink always ready, that packets start every n_beats + 1 + gap cycles. A run
// with random back-pressure checks that data hold while m_ready is low.
module tb_pkt_gen;
  import eth400g_pkg::*;
  import tb_eth_util::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic gen_en, gen_alt, m_valid, m_ready, m_sel, pkt_done;
  logic [15:0] gen_len, gen_gap, seq;
  logic [31:0] gen_count;
  axis_t m_axis;

  pkt_gen dut (.*);

  int checks = 0, failures = 0;
  beats_t cur;
  int npk = 0, exp_seq = 0, cyc = 0, last_start = -1, bad_period = 0, period;
  bit slow = 0, in_pkt = 0, sel_first;
  axis_t held; bit held_v = 0;

  always @(negedge clk) m_ready = !slow || ($urandom % 2 == 0);

  always @(posedge clk) if (rst_n) begin
    cyc++;
    // AXI-Stream rule: once valid, data hold until taken
    if (held_v) begin
      checks++;
      if (!m_valid || m_axis !== held) begin failures++; $display("data changed while stalled"); end
    end
    held_v = m_valid && !m_ready; held = m_axis;
    if (m_valid && m_ready) begin
      if (!in_pkt) begin
        if (!slow && last_start >= 0 && cyc - last_start != period) bad_period++;
        last_start = cyc;
        sel_first = m_sel;
      end
      in_pkt = !m_axis.tlast;
      cur.push_back(m_axis);
      if (m_axis.tlast) begin
        bq_t got, e;
        int len;
        got = from_beats(cur); cur = {}; e = {};
        len = (gen_len < 2) ? 2 : int'(gen_len);
        for (int j = 0; j < len; j++) e.push_back(8'(((j / BYTES) % 2) * 128 + (j % BYTES)) ^ 8'(exp_seq));
        e[0] = 8'(exp_seq >> 8); e[1] = 8'(exp_seq & 'hff);
        checks += 2;
        if (first_diff(got, e) != -1) begin failures++; $display("payload %0d wrong at %0d (%0d bytes, exp %0d, seq %0d)", npk, first_diff(got, e), got.size(), e.size(), exp_seq); end
        if (sel_first !== (gen_alt && exp_seq[0])) begin failures++; $display("sel wrong"); end
        exp_seq = (exp_seq + 1) & 'hffff;
        npk++;
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

  task automatic run(input int len, input int gap, input int count, input bit alt, input bit s);
    int n0;
    @(negedge clk);
    gen_len = 16'(len); gen_gap = 16'(gap); gen_count = count; gen_alt = alt; slow = s;
    n0 = npk; exp_seq = 0; last_start = -1; bad_period = 0;
    period = (len + BYTES - 1) / BYTES + 1 + gap;
    gen_en = 1;
    repeat (count * (period + 2) * (s ? 3 : 1) + 20) @(negedge clk);
    checks += 2;
    if (npk - n0 != count) begin failures++; $display("sent %0d packets, expected %0d", npk - n0, count); end
    if (bad_period != 0) begin failures++; $display("len %0d gap %0d: %0d wrong packet periods", len, gap, bad_period); end
    gen_en = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    gen_en = 0; gen_alt = 0; gen_len = 0; gen_gap = 0; gen_count = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(8192, 0, 6, 1, 0);
    run(1, 3, 5, 0, 0);
    run(129, 7, 9, 1, 0);
    run(1000, 2, 12, 1, 1);
    run(300, 0, 20, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
