// tb_tx_arbiter -- self-checking test of the TX arbiter and its FIFO.
// Two sources offer random frames (byte 0 tags the source) with random gaps; the
// MAC side applies random back-pressure. Each output frame must equal the oldest
// unsent frame of one source, whole and never interleaved; while both sources are
// busy the grants must alternate; with both saturated and the MAC always ready the
// output must carry one beat per clock.
module tb_tx_arbiter;
  import eth400g_pkg::*;
  import tb_eth_util::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic s0_valid, s0_ready, s1_valid, s1_ready, m_valid, m_ready, frame_out;
  axis_t s0_axis, s1_axis, m_axis;

  tx_arbiter #(.FIFO_DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;
  bq_t q0[$], q1[$];          // frames offered, not yet seen at the output
  beats_t cur;
  int last_src = -1, alternations = 0, repeats = 0, nframes = 0, nbeats = 0;
  bit gaps = 1, mac_slow = 1;

  always @(negedge clk) m_ready = !mac_slow || ($urandom % 3 != 0);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    nbeats++;
    cur.push_back(m_axis);
    if (m_axis.tlast) begin
      bq_t got, e;
      int src;
      got = from_beats(cur);
      cur = {};
      src = got[0];
      checks++;
      if (src == 0) e = q0.pop_front(); else e = q1.pop_front();
      if (first_diff(got, e) != -1) begin failures++; $display("frame from source %0d corrupted", src); end
      if (last_src >= 0) begin
        if (src != last_src) alternations++;
        else if (q0.size() > 0 && q1.size() > 0) repeats++;
      end
      last_src = src;
      nframes++;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic source(input int id, input int n);
    for (int k = 0; k < n; k++) begin
      bq_t f;
      beats_t b;
      f = rand_bytes(60 + $urandom % 600);
      f[0] = 8'(id);
      if (id == 0) q0.push_back(f); else q1.push_back(f);
      b = to_beats(f);
      foreach (b[i]) begin
        @(negedge clk);
        while (gaps && $urandom % 5 == 0) begin
          if (id == 0) s0_valid = 0; else s1_valid = 0;
          @(negedge clk);
        end
        if (id == 0) begin s0_valid = 1; s0_axis = b[i]; end
        else         begin s1_valid = 1; s1_axis = b[i]; end
        do @(posedge clk); while (!(id == 0 ? s0_ready : s1_ready));
      end
      @(negedge clk);
      if (id == 0) s0_valid = 0; else s1_valid = 0;
    end
  endtask

  int t0, b0;
  initial begin
    s0_valid = 0; s1_valid = 0; s0_axis = '0; s1_axis = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      source(0, 40);
      source(1, 40);
    join
    wait (q0.size() == 0 && q1.size() == 0);
    // throughput: both sources saturated, MAC always ready
    gaps = 0; mac_slow = 0;
    @(negedge clk);
    t0 = $time; b0 = nbeats;
    fork
      source(0, 10);
      source(1, 10);
    join
    wait (q0.size() == 0 && q1.size() == 0);
    checks++;
    if ((nbeats - b0) * 10 < 8 * (($time - t0) / 2)) begin
      failures++; $display("throughput %0d beats in %0d cycles", nbeats - b0, ($time - t0) / 2);
    end
    checks++;
    if (repeats != 0 || alternations < 20) begin
      failures++; $display("round robin: %0d alternations, %0d repeats", alternations, repeats);
    end
    $display("frames %0d alternations %0d", nframes, alternations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
