// tb_pkt_ring_buffer -- self-checking test of the packet ring buffer.
// Writes random frames (beat 0 through the main port or through the header port,
// beats in reverse order) until the ring is full, checks that wr_ready drops, then
// reads with random back-pressure and compares every beat, tkeep and tlast with the
// frames kept by the testbench. A final burst with m_ready held high checks the read
// rate of one beat per clock.
module tb_pkt_ring_buffer;
  import eth400g_pkg::*;
  localparam int NS = 4, SB = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic wr_ready, wr_en, hdr_en, commit, m_valid, m_ready;
  logic [$clog2(SB)-1:0] wr_beat;
  logic [DATA_W-1:0] wr_data, hdr_data;
  logic [DATA_W/32-1:0] wr_wmask;
  logic [$clog2(SB):0] commit_beats;
  logic [CNT_W-1:0] commit_last_bytes;
  axis_t m_axis;
  logic [$clog2(NS):0] used;

  pkt_ring_buffer #(.NSLOTS(NS), .SLOT_BEATS(SB)) dut (.*);

  int checks = 0, failures = 0;
  typedef logic [DATA_W-1:0] beat_t;
  beat_t exp_data[$];
  int    exp_last[$];   // 0 = not last, else bytes in last beat

  function automatic beat_t rnd_beat();
    beat_t b;
    for (int i = 0; i < DATA_W/32; i++) b[32*i +: 32] = $urandom;
    return b;
  endfunction

  task automatic write_frame(input int nb, input int lastb, input bit use_hdr);
    beat_t f[];
    f = new[nb];
    foreach (f[i]) f[i] = rnd_beat();
    for (int i = nb - 1; i >= 1; i--) begin
      @(negedge clk);
      wr_en = 1; wr_beat = i[$clog2(SB)-1:0]; wr_data = f[i]; wr_wmask = '1;
    end
    @(negedge clk);
    wr_en = 0;
    if (use_hdr) begin hdr_en = 1; hdr_data = f[0]; end
    else begin wr_en = 1; wr_beat = 0; wr_data = f[0]; wr_wmask = '1; end
    commit = 1; commit_beats = nb[$clog2(SB):0]; commit_last_bytes = lastb[CNT_W-1:0];
    @(negedge clk);
    wr_en = 0; hdr_en = 0; commit = 0;
    for (int i = 0; i < nb; i++) begin
      exp_data.push_back(f[i]);
      exp_last.push_back(i == nb - 1 ? lastb : 0);
    end
  endtask

  int got_beats = 0;
  bit rand_ready = 1;
  always @(negedge clk) m_ready = rand_ready ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    beat_t e; int l;
    e = exp_data.pop_front(); l = exp_last.pop_front();
    checks++;
    if (m_axis.tdata !== e || m_axis.tlast !== (l != 0) ||
        m_axis.tkeep !== (l != 0 ? keep_of(CNT_W'(l)) : '1)) begin
      failures++;
      $display("mismatch at beat %0d: last=%0d exp_last=%0d", got_beats, m_axis.tlast, l);
    end
    got_beats++;
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0, t1, burst;
  initial begin
    wr_en = 0; hdr_en = 0; commit = 0; wr_data = '0; hdr_data = '0; wr_wmask = '0;
    wr_beat = '0; commit_beats = '0; commit_last_bytes = '0; rand_ready = 0;
    m_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // hold the reader off so the ring fills
    force m_ready = 1'b0;
    for (int f = 0; f < NS; f++) write_frame(1 + $urandom % SB, 1 + $urandom % BYTES, f[0]);
    @(negedge clk);
    checks++;
    if (wr_ready !== 1'b0 || used != NS) begin failures++; $display("ring not full"); end
    release m_ready;
    rand_ready = 1;
    for (int r = 0; r < 12; r++) begin
      wait (wr_ready);
      write_frame(1 + $urandom % SB, 1 + $urandom % BYTES, r[0]);
    end
    wait (exp_data.size() == 0);
    repeat (4) @(negedge clk);
    // rate: one frame of SB beats with the reader always ready
    rand_ready = 0;
    write_frame(SB, BYTES, 1'b1);
    burst = got_beats;
    wait (m_valid); t0 = $time;
    wait (exp_data.size() == 0); t1 = $time;
    checks++;
    if ((t1 - t0) / 2 > SB) begin
      failures++; $display("read rate too low: %0d cycles for %0d beats", (t1 - t0) / 2, SB);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (used != 0 || !wr_ready) begin failures++; $display("ring not empty at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
