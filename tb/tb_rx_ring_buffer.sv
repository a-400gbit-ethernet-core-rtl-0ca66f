// tb_rx_ring_buffer -- self-checking test of the receive ring buffer.
// Frames arrive without back-pressure, as from the MAC. Some carry the error flag,
// some are longer than a slot, and a burst arrives while the reader is stopped so
// that the ring overflows. Every frame read out must be one of the good frames that
// found a free slot, in order and unchanged; the overflow and error pulses must count
// exactly the frames the testbench expects to be dropped.
module tb_rx_ring_buffer;
  import eth400g_pkg::*;
  import tb_eth_util::*;
  localparam int NS = 4, SB = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic s_valid, s_err, m_valid, m_ready, frame_in, drop_overflow, drop_error;
  axis_t s_axis, m_axis;

  rx_ring_buffer #(.NSLOTS(NS), .SLOT_BEATS(SB)) dut (.*);

  int checks = 0, failures = 0;
  bq_t exp_q[$];
  beats_t cur;
  int n_in = 0, n_ovf = 0, n_err = 0;
  bit stop_reader = 0;

  always @(negedge clk) m_ready = !stop_reader && ($urandom % 3 != 0);

  always @(posedge clk) if (rst_n) begin
    n_in += int'(frame_in); n_ovf += int'(drop_overflow); n_err += int'(drop_error);
    if (m_valid && m_ready) begin
      cur.push_back(m_axis);
      if (m_axis.tlast) begin
        bq_t e; e = exp_q.pop_front(); checks++;
        if (first_diff(from_beats(cur), e) != -1) begin failures++; $display("frame mismatch"); end
        cur = {};
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frames are written back to back; the model tracks which ones get a slot
  task automatic push(input bq_t f, input bit err);
    beats_t b;
    b = to_beats(f);
    foreach (b[i]) begin
      @(negedge clk);
      s_valid = 1; s_axis = b[i]; s_err = err && b[i].tlast;
    end
    @(negedge clk);
    s_valid = 0; s_err = 0;
  endtask

  int exp_ovf = 0, exp_err = 0, sent = 0;
  initial begin
    s_valid = 0; s_err = 0; s_axis = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      bq_t f; bit err; int len;
      err = ($urandom % 6 == 0);
      len = (n % 9 == 4) ? SB*BYTES + 1 + $urandom % 100 : 60 + $urandom % (SB*BYTES - 59);
      f = rand_bytes(len);
      // wait for room so that only the planned drops happen here
      wait (dut.u_ring.count < NS);
      push(f, err);
      sent++;
      if (len > SB*BYTES || err) exp_err++;
      else exp_q.push_back(f);
    end
    wait (exp_q.size() == 0);
    // overflow: reader stopped, NS+3 good frames arrive
    stop_reader = 1;
    repeat (3) @(negedge clk);
    for (int n = 0; n < NS + 3; n++) begin
      bq_t f;
      f = rand_bytes(200 + $urandom % 300);   // 2 beats or more
      push(f, 0);
      sent++;
      if (n < NS) exp_q.push_back(f); else exp_ovf++;
    end
    stop_reader = 0;
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    checks += 3;
    if (n_in != sent)     begin failures++; $display("frame_in %0d, sent %0d", n_in, sent); end
    if (n_ovf != exp_ovf) begin failures++; $display("overflow %0d, exp %0d", n_ovf, exp_ovf); end
    if (n_err != exp_err) begin failures++; $display("error drops %0d, exp %0d", n_err, exp_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
