// tb_eth400g_pkg -- self-checking test of the shared helper functions.
//
// keep_of and count_of are checked against each other and against a loop count for
// every byte count 0..128. ip_checksum is checked against a published known-answer
// IPv4 header (192.168.0.1 -> 192.168.0.199, total length 0x73, DF, TTL 64, UDP,
// checksum 0xB861), and a header with its checksum filled in must sum to 0xFFFF.
// udp_header is checked byte by byte against that same header plus hand-written
// Ethernet and UDP fields, and its checksum against random addresses and lengths
// by re-summing the result. The expected values are written out here, independent
// of the package. A watchdog ends the run if it does not finish.
module tb_eth400g_pkg;
  import eth400g_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One's-complement sum of the 20 IPv4 header bytes at offset 14 of a header.
  function automatic logic [15:0] ones_sum(input logic [HDR_BYTES*8-1:0] h);
    int s;
    s = 0;
    for (int i = 0; i < 10; i++) s += {h[8*(14+2*i) +: 8], h[8*(15+2*i) +: 8]};
    while (s > 'hffff) s = (s & 'hffff) + (s >> 16);
    return 16'(s);
  endfunction

  initial begin
    // keep_of / count_of
    for (int n = 0; n <= BYTES; n++) begin
      logic [BYTES-1:0] k;
      int ones;
      bit contiguous;
      k = keep_of(CNT_W'(n));
      ones = 0; contiguous = 1;
      for (int i = 0; i < BYTES; i++) begin
        ones += int'(k[i]);
        if (k[i] != (i < n)) contiguous = 0;
      end
      check(ones == n && contiguous, $sformatf("keep_of(%0d)", n));
      check(int'(count_of(k)) == n, $sformatf("count_of(keep_of(%0d))", n));
    end

    // Known-answer IPv4 header checksum
    begin
      logic [9:0][15:0] w;
      w = '{16'hc0a8, 16'h00c7, 16'hc0a8, 16'h0001, 16'h0000, 16'h4011,
            16'h4000, 16'h0000, 16'h0073, 16'h4500};   // w[9] first in this literal
      check(ip_checksum(w) == 16'hb861, $sformatf("ip_checksum known answer %h", ip_checksum(w)));
    end

    // udp_header against hand-written bytes
    begin
      udp_cfg_t c;
      logic [HDR_BYTES*8-1:0] h;
      byte unsigned exp [HDR_BYTES];
      int bad;
      c.src_mac  = 48'h02_11_22_33_44_55;
      c.src_ip   = 32'hc0a8_0001;
      c.dst_ip   = 32'hc0a8_00c7;
      c.src_port = 16'd4660;   // 0x1234
      c.dst_port = 16'd60000;  // 0xEA60
      h = udp_header(48'h0a_0b_0c_0d_0e_0f, c, 16'h0057, 16'h0000);
      exp = '{8'h0a, 8'h0b, 8'h0c, 8'h0d, 8'h0e, 8'h0f,
              8'h02, 8'h11, 8'h22, 8'h33, 8'h44, 8'h55,
              8'h08, 8'h00,
              8'h45, 8'h00, 8'h00, 8'h73, 8'h00, 8'h00, 8'h40, 8'h00,
              8'h40, 8'h11, 8'hb8, 8'h61,
              8'hc0, 8'ha8, 8'h00, 8'h01, 8'hc0, 8'ha8, 8'h00, 8'hc7,
              8'h12, 8'h34, 8'hea, 8'h60, 8'h00, 8'h5f, 8'h00, 8'h00};
      bad = 0;
      for (int i = 0; i < HDR_BYTES; i++)
        if (h[8*i +: 8] != exp[i]) begin
          bad++;
          $display("  header byte %0d: got %h expected %h", i, h[8*i +: 8], exp[i]);
        end
      check(bad == 0, "udp_header known answer");
    end

    // udp_header with random fields: checksum must verify, lengths must match
    for (int t = 0; t < 200; t++) begin
      udp_cfg_t c;
      logic [HDR_BYTES*8-1:0] h;
      logic [15:0] len, id;
      c.src_mac  = {$urandom, $urandom};
      c.src_ip   = $urandom;
      c.dst_ip   = $urandom;
      c.src_port = 16'($urandom);
      c.dst_port = 16'($urandom);
      len = 16'($urandom_range(0, 16000));
      id  = 16'($urandom);
      h = udp_header(48'($urandom), c, len, id);
      check(ones_sum(h) == 16'hffff, $sformatf("random header %0d checksum", t));
      check({h[8*16 +: 8], h[8*17 +: 8]} == len + 16'd28 &&
            {h[8*38 +: 8], h[8*39 +: 8]} == len + 16'd8 &&
            {h[8*18 +: 8], h[8*19 +: 8]} == id &&
            {h[8*26 +: 8], h[8*27 +: 8], h[8*28 +: 8], h[8*29 +: 8]} == c.src_ip &&
            {h[8*36 +: 8], h[8*37 +: 8]} == c.dst_port &&
            {h[8*20 +: 8], h[8*21 +: 8]} == 16'h4000 &&
            h[8*22 +: 8] == 8'd64 && h[8*23 +: 8] == 8'd17,
            $sformatf("random header %0d fields", t));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
