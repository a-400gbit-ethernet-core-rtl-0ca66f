// tb_eth_util -- reference models shared by the testbenches.
//
// Frames are handled as byte queues (byte 0 first on the wire). exp_udp_frame builds
// the expected Ethernet/IPv4/UDP frame byte by byte from the RFC 791/768 layouts,
// with its own checksum code, independently of the RTL's header function. to_beats
// and from_beats convert between byte queues and 1024-bit AXI-Stream beats.
package tb_eth_util;
  import eth400g_pkg::*;

  typedef byte unsigned bq_t[$];
  typedef axis_t        beats_t[$];

  function automatic void put16(ref bq_t q, input int v);
    q.push_back(8'((v >> 8) & 'hff));
    q.push_back(8'(v & 'hff));
  endfunction

  function automatic bq_t exp_udp_frame(input longint dmac, input longint smac,
      input int unsigned sip, input int unsigned dip, input int sport, input int dport,
      input int ipid, input bq_t payload);
    bq_t f;
    bq_t ip;
    int unsigned sum;
    for (int i = 5; i >= 0; i--) f.push_back(8'((dmac >> (8*i)) & 'hff));
    for (int i = 5; i >= 0; i--) f.push_back(8'((smac >> (8*i)) & 'hff));
    put16(f, 'h0800);
    ip.push_back(8'h45); ip.push_back(8'h00);
    put16(ip, payload.size() + 28);
    put16(ip, ipid);
    put16(ip, 'h4000);
    ip.push_back(8'd64); ip.push_back(8'd17);
    put16(ip, 0);
    for (int i = 3; i >= 0; i--) ip.push_back(8'((sip >> (8*i)) & 'hff));
    for (int i = 3; i >= 0; i--) ip.push_back(8'((dip >> (8*i)) & 'hff));
    sum = 0;
    for (int i = 0; i < 20; i += 2) sum += {ip[i], ip[i+1]};
    while (sum > 'hffff) sum = (sum & 'hffff) + (sum >> 16);
    sum = ~sum & 'hffff;
    ip[10] = 8'(sum >> 8); ip[11] = 8'(sum & 'hff);
    foreach (ip[i]) f.push_back(ip[i]);
    put16(f, sport); put16(f, dport);
    put16(f, payload.size() + 8);
    put16(f, 0);
    foreach (payload[i]) f.push_back(payload[i]);
    return f;
  endfunction

  function automatic beats_t to_beats(input bq_t f);
    beats_t b;
    axis_t  x;
    int n = (f.size() + BYTES - 1) / BYTES;
    for (int k = 0; k < n; k++) begin
      x = '0;
      for (int i = 0; i < BYTES; i++)
        if (k*BYTES + i < f.size()) begin
          x.tdata[8*i +: 8] = f[k*BYTES + i];
          x.tkeep[i] = 1'b1;
        end
      x.tlast = (k == n - 1);
      b.push_back(x);
    end
    return b;
  endfunction

  function automatic bq_t from_beats(input beats_t b);
    bq_t f;
    foreach (b[k])
      for (int i = 0; i < BYTES; i++)
        if (b[k].tkeep[i]) f.push_back(b[k].tdata[8*i +: 8]);
    return f;
  endfunction

  function automatic bq_t rand_bytes(input int n);
    bq_t q;
    for (int i = 0; i < n; i++) q.push_back(8'($urandom));
    return q;
  endfunction

  function automatic int first_diff(input bq_t a, input bq_t b);
    if (a.size() != b.size()) return -2;
    foreach (a[i]) if (a[i] != b[i]) return i;
    return -1;
  endfunction
endpackage
