// tb_net_pkg: testbench helpers for building Ethernet/IPv4/UDP frames as
// byte queues and for the IPv4 header checksum, written independently of
// the RTL's header logic.
// Interface: byte queues (bq_t) in and out; mac_hdr pads frames to the
// 60-byte Ethernet minimum. Not synthesizable; used by the network
// testbenches and the top-level testbenches only.
package tb_net_pkg;
  typedef byte unsigned bq_t[$];

  function automatic int unsigned ip_sum(bq_t h);  // ones'-complement sum of 16-bit words
    int unsigned s;
    s = 0;
    for (int i = 0; i + 1 < h.size(); i += 2) s += {h[i], h[i+1]};
    while (s > 32'hFFFF) s = (s & 32'hFFFF) + (s >> 16);
    return s;
  endfunction

  function automatic bq_t udp_hdr(int sport, int dport, bq_t pay);
    bq_t q;
    int len;
    len = pay.size() + 8;
    q = {8'(sport >> 8), 8'(sport), 8'(dport >> 8), 8'(dport), 8'(len >> 8), 8'(len), 8'h00, 8'h00};
    return {q, pay};
  endfunction

  function automatic bq_t ip_hdr(int unsigned src, int unsigned dst, bq_t pay, bit corrupt);
    bq_t h;
    int len;
    int unsigned cs;
    len = pay.size() + 20;
    h = {8'h45, 8'h00, 8'(len >> 8), 8'(len), 8'h12, 8'h34, 8'h40, 8'h00, 8'd64, 8'd17, 8'h00, 8'h00,
         8'(src >> 24), 8'(src >> 16), 8'(src >> 8), 8'(src), 8'(dst >> 24), 8'(dst >> 16), 8'(dst >> 8), 8'(dst)};
    cs = ~ip_sum(h) & 32'hFFFF;
    if (corrupt) cs = cs ^ 32'h1;
    h[10] = 8'(cs >> 8);
    h[11] = 8'(cs);
    return {h, pay};
  endfunction

  function automatic bq_t mac_hdr(longint unsigned dst, longint unsigned src, int etype, bq_t pay);
    bq_t h;
    h = {};
    for (int i = 5; i >= 0; i--) h.push_back(8'(dst >> (8 * i)));
    for (int i = 5; i >= 0; i--) h.push_back(8'(src >> (8 * i)));
    h.push_back(8'(etype >> 8));
    h.push_back(8'(etype));
    h = {h, pay};
    while (h.size() < 60) h.push_back(8'h00);   // Ethernet minimum-size padding
    return h;
  endfunction
endpackage
