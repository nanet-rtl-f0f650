// tb_eth_pkg: frame builders shared by the testbenches.
//
// Builds Ethernet frames as byte queues, in the layout the MAC delivers
// with its 16-bit receive shift: two pad bytes, destination and source
// address, EtherType, then the IPv4/UDP headers and payload. Payload bytes
// follow a simple formula, (seed + 7*i) mod 256, so a checker can recompute
// them from the seed alone.
package tb_eth_pkg;

  typedef byte unsigned bytes_t[$];

  function automatic byte unsigned pay_byte(int seed, int i);
    return 8'((seed + 7 * i) & 8'hFF);
  endfunction

  // kind: 0 UDP, 1 ARP (non-IP), 2 ICMP, 3 fragmented UDP, 4 UDP with 2 option words
  function automatic bytes_t build_frame(int kind, int pay_len, int udp_port, int seed);
    bytes_t f;
    int ihl;
    int ip_len;
    ihl = (kind == 4) ? 7 : 5;
    f.push_back(8'h00); f.push_back(8'h00);                         // shift-16 pad
    for (int i = 0; i < 6; i++) f.push_back(8'h02 + 8'(i));          // dst MAC
    for (int i = 0; i < 6; i++) f.push_back(8'h10 + 8'(i));          // src MAC
    if (kind == 1) begin
      f.push_back(8'h08); f.push_back(8'h06);                        // ARP
      for (int i = 0; i < 46; i++) f.push_back(pay_byte(seed, i));
      return f;
    end
    f.push_back(8'h08); f.push_back(8'h00);                          // IPv4
    ip_len = ihl * 4 + 8 + pay_len;
    f.push_back(8'(8'h40 | 8'(ihl))); f.push_back(8'h00);
    f.push_back(8'(ip_len >> 8)); f.push_back(8'(ip_len));
    f.push_back(8'h12); f.push_back(8'h34);                          // identification
    f.push_back((kind == 3) ? 8'h20 : 8'h40); f.push_back(8'h00);    // MF or DF
    f.push_back(8'h40); f.push_back((kind == 2) ? 8'd1 : 8'd17);     // TTL, protocol
    f.push_back(8'h00); f.push_back(8'h00);                          // checksum (unchecked)
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd1); f.push_back(8'd2);
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd1); f.push_back(8'd3);
    for (int i = 0; i < (ihl - 5) * 4; i++) f.push_back(8'h01);      // IP options (NOP)
    f.push_back(8'h30); f.push_back(8'h39);                          // src port 12345
    f.push_back(8'(udp_port >> 8)); f.push_back(8'(udp_port));
    f.push_back(8'((pay_len + 8) >> 8)); f.push_back(8'(pay_len + 8));
    f.push_back(8'h00); f.push_back(8'h00);
    for (int i = 0; i < pay_len; i++) f.push_back(pay_byte(seed, i));
    while (f.size() < 62) f.push_back(8'h00);                        // 60-byte minimum + pad
    return f;
  endfunction

  // Number of 32-bit words a byte queue occupies, and word w (first byte in [31:24]).
  function automatic int nwords(const ref bytes_t f);
    return (f.size() + 3) / 4;
  endfunction

  function automatic logic [31:0] word_at(const ref bytes_t f, int w);
    logic [31:0] r;
    r = '0;
    for (int b = 0; b < 4; b++)
      if (4 * w + b < f.size()) r[31 - 8*b -: 8] = f[4*w + b];
    return r;
  endfunction

endpackage
