// tb_ape_pkg: reference model of APEnet+ packet framing for the testbenches.
//
// pack_datagram() turns a payload byte queue into the sequence of 128-bit
// words a NaNet controller must emit: for each piece of at most max_bytes
// bytes, one header, ceil(bytes/16) payload words, one footer. It is written
// from the format description alone (nanet_pkg field layout, first payload
// byte in bits [31:24] of 32-bit lane 0) and shares no code with the RTL.
package tb_ape_pkg;
  import nanet_pkg::*;

  typedef byte unsigned bytes_t[$];
  typedef ape_beat_t    beats_t[$];

  function automatic beats_t pack_datagram(input bytes_t b, input int max_bytes,
                                           logic [7:0] port, logic [15:0] udp_port,
                                           input logic [15:0] seq0);
    beats_t q;
    int base = 0;
    logic [15:0] seq = seq0;
    while (base < b.size()) begin
      int n = (b.size() - base > max_bytes) ? max_bytes : b.size() - base;
      ape_header_t h = '0;
      ape_footer_t f = '0;
      logic [31:0] sum = '0;
      int nw = (n + 3) / 4;
      h.kind = KIND_HEADER; h.port = port; h.udp_port = udp_port; h.len = 16'(n); h.seq = seq;
      q.push_back('{data: h, sop: 1'b1, eop: 1'b0});
      for (int j = 0; j < (n + 15) / 16; j++) begin
        logic [127:0] d = '0;
        for (int l = 0; l < 4; l++) begin
          logic [31:0] w = '0;
          if (4*j + l < nw)
            for (int i = 0; i < 4; i++)
              if (16*j + 4*l + i < n) w[31 - 8*i -: 8] = b[base + 16*j + 4*l + i];
          d[32*l +: 32] = w;
          sum += w;
        end
        q.push_back('{data: d, sop: 1'b0, eop: 1'b0});
      end
      f.kind = KIND_FOOTER; f.port = port; f.len = 16'(n); f.seq = seq; f.csum = sum;
      q.push_back('{data: f, sop: 1'b0, eop: 1'b1});
      seq++;
      base += n;
    end
    return q;
  endfunction
endpackage
