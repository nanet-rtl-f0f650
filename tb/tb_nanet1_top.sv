// tb_nanet1_top: end-to-end test of the NaNet-1 receive datapath.
//
// The top runs with its default parameters: one GbE channel, three APElink
// channels, 32-entry TLB with 64 KB pages, up to 32 buffers per CLOP. The
// testbench plays every outside party:
//   - the Ethernet MAC: UDP datagrams (some above 4096 bytes, as jumbo
//     frames), ARP, ICMP and fragmented frames on the GbE channel;
//   - three APElink link controllers sending APEnet+ packets of 1..4096 bytes,
//     one of them with a corrupted footer;
//   - the microcontroller: it checks the non-UDP frames, registers the
//     CLOPs (channel 3 only after some of its packets have been dropped)
//     and maps a TLB page whenever the receive engine stalls on a miss;
//   - the PCIe core and GPU/host memory: a byte-addressed memory model
//     written by the write beats, with random back-pressure.
// A per-channel model of the buffer lists predicts every completion
// event. When an event arrives, the buffer's contents are read back from
// the memory model through the page map and compared with the payloads
// that were sent. The test counts how often each mechanism occurred (UDP
// extraction, frames handed to the microcontroller, datagram split,
// router contention, TLB miss stall, buffer closed on overflow and when
// full, dropped packet, length error, PCIe and MAC back-pressure) and
// fails if any never did. A final phase checks that a 4096-byte APElink
// packet crosses the whole datapath at 128 bits per clock.
`timescale 1ns/1ps
module tb_nanet1_top;
  import nanet_pkg::*;
  import tb_eth_pkg::build_frame;
  import tb_eth_pkg::nwords;
  import tb_eth_pkg::word_at;
  import tb_eth_pkg::pay_byte;
  import tb_ape_pkg::*;

  localparam int NA = 3, NCH = 4, PB = 16;
  localparam int BUF_BYTES = 16 * 1024, NBUF = 3;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;   // 200 MHz

  logic [31:0] mac_data; logic mac_valid, mac_sop, mac_eop, mac_ready; logic [1:0] mac_empty;
  logic [31:0] uc_data;  logic uc_valid, uc_sop, uc_eop, uc_ready; logic [1:0] uc_empty;
  ape_beat_t [NA-1:0] apelink_beat; logic [NA-1:0] apelink_valid, apelink_ready;
  dma_beat_t dma; logic dma_valid, dma_ready;
  rx_event_t ev; logic ev_valid, ev_ready;
  logic cfg_buf_we, cfg_nbufs_we; logic [1:0] cfg_clop; logic [4:0] cfg_idx;
  logic [63:0] cfg_base; logic [31:0] cfg_size; logic [5:0] cfg_nbufs;
  logic tlb_wr_en, tlb_wr_valid, tlb_wr_gpu; logic [4:0] tlb_wr_idx;
  logic [63-PB:0] tlb_wr_vpn, tlb_wr_ppn;
  logic tlb_miss; logic [63:0] tlb_miss_va;
  logic [31:0] udp_frames, other_frames, gbe_pkts, pkts_ok, pkts_dropped, len_errors, miss_stalls;
  logic [NCH-1:0][31:0] router_pkts;

  nanet1_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- buffer and page models ----------------
  typedef struct { longint va; bytes_t data; } chunk_t;
  longint m_base[NCH][NBUF]; bit m_reg[NCH]; int m_cur[NCH]; int m_fill[NCH];
  chunk_t m_chunks[NCH][NBUF][$];          // payload pieces placed in each buffer
  rx_event_t exp_ev[NCH][$];
  chunk_t    exp_ev_chunks[NCH][$][$];
  logic [63-PB:0] pmap_ppn[longint]; bit pmap_gpu[longint]; bit mapped[longint];
  int next_tlb = 0;
  byte unsigned mem[longint];
  int n_wrap = 0, n_full = 0, n_drop_exp = 0, n_split = 0, n_bad_exp = 0, n_ok_exp = 0;
  int n_other_exp = 0, n_udp_exp = 0;

  function automatic longint buf_va(int c, int b);
    return 64'h7f00_0000_0000 + longint'(c) * 64'h4_0000 + 64'h8000 + longint'(b) * 64'h6000;
  endfunction

  function automatic longint pa_of(longint va);
    return longint'({pmap_ppn[va >>> PB], 16'(va)});
  endfunction

  function automatic void close_buf(int c);
    exp_ev[c].push_back('{port: 8'(c), buf_idx: 8'(m_cur[c]), base: m_base[c][m_cur[c]],
                          bytes: 32'(m_fill[c])});
    exp_ev_chunks[c].push_back(m_chunks[c][m_cur[c]]);
    m_chunks[c][m_cur[c]] = {};
    m_cur[c] = (m_cur[c] + 1) % NBUF;
    m_fill[c] = 0;
  endfunction

  // One APEnet+ packet of `b` arriving on channel c.
  function automatic void place(int c, bytes_t b, bit bad);
    int len16;
    chunk_t ch;
    if (!m_reg[c]) begin n_drop_exp++; return; end
    len16 = ((b.size() + 15) / 16) * 16;
    if (m_fill[c] > 0 && m_fill[c] + len16 > BUF_BYTES) begin close_buf(c); n_wrap++; end
    ch.va = m_base[c][m_cur[c]] + m_fill[c];
    ch.data = b;
    m_chunks[c][m_cur[c]].push_back(ch);
    m_fill[c] += len16;
    if (bad) n_bad_exp++; else n_ok_exp++;
    if (m_fill[c] >= BUF_BYTES) begin close_buf(c); n_full++; end
  endfunction

  task automatic verify_chunks(chunk_t chs[$], string where);
    bit ok = 1;
    foreach (chs[i])
      for (int k = 0; k < chs[i].data.size(); k++) begin
        longint pa = pa_of(chs[i].va + k);
        if (!mem.exists(pa) || mem[pa] != chs[i].data[k]) ok = 0;
      end
    check(ok, {"buffer contents ", where});
  endtask

  // ---------------- GbE source ----------------
  bit gaps = 1;
  bytes_t uc_exp[$];
  task automatic gbe_send(int kind, int len, int seed);
    bytes_t f = build_frame(kind, len, 16'd58913, seed);
    int n = nwords(f);
    if (kind == 0 || kind == 4) begin
      if (len > 0) begin
        bytes_t p;
        n_udp_exp++;
        for (int i = 0; i < len; i++) p.push_back(pay_byte(seed, i));
        if (len > 4096) n_split++;
        for (int base = 0; base < len; base += 4096) begin
          bytes_t piece;
          for (int i = base; i < len && i < base + 4096; i++) piece.push_back(p[i]);
          place(0, piece, 0);
        end
      end
    end else begin
      uc_exp.push_back(f);
      n_other_exp++;
    end
    for (int w = 0; w < n; w++) begin
      while (gaps && $urandom_range(0, 7) == 0) begin @(negedge clk); mac_valid = 0; end
      @(negedge clk);
      mac_valid = 1; mac_data = word_at(f, w); mac_sop = (w == 0); mac_eop = (w == n - 1);
      mac_empty = (w == n - 1) ? 2'(4 * n - f.size()) : 2'd0;
      #1;
      while (!mac_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    mac_valid = 0;
  endtask

  // ---------------- APElink sources ----------------
  ape_beat_t a_q[NA][$];
  bit a_acc[NA];
  logic [15:0] a_seq[NA];
  function automatic void ape_send(int l, int len, bit bad);
    bytes_t b;
    beats_t pk;
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    pk = pack_datagram(b, 4096, 8'hEE, 16'd0, a_seq[l]);   // sender's port byte is overwritten
    a_seq[l]++;
    if (bad) pk[pk.size() - 1].data[95:80] = ~pk[pk.size() - 1].data[95:80];
    place(l + 1, b, bad);
    foreach (pk[i]) a_q[l].push_back(pk[i]);
  endfunction

  always @(posedge clk) for (int l = 0; l < NA; l++) if (apelink_valid[l] && apelink_ready[l]) a_acc[l] = 1;
  always @(negedge clk) begin
    for (int l = 0; l < NA; l++) begin
      if (a_acc[l]) begin void'(a_q[l].pop_front()); a_acc[l] = 0; apelink_valid[l] = 0; end
      if (!apelink_valid[l] && a_q[l].size() > 0 && (!gaps || $urandom_range(0, 3) != 0)) begin
        apelink_valid[l] = 1; apelink_beat[l] = a_q[l][0];
      end
    end
    dma_ready = !gaps || ($urandom_range(0, 4) != 0);
    ev_ready  = !gaps || ($urandom_range(0, 2) != 0);
    uc_ready  = !gaps || ($urandom_range(0, 2) != 0);
  end

  // ---------------- sinks ----------------
  byte unsigned ubytes[$];
  always @(posedge clk) if (rst_n && uc_valid && uc_ready) begin
    if (uc_sop) ubytes = {};
    for (int b = 0; b < 4 - (uc_eop ? int'(uc_empty) : 0); b++) ubytes.push_back(uc_data[31 - 8*b -: 8]);
    if (uc_eop) begin
      bytes_t e;
      if (uc_exp.size() == 0) check(0, "unexpected microcontroller frame");
      else begin e = uc_exp.pop_front(); check(ubytes == e, "microcontroller frame bytes"); end
    end
  end

  always @(posedge clk) if (rst_n && dma_valid && dma_ready)
    for (int p = 0; p < 16; p++) if (dma.be[p]) mem[longint'(dma.addr) + p] = dma.data[8*p +: 8];

  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    int c;
    c = int'(ev.port);
    if (c >= NCH || exp_ev[c].size() == 0) check(0, $sformatf("unexpected event on CLOP %0d", c));
    else begin
      rx_event_t e;
      e = exp_ev[c].pop_front();
      check(ev == e, $sformatf("event CLOP %0d: buf %0d bytes %0d, expected buf %0d bytes %0d",
            c, ev.buf_idx, ev.bytes, e.buf_idx, e.bytes));
      verify_chunks(exp_ev_chunks[c].pop_front(), $sformatf("at event on CLOP %0d", c));
    end
  end

  // ---------------- mechanism counters ----------------
  int n_contention = 0, n_dma_bp = 0, n_mac_bp = 0;
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.ch_valid) > 1) n_contention++;
    if (dma_valid && !dma_ready) n_dma_bp++;
    if (mac_valid && !mac_ready) n_mac_bp++;
  end

  // ---------------- microcontroller: TLB miss service ----------------
  task automatic map_page(longint vpn);
    @(negedge clk);
    tlb_wr_en = 1; tlb_wr_idx = 5'(next_tlb); tlb_wr_valid = 1;
    tlb_wr_vpn = (64-PB)'(vpn); tlb_wr_ppn = pmap_ppn[vpn]; tlb_wr_gpu = pmap_gpu[vpn];
    next_tlb++;
    mapped[vpn] = 1;
    @(negedge clk);
    tlb_wr_en = 0;
  endtask

  int misses_served = 0;
  initial forever begin
    @(negedge clk);
    if (tlb_miss) begin
      longint vpn;
      vpn = longint'(tlb_miss_va >> PB);
      repeat ($urandom_range(5, 40)) @(negedge clk);
      if (!mapped.exists(vpn) && pmap_ppn.exists(vpn)) begin map_page(vpn); misses_served++; end
    end
  end

  task automatic register_clop(int c);
    for (int b = 0; b < NBUF; b++) begin
      @(negedge clk);
      cfg_buf_we = 1; cfg_clop = 2'(c); cfg_idx = 5'(b); cfg_base = m_base[c][b]; cfg_size = BUF_BYTES;
    end
    @(negedge clk);
    cfg_buf_we = 0; cfg_nbufs_we = 1; cfg_nbufs = 6'(NBUF);
    m_reg[c] = 1; m_cur[c] = 0; m_fill[c] = 0;
    @(negedge clk);
    cfg_nbufs_we = 0;
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    $display("DBG aq %0d %0d %0d ok=%0d drop=%0d st=%0d miss=%b rv=%b", a_q[0].size(), a_q[1].size(), a_q[2].size(), pkts_ok, pkts_dropped, dut.u_rx.state, tlb_miss, dut.r_valid);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mac_valid = 0; mac_data = 0; mac_sop = 0; mac_eop = 0; mac_empty = 0;
    apelink_valid = '0; apelink_beat = '0;
    cfg_buf_we = 0; cfg_nbufs_we = 0; cfg_clop = 0; cfg_idx = 0; cfg_base = 0; cfg_size = 0; cfg_nbufs = 0;
    tlb_wr_en = 0; tlb_wr_idx = 0; tlb_wr_valid = 0; tlb_wr_gpu = 0; tlb_wr_vpn = 0; tlb_wr_ppn = 0;
    foreach (a_acc[l]) begin a_acc[l] = 0; a_seq[l] = 0; end
    foreach (m_reg[c]) begin m_reg[c] = 0; m_cur[c] = 0; m_fill[c] = 0; end
    repeat (4) @(posedge clk);
    rst_n = 1;
    // Address space: 3 buffers of 16 KB per CLOP; buffer 1 straddles a 64 KB page.
    for (int c = 0; c < NCH; c++)
      for (int b = 0; b < NBUF; b++) begin
        m_base[c][b] = buf_va(c, b);
        for (longint v = m_base[c][b] >>> PB; v <= (m_base[c][b] + BUF_BYTES - 1) >>> PB; v++)
          if (!pmap_ppn.exists(v)) begin
            pmap_ppn[v] = (64-PB)'({$urandom, $urandom});
            pmap_gpu[v] = (c != 1);            // channel 1 buffers in host memory
          end
      end
    for (int c = 0; c < 3; c++) register_clop(c);
    foreach (pmap_ppn[v]) if (v[0]) map_page(v);   // half the pages up front
    // Phase 1: channel 3 has no CLOP yet, so its packets are dropped.
    ape_send(2, 300, 0);
    ape_send(2, 17, 0);
    wait (a_q[0].size() == 0 && a_q[1].size() == 0 && a_q[2].size() == 0);
    repeat (100) @(posedge clk);
    register_clop(3);
    // Four 4096-byte packets fill channel 3's first 16 KB buffer exactly.
    for (int i = 0; i < 4; i++) ape_send(2, 4096, 0);
    // Phase 2: mixed traffic on all four channels.
    fork
      begin
        gbe_send(0, 5000, 1);                    // jumbo: split in two packets
        gbe_send(1, 0, 2);                       // ARP
        gbe_send(4, 100, 3);                     // UDP with IP options
        gbe_send(2, 40, 4);                      // ICMP
        gbe_send(3, 200, 5);                     // IP fragment
        for (int i = 0; i < 30; i++) begin
          int r;
          r = $urandom_range(0, 9);
          gbe_send((r < 8) ? 0 : (r == 8) ? 1 : 2, $urandom_range(1, 1472), $urandom);
        end
      end
      for (int i = 0; i < 60; i++) begin
        ape_send($urandom_range(0, NA - 1), ($urandom_range(0, 3) == 0) ? 4096 : $urandom_range(1, 4096),
                 i == 30);
        wait (a_q[0].size() + a_q[1].size() + a_q[2].size() < 1000);
      end
    join
    wait (a_q[0].size() == 0 && a_q[1].size() == 0 && a_q[2].size() == 0);
    repeat (2000) @(posedge clk);
    // Phase 3: full rate, every page mapped, no back-pressure.
    foreach (pmap_ppn[v]) if (!mapped.exists(v)) map_page(v);
    gaps = 0;
    repeat (50) @(posedge clk);
    begin
      int t0, t1, w0;
      w0 = pkts_ok;
      ape_send(0, 4096, 0);
      @(posedge clk); t0 = $time;
      wait (pkts_ok == w0 + 1);
      t1 = $time;
      // 256 payload words + header + footer, plus the register stages
      check((t1 - t0) / 5 <= 256 + 2 + 4, $sformatf("4096-byte APElink packet took %0d clocks", (t1 - t0) / 5));
    end
    repeat (200) @(posedge clk);
    // Buffers not yet closed: their contents must be in memory as well.
    for (int c = 0; c < NCH; c++) verify_chunks(m_chunks[c][m_cur[c]], $sformatf("of open buffer, CLOP %0d", c));
    for (int c = 0; c < NCH; c++) check(exp_ev[c].size() == 0, $sformatf("all events of CLOP %0d seen", c));
    check(uc_exp.size() == 0, "all non-UDP frames delivered");
    check(udp_frames == 32'(n_udp_exp), "UDP frame counter");
    check(other_frames == 32'(n_other_exp), "other frame counter");
    check(pkts_ok == 32'(n_ok_exp), $sformatf("pkts_ok %0d expected %0d", pkts_ok, n_ok_exp));
    check(pkts_dropped == 32'(n_drop_exp), $sformatf("pkts_dropped %0d expected %0d", pkts_dropped, n_drop_exp));
    check(len_errors == 32'(n_bad_exp), $sformatf("len_errors %0d expected %0d", len_errors, n_bad_exp));
    // Every mechanism must have happened at least once.
    $display("mechanisms: udp=%0d uc=%0d split=%0d contention=%0d miss_stalls=%0d wrap=%0d full=%0d drop=%0d lenerr=%0d dma_bp=%0d mac_bp=%0d",
             udp_frames, other_frames, n_split, n_contention, miss_stalls, n_wrap, n_full, pkts_dropped,
             len_errors, n_dma_bp, n_mac_bp);
    check(udp_frames > 0, "UDP extraction happened");
    check(other_frames > 0, "frame handed to the microcontroller");
    check(n_split > 0, "datagram split into several packets");
    check(n_contention > 0, "router contention");
    check(miss_stalls > 0 && misses_served > 0, "TLB miss stall");
    check(n_wrap > 0, "buffer closed on overflow");
    check(n_full > 0, "buffer closed when full");
    check(pkts_dropped > 0, "packet dropped (no CLOP)");
    check(len_errors > 0, "length error detected");
    check(n_dma_bp > 0, "PCIe back-pressure");
    check(n_mac_bp > 0, "MAC back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
