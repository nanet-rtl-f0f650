// tb_rx_block: self-checking test of the RDMA receive engine.
//
// Three CLOPs of three 12 KB buffers each are registered (channel 3 has
// none). The TLB runs with 4 KB pages so that payloads cross page
// boundaries. Half of the pages are mapped up front; the testbench maps the
// others when the block reports a miss, as the driver or microcontroller
// would. Random packets (1..4096 bytes) arrive on random channels, and the
// PCIe side applies random back-pressure. From its own buffer-list and
// page-table model the testbench predicts every write beat (physical
// address, GPU flag, byte enables, data) and every buffer-completion event.
// It also sends packets for the unregistered channel (dropped) and a packet
// whose footer disagrees with its header (length error). A last phase with
// every page mapped and no back-pressure checks N+2 clocks per packet.
`timescale 1ns/1ps
module tb_rx_block;
  import nanet_pkg::*;
  import tb_ape_pkg::*;

  localparam int NC = 4, NB = 4, NT = 64, PB = 12;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  ape_beat_t in_beat; logic in_valid, in_ready;
  dma_beat_t dma; logic dma_valid, dma_ready;
  rx_event_t ev; logic ev_valid, ev_ready;
  logic cfg_buf_we, cfg_nbufs_we; logic [1:0] cfg_clop; logic [1:0] cfg_idx;
  logic [63:0] cfg_base; logic [31:0] cfg_size; logic [2:0] cfg_nbufs;
  logic tlb_wr_en, tlb_wr_valid, tlb_wr_gpu; logic [5:0] tlb_wr_idx;
  logic [63-PB:0] tlb_wr_vpn, tlb_wr_ppn;
  logic tlb_miss; logic [63:0] tlb_miss_va;
  logic [31:0] pkts_ok, pkts_dropped, len_errors, miss_stalls;

  rx_block #(.N_CLOPS(NC), .MAX_BUFS(NB), .N_TLB(NT), .PAGE_BITS(PB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- models ----------------
  localparam int BUF_BYTES = 12 * 1024;
  longint m_base[NC][NB]; int m_n[NC]; int m_cur[NC]; int m_fill[NC];
  logic [63-PB:0] pmap_ppn[longint]; bit pmap_gpu[longint]; bit mapped[longint];
  int next_tlb = 0;
  dma_beat_t exp_dma[$];
  rx_event_t exp_ev[$];
  logic [15:0] seq[NC];

  function automatic longint va_of(int c, int b); return 64'h7f00_0000_0000 + longint'(c) * 64'h10_0000 + longint'(b) * 64'h4000; endfunction

  task automatic map_page(longint vpn);
    @(negedge clk);
    tlb_wr_en = 1; tlb_wr_idx = 6'(next_tlb); tlb_wr_valid = 1;
    tlb_wr_vpn = (64-PB)'(vpn); tlb_wr_ppn = pmap_ppn[vpn]; tlb_wr_gpu = pmap_gpu[vpn];
    next_tlb++;
    mapped[vpn] = 1;
    @(negedge clk);
    tlb_wr_en = 0;
  endtask

  task automatic close_buf(int c);
    exp_ev.push_back('{port: 8'(c), buf_idx: 8'(m_cur[c]), base: m_base[c][m_cur[c]], bytes: 32'(m_fill[c])});
    m_cur[c] = (m_cur[c] + 1) % m_n[c];
    m_fill[c] = 0;
  endtask

  // Predict the write beats of one packet, then send it.
  ape_beat_t src_q[$];
  task automatic packet(int c, int len, bit bad_footer);
    bytes_t b;
    beats_t pk;
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    pk = pack_datagram(b, 4096, 8'(c), 16'd0, seq[c]);
    seq[c]++;
    if (bad_footer) pk[pk.size() - 1].data[95:80] = pk[pk.size() - 1].data[95:80] + 16'd1;
    if (c < 3) begin
      int len16 = ((len + 15) / 16) * 16;
      longint va;
      if (m_fill[c] > 0 && m_fill[c] + len16 > BUF_BYTES) close_buf(c);
      va = m_base[c][m_cur[c]] + m_fill[c];
      m_fill[c] += len16;
      for (int k = 0; k < (len + 15) / 16; k++) begin
        longint a = va + 16 * k;
        logic [15:0] be = '0;
        logic [127:0] d = '0;
        for (int p = 0; p < 16; p++) if (16 * k + p < len) begin
          be[p] = 1;
          d[8*p +: 8] = b[16 * k + p];
        end
        exp_dma.push_back('{addr: {pmap_ppn[a >> PB], 12'(a)}, gpu: pmap_gpu[a >> PB], be: be, data: d});
      end
      if (m_fill[c] >= BUF_BYTES) close_buf(c);
    end
    foreach (pk[i]) src_q.push_back(pk[i]);
  endtask

  // ---------------- source / sinks ----------------
  bit accepted = 0, gaps = 1;
  always @(posedge clk) if (in_valid && in_ready) accepted = 1;
  always @(negedge clk) begin
    if (accepted) begin void'(src_q.pop_front()); accepted = 0; in_valid = 0; end
    if (!in_valid && src_q.size() > 0 && (!gaps || $urandom_range(0, 4) != 0)) begin
      in_valid = 1; in_beat = src_q[0];
    end
    dma_ready = !gaps || ($urandom_range(0, 3) != 0);
    ev_ready  = !gaps || ($urandom_range(0, 1) != 0);
  end

  always @(posedge clk) if (rst_n && dma_valid && dma_ready) begin
    if (exp_dma.size() == 0) check(0, "unexpected write beat");
    else begin
      dma_beat_t e;
      e = exp_dma.pop_front();
      check(dma.addr == e.addr && dma.gpu == e.gpu && dma.be == e.be && (dma.data & bemask(dma.be)) == e.data, $sformatf("write beat: got addr %h be %h gpu %b, expected addr %h be %h gpu %b",
            dma.addr, dma.be, dma.gpu, e.addr, e.be, e.gpu));
    end
  end
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    if (exp_ev.size() == 0) check(0, "unexpected event");
    else begin
      rx_event_t e;
      e = exp_ev.pop_front();
      check(ev == e, $sformatf("event: got clop %0d buf %0d bytes %0d, expected clop %0d buf %0d bytes %0d",
            ev.port, ev.buf_idx, ev.bytes, e.port, e.buf_idx, e.bytes));
    end
  end

  function automatic logic [127:0] bemask(logic [15:0] be);
    for (int p = 0; p < 16; p++) bemask[8*p +: 8] = {8{be[p]}};
  endfunction

  // Miss handler: map the page the block is waiting for.
  int misses_served = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (tlb_miss) begin
        longint vpn;
        vpn = longint'(tlb_miss_va >> PB);
        repeat ($urandom_range(2, 10)) @(negedge clk);
        if (!mapped.exists(vpn)) begin map_page(vpn); misses_served++; end
      end
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_good = 0, n_drop = 0, n_bad = 0;
  initial begin
    in_valid = 0; in_beat = '0;
    cfg_buf_we = 0; cfg_nbufs_we = 0; cfg_clop = 0; cfg_idx = 0; cfg_base = 0; cfg_size = 0; cfg_nbufs = 0;
    tlb_wr_en = 0; tlb_wr_idx = 0; tlb_wr_valid = 0; tlb_wr_gpu = 0; tlb_wr_vpn = 0; tlb_wr_ppn = 0;
    foreach (seq[c]) seq[c] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3; c++) begin
      m_n[c] = 3; m_cur[c] = 0; m_fill[c] = 0;
      for (int b = 0; b < 3; b++) begin
        m_base[c][b] = va_of(c, b);
        for (int pg = 0; pg < 3; pg++) begin
          longint vpn;
          vpn = (m_base[c][b] >> PB) + pg;
          pmap_ppn[vpn] = (64-PB)'({$urandom, $urandom});
          pmap_gpu[vpn] = (c != 2);          // CLOP 2 lives in host memory
        end
        @(negedge clk);
        cfg_buf_we = 1; cfg_clop = 2'(c); cfg_idx = 2'(b); cfg_base = m_base[c][b]; cfg_size = BUF_BYTES;
      end
      @(negedge clk);
      cfg_buf_we = 0; cfg_nbufs_we = 1; cfg_nbufs = 3'd3;
      @(negedge clk);
      cfg_nbufs_we = 0;
    end
    foreach (pmap_ppn[vpn]) if (vpn[0]) map_page(vpn);
    // Random traffic.
    for (int i = 0; i < 80; i++) begin
      int c, r;
      c = $urandom_range(0, 3);
      r = $urandom_range(0, 19);
      packet(c, (r < 4) ? 4096 : $urandom_range(1, 4096), r == 19 && c < 3);
      if (c == 3) n_drop++; else if (r == 19) n_bad++; else n_good++;
      wait (src_q.size() < 600);
    end
    wait (src_q.size() == 0);
    repeat (200) @(posedge clk);
    // Full-rate phase: all pages mapped, no back-pressure.
    foreach (pmap_ppn[vpn]) if (!mapped.exists(vpn)) map_page(vpn);
    gaps = 0;
    repeat (4) @(posedge clk);
    begin
      int t0, t1;
      packet(0, 1024, 0); packet(1, 1024, 0); n_good += 2;
      @(posedge clk); t0 = $time;
      wait (src_q.size() == 0);
      @(posedge clk); t1 = $time;
      // 2 packets x (64 words + header + footer)
      check((t1 - t0) / 5 <= 2 * 66 + 2, $sformatf("two 64-word packets took %0d clocks", (t1 - t0) / 5));
    end
    repeat (50) @(posedge clk);
    check(exp_dma.size() == 0, "all write beats seen");
    check(exp_ev.size() == 0, "all events seen");
    check(pkts_ok == 32'(n_good), $sformatf("pkts_ok %0d expected %0d", pkts_ok, n_good));
    check(pkts_dropped == 32'(n_drop), $sformatf("pkts_dropped %0d expected %0d", pkts_dropped, n_drop));
    check(len_errors == 32'(n_bad), $sformatf("len_errors %0d expected %0d", len_errors, n_bad));
    check(misses_served > 0 && miss_stalls > 0, $sformatf("TLB misses served %0d, stalls %0d", misses_served, miss_stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
