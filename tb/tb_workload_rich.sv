// tb_workload_rich: the NA62 RICH level-0 trigger traffic through NaNet-1.
//
// The trigger feeds the GPU with 64-byte events gathered in receive
// buffers of a fixed number of events. This testbench runs the top at its
// default parameters on that traffic:
//   - GbE channel: UDP datagrams of 16 events (1024 bytes) into GPU
//     buffers of 128 and then 1024 events (8 KB and 64 KB);
//   - APElink channel 1: APEnet+ packets of 64 events (4096 bytes) into
//     GPU buffers of 4096 and then 5120 events (256 KB and 320 KB);
//   - then the buffer-size sweeps of the benchmarks: GbE buffers of 16 to
//     4096 events, APElink buffers of 16 to 16384 events (1 KB to 1 MB),
//     in powers of two. APElink packets are 64 events, or one whole buffer
//     when the buffer is smaller than that.
// For each configuration it checks that every buffer completes with the
// expected byte count and contents. It measures the rate the datapath
// sustains with no back-pressure and compares it with what the link needs:
// 1 Gb/s (0.625 bytes per 200 MHz clock) for GbE, and 20 Gb/s
// (12.5 bytes per clock) for APElink, the rate the APElink link sustains.
// The events per buffer and the link rates are the trigger's figures. The
// 16 events per UDP datagram are this testbench's own choice.
`timescale 1ns/1ps
module tb_workload_rich;
  import nanet_pkg::*;
  import tb_eth_pkg::build_frame;
  import tb_eth_pkg::nwords;
  import tb_eth_pkg::word_at;
  import tb_eth_pkg::pay_byte;
  import tb_ape_pkg::*;

  localparam int NA = 3, NCH = 4, PB = 16, EV_BYTES = 64;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

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

  // Identity-plus-offset page map: PA = VA + 0x1_0000_0000.
  int next_tlb = 0;
  task automatic map_range(longint va, longint bytes);
    for (longint v = va >>> PB; v <= (va + bytes - 1) >>> PB; v++) begin
      @(negedge clk);
      tlb_wr_en = 1; tlb_wr_idx = 5'(next_tlb); tlb_wr_valid = 1; tlb_wr_gpu = 1;
      tlb_wr_vpn = (64-PB)'(v); tlb_wr_ppn = (64-PB)'(v + 64'h1_0000);
      next_tlb = (next_tlb + 1) % 32;
    end
    @(negedge clk);
    tlb_wr_en = 0;
  endtask

  longint bufs[2];
  task automatic setup_clop(int c, longint base, int buf_bytes);
    next_tlb = 0;
    for (int b = 0; b < 2; b++) begin
      bufs[b] = base + longint'(b) * longint'(buf_bytes);
      @(negedge clk);
      cfg_buf_we = 1; cfg_clop = 2'(c); cfg_idx = 5'(b); cfg_base = bufs[b]; cfg_size = 32'(buf_bytes);
    end
    @(negedge clk);
    cfg_buf_we = 0; cfg_nbufs_we = 1; cfg_nbufs = 6'd2;
    @(negedge clk);
    cfg_nbufs_we = 0;
    map_range(base, 2 * buf_bytes);
  endtask

  // Memory model and event sink.
  byte unsigned mem[longint];
  always @(posedge clk) if (rst_n && dma_valid && dma_ready)
    for (int p = 0; p < 16; p++) if (dma.be[p]) mem[longint'(dma.addr) + p] = dma.data[8*p +: 8];
  rx_event_t got_ev[$];
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) got_ev.push_back(ev);

  // Expected content of a buffer: byte i of payload k is pay_byte(seed0 + k, i).
  task automatic check_buffer(rx_event_t e, int c, int b, int buf_bytes, int pkt_bytes, int seed0);
    bit ok = 1;
    check(e.port == 8'(c) && e.buf_idx == 8'(b) && e.bytes == 32'(buf_bytes) && e.base == bufs[b],
          $sformatf("event CLOP %0d buf %0d bytes %0d", e.port, e.buf_idx, e.bytes));
    for (int k = 0; k < buf_bytes / pkt_bytes; k++)
      for (int i = 0; i < pkt_bytes; i++) begin
        longint pa = bufs[b] + (longint'(1) << 32) + longint'(k) * pkt_bytes + i;
        if (!mem.exists(pa) || mem[pa] != pay_byte(seed0 + k, i)) ok = 0;
      end
    check(ok, $sformatf("contents of CLOP %0d buffer %0d", c, b));
  endtask

  task automatic gbe_frame(int len, int seed);
    bytes_t f = build_frame(0, len, 16'd58913, seed);
    int n = nwords(f);
    for (int w = 0; w < n; w++) begin
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

  ape_beat_t a_q[$];
  bit a_acc = 0;
  always @(posedge clk) if (apelink_valid[0] && apelink_ready[0]) a_acc = 1;
  always @(negedge clk) begin
    if (a_acc) begin void'(a_q.pop_front()); a_acc = 0; apelink_valid[0] = 0; end
    if (!apelink_valid[0] && a_q.size() > 0) begin apelink_valid[0] = 1; apelink_beat[0] = a_q[0]; end
  end

  // One configuration: fill two buffers, measure the rate, check contents.
  task automatic run_gbe(int events_per_buf);
    int buf_bytes = events_per_buf * EV_BYTES, pkt = 16 * EV_BYTES, npk = 2 * buf_bytes / pkt;
    int t0, t1;
    real bpc;
    mem.delete();
    setup_clop(0, 64'h7a00_0000_0000, buf_bytes);
    got_ev = {};
    @(posedge clk); t0 = $time;
    for (int k = 0; k < npk; k++) gbe_frame(pkt, 1000 + k);
    wait (got_ev.size() == 2);
    t1 = $time;
    bpc = real'(2 * buf_bytes) / (real'(t1 - t0) / 5.0);
    $display("GbE, %0d-event buffers: %0.3f payload bytes per clock (link needs 0.625)", events_per_buf, bpc);
    check(bpc >= 0.625, "GbE path keeps up with 1 Gb/s");
    for (int b = 0; b < 2; b++) check_buffer(got_ev[b], 0, b, buf_bytes, pkt, 1000 + b * (buf_bytes / pkt));
  endtask

  task automatic run_apelink(int events_per_buf);
    int buf_bytes = events_per_buf * EV_BYTES;
    int pkt = (events_per_buf < 64 ? events_per_buf : 64) * EV_BYTES;
    int npk = 2 * buf_bytes / pkt;
    int t0, t1;
    real bpc;
    logic [15:0] seq = 0;
    mem.delete();
    setup_clop(1, 64'h7b00_0000_0000, buf_bytes);
    got_ev = {};
    for (int k = 0; k < npk; k++) begin
      bytes_t b;
      beats_t pk;
      for (int i = 0; i < pkt; i++) b.push_back(pay_byte(2000 + k, i));
      pk = pack_datagram(b, 4096, 8'd0, 16'd0, seq);
      seq++;
      foreach (pk[i]) a_q.push_back(pk[i]);
    end
    @(posedge clk); t0 = $time;
    wait (got_ev.size() == 2);
    t1 = $time;
    bpc = real'(2 * buf_bytes) / (real'(t1 - t0) / 5.0);
    $display("APElink, %0d-event buffers: %0.3f payload bytes per clock (link needs 12.5)", events_per_buf, bpc);
    check(bpc >= 12.5, "APElink path keeps up with 20 Gb/s");
    for (int b = 0; b < 2; b++) check_buffer(got_ev[b], 1, b, buf_bytes, pkt, 2000 + b * (buf_bytes / pkt));
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mac_valid = 0; mac_data = 0; mac_sop = 0; mac_eop = 0; mac_empty = 0;
    apelink_valid = '0; apelink_beat = '0;
    dma_ready = 1; ev_ready = 1; uc_ready = 1;
    cfg_buf_we = 0; cfg_nbufs_we = 0; cfg_clop = 0; cfg_idx = 0; cfg_base = 0; cfg_size = 0; cfg_nbufs = 0;
    tlb_wr_en = 0; tlb_wr_idx = 0; tlb_wr_valid = 0; tlb_wr_gpu = 0; tlb_wr_vpn = 0; tlb_wr_ppn = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // Trigger operating points, then the buffer-size sweeps of the
    // benchmarks: 16 to 4096 events on GbE, 16 to 16K events on APElink.
    run_gbe(128);
    run_gbe(1024);
    run_apelink(4096);
    run_apelink(5120);
    for (int e = 16; e <= 4096; e *= 2) if (e != 128 && e != 1024) run_gbe(e);
    for (int e = 16; e <= 16384; e *= 2) if (e != 4096) run_apelink(e);
    check(pkts_dropped == 0 && len_errors == 0 && miss_stalls == 0, "no drops, errors or TLB misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
