// tb_clop_vagen: self-checking test of the receive-buffer address generator.
//
// Registers CLOPs with a few buffers of different sizes, then issues random
// allocate/commit pairs of random lengths on random CLOPs, with the event
// consumer sometimes slow. A behavioural model of the buffer lists
// predicts every virtual address and every completion event (buffer closed
// because the next packet does not fit, and buffer closed because it is
// exactly full). An unregistered CLOP must report an error.
`timescale 1ns/1ps
module tb_clop_vagen;
  import nanet_pkg::*;

  localparam int NC = 4, NB = 8;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic cfg_buf_we, cfg_nbufs_we;
  logic [1:0] cfg_clop; logic [2:0] cfg_idx; logic [63:0] cfg_base; logic [31:0] cfg_size;
  logic [3:0] cfg_nbufs;
  logic alloc_valid, alloc_err, commit_valid, req_ready, ev_valid, ev_ready;
  logic [1:0] alloc_clop, commit_clop; logic [15:0] alloc_len; logic [63:0] alloc_va;
  rx_event_t ev;

  clop_vagen #(.N_CLOPS(NC), .MAX_BUFS(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Model state
  longint m_base[NC][NB]; int m_size[NC][NB]; int m_n[NC]; int m_cur[NC]; int m_fill[NC];
  rx_event_t exp_ev[$];
  int n_wrap_events = 0, n_full_events = 0, n_refused = 0;

  always @(negedge clk) ev_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    if (exp_ev.size() == 0) check(0, "unexpected event");
    else begin
      rx_event_t e;
      e = exp_ev.pop_front();
      check(ev == e, $sformatf("event got clop %0d buf %0d bytes %0d, expected clop %0d buf %0d bytes %0d",
            ev.port, ev.buf_idx, ev.bytes, e.port, e.buf_idx, e.bytes));
    end
  end

  task automatic wait_ready();
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
  endtask

  task automatic close_buf(int c);
    exp_ev.push_back('{port: 8'(c), buf_idx: 8'(m_cur[c]), base: m_base[c][m_cur[c]], bytes: 32'(m_fill[c])});
    m_cur[c] = (m_cur[c] + 1) % m_n[c];
    m_fill[c] = 0;
  endtask

  task automatic alloc_commit(int c, int len);
    int len16 = ((len + 15) / 16) * 16;
    longint exp_va;
    @(negedge clk);
    alloc_valid = 1; alloc_clop = 2'(c); alloc_len = 16'(len);
    wait_ready();
    if (m_n[c] == 0) begin
      check(alloc_err == 1, "unregistered CLOP reports error");
    end else if (len16 > m_size[c][(m_fill[c] > 0 && m_fill[c] + len16 > m_size[c][m_cur[c]]) ? (m_cur[c] + 1) % m_n[c] : m_cur[c]]) begin
      // Larger than the buffer it would land in: refused, nothing changes.
      check(alloc_err == 1, $sformatf("clop %0d: %0d-byte packet larger than its buffer refused", c, len));
      n_refused++;
      @(posedge clk);
      @(negedge clk);
      alloc_valid = 0;
      return;
    end else begin
      if (m_fill[c] > 0 && m_fill[c] + len16 > m_size[c][m_cur[c]]) begin close_buf(c); n_wrap_events++; end
      exp_va = m_base[c][m_cur[c]] + m_fill[c];
      m_fill[c] += len16;
      check(alloc_err == 0, "registered CLOP: no error");
      check(alloc_va == 64'(exp_va), $sformatf("clop %0d va %h expected %h", c, alloc_va, exp_va));
    end
    @(posedge clk);
    @(negedge clk);
    alloc_valid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    commit_valid = 1; commit_clop = 2'(c);
    wait_ready();
    if (m_n[c] != 0 && m_fill[c] >= m_size[c][m_cur[c]]) begin close_buf(c); n_full_events++; end
    @(posedge clk);
    @(negedge clk);
    commit_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_buf_we = 0; cfg_nbufs_we = 0; alloc_valid = 0; commit_valid = 0;
    cfg_clop = 0; cfg_idx = 0; cfg_base = 0; cfg_size = 0; cfg_nbufs = 0;
    alloc_clop = 0; alloc_len = 0; commit_clop = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // CLOPs 0..2 registered, CLOP 3 left empty.
    for (int c = 0; c < 3; c++) begin
      m_n[c] = (c == 0) ? 4 : (c == 1) ? 3 : 8;
      m_cur[c] = 0; m_fill[c] = 0;
      for (int b = 0; b < m_n[c]; b++) begin
        m_base[c][b] = 64'h7f00_0000_0000 + longint'(c) * 64'h100_0000 + longint'(b) * 64'h1_0000;
        m_size[c][b] = (c == 1) ? 4096 * 2 : 4096 + 1024 * b;
        @(negedge clk);
        cfg_buf_we = 1; cfg_clop = 2'(c); cfg_idx = 3'(b); cfg_base = m_base[c][b]; cfg_size = 32'(m_size[c][b]);
      end
      @(negedge clk);
      cfg_buf_we = 0; cfg_nbufs_we = 1; cfg_nbufs = 4'(m_n[c]);
      @(negedge clk);
      cfg_nbufs_we = 0;
    end
    m_n[3] = 0;
    alloc_commit(3, 100);
    alloc_commit(1, 4096);          // exactly half
    alloc_commit(1, 4096);          // exactly full -> event on commit
    for (int i = 0; i < 300; i++) begin
      int c, len;
      c = $urandom_range(0, 3);
      len = ($urandom_range(0, 3) == 0) ? 4096 : $urandom_range(1, 4096);
      alloc_commit(c, len);
    end
    // CLOP 3 registered late with one small and one large buffer.
    m_n[3] = 2; m_cur[3] = 0; m_fill[3] = 0;
    m_base[3][0] = 64'h7f00_0400_0000; m_size[3][0] = 1024;
    m_base[3][1] = 64'h7f00_0400_1000; m_size[3][1] = 4096;
    for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      cfg_buf_we = 1; cfg_clop = 2'd3; cfg_idx = 3'(b); cfg_base = m_base[3][b]; cfg_size = 32'(m_size[3][b]);
    end
    @(negedge clk);
    cfg_buf_we = 0; cfg_nbufs_we = 1; cfg_nbufs = 4'd2;
    @(negedge clk);
    cfg_nbufs_we = 0;
    alloc_commit(3, 2000);          // larger than buffer 0: refused
    alloc_commit(3, 1000);          // fits buffer 0
    alloc_commit(3, 100);           // buffer 0 closes, goes to buffer 1
    alloc_commit(3, 4000);          // does not fit after 112 bytes, and buffer 0 is too small: refused
    for (int i = 0; i < 60; i++) alloc_commit(3, $urandom_range(1, 4096));
    repeat (20) @(posedge clk);
    check(exp_ev.size() == 0, "all events delivered");
    check(n_refused >= 2, "packets larger than their buffer were refused");
    check(n_wrap_events > 0, "a buffer was closed because a packet did not fit");
    check(n_full_events > 0, "a buffer was closed because it was exactly full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
