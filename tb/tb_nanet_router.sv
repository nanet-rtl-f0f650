// tb_nanet_router: self-checking test of the channel router.
//
// Four channels send packets (header, 1 to 8 payload words, footer) with
// random gaps while the output applies random back-pressure. Every output
// word must belong to the packet whose header came last (no interleaving)
// and must match, in order, the next word that channel sent. A saturated
// phase checks the round-robin order 0,1,2,3,0,... and one output word per
// clock.
`timescale 1ns/1ps
module tb_nanet_router;
  import nanet_pkg::*;

  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  ape_beat_t [N-1:0] in_beat;
  logic [N-1:0] in_valid, in_ready;
  ape_beat_t out_beat; logic out_valid, out_ready;
  logic [N-1:0][31:0] pkts;

  nanet_router #(.N_PORTS(N)) dut (.*);

  int checks = 0, failures = 0;
  bit gaps = 1;
  ape_beat_t src_q[N][$];    // words still to send, per channel
  ape_beat_t exp_q[N][$];    // words still to see at the output, per channel
  bit accepted[N];
  int sent_pkts[N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic void make_packet(int p, int nwords);
    ape_header_t h = '0;
    ape_beat_t b;
    h.kind = KIND_HEADER; h.port = 8'($urandom); h.seq = 16'(sent_pkts[p]); h.len = 16'(16 * nwords);
    b = '{data: h, sop: 1'b1, eop: 1'b0};
    src_q[p].push_back(b);
    b.data[119:112] = 8'(p);    // the router stamps the channel number
    exp_q[p].push_back(b);
    for (int i = 0; i < nwords; i++) begin
      b = '{data: {$urandom, $urandom, $urandom, $urandom}, sop: 1'b0, eop: 1'b0};
      src_q[p].push_back(b); exp_q[p].push_back(b);
    end
    b = '{data: {8'h5A, 8'(p), 112'(sent_pkts[p])}, sop: 1'b0, eop: 1'b1};
    src_q[p].push_back(b); exp_q[p].push_back(b);
    sent_pkts[p]++;
  endfunction

  // Sources: change on the falling edge, words move on the rising edge.
  always @(posedge clk) for (int p = 0; p < N; p++) if (in_valid[p] && in_ready[p]) accepted[p] = 1;
  always @(negedge clk) begin
    for (int p = 0; p < N; p++) begin
      if (accepted[p]) begin void'(src_q[p].pop_front()); accepted[p] = 0; in_valid[p] = 0; end
      if (!in_valid[p] && src_q[p].size() > 0 && (!gaps || $urandom_range(0, 2) != 0)) begin
        in_valid[p] = 1; in_beat[p] = src_q[p][0];
      end
    end
    out_ready = !gaps || ($urandom_range(0, 3) != 0);
  end

  // Output monitor.
  int cur = -1;
  int order[$];
  int out_words = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    out_words++;
    if (out_beat.sop) begin
      cur = int'(out_beat.data[119:112]);
      order.push_back(cur);
    end
    if (cur < 0 || cur >= N || exp_q[cur].size() == 0) check(0, "word from no open packet");
    else begin
      ape_beat_t e;
      e = exp_q[cur].pop_front();
      check(out_beat == e, $sformatf("channel %0d word mismatch", cur));
    end
    if (out_beat.eop) cur = -1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; in_beat = '0; out_ready = 0;
    foreach (accepted[p]) accepted[p] = 0;
    foreach (sent_pkts[p]) sent_pkts[p] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) make_packet($urandom_range(0, N - 1), $urandom_range(1, 8));
    wait (src_q[0].size() == 0 && src_q[1].size() == 0 && src_q[2].size() == 0 && src_q[3].size() == 0);
    repeat (20) @(posedge clk);
    // Saturated phase: every channel has 3 packets of 4 payload words queued.
    @(negedge clk);
    gaps = 0;
    order = {};
    for (int r = 0; r < 3; r++) for (int p = 0; p < N; p++) make_packet(p, 4);
    begin
      int w0, c0, c1;
      @(posedge clk);
      w0 = out_words; c0 = $time;
      wait (src_q[0].size() == 0 && src_q[1].size() == 0 && src_q[2].size() == 0 && src_q[3].size() == 0);
      @(posedge clk);
      c1 = $time;
      // 12 packets x 6 words with no idle clock
      check(out_words - w0 >= 12 * 6 - 2, $sformatf("saturated: %0d words in %0d clocks", out_words - w0, (c1 - c0) / 5));
    end
    repeat (10) @(posedge clk);
    check(order.size() == 12, "12 packets in saturated phase");
    for (int i = 1; i < order.size(); i++)
      check(order[i] == (order[i-1] + 1) % N, $sformatf("round-robin order %0d after %0d", order[i], order[i-1]));
    for (int p = 0; p < N; p++) begin
      check(exp_q[p].size() == 0, $sformatf("channel %0d drained", p));
      check(pkts[p] == 32'(sent_pkts[p]), $sformatf("channel %0d packet counter", p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
