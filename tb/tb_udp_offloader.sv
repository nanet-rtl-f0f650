// tb_udp_offloader: self-checking test of the UDP offloader.
//
// Sends a random mix of UDP datagrams (with and without IPv4 options, from
// 1 to 300 payload bytes, some shorter than the Ethernet minimum), ARP,
// ICMP and fragmented frames, with random gaps on the input and random
// back-pressure on both outputs. Every UDP payload must come out on the
// payload port byte for byte, with the right length and UDP port. Every
// other frame must come out whole on the microcontroller port. A last phase
// runs with no gaps and no back-pressure and checks that an N-word payload
// streams in N consecutive clocks (32 bits per clock).
`timescale 1ns/1ps
module tb_udp_offloader;
  import tb_eth_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;   // 200 MHz

  logic [31:0] rx_data;  logic rx_valid, rx_sop, rx_eop, rx_ready; logic [1:0] rx_empty;
  logic [31:0] pay_data; logic pay_valid, pay_sop, pay_eop, pay_ready; logic [1:0] pay_empty;
  logic [15:0] pay_len, pay_udp_port;
  logic [31:0] uc_data;  logic uc_valid, uc_sop, uc_eop, uc_ready; logic [1:0] uc_empty;
  logic [31:0] udp_frames, other_frames;

  udp_offloader dut (.*);

  int checks = 0, failures = 0;
  bit gaps = 1;

  typedef struct { int len; int port; int seed; } exp_pay_t;
  exp_pay_t exp_pay[$];
  bytes_t   exp_uc[$];
  int n_udp = 0, n_other = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- driver ----------------
  task automatic send(bytes_t f);
    int n = nwords(f);
    // Inputs change on the falling edge; a word moves on the rising edge
    // where rx_valid and rx_ready are both high.
    for (int w = 0; w < n; w++) begin
      while (gaps && $urandom_range(0, 3) == 0) begin
        @(negedge clk); rx_valid = 0;
      end
      @(negedge clk);
      rx_valid = 1; rx_data = word_at(f, w);
      rx_sop = (w == 0); rx_eop = (w == n - 1);
      rx_empty = (w == n - 1) ? 2'(4 * n - f.size()) : 2'd0;
      #1;
      while (!rx_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic send_kind(int kind, int len, int port, int seed);
    bytes_t f = build_frame(kind, len, port, seed);
    if (kind == 0 || kind == 4) begin
      if (len > 0) begin exp_pay.push_back('{len, port, seed}); n_udp++; end
    end else begin
      exp_uc.push_back(f); n_other++;
    end
    send(f);
  endtask

  // ---------------- back-pressure ----------------
  always @(negedge clk) begin
    pay_ready = !gaps || ($urandom_range(0, 4) != 0);
    uc_ready  = !gaps || ($urandom_range(0, 4) != 0);
  end

  // ---------------- payload monitor ----------------
  byte unsigned pbytes[$];
  int p_words = 0, p_first_cyc = 0, last_pay_cycles = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && pay_valid && pay_ready) begin
    if (pay_sop) begin pbytes = {}; p_first_cyc = cyc; end
    for (int b = 0; b < 4 - (pay_eop ? int'(pay_empty) : 0); b++) pbytes.push_back(pay_data[31 - 8*b -: 8]);
    if (pay_eop) begin
      exp_pay_t e;
      last_pay_cycles = cyc - p_first_cyc + 1;
      if (exp_pay.size() == 0) check(0, "unexpected UDP payload");
      else begin
        bit ok;
        ok = 1;
        e = exp_pay.pop_front();
        check(pbytes.size() == e.len, $sformatf("payload length %0d expected %0d", pbytes.size(), e.len));
        check(pay_len == 16'(e.len), "pay_len field");
        check(pay_udp_port == 16'(e.port), "pay_udp_port field");
        for (int i = 0; i < pbytes.size() && i < e.len; i++) if (pbytes[i] != pay_byte(e.seed, i)) ok = 0;
        check(ok, "payload bytes");
      end
    end
  end

  // ---------------- microcontroller monitor ----------------
  byte unsigned ubytes[$];
  always @(posedge clk) if (rst_n && uc_valid && uc_ready) begin
    if (uc_sop) ubytes = {};
    for (int b = 0; b < 4 - (uc_eop ? int'(uc_empty) : 0); b++) ubytes.push_back(uc_data[31 - 8*b -: 8]);
    if (uc_eop) begin
      if (exp_uc.size() == 0) check(0, "unexpected uC frame");
      else begin
        bytes_t e;
        e = exp_uc.pop_front();
        check(ubytes == e, $sformatf("uC frame: %0d bytes, expected %0d", ubytes.size(), e.size()));
      end
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rx_valid = 0; rx_sop = 0; rx_eop = 0; rx_data = 0; rx_empty = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // directed corner cases
    send_kind(0, 1, 5000, 1);
    send_kind(0, 0, 5000, 2);       // empty payload, dropped
    send_kind(1, 0, 0, 3);
    send_kind(4, 37, 6000, 4);
    send_kind(2, 20, 0, 5);
    send_kind(3, 64, 5000, 6);
    send_kind(0, 18, 5001, 7);      // padded to the minimum frame
    send_kind(0, 4, 5002, 8);       // padded, payload a whole number of words
    send_kind(0, 16, 5003, 9);
    // random mix
    for (int i = 0; i < 60; i++) begin
      int k, kind;
      k = $urandom_range(0, 9);
      kind = (k < 6) ? 0 : (k == 6) ? 4 : (k - 6);
      send_kind(kind, $urandom_range(1, 300), $urandom_range(1, 65535), $urandom);
    end
    // full-rate phase
    repeat (20) @(posedge clk);
    gaps = 0;
    repeat (2) @(posedge clk);
    send_kind(0, 256, 7000, 99);
    repeat (20) @(posedge clk);
    check(last_pay_cycles == 64, $sformatf("256-byte payload took %0d cycles, expected 64", last_pay_cycles));
    check(exp_pay.size() == 0, "all UDP payloads delivered");
    check(exp_uc.size() == 0, "all other frames delivered");
    check(udp_frames == 32'(n_udp), "udp_frames counter");
    check(other_frames == 32'(n_other), "other_frames counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
