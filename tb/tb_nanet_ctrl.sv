// tb_nanet_ctrl: self-checking test of the NaNet controller.
//
// Feeds payload streams of random length (1 byte up to 9000 bytes, so that
// datagrams above 4096 bytes are split) with random input gaps and random
// output back-pressure. Every emitted 128-bit word is compared with the
// independent framing model in tb_ape_pkg (header fields, packed payload,
// footer length, sequence and checksum). A full-rate phase checks that a
// 64-word payload is taken in 64+3 clocks and that a 4096-byte limit splits
// a 5000-byte datagram into two packets.
`timescale 1ns/1ps
module tb_nanet_ctrl;
  import nanet_pkg::*;
  import tb_ape_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic [31:0] in_data; logic in_valid, in_sop, in_eop, in_ready; logic [1:0] in_empty;
  logic [15:0] in_len, in_udp_port;
  ape_beat_t out_beat; logic out_valid, out_ready;
  logic [31:0] pkts_out;

  nanet_ctrl #(.PORT_ID(8'd0)) dut (.*);

  int checks = 0, failures = 0;
  bit gaps = 1;
  ape_beat_t exp_q[$];
  logic [15:0] model_seq = 0;
  int n_pkts = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, in_first = 0, in_last = 0;
  always @(posedge clk) cyc++;

  task automatic send(int len, logic [15:0] port, int seed);
    bytes_t b;
    beats_t e;
    int nw = (len + 3) / 4;
    for (int i = 0; i < len; i++) b.push_back(8'((seed + 13 * i) & 255));
    e = pack_datagram(b, 4096, 8'd0, port, model_seq);
    model_seq += 16'((len + 4095) / 4096);
    foreach (e[i]) exp_q.push_back(e[i]);
    n_pkts += (len + 4095) / 4096;
    for (int w = 0; w < nw; w++) begin
      logic [31:0] d = $urandom;   // bytes past the end are garbage
      while (gaps && $urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
      for (int i = 0; i < 4; i++) if (4*w + i < len) d[31 - 8*i -: 8] = b[4*w + i];
      @(negedge clk);
      in_valid = 1; in_data = d; in_sop = (w == 0); in_eop = (w == nw - 1);
      in_empty = (w == nw - 1) ? 2'(4 * nw - len) : 2'd0;
      in_len = 16'(len); in_udp_port = port;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      if (w == 0) in_first = cyc;
      @(posedge clk);
      in_last = cyc;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  always @(negedge clk) out_ready = !gaps || ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected output word");
    else begin
      ape_beat_t e;
      e = exp_q.pop_front();
      check(out_beat == e, $sformatf("word mismatch: got %h sop%b eop%b, expected %h sop%b eop%b",
            out_beat.data, out_beat.sop, out_beat.eop, e.data, e.sop, e.eop));
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_sop = 0; in_eop = 0; in_data = 0; in_empty = 0; in_len = 0; in_udp_port = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    send(1, 16'd100, 1);
    send(2, 16'd100, 2);
    send(3, 16'd100, 3);
    send(16, 16'd101, 4);
    send(17, 16'd102, 5);
    send(4096, 16'd103, 6);
    send(4097, 16'd104, 7);
    send(9000, 16'd105, 8);
    for (int i = 0; i < 40; i++) send($urandom_range(1, 1500), 16'($urandom), $urandom);
    repeat (50) @(posedge clk);
    gaps = 0;
    repeat (4) @(posedge clk);
    send(256, 16'd200, 9);
    check(in_last - in_first + 1 == 64, $sformatf("64 words accepted in %0d clocks", in_last - in_first + 1));
    // Back to back: N words in N+3 clocks, so the next datagram's first
    // word is taken 4 clocks after the previous datagram's last word.
    begin
      int prev_last;
      prev_last = in_last;
      send(256, 16'd200, 10);
      check(in_first - prev_last == 4, $sformatf("gap between datagrams %0d clocks", in_first - prev_last));
    end
    send(5000, 16'd201, 11);
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, "all expected words emitted");
    check(pkts_out == 32'(n_pkts), $sformatf("pkts_out %0d expected %0d", pkts_out, n_pkts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
