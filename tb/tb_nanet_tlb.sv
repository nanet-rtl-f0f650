// tb_nanet_tlb: self-checking test of the TLB.
//
// Fills the entries with random non-overlapping pages (some GPU, some
// host), then looks up random addresses: inside a mapped page (must hit
// with the right physical address and flag) and in unmapped pages (must
// miss). It also invalidates and overwrites entries and checks that the
// old mapping disappears.
`timescale 1ns/1ps
module tb_nanet_tlb;
  import nanet_pkg::*;

  localparam int NE = 32, PB = 16, PN = 64 - PB;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic wr_en, wr_valid, wr_gpu; logic [4:0] wr_idx; logic [PN-1:0] wr_vpn, wr_ppn;
  logic [63:0] lk_va, lk_pa; logic lk_hit, lk_gpu;

  nanet_tlb #(.N_ENTRIES(NE), .PAGE_BITS(PB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit m_valid[NE]; logic [PN-1:0] m_vpn[NE], m_ppn[NE]; bit m_gpu[NE];

  task automatic write(int i, bit v, logic [PN-1:0] vpn, logic [PN-1:0] ppn, bit gpu);
    @(negedge clk);
    wr_en = 1; wr_idx = 5'(i); wr_valid = v; wr_vpn = vpn; wr_ppn = ppn; wr_gpu = gpu;
    m_valid[i] = v; m_vpn[i] = vpn; m_ppn[i] = ppn; m_gpu[i] = gpu;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic lookup(logic [63:0] va);
    int hit_i = -1;
    @(negedge clk);
    lk_va = va;
    #1;
    for (int i = 0; i < NE; i++) if (m_valid[i] && m_vpn[i] == va[63:PB]) hit_i = i;
    check(lk_hit == (hit_i >= 0), $sformatf("hit for %h", va));
    if (hit_i >= 0) begin
      check(lk_pa == {m_ppn[hit_i], va[PB-1:0]}, $sformatf("pa for %h: %h", va, lk_pa));
      check(lk_gpu == m_gpu[hit_i], "gpu flag");
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_valid = 0; wr_gpu = 0; wr_idx = 0; wr_vpn = 0; wr_ppn = 0; lk_va = 0;
    foreach (m_valid[i]) m_valid[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    lookup(64'h1234_0000);                        // empty after reset
    for (int i = 0; i < NE; i++)                  // distinct pages: 0x7f00_00i0_xxxx
      write(i, 1, PN'(64'h7f00_0000 + i * 3), PN'({$urandom, $urandom}), i[0]);
    for (int k = 0; k < 400; k++) begin
      int i = $urandom_range(0, NE - 1);
      if ($urandom_range(0, 3) == 0) lookup({16'h0, 32'($urandom), 16'($urandom)});   // mostly unmapped
      else lookup({m_vpn[i], 16'($urandom)});
    end
    write(5, 0, m_vpn[5], m_ppn[5], 0);           // invalidate
    lookup({m_vpn[5], 16'h0040});
    write(6, 1, PN'(64'h55_5555), PN'(64'h66_6666), 1);   // overwrite
    lookup({PN'(64'h7f00_0000 + 18), 16'h0100});
    lookup({PN'(64'h55_5555), 16'hfff0});
    lookup({PN'(64'h55_5555), 16'hfff0} + 64'h10);        // next page: miss
    // Invalidate a random third of the entries, then look up every page.
    for (int i = 0; i < NE; i++)
      if ($urandom_range(0, 2) == 0) write(i, 0, m_vpn[i], m_ppn[i], m_gpu[i]);
    for (int i = 0; i < NE; i++) lookup({m_vpn[i], 16'($urandom)});
    // Make them valid again with new frames.
    for (int i = 0; i < NE; i++)
      if (!m_valid[i]) write(i, 1, m_vpn[i], PN'({$urandom, $urandom}), !m_gpu[i]);
    for (int i = 0; i < NE; i++) lookup({m_vpn[i], 16'($urandom)});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
