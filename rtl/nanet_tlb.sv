// nanet_tlb: translation lookaside buffer for RDMA writes.
//
// What it does. It translates a virtual byte address inside a registered
// receive buffer into the physical (bus) address the PCIe write must carry,
// and says whether the page is in GPU or host memory. In NaNet-1 the
// microcontroller firmware does this translation, at the cost of latency
// and jitter. The NaNet roadmap replaces it with a TLB, an associative
// cache holding a limited number of entries. This block is that TLB. Its
// size, page size and fill policy are this design's own choices.
//
// How it works. N_ENTRIES fully associative entries each hold a valid bit,
// a virtual page number, a physical page number and a GPU/host flag. A
// lookup compares the virtual page number with every valid entry in
// parallel. Software (the driver, or the microcontroller on a miss) writes
// an entry at an index of its choosing. Entries must not overlap: at most
// one entry may match (assertion).
//
// Interface and timing. The lookup is combinational: lk_va in, lk_hit,
// lk_pa and lk_gpu out in the same clock, so the receive path can translate
// one 128-bit word per clock. Writes take effect on the next clock. The
// page offset (PAGE_BITS low bits) passes through untranslated. The
// default page is 64 KB, the page size of GPU memory exposed for
// peer-to-peer access.
module nanet_tlb
  import nanet_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 32,
  parameter int unsigned PAGE_BITS = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // Entry writes
  input  logic                         wr_en,
  input  logic [$clog2(N_ENTRIES)-1:0] wr_idx,
  input  logic                         wr_valid,
  input  logic [VA_W-PAGE_BITS-1:0]    wr_vpn,
  input  logic [VA_W-PAGE_BITS-1:0]    wr_ppn,
  input  logic                         wr_gpu,
  // Lookup
  input  logic [VA_W-1:0]              lk_va,
  output logic                         lk_hit,
  output logic [VA_W-1:0]              lk_pa,
  output logic                         lk_gpu
);

  localparam int unsigned PN_W = VA_W - PAGE_BITS;

  logic            e_valid [N_ENTRIES];
  logic [PN_W-1:0] e_vpn   [N_ENTRIES];
  logic [PN_W-1:0] e_ppn   [N_ENTRIES];
  logic            e_gpu   [N_ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ENTRIES; i++) e_valid[i] <= 1'b0;
    end else if (wr_en) begin
      e_valid[wr_idx] <= wr_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      e_vpn[wr_idx] <= wr_vpn;
      e_ppn[wr_idx] <= wr_ppn;
      e_gpu[wr_idx] <= wr_gpu;
    end
  end

  logic [N_ENTRIES-1:0] match;
  always_comb begin
    lk_hit = 1'b0;
    lk_pa  = '0;
    lk_gpu = 1'b0;
    for (int i = 0; i < N_ENTRIES; i++) begin
      match[i] = e_valid[i] && (e_vpn[i] == lk_va[VA_W-1:PAGE_BITS]);
      if (match[i]) begin
        lk_hit = 1'b1;
        lk_pa  = {e_ppn[i], lk_va[PAGE_BITS-1:0]};
        lk_gpu = e_gpu[i];
      end
    end
  end

`ifndef SYNTHESIS
  a_single_match: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(match));
`endif

endmodule
