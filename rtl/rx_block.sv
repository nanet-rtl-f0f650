// rx_block: RDMA receive engine of the Network Interface.
//
// What it does. It takes the APEnet+ packets the router delivers and writes
// their payloads straight into the receive buffers that software has
// registered in GPU or host memory (RDMA, GPUDirect for GPU memory). It
// needs no CPU and no staging copy. When a buffer is complete it posts an
// event, so that the application can launch the GPU kernel on it. The NaNet
// description names this RX block and its job. The datapath below is this
// design's own: it uses the hardware address generator (clop_vagen) and the
// TLB (nanet_tlb) that the NaNet roadmap puts in place of the
// microcontroller firmware.
//
// How it works. On a header word the channel number selects a CLOP and
// clop_vagen returns, in the same clock, the virtual address of the
// payload. Each following 128-bit payload word is translated through the
// TLB, using the running virtual address, and leaves as one dma_beat_t
// write (physical address, GPU/host flag, byte enables, data), with
// the bytes reordered so that byte i of the beat belongs at address addr+i. On a TLB
// miss the block stalls with tlb_miss high and tlb_miss_va showing the
// address, until an entry is written. On the footer the length is checked
// against the header and the packet is committed to clop_vagen, which may
// close the buffer and raise an event. Packets from a channel without a
// registered CLOP, or with an impossible length, are dropped and counted.
//
// Interface and timing. in_*, dma_* and ev_* are valid/ready streams. The
// write beats are registered. A packet of N payload words takes N+2
// clocks (header, N words, footer) when the TLB hits and the PCIe side is
// ready, so the block takes a 128-bit word per clock.
module rx_block
  import nanet_pkg::*;
#(
  parameter int unsigned N_CLOPS   = 4,
  parameter int unsigned MAX_BUFS  = 32,
  parameter int unsigned N_TLB     = 32,
  parameter int unsigned PAGE_BITS = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // From the router
  input  ape_beat_t                     in_beat,
  input  logic                          in_valid,
  output logic                          in_ready,
  // Write beats towards the PCIe core
  output dma_beat_t                     dma,
  output logic                          dma_valid,
  input  logic                          dma_ready,
  // Buffer-completion events
  output rx_event_t                     ev,
  output logic                          ev_valid,
  input  logic                          ev_ready,
  // CLOP registration
  input  logic                          cfg_buf_we,
  input  logic [$clog2(N_CLOPS)-1:0]    cfg_clop,
  input  logic [$clog2(MAX_BUFS)-1:0]   cfg_idx,
  input  logic [VA_W-1:0]               cfg_base,
  input  logic [31:0]                   cfg_size,
  input  logic                          cfg_nbufs_we,
  input  logic [$clog2(MAX_BUFS):0]     cfg_nbufs,
  // TLB entry writes
  input  logic                          tlb_wr_en,
  input  logic [$clog2(N_TLB)-1:0]      tlb_wr_idx,
  input  logic                          tlb_wr_valid,
  input  logic [VA_W-PAGE_BITS-1:0]     tlb_wr_vpn,
  input  logic [VA_W-PAGE_BITS-1:0]     tlb_wr_ppn,
  input  logic                          tlb_wr_gpu,
  // Miss report and statistics
  output logic                          tlb_miss,
  output logic [VA_W-1:0]               tlb_miss_va,
  output logic [31:0]                   pkts_ok,
  output logic [31:0]                   pkts_dropped,
  output logic [31:0]                   len_errors,
  output logic [31:0]                   miss_stalls
);

  localparam int unsigned CW = $clog2(N_CLOPS);

  typedef enum logic [1:0] {S_HDR, S_PAY, S_FTR, S_DROP} state_e;
  state_e state;

  ape_header_t hdr_in;
  ape_footer_t ftr_in;
  assign hdr_in = ape_header_t'(in_beat.data);
  assign ftr_in = ape_footer_t'(in_beat.data);

  logic [CW-1:0]    clop;
  logic [LEN_W-1:0] len;
  logic [LEN_W-1:0] left;      // payload bytes still to write
  logic [VA_W-1:0]  va;        // virtual address of the next payload word
  logic             miss_q;

  // ---- address generator ----
  logic            alloc_valid, alloc_err, commit_valid, req_ready;
  logic [VA_W-1:0] alloc_va;
  wire  hdr_ok = hdr_in.kind == KIND_HEADER && (int'(hdr_in.port) < N_CLOPS) && hdr_in.len != '0 &&
                 hdr_in.len <= LEN_W'(MAX_PAYLOAD);

  clop_vagen #(.N_CLOPS(N_CLOPS), .MAX_BUFS(MAX_BUFS)) u_vagen (
    .clk, .rst_n,
    .cfg_buf_we, .cfg_clop, .cfg_idx, .cfg_base, .cfg_size, .cfg_nbufs_we, .cfg_nbufs,
    .alloc_valid, .alloc_clop(CW'(hdr_in.port)), .alloc_len(hdr_in.len),
    .alloc_va, .alloc_err,
    .commit_valid, .commit_clop(clop), .req_ready,
    .ev, .ev_valid, .ev_ready
  );

  // ---- TLB ----
  logic            lk_hit, lk_gpu;
  logic [VA_W-1:0] lk_pa;
  nanet_tlb #(.N_ENTRIES(N_TLB), .PAGE_BITS(PAGE_BITS)) u_tlb (
    .clk, .rst_n,
    .wr_en(tlb_wr_en), .wr_idx(tlb_wr_idx), .wr_valid(tlb_wr_valid),
    .wr_vpn(tlb_wr_vpn), .wr_ppn(tlb_wr_ppn), .wr_gpu(tlb_wr_gpu),
    .lk_va(va), .lk_hit, .lk_pa, .lk_gpu
  );

  // Payload byte p of an APEnet+ word sits in bits [31-8*(p%4) -: 8] of
  // lane p/4. The write beat is little-endian: byte p goes to addr + p and
  // sits in bits [8p+7:8p]. Byte enables cover the `left` valid bytes.
  logic [APE_BYTES-1:0] be;
  logic [APE_W-1:0]     wdata;
  always_comb begin
    be = '0;
    for (int p = 0; p < APE_BYTES; p++) begin
      wdata[8*p +: 8] = in_beat.data[32*(p/4) + 31 - 8*(p%4) -: 8];
      if (LEN_W'(p) < left) be[p] = 1'b1;
    end
  end

  wire dma_free = !dma_valid || dma_ready;

  always_comb begin
    alloc_valid  = 1'b0;
    commit_valid = 1'b0;
    in_ready     = 1'b0;
    tlb_miss     = 1'b0;
    unique case (state)
      S_HDR: begin
        alloc_valid = in_valid && in_beat.sop && hdr_ok;
        in_ready    = in_beat.sop && hdr_ok ? req_ready : 1'b1;
      end
      S_PAY: begin
        tlb_miss = in_valid && !in_beat.eop && !lk_hit;
        if (in_beat.eop) begin          // short packet: footer comes early
          commit_valid = in_valid;
          in_ready     = req_ready;
        end else begin
          in_ready = lk_hit && dma_free;
        end
      end
      S_FTR: begin
        commit_valid = in_valid;
        in_ready     = req_ready;
      end
      S_DROP: in_ready = 1'b1;
      default: ;
    endcase
  end
  assign tlb_miss_va = va;

  wire in_fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_HDR;
      clop         <= '0;
      len          <= '0;
      left         <= '0;
      va           <= '0;
      dma          <= '0;
      dma_valid    <= 1'b0;
      miss_q       <= 1'b0;
      pkts_ok      <= '0;
      pkts_dropped <= '0;
      len_errors   <= '0;
      miss_stalls  <= '0;
    end else begin
      if (dma_valid && dma_ready) dma_valid <= 1'b0;
      miss_q <= tlb_miss;
      if (tlb_miss && !miss_q) miss_stalls <= miss_stalls + 32'd1;
      unique case (state)
        S_HDR: if (in_fire && in_beat.sop) begin
          if (!hdr_ok || alloc_err) begin
            pkts_dropped <= pkts_dropped + 32'd1;
            state        <= S_DROP;
          end else begin
            clop  <= CW'(hdr_in.port);
            len   <= hdr_in.len;
            left  <= hdr_in.len;
            va    <= alloc_va;
            state <= S_PAY;
          end
        end
        S_PAY: if (in_fire) begin
          if (in_beat.eop) begin
            // Footer before the announced length: the packet is short.
            // Its allocation is committed all the same.
            len_errors <= len_errors + 32'd1;
            state      <= S_HDR;
          end else begin
            dma       <= '{addr: lk_pa, gpu: lk_gpu, be: be, data: wdata};
            dma_valid <= 1'b1;
            va        <= va + VA_W'(APE_BYTES);
            left      <= (left > LEN_W'(APE_BYTES)) ? left - LEN_W'(APE_BYTES) : '0;
            if (left <= LEN_W'(APE_BYTES)) state <= S_FTR;
          end
        end
        S_FTR: if (in_fire) begin
          if (in_beat.eop && ftr_in.kind == KIND_FOOTER && ftr_in.len == len) begin
            pkts_ok <= pkts_ok + 32'd1;
            state   <= S_HDR;
          end else begin
            len_errors <= len_errors + 32'd1;
            state      <= in_beat.eop ? S_HDR : S_DROP;
          end
        end
        S_DROP: if (in_fire && in_beat.eop) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end

`ifndef SYNTHESIS
  // Every write beat carries at least one byte and a 16-byte aligned address.
  a_beat_ok: assert property (@(posedge clk) disable iff (!rst_n)
      dma_valid |-> dma.be != '0 && dma.addr[3:0] == 4'd0);
`endif

endmodule
