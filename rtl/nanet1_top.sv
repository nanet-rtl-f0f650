// nanet1_top: receive datapath of the NaNet-1 NIC.
//
// What it does. NaNet-1 moves readout data from the network links straight
// into GPU (or host) memory. No CPU handles the packets and no buffer sits
// in between. Channel 0 is the GbE channel. The Ethernet MAC's Avalon-ST
// stream enters the UDP offloader, which keeps only UDP payloads. The NaNet
// controller wraps those payloads in APEnet+ packets. Channels
// 1..N_APELINK are APElink channels, whose link controllers already deliver
// APEnet+ packets. The router merges all channels, and the RX block writes
// each payload into the current receive buffer of its channel's CLOP. Every
// write beat goes out towards the PCIe core, and the RX block posts an
// event each time a buffer completes.
//
// What is outside. The Ethernet MAC and PHY, the APElink transceivers,
// word-stuffing and link control, the microcontroller, the PCIe core, the
// GPU I/O accelerator and the TX (injection) path are not part of this
// module. Their signals are ports. The microcontroller side receives the
// non-UDP frames, writes the CLOP and TLB tables, and serves TLB misses.
//
// Structure and timing. The whole path runs on one clock, 200 MHz in
// NaNet-1. The GbE channel carries 32 bits per clock (6.4 Gb/s at
// 200 MHz). The router and the RX block carry 128 bits per clock. The
// module follows the block structure of the NaNet-1 description. The
// address generation and translation in hardware (clop_vagen, nanet_tlb)
// follow the NaNet roadmap, which moves that work out of the
// microcontroller firmware.
module nanet1_top
  import nanet_pkg::*;
#(
  parameter int unsigned N_APELINK = 3,
  parameter int unsigned MAX_BUFS  = 32,
  parameter int unsigned N_TLB     = 32,
  parameter int unsigned PAGE_BITS = 16,
  parameter int unsigned N_CH      = 1 + N_APELINK
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // GbE: Avalon-ST from the Ethernet MAC
  input  logic [31:0]                   mac_data,
  input  logic                          mac_valid,
  input  logic                          mac_sop,
  input  logic                          mac_eop,
  input  logic [1:0]                    mac_empty,
  output logic                          mac_ready,
  // GbE: non-UDP frames to the microcontroller
  output logic [31:0]                   uc_data,
  output logic                          uc_valid,
  output logic                          uc_sop,
  output logic                          uc_eop,
  output logic [1:0]                    uc_empty,
  input  logic                          uc_ready,
  // APElink channels: APEnet+ packets from the link controllers
  input  ape_beat_t [N_APELINK-1:0]     apelink_beat,
  input  logic      [N_APELINK-1:0]     apelink_valid,
  output logic      [N_APELINK-1:0]     apelink_ready,
  // Towards the PCIe core
  output dma_beat_t                     dma,
  output logic                          dma_valid,
  input  logic                          dma_ready,
  output rx_event_t                     ev,
  output logic                          ev_valid,
  input  logic                          ev_ready,
  // CLOP registration
  input  logic                          cfg_buf_we,
  input  logic [$clog2(N_CH)-1:0]       cfg_clop,
  input  logic [$clog2(MAX_BUFS)-1:0]   cfg_idx,
  input  logic [VA_W-1:0]               cfg_base,
  input  logic [31:0]                   cfg_size,
  input  logic                          cfg_nbufs_we,
  input  logic [$clog2(MAX_BUFS):0]     cfg_nbufs,
  // TLB entry writes and miss report
  input  logic                          tlb_wr_en,
  input  logic [$clog2(N_TLB)-1:0]      tlb_wr_idx,
  input  logic                          tlb_wr_valid,
  input  logic [VA_W-PAGE_BITS-1:0]     tlb_wr_vpn,
  input  logic [VA_W-PAGE_BITS-1:0]     tlb_wr_ppn,
  input  logic                          tlb_wr_gpu,
  output logic                          tlb_miss,
  output logic [VA_W-1:0]               tlb_miss_va,
  // Statistics
  output logic [31:0]                   udp_frames,
  output logic [31:0]                   other_frames,
  output logic [31:0]                   gbe_pkts,
  output logic [N_CH-1:0][31:0]         router_pkts,
  output logic [31:0]                   pkts_ok,
  output logic [31:0]                   pkts_dropped,
  output logic [31:0]                   len_errors,
  output logic [31:0]                   miss_stalls
);

  // ---- GbE channel: UDP offloader -> NaNet controller ----
  logic [31:0] pay_data;
  logic        pay_valid, pay_sop, pay_eop, pay_ready;
  logic [1:0]  pay_empty;
  logic [15:0] pay_len, pay_udp_port;

  udp_offloader u_udp (
    .clk, .rst_n,
    .rx_data(mac_data), .rx_valid(mac_valid), .rx_sop(mac_sop), .rx_eop(mac_eop),
    .rx_empty(mac_empty), .rx_ready(mac_ready),
    .pay_data, .pay_valid, .pay_sop, .pay_eop, .pay_empty, .pay_len, .pay_udp_port, .pay_ready,
    .uc_data, .uc_valid, .uc_sop, .uc_eop, .uc_empty, .uc_ready,
    .udp_frames, .other_frames
  );

  ape_beat_t [N_CH-1:0] ch_beat;
  logic      [N_CH-1:0] ch_valid, ch_ready;

  nanet_ctrl #(.PORT_ID(8'd0)) u_ctrl (
    .clk, .rst_n,
    .in_data(pay_data), .in_valid(pay_valid), .in_sop(pay_sop), .in_eop(pay_eop),
    .in_empty(pay_empty), .in_len(pay_len), .in_udp_port(pay_udp_port), .in_ready(pay_ready),
    .out_beat(ch_beat[0]), .out_valid(ch_valid[0]), .out_ready(ch_ready[0]),
    .pkts_out(gbe_pkts)
  );

  // ---- APElink channels ----
  assign ch_beat[N_CH-1:1]  = apelink_beat;
  assign ch_valid[N_CH-1:1] = apelink_valid;
  assign apelink_ready      = ch_ready[N_CH-1:1];

  // ---- Router ----
  ape_beat_t r_beat;
  logic      r_valid, r_ready;

  nanet_router #(.N_PORTS(N_CH)) u_router (
    .clk, .rst_n,
    .in_beat(ch_beat), .in_valid(ch_valid), .in_ready(ch_ready),
    .out_beat(r_beat), .out_valid(r_valid), .out_ready(r_ready),
    .pkts(router_pkts)
  );

  // ---- Network Interface: RX block ----
  rx_block #(.N_CLOPS(N_CH), .MAX_BUFS(MAX_BUFS), .N_TLB(N_TLB), .PAGE_BITS(PAGE_BITS)) u_rx (
    .clk, .rst_n,
    .in_beat(r_beat), .in_valid(r_valid), .in_ready(r_ready),
    .dma, .dma_valid, .dma_ready,
    .ev, .ev_valid, .ev_ready,
    .cfg_buf_we, .cfg_clop, .cfg_idx, .cfg_base, .cfg_size, .cfg_nbufs_we, .cfg_nbufs,
    .tlb_wr_en, .tlb_wr_idx, .tlb_wr_valid, .tlb_wr_vpn, .tlb_wr_ppn, .tlb_wr_gpu,
    .tlb_miss, .tlb_miss_va,
    .pkts_ok, .pkts_dropped, .len_errors, .miss_stalls
  );

endmodule
