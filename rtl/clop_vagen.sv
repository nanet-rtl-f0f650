// clop_vagen: receive-buffer address generator for the RDMA receive path.
//
// What it does. Software registers, per channel, a circular list of
// persistent receive buffers (a CLOP) in GPU or host virtual memory. Each
// incoming packet must be given the virtual address where its payload goes
// inside the current buffer. When a buffer is full, the application must
// be told so that it can launch the GPU kernel on it. In NaNet-1 the
// microcontroller firmware does this. The NaNet roadmap moves it into a
// hardware module, and this block is that module. How it fills buffers is
// this design's own choice.
//
// How it works. Each CLOP has a buffer table (base address and size of up
// to MAX_BUFS buffers), a current buffer index and a fill offset. On an
// allocation the packet length is rounded up to 16 bytes, so every payload
// starts on a 128-bit boundary. If the packet does not fit in what is left
// of the current buffer, that buffer is closed and the packet goes to the
// start of the next one. On a commit (the packet has been fully written),
// a buffer that is exactly full is closed. Closing a buffer posts a
// completion event (CLOP, buffer index, base address, bytes written) and
// moves to the next buffer of the list, wrapping around at the end. A
// packet larger than the buffer it would go to is refused (alloc_err), so
// buffers should be at least as long as the largest packet of the channel.
//
// Interface and timing. alloc_* and commit_* are single-clock requests
// with a shared ready. alloc_va and alloc_err answer combinationally in
// the same clock. Requests are refused (ready low) while a completion
// event is waiting to be taken on ev_*. Writing cfg_nbufs for a CLOP
// (re)starts it at buffer 0, offset 0. nbufs = 0 disables the CLOP: its
// allocations return alloc_err.
module clop_vagen
  import nanet_pkg::*;
#(
  parameter int unsigned N_CLOPS  = 4,
  parameter int unsigned MAX_BUFS = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // Buffer table writes
  input  logic                       cfg_buf_we,
  input  logic [$clog2(N_CLOPS)-1:0] cfg_clop,
  input  logic [$clog2(MAX_BUFS)-1:0] cfg_idx,
  input  logic [VA_W-1:0]            cfg_base,
  input  logic [31:0]                cfg_size,
  input  logic                       cfg_nbufs_we,
  input  logic [$clog2(MAX_BUFS):0]  cfg_nbufs,
  // Allocation (at a packet header)
  input  logic                       alloc_valid,
  input  logic [$clog2(N_CLOPS)-1:0] alloc_clop,
  input  logic [LEN_W-1:0]           alloc_len,
  output logic [VA_W-1:0]            alloc_va,
  output logic                       alloc_err,
  // Commit (at a packet footer)
  input  logic                       commit_valid,
  input  logic [$clog2(N_CLOPS)-1:0] commit_clop,
  output logic                       req_ready,
  // Completion events
  output rx_event_t                  ev,
  output logic                       ev_valid,
  input  logic                       ev_ready
);

  localparam int unsigned BW = $clog2(MAX_BUFS);

  logic [VA_W-1:0] tbl_base [N_CLOPS][MAX_BUFS];
  logic [31:0]     tbl_size [N_CLOPS][MAX_BUFS];
  logic [BW:0]     nbufs    [N_CLOPS];
  logic [BW-1:0]   cur      [N_CLOPS];
  logic [31:0]     offset   [N_CLOPS];

  assign req_ready = !ev_valid;

  function automatic logic [BW-1:0] next_idx(logic [BW-1:0] i, logic [BW:0] n);
    return ({1'b0, i} + 1'b1 >= n) ? '0 : i + 1'b1;
  endfunction

  // Allocation decision for the requesting CLOP.
  logic [BW-1:0] a_cur, a_nxt;
  logic [31:0]   a_off, a_len16;
  logic          a_wrap;
  always_comb begin
    a_cur   = cur[alloc_clop];
    a_nxt   = next_idx(a_cur, nbufs[alloc_clop]);
    a_off   = offset[alloc_clop];
    a_len16 = round16(32'(alloc_len));
    a_wrap  = (a_off != 32'd0) && (a_off + a_len16 > tbl_size[alloc_clop][a_cur]);
    // Refused: no CLOP, or a packet larger than the buffer it would land in
    // (a packet is never split across buffers).
    alloc_err = (nbufs[alloc_clop] == '0)
             || (a_len16 > tbl_size[alloc_clop][a_wrap ? a_nxt : a_cur]);
    alloc_va  = a_wrap ? tbl_base[alloc_clop][a_nxt]
                       : tbl_base[alloc_clop][a_cur] + VA_W'(a_off);
  end

  // Commit: is the buffer exactly full?
  logic [BW-1:0] c_cur;
  logic          c_full;
  always_comb begin
    c_cur  = cur[commit_clop];
    c_full = (nbufs[commit_clop] != '0) && (offset[commit_clop] >= tbl_size[commit_clop][c_cur]);
  end

  wire do_alloc  = alloc_valid && req_ready && !alloc_err;
  wire do_commit = commit_valid && req_ready;

  always_ff @(posedge clk) begin
    if (cfg_buf_we) begin
      tbl_base[cfg_clop][cfg_idx] <= cfg_base;
      tbl_size[cfg_clop][cfg_idx] <= cfg_size;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CLOPS; c++) begin
        nbufs[c]  <= '0;
        cur[c]    <= '0;
        offset[c] <= '0;
      end
      ev       <= '0;
      ev_valid <= 1'b0;
    end else begin
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (cfg_nbufs_we) begin
        nbufs[cfg_clop]  <= cfg_nbufs;
        cur[cfg_clop]    <= '0;
        offset[cfg_clop] <= '0;
      end else if (do_alloc) begin
        if (a_wrap) begin
          ev       <= '{port: 8'(alloc_clop), buf_idx: 8'(a_cur),
                        base: tbl_base[alloc_clop][a_cur], bytes: a_off};
          ev_valid <= 1'b1;
          cur[alloc_clop]    <= a_nxt;
          offset[alloc_clop] <= a_len16;
        end else begin
          offset[alloc_clop] <= a_off + a_len16;
        end
      end else if (do_commit && c_full) begin
        ev       <= '{port: 8'(commit_clop), buf_idx: 8'(c_cur),
                      base: tbl_base[commit_clop][c_cur], bytes: offset[commit_clop]};
        ev_valid <= 1'b1;
        cur[commit_clop]    <= next_idx(c_cur, nbufs[commit_clop]);
        offset[commit_clop] <= '0;
      end
    end
  end

`ifndef SYNTHESIS
  a_no_double_request: assert property (@(posedge clk) disable iff (!rst_n)
      !(alloc_valid && commit_valid));
`endif

endmodule
