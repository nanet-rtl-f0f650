// nanet_router: packet multiplexer from the I/O channels to the Network Interface.
//
// What it does. NaNet has a configurable number of I/O channels (on NaNet-1:
// one GbE channel and up to three APElink channels). Each delivers APEnet+
// packets. The router merges them onto the one stream that enters the
// Network Interface, moving one whole packet at a time so that packets never
// interleave. That the router multiplexes a configurable number of channels
// follows the NaNet description. The round-robin policy and the zero-latency
// combinational path are this design's own choices.
//
// How it works. While the router is idle, a round-robin arbiter picks the
// first channel at or after the priority pointer that offers a header word.
// That channel is connected to the output, in the same clock, until its
// footer word has moved. The pointer then moves to the channel after the one
// served. A word that is not a header, offered while the router is idle,
// is never granted (assertion). The router writes the number of the input
// channel into the port field of every header it forwards, so the receive
// engine can pick that channel's buffer list whatever the sender wrote.
//
// Interface and timing. in_* and out_* are valid/ready streams of
// ape_beat_t. The grant and the data path are combinational: no clock of
// latency, and a full 128-bit word per clock. Between two packets from the
// same channel there is no idle clock.
module nanet_router
  import nanet_pkg::*;
#(
  parameter int unsigned N_PORTS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ape_beat_t [N_PORTS-1:0]  in_beat,
  input  logic      [N_PORTS-1:0]  in_valid,
  output logic      [N_PORTS-1:0]  in_ready,
  output ape_beat_t                out_beat,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic      [N_PORTS-1:0][31:0] pkts   // packets forwarded per channel
);

  localparam int unsigned PW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;

  logic          locked;
  logic [PW-1:0] owner, prio;
  logic [PW-1:0] pick;
  logic          pick_ok;

  // Round-robin choice among channels offering a header.
  always_comb begin
    pick    = prio;
    pick_ok = 1'b0;
    for (int unsigned k = 0; k < N_PORTS; k++) begin
      int unsigned idx;
      idx = (int'(prio) + k) % N_PORTS;
      if (!pick_ok && in_valid[idx] && in_beat[idx].sop) begin
        pick    = PW'(idx);
        pick_ok = 1'b1;
      end
    end
  end

  logic [PW-1:0] sel;
  logic          sel_ok;
  always_comb begin
    sel       = locked ? owner : pick;
    sel_ok    = locked || pick_ok;
    out_beat  = in_beat[sel];
    // Stamp the channel number into the header (it selects the CLOP downstream).
    if (out_beat.sop) out_beat.data[119:112] = 8'(sel);
    out_valid = sel_ok && in_valid[sel];
  end

  always_comb begin
    in_ready = '0;
    if (sel_ok) in_ready[sel] = out_ready;
  end

  wire fire = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= '0;
      prio   <= '0;
      pkts   <= '0;
    end else if (fire) begin
      if (out_beat.eop) begin
        locked     <= 1'b0;
        prio       <= (int'(sel) == N_PORTS - 1) ? '0 : sel + PW'(1);
        pkts[sel]  <= pkts[sel] + 32'd1;
      end else begin
        locked <= 1'b1;
        owner  <= sel;
      end
    end
  end

`ifndef SYNTHESIS
  // A packet starts with its header word.
  a_start_with_header: assert property (@(posedge clk) disable iff (!rst_n)
      fire && !locked |-> out_beat.sop);
  // A granted channel keeps its word stable until it moves.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready && locked |=> out_valid && $stable(out_beat));
`endif

endmodule
