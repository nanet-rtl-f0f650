// nanet_ctrl: NaNet controller of the GbE channel.
//
// What it does. It sinks the 32-bit Avalon-ST payload stream from the UDP
// offloader, packs every four 32-bit words into one 128-bit APEnet+ word and
// wraps the result in APEnet+ packets: one 128-bit header word, up to
// 4096 payload bytes, one 128-bit footer word. A datagram longer than
// 4096 bytes (only possible with jumbo frames) is split into several
// packets. The packing and the packet limits follow the NaNet-1
// description. The header and footer fields (nanet_pkg) are this design's
// own choice.
//
// How it works. The controller is cut-through: the offloader presents the
// payload length with the first word, so the header can leave before the
// payload has arrived and nothing is buffered. Word k of a group of four
// goes to bits [32k+31:32k] of the 128-bit word. Bytes past the end of the
// payload are zeroed, and so are the unused lanes of the last 128-bit word.
// The footer repeats the length and sequence number and carries the sum,
// modulo 2^32, of the (zeroed) 32-bit payload words.
//
// Interface and timing. The input is Avalon-ST (valid/ready, sop/eop, with
// length and UDP port valid alongside sop). The output is an ape_beat_t
// stream, registered, with valid/ready. A packet of N payload words takes
// N+3 clocks at the input: one to see sop, one for the header, N for the
// words and one for the footer. That is 32 bits per clock for the payload.
module nanet_ctrl
  import nanet_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD_BYTES = nanet_pkg::MAX_PAYLOAD,
  parameter logic [7:0]  PORT_ID           = 8'd0
) (
  input  logic         clk,
  input  logic         rst_n,
  // Avalon-ST sink (UDP payload)
  input  logic [31:0]  in_data,
  input  logic         in_valid,
  input  logic         in_sop,
  input  logic         in_eop,
  input  logic [1:0]   in_empty,
  input  logic [15:0]  in_len,
  input  logic [15:0]  in_udp_port,
  output logic         in_ready,
  // APEnet+ packet stream
  output ape_beat_t    out_beat,
  output logic         out_valid,
  input  logic         out_ready,
  // Statistics
  output logic [31:0]  pkts_out
);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY, S_FTR} state_e;
  state_e state;

  logic [15:0]  rem;          // datagram bytes not yet put in a packet
  logic [15:0]  chunk;        // payload bytes of the current packet
  logic [15:0]  chunk_left;   // payload bytes of the current packet still to come
  logic [15:0]  udp_port;
  logic [15:0]  seq;
  logic [31:0]  csum;
  logic [1:0]   lane;
  logic [95:0]  acc;          // lanes 0..2 of the word being packed

  wire can_load = !out_valid || out_ready;
  wire last_word = (chunk_left <= 16'd4);
  wire completes = (lane == 2'd3) || last_word;
  wire in_fire   = in_valid && in_ready;

  // Zero the bytes of the last word past the payload end (first byte is [31:24]).
  logic [31:0] word_m;
  always_comb begin
    word_m = in_data;
    unique case (chunk_left)
      16'd1:   word_m = {in_data[31:24], 24'd0};
      16'd2:   word_m = {in_data[31:16], 16'd0};
      16'd3:   word_m = {in_data[31:8], 8'd0};
      default: ;
    endcase
  end

  // Payload beat built from the accumulator and the incoming word.
  logic [127:0] pay_word;
  always_comb begin
    pay_word = {32'd0, acc};
    unique case (lane)
      2'd0: pay_word = {96'd0, word_m};
      2'd1: pay_word = {64'd0, word_m, acc[31:0]};
      2'd2: pay_word = {32'd0, word_m, acc[63:0]};
      2'd3: pay_word = {word_m, acc};
    endcase
  end

  wire [15:0] next_chunk = (rem > 16'(MAX_PAYLOAD_BYTES)) ? 16'(MAX_PAYLOAD_BYTES) : rem;

  always_comb begin
    unique case (state)
      S_IDLE:  in_ready = in_valid && !in_sop;   // discard words outside a packet
      S_PAY:   in_ready = completes ? can_load : 1'b1;
      default: in_ready = 1'b0;
    endcase
  end

  ape_header_t hdr;
  ape_footer_t ftr;
  always_comb begin
    hdr          = '0;
    hdr.kind     = KIND_HEADER;
    hdr.port     = PORT_ID;
    hdr.udp_port = udp_port;
    hdr.len      = next_chunk;
    hdr.seq      = seq;
    ftr          = '0;
    ftr.kind     = KIND_FOOTER;
    ftr.port     = PORT_ID;
    ftr.len      = chunk;
    ftr.seq      = seq;
    ftr.csum     = csum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      out_valid  <= 1'b0;
      out_beat   <= '0;
      rem        <= '0;
      chunk      <= '0;
      chunk_left <= '0;
      udp_port   <= '0;
      seq        <= '0;
      csum       <= '0;
      lane       <= '0;
      acc        <= '0;
      pkts_out   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && in_sop) begin
          rem      <= in_len;
          udp_port <= in_udp_port;
          state    <= S_HDR;
        end
        S_HDR: if (can_load) begin
          out_beat   <= '{data: hdr, sop: 1'b1, eop: 1'b0};
          out_valid  <= 1'b1;
          chunk      <= next_chunk;
          chunk_left <= next_chunk;
          rem        <= rem - next_chunk;
          csum       <= '0;
          lane       <= '0;
          acc        <= '0;
          state      <= S_PAY;
        end
        S_PAY: if (in_fire) begin
          csum       <= csum + word_m;
          chunk_left <= last_word ? 16'd0 : chunk_left - 16'd4;
          if (completes) begin
            out_beat  <= '{data: pay_word, sop: 1'b0, eop: 1'b0};
            out_valid <= 1'b1;
            lane      <= '0;
            acc       <= '0;
            if (last_word) state <= S_FTR;
          end else begin
            acc  <= pay_word[95:0];
            lane <= lane + 2'd1;
          end
        end
        S_FTR: if (can_load) begin
          out_beat  <= '{data: ftr, sop: 1'b0, eop: 1'b1};
          out_valid <= 1'b1;
          seq       <= seq + 16'd1;
          pkts_out  <= pkts_out + 32'd1;
          state     <= (rem != 16'd0) ? S_HDR : S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // The offloader ends a datagram exactly where its length says.
  a_eop_at_end: assert property (@(posedge clk) disable iff (!rst_n)
      in_fire && state == S_PAY && in_eop |->
        last_word && rem == 16'd0 && in_empty == 2'(16'd4 - chunk_left));
  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_IDLE && in_valid && in_sop |-> in_len != 16'd0);
`endif

endmodule
