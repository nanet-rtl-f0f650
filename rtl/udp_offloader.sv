// udp_offloader: UDP payload extraction for the GbE channel of NaNet-1.
//
// What it does. Frames leave the Ethernet MAC on a 32-bit Avalon-ST stream.
// The offloader reads the Ethernet, IPv4 and UDP headers and takes them off
// every unfragmented IPv4/UDP datagram; only the UDP payload goes on, on a
// 32-bit Avalon-ST stream towards the NaNet controller. Every other frame
// (ARP, ICMP, IP fragments, runt frames, ...) is handed unchanged to the
// microcontroller port, so the microcontroller never touches UDP traffic.
// This split follows the NaNet-1 description. How the headers are parsed is
// this design's own choice.
//
// How it works. The header words are kept in a small buffer while they are
// checked (EtherType 0x0800, version 4, IHL >= 5, no fragmentation,
// protocol 17). As soon as a check fails, the buffered words are replayed to
// the microcontroller port and the rest of the frame follows, passed
// straight through. For a UDP datagram the offloader reads the UDP
// destination port and length, then streams the payload combinationally at
// one word per clock. The UDP length, not the end of the frame, decides
// where the payload ends, so Ethernet minimum-size padding (and a trailing
// FCS, if the MAC passes it on) is dropped. Datagrams with an empty payload
// are dropped.
//
// Interface and timing. All streams are Avalon-ST with valid/ready, and a
// word moves when both are high. The first byte of a frame is in bits
// [31:24]. The MAC is assumed to run with its 16-bit receive shift
// enabled: two pad bytes come before the destination address, so the IPv4
// header begins at word 4 and the UDP payload is 32-bit aligned.
// pay_len (payload bytes) and pay_udp_port are valid with pay_sop and stay
// valid until pay_eop. Header words take one clock each, the payload
// streams with no added cycle, and one idle clock separates frames.
module udp_offloader #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned HBUF_W = 21   // 4 MAC words + 15 IPv4 words + 2 UDP words
) (
  input  logic              clk,
  input  logic              rst_n,
  // From the Ethernet MAC (Avalon-ST source)
  input  logic [DATA_W-1:0] rx_data,
  input  logic              rx_valid,
  input  logic              rx_sop,
  input  logic              rx_eop,
  input  logic [1:0]        rx_empty,
  output logic              rx_ready,
  // UDP payload towards the NaNet controller
  output logic [DATA_W-1:0] pay_data,
  output logic              pay_valid,
  output logic              pay_sop,
  output logic              pay_eop,
  output logic [1:0]        pay_empty,
  output logic [15:0]       pay_len,
  output logic [15:0]       pay_udp_port,
  input  logic              pay_ready,
  // Non-UDP frames towards the microcontroller
  output logic [DATA_W-1:0] uc_data,
  output logic              uc_valid,
  output logic              uc_sop,
  output logic              uc_eop,
  output logic [1:0]        uc_empty,
  input  logic              uc_ready,
  // Statistics
  output logic [31:0]       udp_frames,
  output logic [31:0]       other_frames
);

  typedef enum logic [2:0] {S_HDR, S_REPLAY, S_PASS, S_PAY, S_DROP} state_e;
  state_e state;

  localparam int unsigned IW = $clog2(HBUF_W + 1);

  logic [DATA_W-1:0] hbuf [HBUF_W];
  logic [IW-1:0]     widx, ridx, rcnt;
  logic              r_ended;          // frame ended while in S_HDR
  logic [1:0]        r_empty;
  logic [3:0]        ihl;
  logic [15:0]       remain;           // payload bytes still to send
  logic              first;

  wire rx_fire = rx_valid && rx_ready;

  // Header checks on the word being accepted in S_HDR.
  logic not_udp, udp_len_word, frame_short;
  logic [15:0] udp_len;
  always_comb begin
    not_udp      = 1'b0;
    udp_len_word = 1'b0;
    udp_len      = rx_data[31:16];
    unique case (widx)
      IW'(3): not_udp = (rx_data[15:0] != 16'h0800);
      IW'(4): not_udp = (rx_data[31:28] != 4'd4) || (rx_data[27:24] < 4'd5);
      IW'(5): not_udp = rx_data[13] || (rx_data[12:0] != 13'd0);
      IW'(6): not_udp = (rx_data[23:16] != 8'd17);
      default: ;
    endcase
    if (widx > IW'(6) && widx == IW'(4) + IW'(ihl) + IW'(1)) udp_len_word = 1'b1;
    frame_short = rx_eop && !udp_len_word;
  end

  // Stream steering.
  always_comb begin
    rx_ready  = 1'b0;
    pay_valid = 1'b0;
    pay_data  = rx_data;
    pay_sop   = first;
    pay_eop   = 1'b0;
    pay_empty = 2'd0;
    uc_valid  = 1'b0;
    uc_data   = rx_data;
    uc_sop    = 1'b0;
    uc_eop    = 1'b0;
    uc_empty  = rx_empty;
    unique case (state)
      S_HDR, S_DROP: rx_ready = 1'b1;
      S_REPLAY: begin
        uc_valid = 1'b1;
        uc_data  = hbuf[ridx];
        uc_sop   = (ridx == '0);
        uc_eop   = r_ended && (ridx == rcnt - IW'(1));
        uc_empty = uc_eop ? r_empty : 2'd0;
      end
      S_PASS: begin
        uc_valid = rx_valid;
        rx_ready = uc_ready;
        uc_eop   = rx_eop;
      end
      S_PAY: begin
        pay_valid = rx_valid;
        rx_ready  = pay_ready;
        pay_eop   = (remain <= 16'd4) || rx_eop;
        pay_empty = (remain < 16'd4) ? 2'(16'd4 - remain) : 2'd0;
      end
      default: ;
    endcase
  end

  // Header buffer (no reset needed: read only after being written).
  always_ff @(posedge clk) begin
    if (state == S_HDR && rx_fire && widx < IW'(HBUF_W))
      hbuf[rx_sop ? '0 : widx] <= rx_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_HDR;
      widx         <= '0;
      ridx         <= '0;
      rcnt         <= '0;
      r_ended      <= 1'b0;
      r_empty      <= 2'd0;
      ihl          <= 4'd5;
      remain       <= '0;
      first        <= 1'b0;
      pay_len      <= '0;
      pay_udp_port <= '0;
      udp_frames   <= '0;
      other_frames <= '0;
    end else begin
      unique case (state)
        S_HDR: if (rx_fire) begin
          // A word marked sop always restarts the header buffer.
          widx <= rx_sop ? IW'(1) : widx + IW'(1);
          if (widx == IW'(4)) ihl <= rx_data[27:24];
          if (widx == IW'(4) + IW'(ihl)) pay_udp_port <= rx_data[15:0];
          if (!rx_sop && (not_udp || frame_short)) begin
            state        <= S_REPLAY;
            ridx         <= '0;
            rcnt         <= widx + IW'(1);
            r_ended      <= rx_eop;
            r_empty      <= rx_empty;
            other_frames <= other_frames + 32'd1;
          end else if (!rx_sop && udp_len_word) begin
            widx <= '0;
            if (udp_len <= 16'd8) begin
              state <= rx_eop ? S_HDR : S_DROP;   // empty payload
            end else begin
              state      <= rx_eop ? S_HDR : S_PAY;
              remain     <= udp_len - 16'd8;
              pay_len    <= udp_len - 16'd8;
              first      <= 1'b1;
              udp_frames <= udp_frames + 32'd1;
            end
          end
        end
        S_REPLAY: if (uc_ready) begin
          ridx <= ridx + IW'(1);
          if (ridx == rcnt - IW'(1)) begin
            widx  <= '0;
            state <= r_ended ? S_HDR : S_PASS;
          end
        end
        S_PASS: if (rx_fire && rx_eop) begin
          widx  <= '0;
          state <= S_HDR;
        end
        S_PAY: if (rx_fire) begin
          first  <= 1'b0;
          remain <= (remain > 16'd4) ? remain - 16'd4 : 16'd0;
          if (pay_eop) state <= rx_eop ? S_HDR : S_DROP;
        end
        S_DROP: if (rx_fire && rx_eop) begin
          widx  <= '0;
          state <= S_HDR;
        end
        default: state <= S_HDR;
      endcase
    end
  end

`ifndef SYNTHESIS
  // Every forwarded datagram carries a non-empty payload.
  a_pay_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
      pay_valid && pay_sop |-> pay_len != 16'd0);
`endif

endmodule
