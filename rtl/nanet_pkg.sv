// nanet_pkg: types and constants shared by the NaNet-1 receive datapath.
//
// The widths that come from the NaNet-1 description are the 32-bit
// Avalon-ST channel out of the UDP offloader, the 128-bit APEnet+ word and
// the 4096-byte maximum APEnet+ payload. The field layout of the APEnet+
// header and footer is not published with the design. The layout below is
// this implementation's own choice: it carries only what the receive path
// needs (channel, UDP port, payload length, sequence number and a payload
// checksum).
package nanet_pkg;

  localparam int unsigned AST_W       = 32;    // Avalon-ST word from the UDP offloader
  localparam int unsigned APE_W       = 128;   // APEnet+ data word
  localparam int unsigned APE_BYTES   = APE_W / 8;
  localparam int unsigned MAX_PAYLOAD = 4096;  // bytes per APEnet+ packet
  localparam int unsigned LEN_W       = 16;    // byte-count fields
  localparam int unsigned VA_W        = 64;    // virtual / physical address width

  // Packet kinds written in the first byte of header and footer.
  typedef enum logic [7:0] {
    KIND_HEADER = 8'hA5,
    KIND_FOOTER = 8'h5A
  } ape_kind_e;

  // 128-bit APEnet+ header word.
  typedef struct packed {
    ape_kind_e        kind;      // [127:120]
    logic [7:0]       port;      // [119:112] I/O channel the packet entered on
    logic [15:0]      udp_port;  // [111:96]  UDP destination port (0 on APElink)
    logic [LEN_W-1:0] len;       // [95:80]   payload bytes, 1..4096
    logic [15:0]      seq;       // [79:64]   per-channel packet counter
    logic [63:0]      rsvd;      // [63:0]
  } ape_header_t;

  // 128-bit APEnet+ footer word.
  typedef struct packed {
    ape_kind_e        kind;      // [127:120]
    logic [7:0]       port;      // [119:112]
    logic [15:0]      rsvd0;     // [111:96]
    logic [LEN_W-1:0] len;       // [95:80]   repeats the header length
    logic [15:0]      seq;       // [79:64]
    logic [31:0]      csum;      // [63:32]   sum modulo 2^32 of the 32-bit payload words
    logic [31:0]      rsvd1;     // [31:0]
  } ape_footer_t;

  // One beat of an APEnet+ packet stream (header, payload words, footer).
  typedef struct packed {
    logic [APE_W-1:0] data;
    logic             sop;   // header word
    logic             eop;   // footer word
  } ape_beat_t;

  // One 128-bit RDMA write beat handed to the PCIe core.
  typedef struct packed {
    logic [VA_W-1:0]      addr;  // physical byte address, 16-byte aligned
    logic                 gpu;   // 1: GPU memory (peer-to-peer), 0: host memory
    logic [APE_BYTES-1:0] be;    // byte enables, bit i for data[8*i+7:8*i]
    logic [APE_W-1:0]     data;
  } dma_beat_t;

  // Completion event of one receive buffer of a CLOP.
  typedef struct packed {
    logic [7:0]       port;      // CLOP (= channel) number
    logic [7:0]       buf_idx;   // buffer within the CLOP
    logic [VA_W-1:0]  base;      // buffer virtual base address
    logic [31:0]      bytes;     // bytes written into the buffer
  } rx_event_t;

  // Round a byte count up to a whole number of 128-bit words.
  function automatic logic [31:0] round16(input logic [31:0] n);
    return (n + 32'd15) & ~32'd15;
  endfunction

endpackage
