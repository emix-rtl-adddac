// emix_pkg -- constants, types and helpers shared by the EMiX inter-FPGA bridges.
//
// The partitioned many-core keeps its tiles on several FPGAs; every NoC link that crosses a
// partition edge becomes one "channel" of a bridge. A bridge carries its channels as frames
// on a 64-bit word stream. Each frame starts with one header word (frame_hdr_t) followed by
// `len` NoC flits of one channel, the last word marked with `last`. The header also carries
// piggy-backed flow-control credits for one channel, a frame sequence number and a
// cumulative acknowledgement, so that the same frame format serves the lossless Aurora link
// and the Ethernet link, where lost frames are sent again.
//
// From the paper: 64-bit NoC flits, three NoCs per tile, frames carried over Aurora and over
// Ethernet with per-FPGA source and destination MAC addresses. Own choices: the header layout,
// the magic byte, the EtherType (the IEEE local-experimental value 0x88B5) and the padding of
// the Ethernet header to two 64-bit words.
package emix_pkg;

  // NoC flit width and number of physical NoCs per tile
  localparam int unsigned NOC_W    = 64;
  localparam int unsigned NUM_NOCS = 3;

  // Width of the CMAC user stream (bytes in a beat = CMAC_W/8)
  localparam int unsigned CMAC_W   = 512;
  localparam int unsigned CMAC_WORDS = CMAC_W / 64;

  localparam logic [7:0]  FRAME_MAGIC = 8'hE7;
  localparam logic [15:0] ETHERTYPE   = 16'h88B5;

  // Kind of link attached to one side of an FPGA partition
  typedef enum logic [1:0] {
    LINK_NONE   = 2'd0,
    LINK_AURORA = 2'd1,
    LINK_CMAC   = 2'd2
  } link_kind_e;

  // Frame header, one 64-bit word. Sequence and acknowledgement numbers count frames modulo 256.
  typedef struct packed {
    logic [7:0] magic;        // FRAME_MAGIC
    logic [7:0] len;          // number of flits that follow (0 = header-only frame)
    logic [7:0] data_ch;      // channel the flits belong to
    logic       credit_valid; // credit_ch/credit_cnt are meaningful
    logic       seq_valid;    // frame is numbered (0 only for pure acknowledgement frames)
    logic [5:0] rsvd;
    logic [7:0] credit_ch;    // channel whose receive buffer space is returned
    logic [7:0] credit_cnt;   // number of flit slots returned
    logic [7:0] seq;          // frame number
    logic [7:0] ack;          // next frame number the sender of this header expects
  } frame_hdr_t;

  // One word of the internal frame stream
  typedef struct packed {
    logic [63:0] data;
    logic        last;
  } link_word_t;

  // Status of one link side of an FPGA. Pulses are one cycle wide; *_overflow flags are sticky.
  typedef struct packed {
    logic credit_stall;  // a channel has a flit to send but no credit (NoC clock)
    logic retx;          // frames are being sent again after a timeout (NoC clock)
    logic seq_err;       // a frame arrived with an unexpected number (NoC clock)
    logic bad_frame;     // a frame with a bad header or length arrived (NoC clock)
    logic rx_overflow;   // a flit found its receive buffer full (NoC clock)
    logic cdc_overflow;  // the link delivered faster than the receive FIFO drained (link clock)
    logic drop_fcs;      // Ethernet frame dropped: bad frame check sequence (link clock)
    logic drop_addr;     // Ethernet frame dropped: not from the peer to this FPGA (link clock)
    logic drop_full;     // Ethernet frame dropped: receive buffer full (link clock)
  } link_status_t;

  // Reverse the byte order of a word: a big-endian field written as a 64-bit number becomes
  // the AXI-Stream byte order in which byte 0 (tdata[7:0]) is sent first.
  function automatic logic [63:0] bswap64(input logic [63:0] x);
    logic [63:0] y;
    for (int i = 0; i < 8; i++) y[8*i +: 8] = x[8*(7-i) +: 8];
    return y;
  endfunction

  // The two words of the Ethernet header: destination MAC, source MAC, EtherType, 2 pad bytes
  function automatic logic [63:0] eth_word0(input logic [47:0] dst, input logic [47:0] src);
    return bswap64({dst, src[47:32]});
  endfunction

  function automatic logic [63:0] eth_word1(input logic [47:0] src);
    return bswap64({src[31:0], ETHERTYPE, 16'h0000});
  endfunction

endpackage
