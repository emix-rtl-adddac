// link_replay -- go-back-N retransmission of numbered frames over a lossy link (Ethernet).
//
// Sits between the frame builder (noc_link_tx) and the link. Every numbered frame is copied
// into a circular replay buffer of 2**BUF_LOG2 words as it passes and keeps its place there
// until the far side acknowledges it. The frame number written into the header is assigned
// here (next_seq), so numbering is contiguous over the frames this stage has stored.
// The far side's receiver accepts only the frame number it expects next and reports, in every
// header it sends back, the next number it expects (cumulative acknowledgement, ack_seq, given
// here by the local receiver as ack_valid/ack_seq). An acknowledgement frees all frames before
// that number. If frames stay unacknowledged for TIMEOUT cycles with no progress, sending goes
// back to the oldest unacknowledged frame and repeats everything from there (retx pulses).
// Every header leaving this stage carries the local receiver's expected number (rx_exp_seq) as
// its ack field; if the acknowledgement to send has changed and nothing else is to be sent, a
// header-only unnumbered frame (seq_valid = 0) carries it alone.
// Rules kept: a frame is never cut; rewinds and acknowledgements take effect only between
// frames on the output; at most WIN-1 frames are unacknowledged; the buffer accepts a new word
// only while it has room, so back-pressure reaches the frame builder.
// Timing: words pass with one cycle of latency at most (the output reads the buffer at the
// send pointer, the word is visible the cycle after it is written). One word per cycle.
// From the paper: "reliable delivery ... with retransmission of lost frames when necessary".
// Own choices: go-back-N, cumulative acknowledgements in the header, the buffer size, window
// and timeout.
module link_replay
  import emix_pkg::*;
#(
  parameter int unsigned BUF_LOG2 = 8,
  parameter int unsigned WIN_LOG2 = 4,
  parameter int unsigned TIMEOUT  = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // frames from the builder
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  input  logic        in_last,
  // frames towards the link
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data,
  output logic        out_last,
  // acknowledgement from the far side, and what to acknowledge to it
  input  logic        ack_valid,
  input  logic [7:0]  ack_seq,
  input  logic [7:0]  rx_exp_seq,
  // activity
  output logic        retx,
  output logic [7:0]  inflight
);
  localparam int unsigned DEPTH = 1 << BUF_LOG2;
  localparam int unsigned WIN   = 1 << WIN_LOG2;
  localparam int unsigned PW    = BUF_LOG2 + 1;
  localparam int unsigned TW    = $clog2(TIMEOUT + 1);

  typedef enum logic [1:0] {O_IDLE, O_BUF, O_ACK} out_state_e;

  link_word_t    mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr, base_ptr;
  logic [PW-1:0] end_ptr [WIN];
  logic [7:0]    base_seq, next_seq, ack_reg, last_ack_sent;
  logic          in_first, rewind, ack_new;
  logic [TW-1:0] timer;
  out_state_e    ostate;

  assign inflight = next_seq - base_seq;

  // ---------------- input side ----------------
  wire [PW-1:0] used = wr_ptr - base_ptr;
  assign in_ready = (used < PW'(DEPTH)) && (!in_first || (inflight < 8'(WIN - 1)));
  wire in_fire = in_valid && in_ready;

  frame_hdr_t in_hdr;
  always_comb begin
    in_hdr     = frame_hdr_t'(in_data);
    in_hdr.seq = next_seq;
    in_hdr.seq_valid = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (in_fire) mem[wr_ptr[BUF_LOG2-1:0]] <= '{data: in_first ? 64'(in_hdr) : in_data, last: in_last};
    if (in_fire && in_last) end_ptr[next_seq[WIN_LOG2-1:0]] <= wr_ptr + 1'b1;
  end

  // ---------------- output side ----------------
  link_word_t rd_word;
  frame_hdr_t out_hdr, ack_hdr;
  assign rd_word = mem[rd_ptr[BUF_LOG2-1:0]];

  always_comb begin
    out_hdr     = frame_hdr_t'(rd_word.data);
    out_hdr.ack = rx_exp_seq;
    ack_hdr       = '0;
    ack_hdr.magic = FRAME_MAGIC;
    ack_hdr.ack   = rx_exp_seq;
  end

  // between frames, the next frame starts from the buffer if it holds one
  wire have_word = (rd_ptr != wr_ptr);
  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    out_last  = 1'b0;
    case (ostate)
      O_IDLE: if (!rewind && !ack_new && have_word) begin
                out_valid = 1'b1; out_data = out_hdr; out_last = rd_word.last;
              end else if (!rewind && !ack_new && rx_exp_seq != last_ack_sent) begin
                out_valid = 1'b1; out_data = ack_hdr; out_last = 1'b1;
              end
      O_BUF:  if (have_word) begin
                out_valid = 1'b1; out_data = rd_word.data; out_last = rd_word.last;
              end
      default: ;
    endcase
  end

  wire out_fire = out_valid && out_ready;
  wire from_buf = (ostate == O_BUF) || (ostate == O_IDLE && have_word);

  // acknowledgement bookkeeping
  wire [7:0] ack_d = ack_reg - base_seq;
  wire       ack_adv = (ack_d != 8'd0) && (ack_d <= inflight);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr        <= '0;
      rd_ptr        <= '0;
      base_ptr      <= '0;
      base_seq      <= '0;
      next_seq      <= '0;
      ack_reg       <= '0;
      last_ack_sent <= '0;
      in_first      <= 1'b1;
      rewind        <= 1'b0;
      ack_new       <= 1'b0;
      timer         <= '0;
      ostate        <= O_IDLE;
      retx          <= 1'b0;
    end else begin
      retx <= 1'b0;
      // input
      if (in_fire) begin
        wr_ptr   <= wr_ptr + 1'b1;
        in_first <= in_last;
        if (in_last) next_seq <= next_seq + 8'd1;
      end
      // latest acknowledgement, used between frames
      if (ack_valid) begin
        ack_reg <= ack_seq;
        ack_new <= 1'b1;
      end
      // output
      if (ostate == O_IDLE) begin
        if (ack_new) begin
          ack_new <= ack_valid;          // a newer one may be arriving right now
          if (ack_adv) begin
            // rd_ptr never lies before base_ptr while idle; move it past freed frames
            if ((rd_ptr - base_ptr) < (end_ptr[ack_reg[WIN_LOG2-1:0] - 1'b1] - base_ptr))
              rd_ptr <= end_ptr[ack_reg[WIN_LOG2-1:0] - 1'b1];
            base_ptr <= end_ptr[ack_reg[WIN_LOG2-1:0] - 1'b1];
            base_seq <= ack_reg;
            timer    <= '0;
          end
        end else if (rewind) begin
          rewind <= 1'b0;
          rd_ptr <= base_ptr;
          retx   <= 1'b1;
        end else if (out_fire) begin
          last_ack_sent <= rx_exp_seq;
          if (from_buf) begin
            rd_ptr <= rd_ptr + 1'b1;
            if (!out_last) ostate <= O_BUF;
          end
        end
      end else if (ostate == O_BUF) begin
        if (out_fire) begin
          rd_ptr <= rd_ptr + 1'b1;
          if (out_last) ostate <= O_IDLE;
        end
      end
      // retransmission timer
      if (inflight == 8'd0) timer <= '0;
      else if (!(ostate == O_IDLE && ack_new && ack_adv)) begin
        if (timer == TW'(TIMEOUT)) begin
          timer  <= '0;
          rewind <= 1'b1;
        end else begin
          timer <= timer + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) inflight < 8'(WIN));
  assert property (@(posedge clk) disable iff (!rst_n) (wr_ptr - base_ptr) <= PW'(DEPTH));

endmodule
