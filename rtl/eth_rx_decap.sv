// eth_rx_decap -- receives Ethernet frames from the CMAC, keeps the good ones for this FPGA and
// unpacks them into the 64-bit frame stream.
//
// Beats from the CMAC receive interface (512 bits, tkeep, tlast, tuser = bad frame check
// sequence, flagged on the last beat; the CMAC cannot be stalled) are written into a circular
// buffer of 2**BEATS_LOG2 beats. A frame is only made visible to the reader (committed) once
// its last beat has arrived and it has passed every check: frame check sequence good,
// destination MAC = this FPGA, source MAC = the paired FPGA, EtherType = 0x88B5, and room in
// the buffer for all its beats. A frame failing any check is dropped whole by moving the write
// pointer back to the last commit, and one of drop_fcs, drop_addr or drop_full pulses.
// Store-and-forward is needed because the frame check result comes with the last beat.
// The reader unpacks committed beats into words, skipping the two Ethernet header words of
// each frame's first beat, one word per cycle with valid/ready, `last` on the frame's final
// word (padding words are passed on; the frame parser skips them).
// Timing: a frame's first word appears two cycles after its last beat is written.
// From the paper: Ethernet frames carry FPGA-specific MAC addresses; delivery must survive lost
// frames. Own choices: the filtering rules, buffer depth and store-and-forward.
module eth_rx_decap
  import emix_pkg::*;
#(
  parameter int unsigned BEATS_LOG2 = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [47:0]           my_mac,
  input  logic [47:0]           peer_mac,
  // CMAC receive stream
  input  logic                  rx_tvalid,
  input  logic [CMAC_W-1:0]     rx_tdata,
  input  logic [CMAC_W/8-1:0]   rx_tkeep,
  input  logic                  rx_tlast,
  input  logic                  rx_tuser,
  // frame stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [63:0]           out_data,
  output logic                  out_last,
  // status pulses
  output logic                  drop_fcs,
  output logic                  drop_addr,
  output logic                  drop_full
);
  localparam int unsigned NB = 1 << BEATS_LOG2;
  localparam int unsigned PW = BEATS_LOG2 + 1;
  localparam int unsigned LW = $clog2(CMAC_WORDS);

  typedef struct packed {
    logic [CMAC_WORDS-1:0][63:0] data;
    logic [LW:0]                 nwords;  // 64-bit words present in the beat
    logic                        first;
    logic                        last;
  } beat_t;

  beat_t         buf_q [NB];
  logic [PW-1:0] wr_ptr, commit_ptr, rd_ptr;
  logic          in_frame, bad;           // inside a frame / frame already known to be bad
  logic [LW-1:0] lane;

  // ---------------- write side ----------------
  wire full = (wr_ptr - rd_ptr) == PW'(NB);
  logic [LW:0] nw;
  logic        addr_ok;
  always_comb begin
    nw = '0;
    for (int i = 0; i < CMAC_WORDS; i++) if (rx_tkeep[8*i]) nw = nw + 1'b1;
    addr_ok = (rx_tdata[63:0] == eth_word0(my_mac, peer_mac)) &&
              (rx_tdata[127:64] == eth_word1(peer_mac));
  end

  wire first_beat = !in_frame;
  wire beat_bad   = bad || full || (first_beat && !addr_ok);

  always_ff @(posedge clk) begin
    if (rx_tvalid && !beat_bad)
      buf_q[wr_ptr[BEATS_LOG2-1:0]] <= '{data: rx_tdata, nwords: nw, first: first_beat, last: rx_tlast};
  end

  // reason a frame is being dropped, for the status pulses
  logic why_addr, why_full;
  wire  now_addr = first_beat && !addr_ok;
  wire  now_full = !bad && !now_addr && full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      commit_ptr <= '0;
      in_frame   <= 1'b0;
      bad        <= 1'b0;
      why_addr   <= 1'b0;
      why_full   <= 1'b0;
      drop_fcs   <= 1'b0;
      drop_addr  <= 1'b0;
      drop_full  <= 1'b0;
    end else begin
      drop_fcs  <= 1'b0;
      drop_addr <= 1'b0;
      drop_full <= 1'b0;
      if (rx_tvalid) begin
        in_frame <= !rx_tlast;
        if (rx_tlast) begin
          bad      <= 1'b0;
          why_addr <= 1'b0;
          why_full <= 1'b0;
          if (beat_bad || rx_tuser) begin
            wr_ptr    <= commit_ptr;
            drop_addr <= now_addr || why_addr;
            drop_full <= now_full || why_full;
            drop_fcs  <= !(now_addr || why_addr || now_full || why_full);
          end else begin
            wr_ptr     <= wr_ptr + 1'b1;
            commit_ptr <= wr_ptr + 1'b1;
          end
        end else if (beat_bad) begin
          bad <= 1'b1;
          if (now_addr) why_addr <= 1'b1;
          if (now_full) why_full <= 1'b1;
        end else begin
          wr_ptr <= wr_ptr + 1'b1;
        end
      end
    end
  end

  // ---------------- read side ----------------
  beat_t rb;
  assign rb        = buf_q[rd_ptr[BEATS_LOG2-1:0]];
  assign out_valid = (rd_ptr != commit_ptr);
  always_comb begin
    logic [LW-1:0] l;
    l = (rb.first && lane < LW'(2)) ? LW'(2) : lane;
    out_data = rb.data[l];
    out_last = rb.last && ({1'b0, l} == rb.nwords - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      lane   <= '0;
    end else if (out_valid && out_ready) begin
      logic [LW-1:0] l;
      l = (rb.first && lane < LW'(2)) ? LW'(2) : lane;
      if ({1'b0, l} == rb.nwords - 1'b1) begin
        rd_ptr <= rd_ptr + 1'b1;
        lane   <= '0;
      end else begin
        lane <= l + 1'b1;
      end
    end
  end

endmodule
