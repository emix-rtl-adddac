// noc_link_rx -- parses the frame stream of one link and demultiplexes flits to NoC channels.
//
// The first word of a frame is a frame_hdr_t. A header with a wrong magic byte, or a frame
// cut short, is counted in bad_frame and the rest of the frame is skipped. For a good header:
//   * the cumulative acknowledgement is passed on (ack_valid/ack_seq) to the transmit side;
//   * if the frame is numbered and its number is the one expected, it is accepted and the
//     expected number advances (exp_seq). A numbered frame with any other number is a lost or
//     repeated frame: seq_err pulses, and with DROP_OOS set the whole frame is ignored, so
//     that a retransmitting sender can repeat it; with DROP_OOS clear it is accepted anyway;
//   * returned credits of an accepted frame are passed on (credit_out_*), one pulse per header;
//   * the `len` flits that follow go into the receive buffer of data_ch. Words after the flits
//     (padding added on Ethernet) are skipped up to `last`.
// Each channel has a RX_DEPTH-flit buffer; the far sender never sends more flits than it holds
// credits for, so the buffer always has room. If it does not, the flit is lost and the sticky
// `overflow` flag is set. in_ready is always high: the stream needs no back-pressure.
// rx_pop reports every flit taken by a tile, for the transmit side to return as a credit.
// Timing: one word per cycle; a flit reaches its channel output one cycle after it arrives.
// From the paper: demultiplexing of NoC channels out of the link stream. Own choices: frame
// format, credit return and the sequence check.
module noc_link_rx
  import emix_pkg::*;
#(
  parameter int unsigned NCH      = 24,
  parameter int unsigned RX_DEPTH = 8,
  parameter bit          DROP_OOS = 1'b0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // frame stream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [63:0]               in_data,
  input  logic                      in_last,
  // NoC channels towards the tiles
  output logic [NCH-1:0]            noc_valid,
  input  logic [NCH-1:0]            noc_ready,
  output logic [NCH-1:0][NOC_W-1:0] noc_data,
  output logic [NCH-1:0]            rx_pop,
  // to the transmit side
  output logic                      credit_out_valid,
  output logic [7:0]                credit_out_ch,
  output logic [7:0]                credit_out_cnt,
  output logic                      ack_valid,
  output logic [7:0]                ack_seq,
  output logic [7:0]                exp_seq,
  // status
  output logic                      seq_err,
  output logic                      bad_frame,
  output logic                      overflow
);
  localparam int unsigned FW = $clog2(RX_DEPTH + 1);

  typedef enum logic [1:0] {S_HDR, S_BODY, S_SKIP} state_e;

  state_e     state;
  logic [7:0] remaining, cur_ch;
  frame_hdr_t hdr;
  logic [NCH-1:0] q_push, q_ready;
  logic [NCH-1:0][FW-1:0] q_count;

  assign in_ready = 1'b1;
  assign hdr      = frame_hdr_t'(in_data);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    noc_chan_fifo #(.W(NOC_W), .DEPTH(RX_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (q_push[c]),    .in_ready (q_ready[c]), .in_data (in_data),
      .out_valid(noc_valid[c]), .out_ready(noc_ready[c]), .out_data(noc_data[c]),
      .count    (q_count[c])
    );
  end

  assign rx_pop = noc_valid & noc_ready;

  // header decode
  logic hdr_ok, in_seq, accept;
  always_comb begin
    hdr_ok = (hdr.magic == FRAME_MAGIC);
    in_seq = !hdr.seq_valid || (hdr.seq == exp_seq);
    accept = hdr_ok && (in_seq || !DROP_OOS);
  end

  always_comb begin
    q_push = '0;
    if (state == S_BODY && in_valid && cur_ch < 8'(NCH)) q_push[cur_ch[$clog2(NCH+1)-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= S_HDR;
      remaining        <= '0;
      cur_ch           <= '0;
      exp_seq          <= '0;
      credit_out_valid <= 1'b0;
      credit_out_ch    <= '0;
      credit_out_cnt   <= '0;
      ack_valid        <= 1'b0;
      ack_seq          <= '0;
      seq_err          <= 1'b0;
      bad_frame        <= 1'b0;
      overflow         <= 1'b0;
    end else begin
      credit_out_valid <= 1'b0;
      ack_valid        <= 1'b0;
      seq_err          <= 1'b0;
      bad_frame        <= 1'b0;
      if (|(q_push & ~q_ready)) overflow <= 1'b1;
      if (in_valid) begin
        case (state)
          S_HDR: begin
            if (!hdr_ok) begin
              bad_frame <= 1'b1;
              if (!in_last) state <= S_SKIP;
            end else begin
              ack_valid <= 1'b1;
              ack_seq   <= hdr.ack;
              if (hdr.seq_valid && hdr.seq != exp_seq) seq_err <= 1'b1;
              if (accept) begin
                if (hdr.seq_valid) exp_seq <= hdr.seq + 8'd1;
                credit_out_valid <= hdr.credit_valid;
                credit_out_ch    <= hdr.credit_ch;
                credit_out_cnt   <= hdr.credit_cnt;
              end
              if (in_last) begin
                if (accept && hdr.len != 0) bad_frame <= 1'b1;   // flits promised, none came
                state <= S_HDR;
              end else if (accept && hdr.len != 0) begin
                state     <= S_BODY;
                remaining <= hdr.len;
                cur_ch    <= hdr.data_ch;
              end else begin
                state <= S_SKIP;
              end
            end
          end
          S_BODY: begin
            remaining <= remaining - 8'd1;
            if (in_last) begin
              if (remaining != 8'd1) bad_frame <= 1'b1;
              state <= S_HDR;
            end else if (remaining == 8'd1) begin
              state <= S_SKIP;
            end
          end
          S_SKIP: if (in_last) state <= S_HDR;
          default: state <= S_HDR;
        endcase
      end
    end
  end

  // the far side must respect the credits: a flit always finds room
  assert property (@(posedge clk) disable iff (!rst_n) !(|(q_push & ~q_ready)));

endmodule
