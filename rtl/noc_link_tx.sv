// noc_link_tx -- multiplexes the NoC channels of one partition edge into a frame stream.
//
// Every NoC link that leaves the FPGA across this edge is one channel (index = tile * 3 + NoC).
// Each channel has a small buffer (TX_DEPTH flits) and a credit counter that starts at the size
// of the matching receive buffer on the other FPGA (RX_DEPTH). A frame is built by choosing, in
// round-robin order, a channel that has both a buffered flit and a credit; the frame then
// carries min(buffered flits, credits, MAX_BURST) flits of that channel after one header word.
// Since a flit is only sent when the far buffer has room for it, the three NoCs and all tiles
// stay independent of one another across the link, as they are on the monolithic chip.
//
// Credits flow back in the same headers: each time the local receive side hands a flit to its
// tile (rx_pop), one credit for that channel becomes pending here, and the next header returns
// all pending credits of one channel (round robin among channels). If credits are pending but
// no data may be sent, a header-only frame (len = 0) is sent to return them.
// Credits received from the far side arrive on credit_in_* and are added to the counters.
// Frames are numbered with seq (modulo 256); ack is left at zero for a later stage to fill.
//
// Timing: the header is presented one cycle after a channel becomes eligible (registered FSM
// state), then one flit per cycle while out_ready is high. credit_stall pulses in every cycle in
// which some channel has a buffered flit but no credit.
// From the paper: NoC channels are multiplexed onto one stream per link. Own choices: the
// credit scheme, buffer sizes, burst length and header-only credit frames.
module noc_link_tx
  import emix_pkg::*;
#(
  parameter int unsigned NCH       = 24,
  parameter int unsigned TX_DEPTH  = 4,
  parameter int unsigned RX_DEPTH  = 8,
  parameter int unsigned MAX_BURST = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // NoC channels towards the link
  input  logic [NCH-1:0]          noc_valid,
  output logic [NCH-1:0]          noc_ready,
  input  logic [NCH-1:0][NOC_W-1:0] noc_data,
  // credits returned by the far side (from noc_link_rx)
  input  logic                    credit_in_valid,
  input  logic [7:0]              credit_in_ch,
  input  logic [7:0]              credit_in_cnt,
  // flits delivered to local tiles by noc_link_rx: one credit each to send back
  input  logic [NCH-1:0]          rx_pop,
  // frame stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [63:0]             out_data,
  output logic                    out_last,
  // activity
  output logic                    credit_stall
);
  localparam int unsigned CW = $clog2(RX_DEPTH + 1) + 1;   // credit counter width
  localparam int unsigned FW = $clog2(TX_DEPTH + 1);
  localparam int unsigned IW = (NCH > 1) ? $clog2(NCH) : 1;

  typedef enum logic {S_HDR, S_BODY} state_e;

  logic [NCH-1:0][NOC_W-1:0] q_data;
  logic [NCH-1:0]            q_valid, q_pop;
  logic [NCH-1:0][FW-1:0]    q_count;
  logic [NCH-1:0][CW-1:0]    credits;
  logic [NCH-1:0][7:0]       pend;

  state_e      state;
  logic [IW-1:0] rr, crr, cur_ch;
  logic [7:0]  remaining, seq;

  // ---------------- per-channel buffers ----------------
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    noc_chan_fifo #(.W(NOC_W), .DEPTH(TX_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (noc_valid[c]), .in_ready (noc_ready[c]), .in_data (noc_data[c]),
      .out_valid(q_valid[c]),   .out_ready(q_pop[c]),     .out_data(q_data[c]),
      .count    (q_count[c])
    );
  end

  // ---------------- arbitration ----------------
  logic          d_found, c_found;
  logic [IW-1:0] d_ch, c_ch;
  logic [7:0]    d_len;
  frame_hdr_t    hdr;

  always_comb begin
    d_found = 1'b0; d_ch = '0;
    c_found = 1'b0; c_ch = '0;
    credit_stall = 1'b0;
    for (int i = 0; i < NCH; i++) begin
      int unsigned di, ci;
      di = int'(rr) + i;  if (di >= NCH) di -= NCH;
      ci = int'(crr) + i; if (ci >= NCH) ci -= NCH;
      if (!d_found && q_count[di] != '0 && credits[di] != '0) begin
        d_found = 1'b1; d_ch = IW'(di);
      end
      if (!c_found && pend[ci] != '0) begin
        c_found = 1'b1; c_ch = IW'(ci);
      end
      if (q_count[i] != '0 && credits[i] == '0) credit_stall = 1'b1;
    end
    // burst length: min(buffered, credits, MAX_BURST)
    d_len = 8'(q_count[d_ch]);
    if (32'(credits[d_ch]) < 32'(d_len)) d_len = 8'(credits[d_ch]);
    if (d_len > 8'(MAX_BURST)) d_len = 8'(MAX_BURST);
    if (!d_found) d_len = '0;

    hdr              = '0;
    hdr.magic        = FRAME_MAGIC;
    hdr.len          = d_len;
    hdr.data_ch      = 8'(d_ch);
    hdr.credit_valid = c_found;
    hdr.seq_valid    = 1'b1;
    hdr.credit_ch    = 8'(c_ch);
    hdr.credit_cnt   = pend[c_ch];
    hdr.seq          = seq;
    hdr.ack          = '0;
  end

  // ---------------- output ----------------
  always_comb begin
    q_pop = '0;
    if (state == S_HDR) begin
      out_valid = d_found || c_found;
      out_data  = hdr;
      out_last  = !d_found;
    end else begin
      out_valid = 1'b1;               // the chosen buffer holds at least `remaining` flits
      out_data  = q_data[cur_ch];
      out_last  = (remaining == 8'd1);
      q_pop[cur_ch] = out_ready;
    end
  end

  wire hdr_fire = (state == S_HDR) && out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_HDR;
      rr        <= '0;
      crr       <= '0;
      cur_ch    <= '0;
      remaining <= '0;
      seq       <= '0;
      for (int c = 0; c < NCH; c++) begin
        credits[c] <= CW'(RX_DEPTH);
        pend[c]    <= '0;
      end
    end else begin
      // credit counters: far side returns, frames consume
      for (int c = 0; c < NCH; c++) begin
        logic [CW-1:0] cr;
        logic [7:0]    pd;
        cr = credits[c];
        pd = pend[c];
        if (credit_in_valid && credit_in_ch == 8'(c)) cr = cr + CW'(credit_in_cnt);
        if (hdr_fire && d_found && d_ch == IW'(c))    cr = cr - CW'(d_len);
        if (hdr_fire && c_found && c_ch == IW'(c))    pd = '0;
        if (rx_pop[c])                                pd = pd + 8'd1;
        credits[c] <= cr;
        pend[c]    <= pd;
      end

      case (state)
        S_HDR: if (hdr_fire) begin
          seq <= seq + 8'd1;
          if (c_found) crr <= (c_ch == IW'(NCH - 1)) ? '0 : c_ch + 1'b1;
          if (d_found) begin
            state     <= S_BODY;
            cur_ch    <= d_ch;
            remaining <= d_len;
          end
        end
        S_BODY: if (out_ready) begin
          remaining <= remaining - 8'd1;
          if (remaining == 8'd1) begin
            state <= S_HDR;
            rr    <= (cur_ch == IW'(NCH - 1)) ? '0 : cur_ch + 1'b1;
          end
        end
        default: state <= S_HDR;
      endcase
    end
  end

  // a frame never takes more flits than the channel holds, nor more than its credits
  assert property (@(posedge clk) disable iff (!rst_n)
    hdr_fire && d_found |-> (32'(q_count[d_ch]) >= 32'(d_len)) && (32'(credits[d_ch]) >= 32'(d_len)));
  assert property (@(posedge clk) disable iff (!rst_n)
    state == S_BODY |-> q_valid[cur_ch]);

endmodule
