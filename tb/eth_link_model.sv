// eth_link_model -- one direction of the Ethernet path between two CMAC user interfaces: the
// sending CMAC, the 100 Gb switch and the receiving CMAC, reduced to what the bridges see.
// Frames are taken from the transmit stream (tready random, READY_PCT percent) in the sender's
// clock, queued, and replayed beat by beat on the receive stream in the receiver's clock,
// without back-pressure. A frame is spoiled with probability LOSS_PCT percent (tuser set on its
// last beat, as the CMAC reports a bad frame check sequence); with probability FOREIGN_PCT
// percent an extra copy of a frame addressed to another station is delivered first (the
// switch floods it). Counts what it did.
module eth_link_model #(
  parameter int LOSS_PCT    = 5,
  parameter int FOREIGN_PCT = 3,
  parameter int READY_PCT   = 90
) (
  input  logic         tx_clk,
  input  logic         rx_clk,
  input  logic         rst_n,
  input  logic         enable_faults,
  input  logic [511:0] tx_tdata,
  input  logic [63:0]  tx_tkeep,
  input  logic         tx_tlast,
  input  logic         tx_tvalid,
  output logic         tx_tready,
  output logic [511:0] rx_tdata,
  output logic [63:0]  rx_tkeep,
  output logic         rx_tlast,
  output logic         rx_tuser,
  output logic         rx_tvalid,
  output int           frames,
  output int           spoiled,
  output int           foreign
);
  typedef struct { logic [511:0] d; logic [63:0] k; logic l; } beat_t;
  beat_t cur [$];
  beat_t q [$];
  beat_t outq [$];
  bit    spoil_cur;

  initial begin
    tx_tready = 0; rx_tvalid = 0; rx_tdata = '0; rx_tkeep = '0; rx_tlast = 0; rx_tuser = 0;
    frames = 0; spoiled = 0; foreign = 0; spoil_cur = 0;
  end

  always @(posedge tx_clk) if (rst_n) begin
    if (tx_tvalid && tx_tready) begin
      cur.push_back('{d: tx_tdata, k: tx_tkeep, l: tx_tlast});
      if (tx_tlast) begin
        foreach (cur[i]) q.push_back(cur[i]);
        cur.delete();
      end
    end
    #1 tx_tready = ($urandom_range(0, 99) < READY_PCT);
  end

  always @(posedge rx_clk) if (rst_n) begin
    #1;
    rx_tvalid = 0; rx_tuser = 0; rx_tlast = 0;
    if (outq.size() == 0 && q.size() > 0) begin
      // move one whole frame to the output, perhaps after a foreign copy
      beat_t b;
      bit fr;
      fr = enable_faults && ($urandom_range(0, 99) < FOREIGN_PCT);
      spoil_cur = enable_faults && ($urandom_range(0, 99) < LOSS_PCT);
      if (fr) begin
        int i;
        i = 0;
        foreign++;
        do begin
          b = q[i];
          if (i == 0) b.d[7:0] = b.d[7:0] ^ 8'h40;   // other destination station
          outq.push_back(b);
          i++;
        end while (!q[i-1].l);
      end
      do begin
        b = q.pop_front();
        outq.push_back(b);
      end while (!b.l);
      frames++;
      if (spoil_cur) spoiled++;
    end
    if (outq.size() > 0) begin
      beat_t b;
      b = outq.pop_front();
      rx_tvalid = 1; rx_tdata = b.d; rx_tkeep = b.k; rx_tlast = b.l;
      // only the real frame (the last one queued) is spoiled
      rx_tuser = b.l && spoil_cur && outq.size() == 0;
    end
  end
endmodule
