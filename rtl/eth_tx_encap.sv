// eth_tx_encap -- wraps frames in Ethernet and packs them into the 512-bit CMAC transmit stream.
//
// Input: the 64-bit frame stream (one frame = header word + flits, `last` on its final word).
// Output: AXI-Stream towards the CMAC's transmit user interface, 64 bytes per beat, tkeep
// marking valid bytes, tlast on the frame's last beat. Each frame becomes one Ethernet frame:
//   bytes 0-5   destination MAC (the paired FPGA), bytes 6-11 source MAC (this FPGA),
//   bytes 12-13 EtherType 0x88B5, bytes 14-15 zero, then the frame words in order.
// A frame shorter than one beat is padded with zero words to 64 bytes, above the Ethernet
// minimum of 60 bytes before the frame check sequence, which the CMAC appends.
// Eight 64-bit words are gathered per beat in an assembly register and moved to a one-beat
// output register; gathering pauses while the output register is full and not taken, so a
// word enters at most once per cycle and a full beat leaves at most once per cycle.
// MAC addresses are static configuration inputs.
// From the paper: Ethernet frames carry FPGA-specific source and destination MAC addresses,
// sent through the 100 Gb CMAC. Own choices: EtherType, header padding and packing order.
module eth_tx_encap
  import emix_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [47:0]           src_mac,
  input  logic [47:0]           dst_mac,
  // frame stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [63:0]           in_data,
  input  logic                  in_last,
  // CMAC transmit stream
  output logic                  tx_tvalid,
  input  logic                  tx_tready,
  output logic [CMAC_W-1:0]     tx_tdata,
  output logic [CMAC_W/8-1:0]   tx_tkeep,
  output logic                  tx_tlast,
  output logic                  tx_tuser
);
  localparam int unsigned LW = $clog2(CMAC_WORDS);

  logic [CMAC_WORDS-1:0][63:0] acc;
  logic [CMAC_WORDS-1:0]       acc_keep;
  logic [LW-1:0]               lane;
  logic [1:0]                  hdr_cnt;     // 0,1: Ethernet header words pending; 2: payload
  logic                        padding;

  assign tx_tuser = 1'b0;

  wire can = !tx_tvalid || tx_tready;

  // the word written this cycle, if any, and whether it closes the beat / the frame
  logic        wr_en, close_beat, close_frame;
  logic [63:0] wr_word;
  always_comb begin
    wr_en = 1'b0; wr_word = '0; close_beat = 1'b0; close_frame = 1'b0; in_ready = 1'b0;
    if (can) begin
      if (padding) begin
        wr_en = 1'b1;
        close_beat = (lane == LW'(CMAC_WORDS - 1));
        close_frame = close_beat;
      end else if (hdr_cnt != 2'd2) begin
        if (in_valid) begin
          wr_en   = 1'b1;
          wr_word = (hdr_cnt == 2'd0) ? eth_word0(dst_mac, src_mac) : eth_word1(src_mac);
        end
      end else if (in_valid) begin
        in_ready = 1'b1;
        wr_en    = 1'b1;
        wr_word  = in_data;
        close_beat  = (lane == LW'(CMAC_WORDS - 1));
        close_frame = in_last && close_beat;
      end
    end
  end

  // a payload word ending the frame inside the beat starts padding if this is the first beat
  logic first_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane       <= '0;
      hdr_cnt    <= '0;
      padding    <= 1'b0;
      first_beat <= 1'b1;
      acc        <= '0;
      acc_keep   <= '0;
      tx_tvalid  <= 1'b0;
      tx_tdata   <= '0;
      tx_tkeep   <= '0;
      tx_tlast   <= 1'b0;
    end else begin
      if (tx_tvalid && tx_tready) tx_tvalid <= 1'b0;
      if (wr_en) begin
        logic [CMAC_WORDS-1:0][63:0] nacc;
        logic [CMAC_WORDS-1:0]       nkeep;
        logic                        end_in_beat;
        nacc  = acc;
        nkeep = acc_keep;
        nacc[lane]  = wr_word;
        nkeep[lane] = 1'b1;
        // frame ends with a word that is not the beat's last
        end_in_beat = !padding && hdr_cnt == 2'd2 && in_last && !close_beat;
        if (hdr_cnt != 2'd2 && !padding) hdr_cnt <= hdr_cnt + 2'd1;
        if (end_in_beat && first_beat) begin
          padding <= 1'b1;                   // short frame: fill the first beat with zeros
          acc     <= nacc;
          acc_keep<= nkeep;
          lane    <= lane + 1'b1;
        end else if (close_beat || end_in_beat) begin
          tx_tvalid <= 1'b1;
          tx_tdata  <= nacc;
          for (int i = 0; i < CMAC_WORDS; i++) tx_tkeep[8*i +: 8] <= {8{nkeep[i]}};
          tx_tlast  <= close_frame || end_in_beat;
          acc       <= '0;
          acc_keep  <= '0;
          lane      <= '0;
          if (close_frame || end_in_beat) begin
            hdr_cnt    <= '0;
            padding    <= 1'b0;
            first_beat <= 1'b1;
          end else begin
            first_beat <= 1'b0;
          end
        end else begin
          acc      <= nacc;
          acc_keep <= nkeep;
          lane     <= lane + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) tx_tvalid && !tx_tready |=> $stable(tx_tdata) && tx_tvalid);

endmodule
