// noc_aurora_bridge -- carries the NoC channels of one partition edge over an Aurora link.
//
// Low-latency path between the two FPGAs of a pair. Transmit: noc_link_tx multiplexes the
// channels into frames in the NoC clock domain, an asynchronous FIFO moves the 64-bit words to
// the Aurora user clock, and they leave on the Aurora 64B/66B framing user interface
// (tx_tdata/tkeep/tlast/tvalid/tready, one frame = one Aurora frame). Receive: Aurora frames
// (no back-pressure on that interface) enter an asynchronous FIFO back to the NoC clock and
// noc_link_rx demultiplexes them to the channels. Credits received are handed to the
// transmitter, and every flit delivered locally is returned as a credit in the next header.
// The Aurora link is taken as lossless, so a frame number out of order is only reported
// (seq_err) and the frame is still accepted. Both ends run the NoC clock at the same nominal
// rate; the receive FIFO's overflow flag reports the case the link outpaces the NoC side.
// Interface: NoC channels with valid/ready per channel; Aurora user interface in the link
// clock domain. Latency (without the Aurora core): about 2 NoC cycles + 3 link cycles per
// FIFO crossing on each side.
// From the paper: a NoC-Aurora bridge carries NoC packets over the Aurora P2P link of
// adjacent FPGAs, using stream multiplexing, clock-domain crossing and demultiplexing. Own
// choices: the frame format, the credit flow control, a 64-bit (one-lane) Aurora interface.
module noc_aurora_bridge
  import emix_pkg::*;
#(
  parameter int unsigned NCH       = 24,
  parameter int unsigned TX_DEPTH  = 4,
  parameter int unsigned RX_DEPTH  = 8,
  parameter int unsigned MAX_BURST = 8,
  parameter int unsigned CDC_LOG2  = 5
) (
  input  logic                      noc_clk,
  input  logic                      noc_rst_n,
  input  logic                      link_clk,
  input  logic                      link_rst_n,
  // NoC channels leaving the partition
  input  logic [NCH-1:0]            out_valid,
  output logic [NCH-1:0]            out_ready,
  input  logic [NCH-1:0][NOC_W-1:0] out_data,
  // NoC channels entering the partition
  output logic [NCH-1:0]            in_valid,
  input  logic [NCH-1:0]            in_ready,
  output logic [NCH-1:0][NOC_W-1:0] in_data,
  // Aurora user interface, transmit
  output logic [63:0]               tx_tdata,
  output logic [7:0]                tx_tkeep,
  output logic                      tx_tlast,
  output logic                      tx_tvalid,
  input  logic                      tx_tready,
  // Aurora user interface, receive
  input  logic [63:0]               rx_tdata,
  input  logic [7:0]                rx_tkeep,
  input  logic                      rx_tlast,
  input  logic                      rx_tvalid,
  // status (NoC clock unless noted)
  output logic                      credit_stall,
  output logic                      seq_err,
  output logic                      bad_frame,
  output logic                      rx_overflow,
  output logic                      cdc_overflow      // link clock, sticky
);
  logic        f_valid, f_ready, f_last;
  logic [63:0] f_data;
  logic        r_valid, r_ready, r_last;
  logic [63:0] r_data;
  logic        cr_valid;
  logic [7:0]  cr_ch, cr_cnt;
  logic [NCH-1:0] rx_pop;
  logic        ack_valid;
  logic [7:0]  ack_seq, exp_seq;
  logic        tx_ovf_unused;

  noc_link_tx #(.NCH(NCH), .TX_DEPTH(TX_DEPTH), .RX_DEPTH(RX_DEPTH), .MAX_BURST(MAX_BURST)) u_tx (
    .clk(noc_clk), .rst_n(noc_rst_n),
    .noc_valid(out_valid), .noc_ready(out_ready), .noc_data(out_data),
    .credit_in_valid(cr_valid), .credit_in_ch(cr_ch), .credit_in_cnt(cr_cnt),
    .rx_pop,
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .out_last(f_last),
    .credit_stall
  );

  axis_async_fifo #(.W(65), .DEPTH_LOG2(CDC_LOG2)) u_tx_cdc (
    .s_clk(noc_clk), .s_rst_n(noc_rst_n),
    .s_valid(f_valid), .s_ready(f_ready), .s_data({f_data, f_last}), .overflow(tx_ovf_unused),
    .m_clk(link_clk), .m_rst_n(link_rst_n),
    .m_valid(tx_tvalid), .m_ready(tx_tready), .m_data({tx_tdata, tx_tlast})
  );
  assign tx_tkeep = 8'hFF;

  // rx_tkeep is always all ones: frames are whole 64-bit words
  axis_async_fifo #(.W(65), .DEPTH_LOG2(CDC_LOG2), .MUST_ACCEPT(1'b1)) u_rx_cdc (
    .s_clk(link_clk), .s_rst_n(link_rst_n),
    .s_valid(rx_tvalid && rx_tkeep[0]), .s_ready(), .s_data({rx_tdata, rx_tlast}),
    .overflow(cdc_overflow),
    .m_clk(noc_clk), .m_rst_n(noc_rst_n),
    .m_valid(r_valid), .m_ready(r_ready), .m_data({r_data, r_last})
  );

  noc_link_rx #(.NCH(NCH), .RX_DEPTH(RX_DEPTH), .DROP_OOS(1'b0)) u_rx (
    .clk(noc_clk), .rst_n(noc_rst_n),
    .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data), .in_last(r_last),
    .noc_valid(in_valid), .noc_ready(in_ready), .noc_data(in_data), .rx_pop,
    .credit_out_valid(cr_valid), .credit_out_ch(cr_ch), .credit_out_cnt(cr_cnt),
    .ack_valid, .ack_seq, .exp_seq,
    .seq_err, .bad_frame, .overflow(rx_overflow)
  );

endmodule
