// noc_cmac_bridge -- carries the NoC channels of one partition edge over 100 Gb Ethernet.
//
// Scalable path between FPGA pairs, through the Ethernet switch. Transmit: noc_link_tx builds
// frames from the channels, link_replay numbers them and keeps a copy until they are
// acknowledged, an asynchronous FIFO moves the words to the CMAC clock, and eth_tx_encap wraps
// each frame in an Ethernet header addressed to the paired FPGA and packs it into the 512-bit
// CMAC stream. Receive: eth_rx_decap keeps only complete, error-free frames from the paired
// FPGA addressed to this one, an asynchronous FIFO moves the words to the NoC clock, and
// noc_link_rx accepts frames strictly in number order (DROP_OOS), demultiplexes the flits and
// passes returned credits and acknowledgements on. A frame lost in the network (dropped, or
// received with a bad frame check sequence) is repeated by link_replay after its timeout,
// together with all frames sent after it (go-back-N); out-of-order copies are dropped.
// Interface: NoC channels with valid/ready per channel (NoC clock); CMAC user interface
// (512-bit AXI-Stream, link clock); this FPGA's and the paired FPGA's MAC addresses as static
// configuration. Status: retransmissions, dropped frames, flow-control stalls.
// From the paper: a NoC-CMAC bridge transports NoC packets over Ethernet with FPGA-specific
// MAC addresses; lost frames are retransmitted. Own choices: everything about the frame
// format, the go-back-N scheme and buffer sizes.
module noc_cmac_bridge
  import emix_pkg::*;
#(
  parameter int unsigned NCH       = 24,
  parameter int unsigned TX_DEPTH  = 4,
  parameter int unsigned RX_DEPTH  = 8,
  parameter int unsigned MAX_BURST = 8,
  parameter int unsigned CDC_LOG2  = 5,
  parameter int unsigned REPLAY_LOG2 = 8,
  parameter int unsigned TIMEOUT   = 1024
) (
  input  logic                      noc_clk,
  input  logic                      noc_rst_n,
  input  logic                      link_clk,
  input  logic                      link_rst_n,
  input  logic [47:0]               my_mac,
  input  logic [47:0]               peer_mac,
  // NoC channels leaving the partition
  input  logic [NCH-1:0]            out_valid,
  output logic [NCH-1:0]            out_ready,
  input  logic [NCH-1:0][NOC_W-1:0] out_data,
  // NoC channels entering the partition
  output logic [NCH-1:0]            in_valid,
  input  logic [NCH-1:0]            in_ready,
  output logic [NCH-1:0][NOC_W-1:0] in_data,
  // CMAC user interface, transmit
  output logic [CMAC_W-1:0]         tx_tdata,
  output logic [CMAC_W/8-1:0]       tx_tkeep,
  output logic                      tx_tlast,
  output logic                      tx_tuser,
  output logic                      tx_tvalid,
  input  logic                      tx_tready,
  // CMAC user interface, receive
  input  logic [CMAC_W-1:0]         rx_tdata,
  input  logic [CMAC_W/8-1:0]       rx_tkeep,
  input  logic                      rx_tlast,
  input  logic                      rx_tuser,
  input  logic                      rx_tvalid,
  // status (NoC clock unless noted)
  output logic                      credit_stall,
  output logic                      retx,
  output logic                      seq_err,
  output logic                      bad_frame,
  output logic                      rx_overflow,
  output logic                      drop_fcs,       // link clock pulses
  output logic                      drop_addr,
  output logic                      drop_full
);
  logic        f_valid, f_ready, f_last;
  logic [63:0] f_data;
  logic        p_valid, p_ready, p_last;
  logic [63:0] p_data;
  logic        l_valid, l_ready, l_last;
  logic [63:0] l_data;
  logic        d_valid, d_ready, d_last;
  logic [63:0] d_data;
  logic        r_valid, r_ready, r_last;
  logic [63:0] r_data;
  logic        cr_valid;
  logic [7:0]  cr_ch, cr_cnt;
  logic [NCH-1:0] rx_pop;
  logic        ack_valid;
  logic [7:0]  ack_seq, exp_seq, inflight;
  logic        ovf_unused_tx, ovf_unused_rx;

  noc_link_tx #(.NCH(NCH), .TX_DEPTH(TX_DEPTH), .RX_DEPTH(RX_DEPTH), .MAX_BURST(MAX_BURST)) u_tx (
    .clk(noc_clk), .rst_n(noc_rst_n),
    .noc_valid(out_valid), .noc_ready(out_ready), .noc_data(out_data),
    .credit_in_valid(cr_valid), .credit_in_ch(cr_ch), .credit_in_cnt(cr_cnt),
    .rx_pop,
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .out_last(f_last),
    .credit_stall
  );

  link_replay #(.BUF_LOG2(REPLAY_LOG2), .TIMEOUT(TIMEOUT)) u_replay (
    .clk(noc_clk), .rst_n(noc_rst_n),
    .in_valid(f_valid), .in_ready(f_ready), .in_data(f_data), .in_last(f_last),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data), .out_last(p_last),
    .ack_valid, .ack_seq, .rx_exp_seq(exp_seq),
    .retx, .inflight
  );

  axis_async_fifo #(.W(65), .DEPTH_LOG2(CDC_LOG2)) u_tx_cdc (
    .s_clk(noc_clk), .s_rst_n(noc_rst_n),
    .s_valid(p_valid), .s_ready(p_ready), .s_data({p_data, p_last}), .overflow(ovf_unused_tx),
    .m_clk(link_clk), .m_rst_n(link_rst_n),
    .m_valid(l_valid), .m_ready(l_ready), .m_data({l_data, l_last})
  );

  eth_tx_encap u_encap (
    .clk(link_clk), .rst_n(link_rst_n), .src_mac(my_mac), .dst_mac(peer_mac),
    .in_valid(l_valid), .in_ready(l_ready), .in_data(l_data), .in_last(l_last),
    .tx_tvalid, .tx_tready, .tx_tdata, .tx_tkeep, .tx_tlast, .tx_tuser
  );

  eth_rx_decap u_decap (
    .clk(link_clk), .rst_n(link_rst_n), .my_mac, .peer_mac,
    .rx_tvalid, .rx_tdata, .rx_tkeep, .rx_tlast, .rx_tuser,
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data), .out_last(d_last),
    .drop_fcs, .drop_addr, .drop_full
  );

  axis_async_fifo #(.W(65), .DEPTH_LOG2(CDC_LOG2)) u_rx_cdc (
    .s_clk(link_clk), .s_rst_n(link_rst_n),
    .s_valid(d_valid), .s_ready(d_ready), .s_data({d_data, d_last}), .overflow(ovf_unused_rx),
    .m_clk(noc_clk), .m_rst_n(noc_rst_n),
    .m_valid(r_valid), .m_ready(r_ready), .m_data({r_data, r_last})
  );

  noc_link_rx #(.NCH(NCH), .RX_DEPTH(RX_DEPTH), .DROP_OOS(1'b1)) u_rx (
    .clk(noc_clk), .rst_n(noc_rst_n),
    .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data), .in_last(r_last),
    .noc_valid(in_valid), .noc_ready(in_ready), .noc_data(in_data), .rx_pop,
    .credit_out_valid(cr_valid), .credit_out_ch(cr_ch), .credit_out_cnt(cr_cnt),
    .ack_valid, .ack_seq, .exp_seq,
    .seq_err, .bad_frame, .overflow(rx_overflow)
  );

endmodule
