// emix_edge -- one side (west or east) of an FPGA's tile partition and the bridge serving it.
//
// Chooses, by the KIND parameter, what carries the NoC channels that cross this edge:
// LINK_AURORA: a noc_aurora_bridge to the adjacent FPGA of the same pair (QSFP-1);
// LINK_CMAC:   a noc_cmac_bridge to the neighbouring pair through the Ethernet switch (QSFP-0);
// LINK_NONE:   the edge of the whole mesh; no channel leaves, nothing enters (the mesh edge
//              ports are closed, as on the monolithic chip).
// Both link interfaces are always present as ports; the one not used is driven idle, with
// tready held low on the receive side it does not have.
// Interface and timing are those of the chosen bridge. From the paper: each FPGA pair is joined
// by Aurora, pairs are joined by Ethernet. Own choice: one bridge per partition edge.
module emix_edge
  import emix_pkg::*;
#(
  parameter link_kind_e  KIND      = LINK_AURORA,
  parameter int unsigned NCH       = 24,
  parameter int unsigned TX_DEPTH  = 4,
  parameter int unsigned RX_DEPTH  = 8,
  parameter int unsigned MAX_BURST = 8,
  parameter int unsigned TIMEOUT   = 1024
) (
  input  logic                      noc_clk,
  input  logic                      noc_rst_n,
  input  logic                      link_clk,
  input  logic                      link_rst_n,
  input  logic [47:0]               my_mac,
  input  logic [47:0]               peer_mac,
  input  logic [NCH-1:0]            out_valid,
  output logic [NCH-1:0]            out_ready,
  input  logic [NCH-1:0][NOC_W-1:0] out_data,
  output logic [NCH-1:0]            in_valid,
  input  logic [NCH-1:0]            in_ready,
  output logic [NCH-1:0][NOC_W-1:0] in_data,
  // Aurora user interface
  output logic [63:0]               au_tx_tdata,
  output logic [7:0]                au_tx_tkeep,
  output logic                      au_tx_tlast,
  output logic                      au_tx_tvalid,
  input  logic                      au_tx_tready,
  input  logic [63:0]               au_rx_tdata,
  input  logic [7:0]                au_rx_tkeep,
  input  logic                      au_rx_tlast,
  input  logic                      au_rx_tvalid,
  // CMAC user interface
  output logic [CMAC_W-1:0]         cm_tx_tdata,
  output logic [CMAC_W/8-1:0]       cm_tx_tkeep,
  output logic                      cm_tx_tlast,
  output logic                      cm_tx_tuser,
  output logic                      cm_tx_tvalid,
  input  logic                      cm_tx_tready,
  input  logic [CMAC_W-1:0]         cm_rx_tdata,
  input  logic [CMAC_W/8-1:0]       cm_rx_tkeep,
  input  logic                      cm_rx_tlast,
  input  logic                      cm_rx_tuser,
  input  logic                      cm_rx_tvalid,
  output link_status_t              status
);
  if (KIND == LINK_AURORA) begin : g_aurora
    noc_aurora_bridge #(.NCH(NCH), .TX_DEPTH(TX_DEPTH), .RX_DEPTH(RX_DEPTH), .MAX_BURST(MAX_BURST)) u_br (
      .noc_clk, .noc_rst_n, .link_clk, .link_rst_n,
      .out_valid, .out_ready, .out_data, .in_valid, .in_ready, .in_data,
      .tx_tdata(au_tx_tdata), .tx_tkeep(au_tx_tkeep), .tx_tlast(au_tx_tlast),
      .tx_tvalid(au_tx_tvalid), .tx_tready(au_tx_tready),
      .rx_tdata(au_rx_tdata), .rx_tkeep(au_rx_tkeep), .rx_tlast(au_rx_tlast), .rx_tvalid(au_rx_tvalid),
      .credit_stall(status.credit_stall), .seq_err(status.seq_err), .bad_frame(status.bad_frame),
      .rx_overflow(status.rx_overflow), .cdc_overflow(status.cdc_overflow)
    );
    assign status.retx = 1'b0;
    assign status.drop_fcs = 1'b0;
    assign status.drop_addr = 1'b0;
    assign status.drop_full = 1'b0;
    assign cm_tx_tdata = '0;
    assign cm_tx_tkeep = '0;
    assign cm_tx_tlast = 1'b0;
    assign cm_tx_tuser = 1'b0;
    assign cm_tx_tvalid = 1'b0;
  end else if (KIND == LINK_CMAC) begin : g_cmac
    noc_cmac_bridge #(.NCH(NCH), .TX_DEPTH(TX_DEPTH), .RX_DEPTH(RX_DEPTH), .MAX_BURST(MAX_BURST),
                      .TIMEOUT(TIMEOUT)) u_br (
      .noc_clk, .noc_rst_n, .link_clk, .link_rst_n, .my_mac, .peer_mac,
      .out_valid, .out_ready, .out_data, .in_valid, .in_ready, .in_data,
      .tx_tdata(cm_tx_tdata), .tx_tkeep(cm_tx_tkeep), .tx_tlast(cm_tx_tlast), .tx_tuser(cm_tx_tuser),
      .tx_tvalid(cm_tx_tvalid), .tx_tready(cm_tx_tready),
      .rx_tdata(cm_rx_tdata), .rx_tkeep(cm_rx_tkeep), .rx_tlast(cm_rx_tlast), .rx_tuser(cm_rx_tuser),
      .rx_tvalid(cm_rx_tvalid),
      .credit_stall(status.credit_stall), .retx(status.retx), .seq_err(status.seq_err),
      .bad_frame(status.bad_frame), .rx_overflow(status.rx_overflow),
      .drop_fcs(status.drop_fcs), .drop_addr(status.drop_addr), .drop_full(status.drop_full)
    );
    assign status.cdc_overflow = 1'b0;
    assign au_tx_tdata = '0;
    assign au_tx_tkeep = '0;
    assign au_tx_tlast = 1'b0;
    assign au_tx_tvalid = 1'b0;
  end else begin : g_none
    assign out_ready = '0;
    assign in_valid  = '0;
    assign in_data   = '0;
    assign status    = '0;
    assign au_tx_tdata = '0;
    assign au_tx_tkeep = '0;
    assign au_tx_tlast = 1'b0;
    assign au_tx_tvalid = 1'b0;
    assign cm_tx_tdata = '0;
    assign cm_tx_tkeep = '0;
    assign cm_tx_tlast = 1'b0;
    assign cm_tx_tuser = 1'b0;
    assign cm_tx_tvalid = 1'b0;
  end

endmodule
