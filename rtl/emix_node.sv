// emix_node -- the inter-FPGA part of one FPGA in an EMiX multi-FPGA emulation.
//
// A tiled many-core is cut along tile boundaries and its tiles are spread over several FPGAs.
// With vertical partitioning each FPGA holds a column of TILES_PER_EDGE tiles; the NoC links
// of these tiles that point west or east cross to another FPGA. Each tile has three NoCs with
// one 64-bit link per direction, so an edge has TILES_PER_EDGE * 3 channels each way.
// The FPGAs are grouped in pairs. Inside a pair the two FPGAs face each other through a
// low-latency Aurora link (QSFP-1); neighbouring pairs are joined through 100 Gb Ethernet and
// a switch (QSFP-0). So the FPGAs alternate: west Ethernet / east Aurora, west Aurora / east
// Ethernet; the outermost edges have no link. WEST_LINK and EAST_LINK pick the kind of each
// side (default: an inner FPGA with Aurora to the west and Ethernet to the east).
// Channel mapping: tile t, NoC n (0..2) is channel t*3+n on both sides and on both FPGAs, so
// the far bridge delivers each flit on the same tile row and NoC it left from.
// Interface: tile-side channels are valid/ready per tile and NoC, in the NoC clock; every side
// has both an Aurora and a CMAC user interface (only the chosen one is active) in that side's
// link clock; my_mac / w_peer_mac / e_peer_mac configure the Ethernet addresses; one status
// word per side. The tiles, the chipset and the Aurora and CMAC cores themselves are outside.
// From the paper: partitioning at tile/NoC boundaries, Aurora inside pairs, Ethernet between
// pairs, 8 tiles per FPGA, three 64-bit NoCs. Own choices: the per-edge bridge arrangement and
// every detail of the bridges' framing and flow control.
module emix_node
  import emix_pkg::*;
#(
  parameter int unsigned TILES_PER_EDGE = 8,
  parameter link_kind_e  WEST_LINK      = LINK_AURORA,
  parameter link_kind_e  EAST_LINK      = LINK_CMAC,
  parameter int unsigned TX_DEPTH       = 4,
  parameter int unsigned RX_DEPTH       = 8,
  parameter int unsigned MAX_BURST      = 8,
  parameter int unsigned TIMEOUT        = 1024
) (
  input  logic                 noc_clk,
  input  logic                 noc_rst_n,
  input  logic                 w_link_clk,
  input  logic                 w_link_rst_n,
  input  logic                 e_link_clk,
  input  logic                 e_link_rst_n,
  input  logic [47:0]          my_mac,
  input  logic [47:0]          w_peer_mac,
  input  logic [47:0]          e_peer_mac,
  // tile side, west edge: from tiles (leaving) and to tiles (entering)
  input  logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            w_out_valid,
  output logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            w_out_ready,
  input  logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0][NOC_W-1:0] w_out_data,
  output logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            w_in_valid,
  input  logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            w_in_ready,
  output logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0][NOC_W-1:0] w_in_data,
  // tile side, east edge
  input  logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            e_out_valid,
  output logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            e_out_ready,
  input  logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0][NOC_W-1:0] e_out_data,
  output logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            e_in_valid,
  input  logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0]            e_in_ready,
  output logic [TILES_PER_EDGE-1:0][NUM_NOCS-1:0][NOC_W-1:0] e_in_data,
  // west Aurora user interface
  output logic [63:0]          w_au_tx_tdata,
  output logic [7:0]           w_au_tx_tkeep,
  output logic                 w_au_tx_tlast,
  output logic                 w_au_tx_tvalid,
  input  logic                 w_au_tx_tready,
  input  logic [63:0]          w_au_rx_tdata,
  input  logic [7:0]           w_au_rx_tkeep,
  input  logic                 w_au_rx_tlast,
  input  logic                 w_au_rx_tvalid,
  // west CMAC user interface
  output logic [CMAC_W-1:0]    w_cm_tx_tdata,
  output logic [CMAC_W/8-1:0]  w_cm_tx_tkeep,
  output logic                 w_cm_tx_tlast,
  output logic                 w_cm_tx_tuser,
  output logic                 w_cm_tx_tvalid,
  input  logic                 w_cm_tx_tready,
  input  logic [CMAC_W-1:0]    w_cm_rx_tdata,
  input  logic [CMAC_W/8-1:0]  w_cm_rx_tkeep,
  input  logic                 w_cm_rx_tlast,
  input  logic                 w_cm_rx_tuser,
  input  logic                 w_cm_rx_tvalid,
  // east Aurora user interface
  output logic [63:0]          e_au_tx_tdata,
  output logic [7:0]           e_au_tx_tkeep,
  output logic                 e_au_tx_tlast,
  output logic                 e_au_tx_tvalid,
  input  logic                 e_au_tx_tready,
  input  logic [63:0]          e_au_rx_tdata,
  input  logic [7:0]           e_au_rx_tkeep,
  input  logic                 e_au_rx_tlast,
  input  logic                 e_au_rx_tvalid,
  // east CMAC user interface
  output logic [CMAC_W-1:0]    e_cm_tx_tdata,
  output logic [CMAC_W/8-1:0]  e_cm_tx_tkeep,
  output logic                 e_cm_tx_tlast,
  output logic                 e_cm_tx_tuser,
  output logic                 e_cm_tx_tvalid,
  input  logic                 e_cm_tx_tready,
  input  logic [CMAC_W-1:0]    e_cm_rx_tdata,
  input  logic [CMAC_W/8-1:0]  e_cm_rx_tkeep,
  input  logic                 e_cm_rx_tlast,
  input  logic                 e_cm_rx_tuser,
  input  logic                 e_cm_rx_tvalid,
  // status
  output link_status_t         w_status,
  output link_status_t         e_status
);
  localparam int unsigned NCH = TILES_PER_EDGE * NUM_NOCS;

  // channel mapping: [tile][noc] is channel tile*NUM_NOCS + noc (packed arrays flatten so)
  logic [NCH-1:0]            w_ov, w_or, w_iv, w_ir, e_ov, e_or, e_iv, e_ir;
  logic [NCH-1:0][NOC_W-1:0] w_od, w_id, e_od, e_id;

  assign w_ov = w_out_valid;
  assign w_od = w_out_data;
  assign w_out_ready = w_or;
  assign w_in_valid  = w_iv;
  assign w_in_data   = w_id;
  assign w_ir = w_in_ready;
  assign e_ov = e_out_valid;
  assign e_od = e_out_data;
  assign e_out_ready = e_or;
  assign e_in_valid  = e_iv;
  assign e_in_data   = e_id;
  assign e_ir = e_in_ready;

  emix_edge #(.KIND(WEST_LINK), .NCH(NCH), .TX_DEPTH(TX_DEPTH), .RX_DEPTH(RX_DEPTH),
              .MAX_BURST(MAX_BURST), .TIMEOUT(TIMEOUT)) u_west (
    .noc_clk, .noc_rst_n, .link_clk(w_link_clk), .link_rst_n(w_link_rst_n),
    .my_mac, .peer_mac(w_peer_mac),
    .out_valid(w_ov), .out_ready(w_or), .out_data(w_od),
    .in_valid(w_iv), .in_ready(w_ir), .in_data(w_id),
    .au_tx_tdata(w_au_tx_tdata), .au_tx_tkeep(w_au_tx_tkeep), .au_tx_tlast(w_au_tx_tlast),
    .au_tx_tvalid(w_au_tx_tvalid), .au_tx_tready(w_au_tx_tready),
    .au_rx_tdata(w_au_rx_tdata), .au_rx_tkeep(w_au_rx_tkeep), .au_rx_tlast(w_au_rx_tlast),
    .au_rx_tvalid(w_au_rx_tvalid),
    .cm_tx_tdata(w_cm_tx_tdata), .cm_tx_tkeep(w_cm_tx_tkeep), .cm_tx_tlast(w_cm_tx_tlast),
    .cm_tx_tuser(w_cm_tx_tuser), .cm_tx_tvalid(w_cm_tx_tvalid), .cm_tx_tready(w_cm_tx_tready),
    .cm_rx_tdata(w_cm_rx_tdata), .cm_rx_tkeep(w_cm_rx_tkeep), .cm_rx_tlast(w_cm_rx_tlast),
    .cm_rx_tuser(w_cm_rx_tuser), .cm_rx_tvalid(w_cm_rx_tvalid),
    .status(w_status)
  );

  emix_edge #(.KIND(EAST_LINK), .NCH(NCH), .TX_DEPTH(TX_DEPTH), .RX_DEPTH(RX_DEPTH),
              .MAX_BURST(MAX_BURST), .TIMEOUT(TIMEOUT)) u_east (
    .noc_clk, .noc_rst_n, .link_clk(e_link_clk), .link_rst_n(e_link_rst_n),
    .my_mac, .peer_mac(e_peer_mac),
    .out_valid(e_ov), .out_ready(e_or), .out_data(e_od),
    .in_valid(e_iv), .in_ready(e_ir), .in_data(e_id),
    .au_tx_tdata(e_au_tx_tdata), .au_tx_tkeep(e_au_tx_tkeep), .au_tx_tlast(e_au_tx_tlast),
    .au_tx_tvalid(e_au_tx_tvalid), .au_tx_tready(e_au_tx_tready),
    .au_rx_tdata(e_au_rx_tdata), .au_rx_tkeep(e_au_rx_tkeep), .au_rx_tlast(e_au_rx_tlast),
    .au_rx_tvalid(e_au_rx_tvalid),
    .cm_tx_tdata(e_cm_tx_tdata), .cm_tx_tkeep(e_cm_tx_tkeep), .cm_tx_tlast(e_cm_tx_tlast),
    .cm_tx_tuser(e_cm_tx_tuser), .cm_tx_tvalid(e_cm_tx_tvalid), .cm_tx_tready(e_cm_tx_tready),
    .cm_rx_tdata(e_cm_rx_tdata), .cm_rx_tkeep(e_cm_rx_tkeep), .cm_rx_tlast(e_cm_rx_tlast),
    .cm_rx_tuser(e_cm_rx_tuser), .cm_rx_tvalid(e_cm_rx_tvalid),
    .status(e_status)
  );

endmodule
