// tb_emix_node -- end-to-end test of two FPGAs at the default configuration (8 tiles per
// edge, 3 NoCs: 24 channels per edge, Aurora to the west, Ethernet to the east).
// The two nodes are wired into a ring: their west Aurora interfaces face each other (the pair
// link), their east CMAC interfaces are joined through a lossy Ethernet model (the switch
// path). Four traffic generators stand in for the tile columns: every channel of every edge
// sends 200 numbered flits and checks what it receives. NoC clock 20 ns (50 MHz), Aurora user
// clock 6.4 ns, CMAC clocks 3.1 ns and 3.2 ns.
// Checked: all flits arrive once, in order, on the channel (tile and NoC) they left from, over
// both kinds of link. Counted, and each must happen at least once: flits over Aurora, flits
// over Ethernet, credit stalls on an Aurora edge and on an Ethernet edge, retransmissions,
// frames dropped for a bad frame check sequence and for a foreign address. No overflow, no
// sequence error on Aurora.
module tb_emix_node;
  import emix_pkg::*;
  localparam int T = 8, NCH = T * NUM_NOCS, NFLITS = 200;
  localparam logic [47:0] MAC_X = 48'h02_00_00_00_00_02, MAC_Y = 48'h02_00_00_00_00_03;

  logic nclk = 0, aclk = 0, cclk_x = 0, cclk_y = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #10   nclk = ~nclk;
  always #3.2  aclk = ~aclk;
  always #1.55 cclk_x = ~cclk_x;
  always #1.6  cclk_y = ~cclk_y;

  logic hold;
  // tile-side channels, flattened: channel = tile*3 + noc
  logic [NCH-1:0] xw_ov, xw_or, xw_iv, xw_ir, xe_ov, xe_or, xe_iv, xe_ir;
  logic [NCH-1:0] yw_ov, yw_or, yw_iv, yw_ir, ye_ov, ye_or, ye_iv, ye_ir;
  logic [NCH-1:0][63:0] xw_od, xw_id, xe_od, xe_id, yw_od, yw_id, ye_od, ye_id;
  // Aurora (west) between X and Y
  logic [63:0] xy_d, yx_d;
  logic [7:0] xy_k, yx_k;
  logic xy_l, xy_v, yx_l, yx_v;
  // CMAC (east) between X and Y
  logic [511:0] xtx_d, xrx_d, ytx_d, yrx_d;
  logic [63:0] xtx_k, xrx_k, ytx_k, yrx_k;
  logic xtx_l, xtx_u, xtx_v, xtx_r, xrx_l, xrx_u, xrx_v;
  logic ytx_l, ytx_u, ytx_v, ytx_r, yrx_l, yrx_u, yrx_v;
  // unused interfaces
  logic [511:0] nc_cd [4];
  logic [63:0]  nc_ck [4], nc_ad [4];
  logic [7:0]   nc_ak [4];
  logic         nc_b  [16];
  link_status_t xw_s, xe_s, yw_s, ye_s;

  emix_node u_x (
    .noc_clk(nclk), .noc_rst_n(rst_n), .w_link_clk(aclk), .w_link_rst_n(rst_n),
    .e_link_clk(cclk_x), .e_link_rst_n(rst_n), .my_mac(MAC_X), .w_peer_mac(48'h0), .e_peer_mac(MAC_Y),
    .w_out_valid(xw_ov), .w_out_ready(xw_or), .w_out_data(xw_od),
    .w_in_valid(xw_iv), .w_in_ready(xw_ir), .w_in_data(xw_id),
    .e_out_valid(xe_ov), .e_out_ready(xe_or), .e_out_data(xe_od),
    .e_in_valid(xe_iv), .e_in_ready(xe_ir), .e_in_data(xe_id),
    .w_au_tx_tdata(xy_d), .w_au_tx_tkeep(xy_k), .w_au_tx_tlast(xy_l), .w_au_tx_tvalid(xy_v), .w_au_tx_tready(1'b1),
    .w_au_rx_tdata(yx_d), .w_au_rx_tkeep(yx_k), .w_au_rx_tlast(yx_l), .w_au_rx_tvalid(yx_v),
    .w_cm_tx_tdata(nc_cd[0]), .w_cm_tx_tkeep(nc_ck[0]), .w_cm_tx_tlast(nc_b[0]), .w_cm_tx_tuser(nc_b[1]),
    .w_cm_tx_tvalid(nc_b[2]), .w_cm_tx_tready(1'b0),
    .w_cm_rx_tdata('0), .w_cm_rx_tkeep('0), .w_cm_rx_tlast(1'b0), .w_cm_rx_tuser(1'b0), .w_cm_rx_tvalid(1'b0),
    .e_au_tx_tdata(nc_ad[0]), .e_au_tx_tkeep(nc_ak[0]), .e_au_tx_tlast(nc_b[3]), .e_au_tx_tvalid(nc_b[4]),
    .e_au_tx_tready(1'b0), .e_au_rx_tdata('0), .e_au_rx_tkeep('0), .e_au_rx_tlast(1'b0), .e_au_rx_tvalid(1'b0),
    .e_cm_tx_tdata(xtx_d), .e_cm_tx_tkeep(xtx_k), .e_cm_tx_tlast(xtx_l), .e_cm_tx_tuser(xtx_u),
    .e_cm_tx_tvalid(xtx_v), .e_cm_tx_tready(xtx_r),
    .e_cm_rx_tdata(xrx_d), .e_cm_rx_tkeep(xrx_k), .e_cm_rx_tlast(xrx_l), .e_cm_rx_tuser(xrx_u), .e_cm_rx_tvalid(xrx_v),
    .w_status(xw_s), .e_status(xe_s));

  emix_node u_y (
    .noc_clk(nclk), .noc_rst_n(rst_n), .w_link_clk(aclk), .w_link_rst_n(rst_n),
    .e_link_clk(cclk_y), .e_link_rst_n(rst_n), .my_mac(MAC_Y), .w_peer_mac(48'h0), .e_peer_mac(MAC_X),
    .w_out_valid(yw_ov), .w_out_ready(yw_or), .w_out_data(yw_od),
    .w_in_valid(yw_iv), .w_in_ready(yw_ir), .w_in_data(yw_id),
    .e_out_valid(ye_ov), .e_out_ready(ye_or), .e_out_data(ye_od),
    .e_in_valid(ye_iv), .e_in_ready(ye_ir), .e_in_data(ye_id),
    .w_au_tx_tdata(yx_d), .w_au_tx_tkeep(yx_k), .w_au_tx_tlast(yx_l), .w_au_tx_tvalid(yx_v), .w_au_tx_tready(1'b1),
    .w_au_rx_tdata(xy_d), .w_au_rx_tkeep(xy_k), .w_au_rx_tlast(xy_l), .w_au_rx_tvalid(xy_v),
    .w_cm_tx_tdata(nc_cd[1]), .w_cm_tx_tkeep(nc_ck[1]), .w_cm_tx_tlast(nc_b[5]), .w_cm_tx_tuser(nc_b[6]),
    .w_cm_tx_tvalid(nc_b[7]), .w_cm_tx_tready(1'b0),
    .w_cm_rx_tdata('0), .w_cm_rx_tkeep('0), .w_cm_rx_tlast(1'b0), .w_cm_rx_tuser(1'b0), .w_cm_rx_tvalid(1'b0),
    .e_au_tx_tdata(nc_ad[1]), .e_au_tx_tkeep(nc_ak[1]), .e_au_tx_tlast(nc_b[8]), .e_au_tx_tvalid(nc_b[9]),
    .e_au_tx_tready(1'b0), .e_au_rx_tdata('0), .e_au_rx_tkeep('0), .e_au_rx_tlast(1'b0), .e_au_rx_tvalid(1'b0),
    .e_cm_tx_tdata(ytx_d), .e_cm_tx_tkeep(ytx_k), .e_cm_tx_tlast(ytx_l), .e_cm_tx_tuser(ytx_u),
    .e_cm_tx_tvalid(ytx_v), .e_cm_tx_tready(ytx_r),
    .e_cm_rx_tdata(yrx_d), .e_cm_rx_tkeep(yrx_k), .e_cm_rx_tlast(yrx_l), .e_cm_rx_tuser(yrx_u), .e_cm_rx_tvalid(yrx_v),
    .w_status(yw_s), .e_status(ye_s));

  int xy_frames, xy_spoiled, xy_foreign, yx_frames, yx_spoiled, yx_foreign;
  eth_link_model #(.LOSS_PCT(5), .FOREIGN_PCT(3)) l_xy (
    .tx_clk(cclk_x), .rx_clk(cclk_y), .rst_n, .enable_faults(1'b1),
    .tx_tdata(xtx_d), .tx_tkeep(xtx_k), .tx_tlast(xtx_l), .tx_tvalid(xtx_v), .tx_tready(xtx_r),
    .rx_tdata(yrx_d), .rx_tkeep(yrx_k), .rx_tlast(yrx_l), .rx_tuser(yrx_u), .rx_tvalid(yrx_v),
    .frames(xy_frames), .spoiled(xy_spoiled), .foreign(xy_foreign));
  eth_link_model #(.LOSS_PCT(5), .FOREIGN_PCT(3)) l_yx (
    .tx_clk(cclk_y), .rx_clk(cclk_x), .rst_n, .enable_faults(1'b1),
    .tx_tdata(ytx_d), .tx_tkeep(ytx_k), .tx_tlast(ytx_l), .tx_tvalid(ytx_v), .tx_tready(ytx_r),
    .rx_tdata(xrx_d), .rx_tkeep(xrx_k), .rx_tlast(xrx_l), .rx_tuser(xrx_u), .rx_tvalid(xrx_v),
    .frames(yx_frames), .spoiled(yx_spoiled), .foreign(yx_foreign));

  // tile columns: X west <-> Y west over Aurora, X east <-> Y east over Ethernet
  logic d_xw, d_yw, d_xe, d_ye;
  int e_xw, e_yw, e_xe, e_ye, r_xw, r_yw, r_xe, r_ye;
  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(1), .PEER_ID(3)) t_xw (.clk(nclk), .rst_n, .hold,
    .out_valid(xw_ov), .out_ready(xw_or), .out_data(xw_od), .in_valid(xw_iv), .in_ready(xw_ir), .in_data(xw_id),
    .done(d_xw), .errors(e_xw), .received(r_xw));
  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(3), .PEER_ID(1)) t_yw (.clk(nclk), .rst_n, .hold,
    .out_valid(yw_ov), .out_ready(yw_or), .out_data(yw_od), .in_valid(yw_iv), .in_ready(yw_ir), .in_data(yw_id),
    .done(d_yw), .errors(e_yw), .received(r_yw));
  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(2), .PEER_ID(4)) t_xe (.clk(nclk), .rst_n, .hold,
    .out_valid(xe_ov), .out_ready(xe_or), .out_data(xe_od), .in_valid(xe_iv), .in_ready(xe_ir), .in_data(xe_id),
    .done(d_xe), .errors(e_xe), .received(r_xe));
  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(4), .PEER_ID(2)) t_ye (.clk(nclk), .rst_n, .hold,
    .out_valid(ye_ov), .out_ready(ye_or), .out_data(ye_od), .in_valid(ye_iv), .in_ready(ye_ir), .in_data(ye_id),
    .done(d_ye), .errors(e_ye), .received(r_ye));

  int checks = 0, failures = 0;
  int au_stall = 0, cm_stall = 0, retx = 0, fcs = 0, addr = 0, au_seq = 0, ovf = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(posedge nclk) if (rst_n) begin
    if (xw_s.credit_stall || yw_s.credit_stall) au_stall++;
    if (xe_s.credit_stall || ye_s.credit_stall) cm_stall++;
    if (xe_s.retx || ye_s.retx) retx++;
    if (xw_s.seq_err || yw_s.seq_err || xw_s.bad_frame || yw_s.bad_frame) au_seq++;
    if (xw_s.rx_overflow || yw_s.rx_overflow || xe_s.rx_overflow || ye_s.rx_overflow ||
        xw_s.cdc_overflow || yw_s.cdc_overflow) ovf++;
  end
  always @(posedge cclk_x) if (rst_n) begin
    if (xe_s.drop_fcs) fcs++;
    if (xe_s.drop_addr) addr++;
  end
  always @(posedge cclk_y) if (rst_n) begin
    if (ye_s.drop_fcs) fcs++;
    if (ye_s.drop_addr) addr++;
  end

  initial begin
    hold = 0;
    repeat (3) @(posedge nclk);
    rst_n = 1;
    repeat (200) @(posedge nclk);
    #1 hold = 1;                 // the tiles stop taking flits; credits run out on both links
    repeat (300) @(posedge nclk);
    #1 hold = 0;
    wait (d_xw && d_yw && d_xe && d_ye);
    repeat (50) @(posedge nclk);
    check(e_xw + e_yw + e_xe + e_ye == 0, "flits intact, in order, on their own channel");
    check(r_xw == NCH * NFLITS && r_yw == NCH * NFLITS, "all Aurora flits delivered once");
    check(r_xe == NCH * NFLITS && r_ye == NCH * NFLITS, "all Ethernet flits delivered once");
    check(au_stall > 0, "credit stall on the Aurora edge");
    check(cm_stall > 0, "credit stall on the Ethernet edge");
    check(retx > 0, "retransmission after lost frames");
    check(fcs > 0, "frames with a bad check sequence dropped");
    check(addr > 0 && addr == xy_foreign + yx_foreign, "frames for another station dropped");
    check(au_seq == 0, "no sequence error on Aurora");
    check(ovf == 0, "no overflow");
    $display("aurora_flits=%0d ethernet_flits=%0d aurora_stall=%0d ethernet_stall=%0d retx=%0d fcs_drops=%0d addr_drops=%0d",
             r_xw + r_yw, r_xe + r_ye, au_stall, cm_stall, retx, fcs, addr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge nclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
