// tb_emix_system -- the 64-core, 8-FPGA arrangement: eight nodes in a chain, 8 tiles per
// node edge (24 channels), four Aurora pairs (FPGA1-2, 3-4, 5-6, 7-8) joined by Ethernet
// (FPGA2-3, 4-5, 6-7) through a lossy switch model. The outer edges of FPGA1 and FPGA8 are the
// mesh edges (no link). On every one of the seven links the tile columns on both sides send
// 100 numbered flits per channel; every flit must arrive once, in order, on its own channel.
// Counted: flits over Aurora and over Ethernet, retransmissions, credit stalls, drops for a bad
// frame check sequence. The closed mesh edges must not offer or accept anything.
module tb_emix_system;
  import emix_pkg::*;
  localparam int N = 8, T = 8, NCH = T * NUM_NOCS, NFLITS = 100;

  logic nclk = 0, aclk = 0, cclk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #10   nclk = ~nclk;
  always #3.2  aclk = ~aclk;
  always #1.55 cclk = ~cclk;

  logic hold;
  logic [NCH-1:0]       w_ov [N], w_or [N], w_iv [N], w_ir [N], e_ov [N], e_or [N], e_iv [N], e_ir [N];
  logic [NCH-1:0][63:0] w_od [N], w_id [N], e_od [N], e_id [N];
  logic [63:0]  w_aut_d [N], w_aur_d [N], e_aut_d [N], e_aur_d [N];
  logic [7:0]   w_aut_k [N], w_aur_k [N], e_aut_k [N], e_aur_k [N];
  logic         w_aut_l [N], w_aut_v [N], w_aur_l [N], w_aur_v [N], e_aut_l [N], e_aut_v [N], e_aur_l [N], e_aur_v [N];
  logic [511:0] w_cmt_d [N], w_cmr_d [N], e_cmt_d [N], e_cmr_d [N];
  logic [63:0]  w_cmt_k [N], w_cmr_k [N], e_cmt_k [N], e_cmr_k [N];
  logic         w_cmt_l [N], w_cmt_u [N], w_cmt_v [N], w_cmt_r [N], w_cmr_l [N], w_cmr_u [N], w_cmr_v [N];
  logic         e_cmt_l [N], e_cmt_u [N], e_cmt_v [N], e_cmt_r [N], e_cmr_l [N], e_cmr_u [N], e_cmr_v [N];
  link_status_t w_s [N], e_s [N];

  for (genvar g = 0; g < N; g++) begin : g_node
    localparam link_kind_e WK = (g == 0) ? LINK_NONE : ((g % 2) == 1) ? LINK_AURORA : LINK_CMAC;
    localparam link_kind_e EK = (g == N - 1) ? LINK_NONE : ((g % 2) == 0) ? LINK_AURORA : LINK_CMAC;
    emix_node #(.TILES_PER_EDGE(T), .WEST_LINK(WK), .EAST_LINK(EK)) u_n (
      .noc_clk(nclk), .noc_rst_n(rst_n),
      .w_link_clk(WK == LINK_CMAC ? cclk : aclk), .w_link_rst_n(rst_n),
      .e_link_clk(EK == LINK_CMAC ? cclk : aclk), .e_link_rst_n(rst_n),
      .my_mac(48'h02_00_00_00_00_00 | 48'(g + 1)),
      .w_peer_mac(48'h02_00_00_00_00_00 | 48'(g)), .e_peer_mac(48'h02_00_00_00_00_00 | 48'(g + 2)),
      .w_out_valid(w_ov[g]), .w_out_ready(w_or[g]), .w_out_data(w_od[g]),
      .w_in_valid(w_iv[g]), .w_in_ready(w_ir[g]), .w_in_data(w_id[g]),
      .e_out_valid(e_ov[g]), .e_out_ready(e_or[g]), .e_out_data(e_od[g]),
      .e_in_valid(e_iv[g]), .e_in_ready(e_ir[g]), .e_in_data(e_id[g]),
      .w_au_tx_tdata(w_aut_d[g]), .w_au_tx_tkeep(w_aut_k[g]), .w_au_tx_tlast(w_aut_l[g]), .w_au_tx_tvalid(w_aut_v[g]),
      .w_au_tx_tready(1'b1),
      .w_au_rx_tdata(w_aur_d[g]), .w_au_rx_tkeep(w_aur_k[g]), .w_au_rx_tlast(w_aur_l[g]), .w_au_rx_tvalid(w_aur_v[g]),
      .w_cm_tx_tdata(w_cmt_d[g]), .w_cm_tx_tkeep(w_cmt_k[g]), .w_cm_tx_tlast(w_cmt_l[g]), .w_cm_tx_tuser(w_cmt_u[g]),
      .w_cm_tx_tvalid(w_cmt_v[g]), .w_cm_tx_tready(w_cmt_r[g]),
      .w_cm_rx_tdata(w_cmr_d[g]), .w_cm_rx_tkeep(w_cmr_k[g]), .w_cm_rx_tlast(w_cmr_l[g]), .w_cm_rx_tuser(w_cmr_u[g]),
      .w_cm_rx_tvalid(w_cmr_v[g]),
      .e_au_tx_tdata(e_aut_d[g]), .e_au_tx_tkeep(e_aut_k[g]), .e_au_tx_tlast(e_aut_l[g]), .e_au_tx_tvalid(e_aut_v[g]),
      .e_au_tx_tready(1'b1),
      .e_au_rx_tdata(e_aur_d[g]), .e_au_rx_tkeep(e_aur_k[g]), .e_au_rx_tlast(e_aur_l[g]), .e_au_rx_tvalid(e_aur_v[g]),
      .e_cm_tx_tdata(e_cmt_d[g]), .e_cm_tx_tkeep(e_cmt_k[g]), .e_cm_tx_tlast(e_cmt_l[g]), .e_cm_tx_tuser(e_cmt_u[g]),
      .e_cm_tx_tvalid(e_cmt_v[g]), .e_cm_tx_tready(e_cmt_r[g]),
      .e_cm_rx_tdata(e_cmr_d[g]), .e_cm_rx_tkeep(e_cmr_k[g]), .e_cm_rx_tlast(e_cmr_l[g]), .e_cm_rx_tuser(e_cmr_u[g]),
      .e_cm_rx_tvalid(e_cmr_v[g]),
      .w_status(w_s[g]), .e_status(e_s[g]));
  end

  // mesh edges: nothing enters
  assign w_ov[0] = '0; assign w_od[0] = '0; assign w_ir[0] = '1;
  assign e_ov[N-1] = '0; assign e_od[N-1] = '0; assign e_ir[N-1] = '1;
  // unused receive interfaces idle
  for (genvar g = 0; g < N; g++) begin : g_idle
    if (g == 0 || (g % 2) == 0) begin : g_w_au
      assign w_aur_d[g] = '0; assign w_aur_k[g] = '0; assign w_aur_l[g] = 0; assign w_aur_v[g] = 0;
    end
    if (g == 0 || (g % 2) == 1) begin : g_w_cm
      assign w_cmr_d[g] = '0; assign w_cmr_k[g] = '0; assign w_cmr_l[g] = 0; assign w_cmr_u[g] = 0;
      assign w_cmr_v[g] = 0; assign w_cmt_r[g] = 0;
    end
    if (g == N - 1 || (g % 2) == 1) begin : g_e_au
      assign e_aur_d[g] = '0; assign e_aur_k[g] = '0; assign e_aur_l[g] = 0; assign e_aur_v[g] = 0;
    end
    if (g == N - 1 || (g % 2) == 0) begin : g_e_cm
      assign e_cmr_d[g] = '0; assign e_cmr_k[g] = '0; assign e_cmr_l[g] = 0; assign e_cmr_u[g] = 0;
      assign e_cmr_v[g] = 0; assign e_cmt_r[g] = 0;
    end
  end

  // links k = 0..N-2 between node k (east) and node k+1 (west)
  int fr [N-1][2], sp [N-1][2], fo [N-1][2];
  logic dn [N-1][2];
  int er [N-1][2], rc [N-1][2];
  for (genvar k = 0; k < N - 1; k++) begin : g_link
    if ((k % 2) == 0) begin : g_aurora
      assign w_aur_d[k+1] = e_aut_d[k]; assign w_aur_k[k+1] = e_aut_k[k];
      assign w_aur_l[k+1] = e_aut_l[k]; assign w_aur_v[k+1] = e_aut_v[k];
      assign e_aur_d[k] = w_aut_d[k+1]; assign e_aur_k[k] = w_aut_k[k+1];
      assign e_aur_l[k] = w_aut_l[k+1]; assign e_aur_v[k] = w_aut_v[k+1];
      assign fr[k] = '{0, 0}; assign sp[k] = '{0, 0}; assign fo[k] = '{0, 0};
    end else begin : g_eth
      eth_link_model #(.LOSS_PCT(3), .FOREIGN_PCT(2)) l_ew (
        .tx_clk(cclk), .rx_clk(cclk), .rst_n, .enable_faults(1'b1),
        .tx_tdata(e_cmt_d[k]), .tx_tkeep(e_cmt_k[k]), .tx_tlast(e_cmt_l[k]), .tx_tvalid(e_cmt_v[k]), .tx_tready(e_cmt_r[k]),
        .rx_tdata(w_cmr_d[k+1]), .rx_tkeep(w_cmr_k[k+1]), .rx_tlast(w_cmr_l[k+1]), .rx_tuser(w_cmr_u[k+1]), .rx_tvalid(w_cmr_v[k+1]),
        .frames(fr[k][0]), .spoiled(sp[k][0]), .foreign(fo[k][0]));
      eth_link_model #(.LOSS_PCT(3), .FOREIGN_PCT(2)) l_we (
        .tx_clk(cclk), .rx_clk(cclk), .rst_n, .enable_faults(1'b1),
        .tx_tdata(w_cmt_d[k+1]), .tx_tkeep(w_cmt_k[k+1]), .tx_tlast(w_cmt_l[k+1]), .tx_tvalid(w_cmt_v[k+1]), .tx_tready(w_cmt_r[k+1]),
        .rx_tdata(e_cmr_d[k]), .rx_tkeep(e_cmr_k[k]), .rx_tlast(e_cmr_l[k]), .rx_tuser(e_cmr_u[k]), .rx_tvalid(e_cmr_v[k]),
        .frames(fr[k][1]), .spoiled(sp[k][1]), .foreign(fo[k][1]));
    end
    noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(2*k+1), .PEER_ID(2*k+2)) t_e (.clk(nclk), .rst_n, .hold,
      .out_valid(e_ov[k]), .out_ready(e_or[k]), .out_data(e_od[k]), .in_valid(e_iv[k]), .in_ready(e_ir[k]), .in_data(e_id[k]),
      .done(dn[k][0]), .errors(er[k][0]), .received(rc[k][0]));
    noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(2*k+2), .PEER_ID(2*k+1)) t_w (.clk(nclk), .rst_n, .hold,
      .out_valid(w_ov[k+1]), .out_ready(w_or[k+1]), .out_data(w_od[k+1]), .in_valid(w_iv[k+1]), .in_ready(w_ir[k+1]), .in_data(w_id[k+1]),
      .done(dn[k][1]), .errors(er[k][1]), .received(rc[k][1]));
  end

  int checks = 0, failures = 0, stalls = 0, retx = 0, fcs = 0, edge_activity = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(posedge nclk) if (rst_n) begin
    for (int g = 0; g < N; g++) begin
      if (w_s[g].credit_stall || e_s[g].credit_stall) stalls++;
      if (w_s[g].retx || e_s[g].retx) retx++;
    end
    if (w_or[0] != '0 || w_iv[0] != '0 || e_or[N-1] != '0 || e_iv[N-1] != '0) edge_activity++;
  end
  always @(posedge cclk) if (rst_n)
    for (int g = 0; g < N; g++) if (w_s[g].drop_fcs || e_s[g].drop_fcs) fcs++;

  function automatic bit all_done();
    for (int k = 0; k < N - 1; k++) if (!dn[k][0] || !dn[k][1]) return 0;
    return 1;
  endfunction

  initial begin
    hold = 0;
    repeat (3) @(posedge nclk);
    rst_n = 1;
    repeat (100) @(posedge nclk);
    #1 hold = 1;
    repeat (200) @(posedge nclk);
    #1 hold = 0;
    while (!all_done()) @(posedge nclk);
    repeat (50) @(posedge nclk);
    begin
      int au = 0, eth = 0, errs = 0;
      for (int k = 0; k < N - 1; k++) begin
        errs += er[k][0] + er[k][1];
        check(rc[k][0] == NCH * NFLITS && rc[k][1] == NCH * NFLITS, $sformatf("link %0d delivered everything once", k));
        if ((k % 2) == 0) au += rc[k][0] + rc[k][1]; else eth += rc[k][0] + rc[k][1];
      end
      check(errs == 0, "flits intact, in order, on their own channel");
      check(au > 0 && eth > 0, "both link kinds carried traffic");
      check(stalls > 0, "credit stalls");
      check(retx > 0 && fcs > 0, "lost frames repaired by retransmission");
      check(edge_activity == 0, "mesh edges closed");
      $display("aurora_flits=%0d ethernet_flits=%0d stall_cycles=%0d retx=%0d fcs_drops=%0d", au, eth, stalls, retx, fcs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge nclk);
    for (int k = 0; k < N - 1; k++) $display("link %0d: received %0d/%0d errors %0d/%0d", k, rc[k][0], rc[k][1], er[k][0], er[k][1]);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
