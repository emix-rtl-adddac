// tb_noc_cmac_bridge -- two CMAC bridges joined through a lossy Ethernet model, as two FPGA
// pairs joined through the switch. NoC clock 20 ns, CMAC clocks 3.1 ns and 3.2 ns. Six channels
// carry 300 flits each way. The link model spoils some frames (bad frame check sequence) and
// floods some frames addressed to another station; the tiles stop taking flits for a while.
// Checked: every flit arrives exactly once, in order, on its channel, despite the losses; lost
// frames were repaired by retransmission; foreign frames and spoiled frames were dropped by
// the receivers; credit flow control stalled a sender; no receive overflow.
module tb_noc_cmac_bridge;
  import emix_pkg::*;
  localparam int NCH = 6, NFLITS = 300;
  localparam logic [47:0] MAC_A = 48'h02_00_00_00_00_02, MAC_B = 48'h02_00_00_00_00_03;

  logic nclk = 0, lclk_a = 0, lclk_b = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #10  nclk = ~nclk;
  always #1.55 lclk_a = ~lclk_a;
  always #1.6  lclk_b = ~lclk_b;

  logic hold, faults;
  logic [NCH-1:0] a_ov, a_or, a_iv, a_ir, b_ov, b_or, b_iv, b_ir;
  logic [NCH-1:0][63:0] a_od, a_id, b_od, b_id;
  logic [511:0] atx_d, arx_d, btx_d, brx_d;
  logic [63:0] atx_k, arx_k, btx_k, brx_k;
  logic atx_l, atx_u, atx_v, atx_r, arx_l, arx_u, arx_v;
  logic btx_l, btx_u, btx_v, btx_r, brx_l, brx_u, brx_v;
  link_status_t sa, sb;
  logic a_done, b_done;
  int a_err, b_err, a_rcv, b_rcv, ab_frames, ab_spoiled, ab_foreign, ba_frames, ba_spoiled, ba_foreign;

  noc_cmac_bridge #(.NCH(NCH), .TIMEOUT(400)) u_a (
    .noc_clk(nclk), .noc_rst_n(rst_n), .link_clk(lclk_a), .link_rst_n(rst_n), .my_mac(MAC_A), .peer_mac(MAC_B),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od), .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .tx_tdata(atx_d), .tx_tkeep(atx_k), .tx_tlast(atx_l), .tx_tuser(atx_u), .tx_tvalid(atx_v), .tx_tready(atx_r),
    .rx_tdata(arx_d), .rx_tkeep(arx_k), .rx_tlast(arx_l), .rx_tuser(arx_u), .rx_tvalid(arx_v),
    .credit_stall(sa.credit_stall), .retx(sa.retx), .seq_err(sa.seq_err), .bad_frame(sa.bad_frame),
    .rx_overflow(sa.rx_overflow), .drop_fcs(sa.drop_fcs), .drop_addr(sa.drop_addr), .drop_full(sa.drop_full));
  noc_cmac_bridge #(.NCH(NCH), .TIMEOUT(400)) u_b (
    .noc_clk(nclk), .noc_rst_n(rst_n), .link_clk(lclk_b), .link_rst_n(rst_n), .my_mac(MAC_B), .peer_mac(MAC_A),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od), .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .tx_tdata(btx_d), .tx_tkeep(btx_k), .tx_tlast(btx_l), .tx_tuser(btx_u), .tx_tvalid(btx_v), .tx_tready(btx_r),
    .rx_tdata(brx_d), .rx_tkeep(brx_k), .rx_tlast(brx_l), .rx_tuser(brx_u), .rx_tvalid(brx_v),
    .credit_stall(sb.credit_stall), .retx(sb.retx), .seq_err(sb.seq_err), .bad_frame(sb.bad_frame),
    .rx_overflow(sb.rx_overflow), .drop_fcs(sb.drop_fcs), .drop_addr(sb.drop_addr), .drop_full(sb.drop_full));
  assign sa.cdc_overflow = 1'b0;
  assign sb.cdc_overflow = 1'b0;

  eth_link_model #(.LOSS_PCT(8), .FOREIGN_PCT(4)) l_ab (
    .tx_clk(lclk_a), .rx_clk(lclk_b), .rst_n, .enable_faults(faults),
    .tx_tdata(atx_d), .tx_tkeep(atx_k), .tx_tlast(atx_l), .tx_tvalid(atx_v), .tx_tready(atx_r),
    .rx_tdata(brx_d), .rx_tkeep(brx_k), .rx_tlast(brx_l), .rx_tuser(brx_u), .rx_tvalid(brx_v),
    .frames(ab_frames), .spoiled(ab_spoiled), .foreign(ab_foreign));
  eth_link_model #(.LOSS_PCT(8), .FOREIGN_PCT(4)) l_ba (
    .tx_clk(lclk_b), .rx_clk(lclk_a), .rst_n, .enable_faults(faults),
    .tx_tdata(btx_d), .tx_tkeep(btx_k), .tx_tlast(btx_l), .tx_tvalid(btx_v), .tx_tready(btx_r),
    .rx_tdata(arx_d), .rx_tkeep(arx_k), .rx_tlast(arx_l), .rx_tuser(arx_u), .rx_tvalid(arx_v),
    .frames(ba_frames), .spoiled(ba_spoiled), .foreign(ba_foreign));

  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(1), .PEER_ID(2)) t_a (
    .clk(nclk), .rst_n, .hold, .out_valid(a_ov), .out_ready(a_or), .out_data(a_od),
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id), .done(a_done), .errors(a_err), .received(a_rcv));
  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(2), .PEER_ID(1)) t_b (
    .clk(nclk), .rst_n, .hold, .out_valid(b_ov), .out_ready(b_or), .out_data(b_od),
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id), .done(b_done), .errors(b_err), .received(b_rcv));

  int checks = 0, failures = 0, stalls = 0, retx = 0, fcs = 0, addr = 0, full = 0, ovf = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(posedge nclk) if (rst_n) begin
    if (sa.credit_stall || sb.credit_stall) stalls++;
    if (sa.retx || sb.retx) retx++;
    if (sa.rx_overflow || sb.rx_overflow) ovf++;
  end
  always @(posedge lclk_a) if (rst_n) begin
    if (sa.drop_fcs) fcs++;
    if (sa.drop_addr) addr++;
    if (sa.drop_full) full++;
  end
  always @(posedge lclk_b) if (rst_n) begin
    if (sb.drop_fcs) fcs++;
    if (sb.drop_addr) addr++;
    if (sb.drop_full) full++;
  end

  initial begin
    hold = 0; faults = 1;
    repeat (3) @(posedge nclk);
    rst_n = 1;
    repeat (300) @(posedge nclk);
    #1 hold = 1;
    repeat (300) @(posedge nclk);
    #1 hold = 0;
    wait (a_done && b_done);
    repeat (50) @(posedge nclk);
    check(a_err == 0 && b_err == 0, "flits intact and in order");
    check(a_rcv == NCH * NFLITS && b_rcv == NCH * NFLITS, "every flit delivered exactly once");
    // a spoiled frame that also finds the receive buffer full is counted as a full drop
    check(ab_spoiled + ba_spoiled > 0 && fcs > 0 && fcs <= ab_spoiled + ba_spoiled &&
          fcs + full >= ab_spoiled + ba_spoiled,
          $sformatf("spoiled frames dropped %0d/%0d", fcs, ab_spoiled + ba_spoiled));
    check(ab_foreign + ba_foreign > 0 && addr == ab_foreign + ba_foreign,
          $sformatf("foreign frames dropped %0d/%0d", addr, ab_foreign + ba_foreign));
    check(retx > 0, "lost frames retransmitted");
    check(stalls > 0, "credit flow control stalled a sender");
    check(ovf == 0, "no receive overflow");
    $display("frames=%0d spoiled=%0d foreign=%0d retx=%0d stall_cycles=%0d full_drops=%0d",
             ab_frames + ba_frames, fcs, addr, retx, stalls, full);
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
