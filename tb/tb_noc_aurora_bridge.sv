// tb_noc_aurora_bridge -- two Aurora bridges facing each other, as on the two FPGAs of a pair.
// The Aurora cores and the optical link are replaced by wires (with the receiving Aurora
// interface never stalling, as in hardware, and the transmit side always ready). NoC clocks
// 20 ns, link (Aurora user) clock 6.4 ns; both bridges see words in that clock, as each Aurora
// core delivers received words in its own user clock. Six channels per edge carry 300 flits
// each way; the sinks stall for a while so that the credit flow control stops the senders.
// Checked: every flit arrives once, in order, on the same channel; a credit stall happened;
// no sequence error, bad frame or overflow; the first flit crosses in a bounded time.
module tb_noc_aurora_bridge;
  import emix_pkg::*;
  localparam int NCH = 6, NFLITS = 300;

  logic nclk = 0, lclk_a = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #10  nclk = ~nclk;
  always #3.2 lclk_a = ~lclk_a;

  logic hold;
  logic [NCH-1:0] a_ov, a_or, a_iv, a_ir, b_ov, b_or, b_iv, b_ir;
  logic [NCH-1:0][63:0] a_od, a_id, b_od, b_id;
  logic [63:0] ab_d, ba_d;
  logic [7:0] ab_k, ba_k;
  logic ab_l, ab_v, ba_l, ba_v;
  logic a_stall, a_seq, a_bad, a_ovf, a_cdc, b_stall, b_seq, b_bad, b_ovf, b_cdc;
  logic a_done, b_done;
  int a_err, b_err, a_rcv, b_rcv;

  noc_aurora_bridge #(.NCH(NCH)) u_a (
    .noc_clk(nclk), .noc_rst_n(rst_n), .link_clk(lclk_a), .link_rst_n(rst_n),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od), .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .tx_tdata(ab_d), .tx_tkeep(ab_k), .tx_tlast(ab_l), .tx_tvalid(ab_v), .tx_tready(1'b1),
    .rx_tdata(ba_d), .rx_tkeep(ba_k), .rx_tlast(ba_l), .rx_tvalid(ba_v),
    .credit_stall(a_stall), .seq_err(a_seq), .bad_frame(a_bad), .rx_overflow(a_ovf), .cdc_overflow(a_cdc));

  noc_aurora_bridge #(.NCH(NCH)) u_b (
    .noc_clk(nclk), .noc_rst_n(rst_n), .link_clk(lclk_a), .link_rst_n(rst_n),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od), .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .tx_tdata(ba_d), .tx_tkeep(ba_k), .tx_tlast(ba_l), .tx_tvalid(ba_v), .tx_tready(1'b1),
    .rx_tdata(ab_d), .rx_tkeep(ab_k), .rx_tlast(ab_l), .rx_tvalid(ab_v),
    .credit_stall(b_stall), .seq_err(b_seq), .bad_frame(b_bad), .rx_overflow(b_ovf), .cdc_overflow(b_cdc));

  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(1), .PEER_ID(2)) t_a (
    .clk(nclk), .rst_n, .hold, .out_valid(a_ov), .out_ready(a_or), .out_data(a_od),
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id), .done(a_done), .errors(a_err), .received(a_rcv));
  noc_traffic #(.NCH(NCH), .NFLITS(NFLITS), .SRC_ID(2), .PEER_ID(1)) t_b (
    .clk(nclk), .rst_n, .hold, .out_valid(b_ov), .out_ready(b_or), .out_data(b_od),
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id), .done(b_done), .errors(b_err), .received(b_rcv));

  int checks = 0, failures = 0, stalls = 0, anomalies = 0, first_rx = -1, cyc = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(posedge nclk) if (rst_n) begin
    cyc++;
    if (a_stall || b_stall) stalls++;
    if (a_seq || b_seq || a_bad || b_bad) anomalies++;
    if (first_rx < 0 && (b_iv != '0)) first_rx = cyc;
  end

  initial begin
    hold = 0;
    repeat (3) @(posedge nclk);
    rst_n = 1;
    repeat (200) @(posedge nclk);
    #1 hold = 1;                 // tiles stop taking flits: credits run out
    repeat (300) @(posedge nclk);
    #1 hold = 0;
    wait (a_done && b_done);
    repeat (20) @(posedge nclk);
    check(a_err == 0 && b_err == 0, "flits intact and in order");
    check(a_rcv == NCH * NFLITS && b_rcv == NCH * NFLITS, "every flit delivered once");
    check(stalls > 0, "credit flow control stalled a sender");
    check(anomalies == 0, "no sequence error or bad frame");
    check(!a_ovf && !b_ovf && !a_cdc && !b_cdc, "no overflow");
    check(first_rx > 0 && first_rx < 20, $sformatf("first flit after %0d NoC cycles", first_rx));
    $display("stall_cycles=%0d first_flit_cycles=%0d", stalls, first_rx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge nclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
