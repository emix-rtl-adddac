// tb_noc_link_rx -- feeds hand-built frames to the frame parser (in-order mode, DROP_OOS = 1).
// Frames carry numbered flits for four channels, sometimes followed by padding words. Some
// frames are spoiled on purpose: a wrong frame number (must raise seq_err and be ignored) or a
// wrong magic byte (bad_frame, ignored). The testbench checks that exactly the flits of good
// frames reach their channels, in order; that the returned credits and acknowledgement of each
// good frame are passed on; that the expected frame number advances; and that every flit taken
// by a tile is reported on rx_pop. The sender model never exceeds the receive buffer space.
module tb_noc_link_rx;
  import emix_pkg::*;
  localparam int NCH = 4, RX_DEPTH = 4, NFRAMES = 400;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_last;
  logic [63:0] in_data;
  logic [NCH-1:0] noc_valid, noc_ready, rx_pop;
  logic [NCH-1:0][NOC_W-1:0] noc_data;
  logic credit_out_valid, ack_valid, seq_err, bad_frame, overflow;
  logic [7:0] credit_out_ch, credit_out_cnt, ack_seq, exp_seq;

  noc_link_rx #(.NCH(NCH), .RX_DEPTH(RX_DEPTH), .DROP_OOS(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int space [NCH];       // free receive slots as the sender sees them
  int sent  [NCH];       // flits sent in good frames
  int got   [NCH];       // flits delivered
  int pops  [NCH];
  int seq_errs = 0, bad_frames = 0, exp_seq_errs = 0, exp_bad = 0, credit_pulses = 0, exp_credit_pulses = 0;
  int ack_pulses = 0;
  byte unsigned acks [$];   // acknowledgements of good headers, in order

  // sinks
  always @(posedge clk) begin
    #1 noc_ready <= NCH'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      if (noc_valid[c] && noc_ready[c]) begin
        check(noc_data[c] == {8'hC0 | 8'(c), 56'(got[c])}, $sformatf("flit order ch %0d", c));
        got[c]++;
      end
      if (rx_pop[c]) begin pops[c]++; space[c]++; end
    end
    check(rx_pop == (noc_valid & noc_ready), "rx_pop = deliveries");
    if (seq_err) seq_errs++;
    if (bad_frame) bad_frames++;
    if (credit_out_valid) credit_pulses++;
    if (ack_valid) begin ack_pulses++; check(acks.size() > 0 && ack_seq == acks.pop_front(), "acknowledgement passed on"); end
  end

  task automatic word(input logic [63:0] d, input bit last);
    in_valid = 1; in_data = d; in_last = last;
    @(posedge clk); #1;
    in_valid = 0;
    if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
  endtask

  initial begin
    int eseq;
    in_valid = 0; in_last = 0; in_data = '0;
    for (int c = 0; c < NCH; c++) begin space[c] = RX_DEPTH; sent[c] = 0; got[c] = 0; pops[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    eseq = 0;
    for (int f = 0; f < NFRAMES; f++) begin
      frame_hdr_t h;
      int c, n, kind, pad;
      c = $urandom_range(0, NCH - 1);
      kind = $urandom_range(0, 19);   // 0: wrong number, 1: wrong magic, 2: header only
      n = (space[c] > 0 && kind != 2) ? $urandom_range(1, space[c]) : 0;
      pad = $urandom_range(0, 2);
      h = '0;
      h.magic = (kind == 1) ? 8'h5A : FRAME_MAGIC;
      h.len = 8'(n); h.data_ch = 8'(c); h.seq_valid = 1'b1;
      h.seq = (kind == 0) ? 8'(eseq + 3) : 8'(eseq);
      h.credit_valid = ($urandom_range(0, 1) == 1);
      h.credit_ch = 8'($urandom_range(0, 7)); h.credit_cnt = 8'($urandom_range(1, 9));
      h.ack = 8'($urandom);
      check(exp_seq == 8'(eseq), "expected number");
      if (kind > 1) begin
        eseq++;
        if (h.credit_valid) exp_credit_pulses++;
        space[c] -= n;
      end
      if (kind == 0) exp_seq_errs++;
      if (kind == 1) exp_bad++;
      if (kind != 1) acks.push_back(h.ack);
      word(64'(h), n == 0 && pad == 0);
      for (int i = 0; i < n; i++) begin
        word({8'hC0 | 8'(c), 56'(sent[c] + i)}, i == n - 1 && pad == 0);
      end
      if (kind > 1) sent[c] += n;
      for (int i = 0; i < pad; i++) word(64'hDEAD_0000 + 64'(i), i == pad - 1);
      // credit returns of the good frame must appear one cycle after its header
    end
    repeat (50) @(posedge clk);
    for (int c = 0; c < NCH; c++) begin
      check(got[c] == sent[c], $sformatf("ch %0d delivered %0d of %0d", c, got[c], sent[c]));
      check(pops[c] == got[c], "pops");
    end
    check(seq_errs == exp_seq_errs && exp_seq_errs > 0, $sformatf("seq errors %0d/%0d", seq_errs, exp_seq_errs));
    check(bad_frames == exp_bad && exp_bad > 0, $sformatf("bad frames %0d/%0d", bad_frames, exp_bad));
    check(credit_pulses == exp_credit_pulses, $sformatf("credit pulses %0d/%0d", credit_pulses, exp_credit_pulses));
    check(!overflow, "no overflow");
    check(ack_pulses == NFRAMES - exp_bad, "one acknowledgement per good header");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
