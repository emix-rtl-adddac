// tb_noc_link_tx -- the frame builder against a model of the far receiver.
// Four channels send numbered flits. The testbench parses every frame leaving the block and
// checks: magic byte, burst length within MAX_BURST and within the credits the model holds,
// consecutive frame numbers, `last` on the final word, and that each channel's flits arrive
// complete and in order. Phase 1 returns no credits: each channel must stop after exactly
// RX_DEPTH flits with credit_stall raised. Phase 2 returns credits and everything must drain.
// Local deliveries (rx_pop) must come back as credit returns in headers, exactly once, with
// header-only frames carrying them when there is no data.
module tb_noc_link_tx;
  import emix_pkg::*;
  localparam int NCH = 4, TX_DEPTH = 4, RX_DEPTH = 6, MAX_BURST = 3, NFLITS = 60;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic [NCH-1:0] noc_valid, noc_ready, rx_pop;
  logic [NCH-1:0][NOC_W-1:0] noc_data;
  logic credit_in_valid;
  logic [7:0] credit_in_ch, credit_in_cnt;
  logic out_valid, out_ready, out_last, credit_stall;
  logic [63:0] out_data;

  noc_link_tx #(.NCH(NCH), .TX_DEPTH(TX_DEPTH), .RX_DEPTH(RX_DEPTH), .MAX_BURST(MAX_BURST)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int sent_idx [NCH];      // next flit number a source offers
  int recv_idx [NCH];      // next flit number expected at the output
  int credits  [NCH];      // model of the far receiver's free space
  int owed     [NCH];      // credits the far side still has to return
  int pops     [NCH];      // local deliveries signalled
  int returned [NCH];      // credit returns seen in headers
  int stall_cycles = 0, hdr_only = 0, frames = 0;
  bit give_credits = 0, pops_on = 1;
  int phase1_end_ok = 0;

  // sources and local deliveries, driven 1 ns after the edge
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < NCH; c++) begin
      noc_valid[c] <= (sent_idx[c] < NFLITS) && ($urandom_range(0, 3) != 0);
      noc_data[c]  <= {8'(c), 56'(sent_idx[c])};
    end
    out_ready <= ($urandom_range(0, 4) != 0);
    rx_pop    <= (rst_n && pops_on && $urandom_range(0, 5) == 0) ? NCH'($urandom) : '0;
    credit_in_valid <= 1'b0;
    if (give_credits) begin
      int c;
      c = $urandom_range(0, NCH - 1);
      if (owed[c] > 0) begin
        int n;
        n = $urandom_range(1, owed[c]);
        credit_in_valid <= 1'b1;
        credit_in_ch    <= 8'(c);
        credit_in_cnt   <= 8'(n);
        owed[c]    -= n;
        credits[c] += n;
      end
    end
  end

  // frame parser, sampled at the clock edge
  int remaining = 0, cur = 0;
  int exp_seq = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      if (noc_valid[c] && noc_ready[c]) sent_idx[c]++;
      if (rx_pop[c]) pops[c]++;
    end
    if (credit_stall) stall_cycles++;
    if (out_valid && out_ready) begin
      if (remaining == 0) begin
        frame_hdr_t h;
        h = frame_hdr_t'(out_data);
        frames++;
        check(h.magic == FRAME_MAGIC, "magic");
        check(h.seq_valid && int'(h.seq) == exp_seq % 256, "frame number");
        exp_seq++;
        check(h.len <= MAX_BURST, "burst length");
        if (h.len != 0) begin
          check(int'(h.data_ch) < NCH, "channel");
          check(int'(h.len) <= credits[h.data_ch], "burst within credits");
          credits[h.data_ch] -= h.len;
          owed[h.data_ch]    += h.len;
        end else begin
          hdr_only++;
          check(h.credit_valid, "header-only frame returns credits");
        end
        if (h.credit_valid) returned[h.credit_ch] += h.credit_cnt;
        check(out_last == (h.len == 0), "last on header-only frame");
        remaining = h.len;
        cur = h.data_ch;
      end else begin
        check(out_data == {8'(cur), 56'(recv_idx[cur])}, "flit order");
        recv_idx[cur]++;
        remaining--;
        check(out_last == (remaining == 0), "last on final flit");
      end
    end
  end

  initial begin
    noc_valid = '0; out_ready = 0; rx_pop = '0; credit_in_valid = 0;
    for (int c = 0; c < NCH; c++) begin
      sent_idx[c] = 0; recv_idx[c] = 0; credits[c] = RX_DEPTH; owed[c] = 0; pops[c] = 0; returned[c] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: no credits come back
    repeat (300) @(posedge clk);
    for (int c = 0; c < NCH; c++) check(recv_idx[c] == RX_DEPTH, $sformatf("ch %0d stopped at RX_DEPTH", c));
    check(stall_cycles > 0, "credit stall seen");
    // phase 2: credits come back
    give_credits = 1;
    repeat (2800) @(posedge clk);
    pops_on = 0;
    repeat (200) @(posedge clk);
    for (int c = 0; c < NCH; c++) begin
      check(recv_idx[c] == NFLITS, $sformatf("ch %0d drained", c));
      check(returned[c] == pops[c], $sformatf("ch %0d credit returns %0d of %0d", c, returned[c], pops[c]));
    end
    check(hdr_only > 0, "header-only credit frames seen");
    check(remaining == 0, "ended between frames");
    $display("frames=%0d header_only=%0d stall_cycles=%0d", frames, hdr_only, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
