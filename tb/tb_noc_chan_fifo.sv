// tb_noc_chan_fifo -- random pushes and pops against a queue model: order of words, count,
// full and empty flags, and that a full buffer refuses a write.
module tb_noc_chan_fifo;
  localparam int W = 16, DEPTH = 5;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, full_seen = 0;
  logic [W-1:0] model [$];

  noc_chan_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;   // inputs change 1 ns after the clock edge
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // bias towards filling in the first half, draining in the second
      in_valid  = ($urandom_range(0, 99) < ((cyc % 400) < 200 ? 80 : 30));
      out_ready = ($urandom_range(0, 99) < ((cyc % 400) < 200 ? 30 : 80));
      in_data   = W'($urandom);
      #1;
      check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid && model.size() > 0) check(out_data == model[0], "data order");
      if (!in_ready) full_seen++;
      begin
        bit do_pop, do_push;
        do_pop  = out_valid && out_ready;
        do_push = in_valid && in_ready;
        @(posedge clk);
        #1;
        if (do_pop) void'(model.pop_front());
        if (do_push) model.push_back(in_data);
      end
    end
    check(full_seen > 0, "buffer filled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
