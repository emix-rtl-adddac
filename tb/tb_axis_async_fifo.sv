// tb_axis_async_fifo -- words cross from a 10 ns clock to a 3.1 ns clock and back through two
// FIFOs with random valid/ready; every word must arrive once, in order. Also checks that the
// FIFO fills (back-pressure) and that a write into a full MUST_ACCEPT FIFO sets `overflow`.
module tb_axis_async_fifo;
  localparam int W = 20;
  logic sclk = 0, mclk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  logic s_valid, s_ready, m_valid, m_ready, ovf;
  logic [W-1:0] s_data, m_data;
  logic b_valid, b_ready, b_ovf, mb_valid, mb_ready;
  logic [W-1:0] mb_data;
  int checks = 0, failures = 0, sent = 0, got = 0, full_seen = 0;
  logic [W-1:0] model [$];

  always #5    sclk = ~sclk;
  always #1.55 mclk = ~mclk;

  axis_async_fifo #(.W(W), .DEPTH_LOG2(3)) dut (
    .s_clk(sclk), .s_rst_n(rst_n), .s_valid, .s_ready, .s_data, .overflow(ovf),
    .m_clk(mclk), .m_rst_n(rst_n), .m_valid, .m_ready, .m_data);

  // second FIFO that must accept: written from the fast clock, read slowly
  axis_async_fifo #(.W(W), .DEPTH_LOG2(2), .MUST_ACCEPT(1'b1)) dut2 (
    .s_clk(mclk), .s_rst_n(rst_n), .s_valid(b_valid), .s_ready(b_ready), .s_data('0), .overflow(b_ovf),
    .m_clk(sclk), .m_rst_n(rst_n), .m_valid(mb_valid), .m_ready(mb_ready), .m_data(mb_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // writer
  initial begin
    s_valid = 0; s_data = '0;
    repeat (4) @(posedge sclk);
    rst_n = 1;
    repeat (3) @(posedge sclk);
    #1;   // inputs change 1 ns after the clock edge
    while (sent < 2000) begin
      bit fire;
      s_valid = ($urandom_range(0, 3) != 0);
      s_data  = W'(sent);
      #1;
      fire = s_valid && s_ready;
      if (!s_ready) full_seen++;
      @(posedge sclk);
      #1;
      if (fire) begin model.push_back(s_data); sent++; end
    end
    s_valid <= 0;
  end

  // reader: slow at times so the FIFO fills
  always @(posedge mclk) begin
    if (rst_n && m_valid && m_ready) begin   // sampled at the edge, before the FIFO moves
      check(model.size() > 0 && m_data == model[0], "order across clocks");
      if (model.size() > 0) void'(model.pop_front());
      got++;
    end
    m_ready <= ($urandom_range(0, 9) < ((got / 200) % 2 == 0 ? 1 : 9));
  end

  initial begin
    b_valid = 0; mb_ready = 0;
    wait (rst_n);
    repeat (10) @(posedge mclk);
    check(!b_ovf, "no overflow before writing");
    b_valid <= 1'b1;
    repeat (12) @(posedge mclk);   // 12 writes into 4 places, reader stopped
    b_valid <= 1'b0;
    repeat (2) @(posedge mclk);
    check(b_ovf, "overflow flagged on a full must-accept FIFO");
    check(!ovf, "no overflow on the back-pressured FIFO");
    wait (got == 2000);
    repeat (20) @(posedge mclk);
    check(got == 2000 && model.size() == 0, "all words crossed");
    check(full_seen > 0, "back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge sclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
