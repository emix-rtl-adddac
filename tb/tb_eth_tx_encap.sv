// tb_eth_tx_encap -- Ethernet wrapping and 512-bit packing of frames of 1 to 20 words.
// Each beat leaving the block is unpacked byte by byte (tkeep) with a random tready; a frame
// ends at tlast. Checked against the frame that went in: destination and source MAC in bytes
// 0-11, EtherType 0x88B5, two zero bytes, the frame words in order, zero padding up to 64
// bytes for short frames and no padding for long ones, contiguous tkeep, tuser low.
module tb_eth_tx_encap;
  import emix_pkg::*;
  localparam int NF = 200;
  localparam logic [47:0] SRC = 48'h02_00_00_00_00_07, DST = 48'h02_00_00_00_00_08;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_last, tx_tvalid, tx_tready, tx_tlast, tx_tuser;
  logic [63:0] in_data;
  logic [CMAC_W-1:0] tx_tdata;
  logic [CMAC_W/8-1:0] tx_tkeep;

  eth_tx_encap dut (.clk, .rst_n, .src_mac(SRC), .dst_mac(DST), .*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int flen [NF];
  int src_frame = 0, src_word = 0, rx_frame = 0, padded = 0;
  byte unsigned bytes [$];

  always @(posedge clk) begin
    bit fire;
    fire = in_valid && in_ready;
    #1;
    if (fire) begin
      if (src_word == flen[src_frame] - 1) begin src_frame++; src_word = 0; end
      else src_word++;
    end
    in_valid  = (src_frame < NF) && ($urandom_range(0, 4) != 0);
    in_data   = {16'(src_frame), 48'(src_word) * 48'h10001};
    in_last   = (src_frame < NF) && (src_word == flen[src_frame] - 1);
    tx_tready = ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n && tx_tvalid && tx_tready) begin
    bit seen_gap;
    seen_gap = 0;
    check(!tx_tuser, "tuser low");
    for (int i = 0; i < CMAC_W / 8; i++) begin
      if (tx_tkeep[i]) begin
        check(!seen_gap, "tkeep contiguous");
        bytes.push_back(tx_tdata[8*i +: 8]);
      end else seen_gap = 1;
    end
    if (tx_tlast) begin
      int n, total;
      n = flen[rx_frame];
      total = 16 + 8 * n;
      if (total < 64) begin total = 64; padded++; end
      check(bytes.size() == total, $sformatf("frame %0d length %0d want %0d", rx_frame, bytes.size(), total));
      for (int i = 0; i < 6; i++) begin
        check(bytes[i] == DST[8*(5-i) +: 8], "destination MAC");
        check(bytes[6+i] == SRC[8*(5-i) +: 8], "source MAC");
      end
      check(bytes[12] == 8'h88 && bytes[13] == 8'hB5 && bytes[14] == 0 && bytes[15] == 0, "EtherType and pad");
      for (int w = 0; w < n; w++) begin
        logic [63:0] exp_w, got_w;
        exp_w = {16'(rx_frame), 48'(w) * 48'h10001};
        for (int b = 0; b < 8; b++) got_w[8*b +: 8] = bytes[16 + 8*w + b];
        check(got_w == exp_w, "payload word");
      end
      for (int i = 16 + 8 * n; i < bytes.size(); i++) check(bytes[i] == 0, "zero padding");
      bytes.delete();
      rx_frame++;
    end
  end

  initial begin
    in_valid = 0; tx_tready = 0;
    for (int f = 0; f < NF; f++) flen[f] = $urandom_range(1, 20);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rx_frame == NF);
    repeat (5) @(posedge clk);
    check(padded > 0 && padded < NF, "both short and long frames");
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
