// tb_eth_rx_decap -- Ethernet receive filtering and unpacking.
// The testbench builds Ethernet frames byte by byte, cuts them into 64-byte beats with tkeep
// and sends them without back-pressure, as the CMAC does. Phase 1 mixes good frames with
// frames that have a bad frame check sequence (tuser on the last beat), a foreign destination
// or source MAC, or a foreign EtherType: exactly the good frames' words (from byte 16 on,
// padding included) must come out, in order, with `last` on each frame's final word, and each
// bad frame must raise the matching drop pulse. Phase 2 stops the reader and sends six
// two-beat frames into the eight-beat buffer: four are kept, two dropped as full.
module tb_eth_rx_decap;
  import emix_pkg::*;
  localparam logic [47:0] ME = 48'h02_00_00_00_00_03, PEER = 48'h02_00_00_00_00_04;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic rx_tvalid, rx_tlast, rx_tuser, out_valid, out_ready, out_last, drop_fcs, drop_addr, drop_full;
  logic [CMAC_W-1:0] rx_tdata;
  logic [CMAC_W/8-1:0] rx_tkeep;
  logic [63:0] out_data;

  eth_rx_decap #(.BEATS_LOG2(3)) dut (.clk, .rst_n, .my_mac(ME), .peer_mac(PEER), .*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  logic [64:0] expq [$];    // {last, word}
  int n_fcs = 0, n_addr = 0, n_full = 0, e_fcs = 0, e_addr = 0, got_words = 0;
  bit ready_on = 1;

  always @(posedge clk) #1 out_ready = ready_on && ($urandom_range(0, 4) != 0);

  always @(posedge clk) if (rst_n) begin
    if (drop_fcs) n_fcs++;
    if (drop_addr) n_addr++;
    if (drop_full) n_full++;
    if (out_valid && out_ready) begin
      check(expq.size() > 0 && {out_last, out_data} == expq[0], "output word");
      if (expq.size() > 0) void'(expq.pop_front());
      got_words++;
    end
  end

  // kind: 0 good, 1 bad FCS, 2 wrong destination, 3 wrong source, 4 wrong EtherType
  task automatic send_frame(input int id, input int nwords, input int kind, input bit expect_out);
    byte unsigned b [$];
    logic [47:0] d, s;
    logic [15:0] et;
    d = (kind == 2) ? 48'h02_00_00_00_00_09 : ME;
    s = (kind == 3) ? 48'h02_00_00_00_00_0A : PEER;
    et = (kind == 4) ? 16'h0800 : ETHERTYPE;
    for (int i = 5; i >= 0; i--) b.push_back(d[8*i +: 8]);
    for (int i = 5; i >= 0; i--) b.push_back(s[8*i +: 8]);
    b.push_back(et[15:8]); b.push_back(et[7:0]); b.push_back(0); b.push_back(0);
    for (int w = 0; w < nwords; w++) begin
      logic [63:0] v;
      v = {16'hABCD, 16'(id), 32'(w)};
      for (int k = 0; k < 8; k++) b.push_back(v[8*k +: 8]);
    end
    while (b.size() < 64) b.push_back(0);
    if (kind == 0 && expect_out) begin
      int nw;
      nw = b.size() / 8;
      for (int w = 2; w < nw; w++) begin
        logic [63:0] v;
        for (int k = 0; k < 8; k++) v[8*k +: 8] = b[8*w + k];
        expq.push_back({w == nw - 1, v});
      end
    end
    if (kind == 1) e_fcs++;
    if (kind >= 2) e_addr++;
    for (int off = 0; off < b.size(); off += 64) begin
      rx_tvalid = 1; rx_tdata = '0; rx_tkeep = '0;
      for (int i = 0; i < 64 && off + i < b.size(); i++) begin
        rx_tdata[8*i +: 8] = b[off + i]; rx_tkeep[i] = 1'b1;
      end
      rx_tlast = (off + 64 >= b.size());
      rx_tuser = rx_tlast && (kind == 1);
      @(posedge clk); #1;
      rx_tvalid = 0;
    end
  endtask

  initial begin
    rx_tvalid = 0; rx_tlast = 0; rx_tuser = 0; rx_tdata = '0; rx_tkeep = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int f = 0; f < 150; f++) begin
      int kind;
      kind = ($urandom_range(0, 3) == 0) ? $urandom_range(1, 4) : 0;
      send_frame(f, $urandom_range(1, 14), kind, 1);
      repeat ($urandom_range(2, 12)) @(posedge clk);   // the reader keeps up
      #1;
    end
    wait (expq.size() == 0);
    repeat (5) @(posedge clk);
    check(n_fcs == e_fcs && e_fcs > 0, $sformatf("FCS drops %0d/%0d", n_fcs, e_fcs));
    check(n_addr == e_addr && e_addr > 0, $sformatf("address drops %0d/%0d", n_addr, e_addr));
    check(n_full == 0, "no full drops in phase 1");
    // phase 2: reader stopped, buffer of 8 beats, 2-beat frames
    ready_on = 0;
    repeat (2) @(posedge clk); #1;
    for (int f = 0; f < 6; f++) send_frame(1000 + f, 10, 0, f < 4);
    repeat (3) @(posedge clk);
    check(n_full == 2, $sformatf("full drops %0d", n_full));
    ready_on = 1;
    wait (expq.size() == 0);
    repeat (5) @(posedge clk);
    check(!out_valid, "nothing extra delivered");
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
