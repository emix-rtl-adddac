// tb_emix_pkg -- checks the shared frame header layout and the Ethernet header helpers.
// The header must be exactly one 64-bit word with the magic byte on top; the Ethernet header
// words must put the destination MAC first on the wire (byte 0 = bits 7:0), then the source
// MAC, then the EtherType at bytes 12-13. Expected values are written out byte by byte here.
module tb_emix_pkg;
  import emix_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    frame_hdr_t h;
    logic [63:0] w0, w1, x;
    logic [47:0] dst, src;
    byte unsigned b [16];
    check($bits(frame_hdr_t) == 64, "header is one word");
    h = '0; h.magic = 8'hE7; h.len = 8'd3; h.data_ch = 8'd17; h.credit_valid = 1'b1;
    h.seq_valid = 1'b1; h.credit_ch = 8'd5; h.credit_cnt = 8'd2; h.seq = 8'h44; h.ack = 8'h21;
    x = 64'(h);
    check(x[63:56] == 8'hE7 && x[55:48] == 8'd3 && x[47:40] == 8'd17, "header top fields");
    check(x[39] == 1'b1 && x[38] == 1'b1 && x[31:24] == 8'd5 && x[23:16] == 8'd2, "credit fields");
    check(x[15:8] == 8'h44 && x[7:0] == 8'h21, "seq/ack fields");
    check(bswap64(64'h0102030405060708) == 64'h0807060504030201, "bswap64");
    check(FRAME_MAGIC == 8'hE7 && ETHERTYPE == 16'h88B5, "constants");
    check(NOC_W == 64 && NUM_NOCS == 3 && CMAC_W == 512 && CMAC_WORDS == 8, "sizes");
    dst = 48'hA1A2A3A4A5A6; src = 48'hB1B2B3B4B5B6;
    w0 = eth_word0(dst, src); w1 = eth_word1(src);
    for (int i = 0; i < 8; i++) begin b[i] = w0[8*i +: 8]; b[8+i] = w1[8*i +: 8]; end
    check(b[0] == 8'hA1 && b[5] == 8'hA6, "destination MAC first");
    check(b[6] == 8'hB1 && b[11] == 8'hB6, "source MAC next");
    check(b[12] == 8'h88 && b[13] == 8'hB5, "EtherType at bytes 12-13");
    check(b[14] == 8'h00 && b[15] == 8'h00, "pad bytes");
    check(LINK_NONE != LINK_AURORA && LINK_AURORA != LINK_CMAC, "link kinds distinct");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
