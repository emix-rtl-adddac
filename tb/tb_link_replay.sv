// tb_link_replay -- go-back-N retransmission over a lossy channel model.
// A source offers 300 numbered frames (frame id in the header's credit fields and in every
// flit). The channel model behind the block loses about one frame in eight; its receiver
// accepts only the next expected frame number and sends a cumulative acknowledgement back
// after a fixed delay. Checked: every frame arrives exactly once and in order with intact
// contents, lost frames are repeated after the timeout (retx), outgoing headers carry the
// acknowledgement number given on rx_exp_seq, header-only acknowledgement frames are sent
// when that number changes with nothing else to send, and no more than 15 frames are ever
// unacknowledged.
module tb_link_replay;
  import emix_pkg::*;
  localparam int NF = 300, TIMEOUT = 200, ACK_DELAY = 12;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last, ack_valid, retx;
  logic [63:0] in_data, out_data;
  logic [7:0] ack_seq, rx_exp_seq, inflight;

  link_replay #(.BUF_LOG2(6), .WIN_LOG2(4), .TIMEOUT(TIMEOUT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- source ----------------
  int src_frame = 0, src_word = 0;
  int flen [NF];
  function automatic logic [63:0] src_word_data(int f, int w);
    frame_hdr_t h;
    if (w == 0) begin
      h = '0; h.magic = FRAME_MAGIC; h.len = 8'(flen[f]); h.credit_valid = 1'b1;
      h.credit_ch = 8'(f >> 8); h.credit_cnt = 8'(f); h.seq = 8'hFF;   // seq is replaced
      return 64'(h);
    end
    return {16'hF117, 16'(f), 32'(w)};
  endfunction

  always @(posedge clk) begin
    bit fire;
    fire = in_valid && in_ready;
    #1;
    if (fire) begin
      if (src_word == flen[src_frame]) begin src_frame++; src_word = 0; end
      else src_word++;
    end
    in_valid = (src_frame < NF) && ($urandom_range(0, 3) != 0);
    in_data  = (src_frame < NF) ? src_word_data(src_frame, src_word) : '0;
    in_last  = (src_frame < NF) && (src_word == flen[src_frame]);
    out_ready = ($urandom_range(0, 5) != 0);
  end

  // ---------------- lossy channel and far receiver ----------------
  int rx_exp = 0, next_id = 0, words_left = 0, cur_id = 0, widx = 0;
  bit in_frame = 0, lose = 0, take = 0, hdr_only_frame = 0;
  int lost = 0, dups = 0, ack_frames = 0, retx_count = 0, max_inflight = 0;
  int ack_pipe [ACK_DELAY];
  bit ack_pipe_v [ACK_DELAY];

  always @(posedge clk) if (rst_n) begin
    if (retx) retx_count++;
    if (int'(inflight) > max_inflight) max_inflight = inflight;
    // acknowledgement delay line
    ack_valid <= ack_pipe_v[0];
    ack_seq   <= 8'(ack_pipe[0]);
    for (int i = 0; i < ACK_DELAY - 1; i++) begin
      ack_pipe[i] = ack_pipe[i + 1]; ack_pipe_v[i] = ack_pipe_v[i + 1];
    end
    ack_pipe_v[ACK_DELAY - 1] = 0;
    if (out_valid && out_ready) begin
      if (!in_frame) begin
        frame_hdr_t h;
        h = frame_hdr_t'(out_data);
        check(h.magic == FRAME_MAGIC, "magic");
        check(h.ack == rx_exp_seq, "acknowledgement stamped on header");
        lose = ($urandom_range(0, 7) == 0);
        if (!h.seq_valid) begin
          ack_frames++;
          check(h.len == 0 && out_last, "acknowledgement frame is header only");
          take = 0;
        end else if (lose) begin
          lost++; take = 0;
        end else if (int'(h.seq) == rx_exp % 256) begin
          take = 1;
          cur_id = {h.credit_ch, h.credit_cnt};
          check(cur_id == next_id, $sformatf("frame order: got %0d want %0d", cur_id, next_id));
          check(int'(h.len) == flen[cur_id % NF], "frame length");
          rx_exp++;
          next_id++;
          ack_pipe[ACK_DELAY - 1] = rx_exp % 256; ack_pipe_v[ACK_DELAY - 1] = 1;
        end else begin
          dups++; take = 0;
          ack_pipe[ACK_DELAY - 1] = rx_exp % 256; ack_pipe_v[ACK_DELAY - 1] = 1;
        end
        widx = 1;
        in_frame = !out_last;
      end else begin
        if (take) check(out_data == {16'hF117, 16'(cur_id), 32'(widx)}, "flit contents");
        widx++;
        in_frame = !out_last;
      end
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; ack_valid = 0; ack_seq = 0; rx_exp_seq = 0;
    for (int i = 0; i < ACK_DELAY; i++) begin ack_pipe[i] = 0; ack_pipe_v[i] = 0; end
    for (int f = 0; f < NF; f++) flen[f] = $urandom_range(0, 4);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the local receiver's expected number changes from time to time
    while (next_id < NF) begin
      repeat ($urandom_range(100, 400)) @(posedge clk);
      #2 rx_exp_seq = rx_exp_seq + 8'd1;
    end
    repeat (300) @(posedge clk);
    check(next_id == NF, "all frames delivered once, in order");
    check(lost > 0 && retx_count > 0, $sformatf("losses %0d repaired by %0d retransmissions", lost, retx_count));
    check(ack_frames > 0, "acknowledgement-only frames sent");
    check(max_inflight <= 15, "window respected");
    check(inflight == 0, "everything acknowledged at the end");
    $display("lost=%0d dups=%0d retx=%0d ackframes=%0d", lost, dups, retx_count, ack_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
