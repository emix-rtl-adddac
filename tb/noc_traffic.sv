// noc_traffic -- test traffic for the NoC channels of one partition edge.
// Source: every channel offers NFLITS flits {SRC_ID, channel, index} with random valid.
// Sink: every channel accepts flits with random ready (held low while `hold` is high) and
// checks that they come from PEER_ID on the same channel with consecutive indices.
// `done` rises when every flit has been sent and every expected flit received; `errors`
// counts flits that were wrong. Inputs are sampled at the clock edge, outputs change 1 ns
// after it.
module noc_traffic #(
  parameter int NCH       = 4,
  parameter int NFLITS    = 100,
  parameter int SRC_ID    = 1,
  parameter int PEER_ID   = 2,
  parameter int VALID_PCT = 70,
  parameter int READY_PCT = 70
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 hold,
  output logic [NCH-1:0]       out_valid,
  input  logic [NCH-1:0]       out_ready,
  output logic [NCH-1:0][63:0] out_data,
  input  logic [NCH-1:0]       in_valid,
  output logic [NCH-1:0]       in_ready,
  input  logic [NCH-1:0][63:0] in_data,
  output logic                 done,
  output int                   errors,
  output int                   received
);
  int sent [NCH];
  int got  [NCH];

  initial begin
    for (int c = 0; c < NCH; c++) begin sent[c] = 0; got[c] = 0; end
    errors = 0; received = 0; done = 0;
    out_valid = '0; out_data = '0; in_ready = '0;
  end

  always @(posedge clk) if (rst_n) begin
    bit all;
    all = 1;
    for (int c = 0; c < NCH; c++) begin
      if (out_valid[c] && out_ready[c]) sent[c]++;
      if (in_valid[c] && in_ready[c]) begin
        if (in_data[c] != {8'(PEER_ID), 8'(c), 48'(got[c])}) begin
          errors++;
          if (errors < 5) $display("noc_traffic %0d: ch %0d got %h want index %0d", SRC_ID, c, in_data[c], got[c]);
        end
        got[c]++;
        received++;
      end
      if (sent[c] < NFLITS || got[c] < NFLITS) all = 0;
    end
    #1;
    done = all;
    for (int c = 0; c < NCH; c++) begin
      out_valid[c] = (sent[c] < NFLITS) && ($urandom_range(0, 99) < VALID_PCT);
      out_data[c]  = {8'(SRC_ID), 8'(c), 48'(sent[c])};
      in_ready[c]  = !hold && ($urandom_range(0, 99) < READY_PCT);
    end
  end
endmodule
