// axis_async_fifo -- clock-domain-crossing FIFO for an AXI-Stream style valid/ready stream.
//
// Crosses words from the NoC clock to a link clock (Aurora or CMAC user clock) and back.
// Write and read pointers are kept in binary in their own domain and passed to the other
// domain in Gray code through two-flop synchronisers, so full and empty are judged on a
// pointer that changes one bit at a time. Full/empty are pessimistic by the synchroniser delay
// (about three cycles of the observing clock), never optimistic. Capacity is 2**DEPTH_LOG2
// words; out_data is valid in the same cycle as out_valid (first word falls through).
// `overflow` is a sticky flag, set when a word is offered on a full FIFO whose writer cannot
// wait (s_valid while !s_ready with MUST_ACCEPT set): used on receive paths fed by a link that
// has no back-pressure. Each side has its own active-low reset; both must be asserted together.
// The paper uses the vendor's AXI-Stream clock converter for this; this is a plain Gray-code
// implementation of the same function.
module axis_async_fifo #(
  parameter int unsigned W           = 65,
  parameter int unsigned DEPTH_LOG2  = 4,
  parameter bit          MUST_ACCEPT = 1'b0
) (
  input  logic         s_clk,
  input  logic         s_rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  output logic         overflow,

  input  logic         m_clk,
  input  logic         m_rst_n,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data
);
  localparam int unsigned DEPTH = 1 << DEPTH_LOG2;
  localparam int unsigned PW    = DEPTH_LOG2 + 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wbin, wgray, rbin, rgray;
  logic [PW-1:0] rgray_s1, rgray_s2;   // read pointer seen by the write side
  logic [PW-1:0] wgray_s1, wgray_s2;   // write pointer seen by the read side

  function automatic logic [PW-1:0] bin2gray(input logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  assign s_ready = (wgray != {~rgray_s2[PW-1:PW-2], rgray_s2[PW-3:0]});

  always_ff @(posedge s_clk) begin
    if (s_valid && s_ready) mem[wbin[DEPTH_LOG2-1:0]] <= s_data;
  end

  always_ff @(posedge s_clk or negedge s_rst_n) begin
    if (!s_rst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
      overflow <= 1'b0;
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      if (s_valid && s_ready) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
      if (MUST_ACCEPT && s_valid && !s_ready) overflow <= 1'b1;
    end
  end

  // ---------------- read side ----------------
  assign m_valid = (rgray != wgray_s2);
  assign m_data  = mem[rbin[DEPTH_LOG2-1:0]];

  always_ff @(posedge m_clk or negedge m_rst_n) begin
    if (!m_rst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
      if (m_valid && m_ready) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

endmodule
