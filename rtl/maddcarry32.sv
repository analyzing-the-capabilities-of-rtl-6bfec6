// maddcarry32: MADDCARRY_32, (carry, p) = a * b + c + carry, carry kept inside.
//
// A MADD_32 unit computes the 64-bit q = a*b + c. One more DSP slice, in A:B
// concatenation mode, adds the low half of q to the high half of the previous
// q, which waits one cycle in register S:
//   A:B = {q[31:0], 16'h0000},  C = {S, 16'hFFFF},  p = P[47:16]
// The slice's carry-out is fed back as its own carry-in on the next cycle.
// The 16 ones in the low bits of C turn a carry-in at bit 0 into a carry into
// bit 16, so each output word is q_lo(n) + q_hi(n-1) + carry-out(n-1): the
// running carry of the CIOS inner loop is held as S plus one bit.
//
// Use: one (a, b, c) per cycle with start high; p is the word of the same
// position LATENCY = 8 cycles later, flagged by done (the delayed start).
// Pushing a = b = c = 0 returns the pending carry word and clears both S and
// the carry bit, which readies the unit for the next inner loop. The slice
// arrangement, the {..,16'h0}/{..,16'hFFFF} operand packing, the carry
// feedback and the latency are taken from the paper; the start/done delay
// line, reset and clock enable are this design's.
module maddcarry32
  import mmm_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  ce,
  input  logic  start,   // m_start: inputs valid this cycle
  input  word_t a,
  input  word_t b,
  input  word_t c,
  output word_t p,
  output logic  done     // m_done: p valid this cycle
);

  localparam int unsigned LATENCY = MC_LATENCY;

  dword_t      q;
  word_t       s_q;
  logic [47:0] p_dsp, pc_dsp;
  logic        co_dsp;
  logic [LATENCY-1:0] vld_q;

  madd32 u_madd (.clk, .rst, .ce, .a, .b, .c, .p(q));

  always_ff @(posedge clk) begin
    if (rst)     s_q <= '0;
    else if (ce) s_q <= q[2*W-1:W];
  end

  dsp48_lite #(.AB_REGS(1), .USE_MULT(1'b0), .ZSEL(0), .CARRY_FB(1'b1)) u_dsp_carry (
    .clk, .rst, .ce,
    .a(q[31:2]), .b({q[1:0], 16'h0000}), .c({s_q, 16'hFFFF}),
    .pcin('0), .p(p_dsp), .pcout(pc_dsp), .carryout(co_dsp)
  );

  assign p = p_dsp[47:16];

  always_ff @(posedge clk) begin
    if (rst)     vld_q <= '0;
    else if (ce) vld_q <= {vld_q[LATENCY-2:0], start};
  end

  assign done = vld_q[LATENCY-1];

endmodule
