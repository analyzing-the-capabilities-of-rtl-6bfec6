// dsp48_lite: the part of an UltraScale+ DSP48E2 slice that the word units use.
//
// Datapath (all registers share one clock enable and a synchronous reset):
//   a, b, c  --AB_REGS input registers-->  (A1/A2, B1/B2, C1 and fabric delay)
//   USE_MULT=1:  M <= a[26:0] * b            (M register)
//                P <= M + C + Z + cin        (P register)
//   USE_MULT=0:  P <= {a, b} + C + Z + cin   (A:B concatenation, no M stage)
// where Z is 0, PCIN or PCIN >> 17 (ZSEL = 0, 1, 2) and cin is the slice's own
// registered carry-out of the previous cycle when CARRY_FB = 1 (CARRYINSEL =
// 3'b100, carry cascade fed back), otherwise 0.
// Latency from a/b/c to p: AB_REGS + 2 with the multiplier, AB_REGS + 1
// without. PCIN enters at the P adder, so a slice whose inputs are delayed by
// one more register than its predecessor lines up with the predecessor's P.
//
// The slice function, its register names and the 17-bit cascade shift follow
// the DSP48E2 description (27x18 multiplier, 48-bit adder, >>17 on PCIN). The
// operands here are unsigned limbs of at most 17 bits, so the signed
// multiplier of the real slice is written as an unsigned product of the low
// 27 x 18 bits. Modelling input delays as one parameter instead of separate
// A1/A2/B1/B2 enables, and leaving out the pre-adder, SIMD and logic modes, is
// this design's simplification. pcout is the P register, as on the real slice.
module dsp48_lite #(
  parameter int unsigned AB_REGS  = 1,
  parameter bit          USE_MULT = 1'b1,
  parameter int unsigned ZSEL     = 0,
  parameter bit          CARRY_FB = 1'b0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        ce,
  input  logic [29:0] a,
  input  logic [17:0] b,
  input  logic [47:0] c,
  input  logic [47:0] pcin,
  output logic [47:0] p,
  output logic [47:0] pcout,
  output logic        carryout
);

  logic [29:0] a_q [AB_REGS];
  logic [17:0] b_q [AB_REGS];
  logic [47:0] c_q [AB_REGS];
  logic [47:0] m_q;     // multiplier register (USE_MULT)
  logic [47:0] c_m_q;   // C aligned with M (USE_MULT)
  logic [47:0] z;
  logic [47:0] x_y;     // multiplier or A:B term
  logic [47:0] c_at_p;
  logic [48:0] sum;

  // Input delay line
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < AB_REGS; k++) begin
        a_q[k] <= '0;
        b_q[k] <= '0;
        c_q[k] <= '0;
      end
    end else if (ce) begin
      a_q[0] <= a;
      b_q[0] <= b;
      c_q[0] <= c;
      for (int k = 1; k < AB_REGS; k++) begin
        a_q[k] <= a_q[k-1];
        b_q[k] <= b_q[k-1];
        c_q[k] <= c_q[k-1];
      end
    end
  end

  // Multiplier stage
  always_ff @(posedge clk) begin
    if (rst) begin
      m_q   <= '0;
      c_m_q <= '0;
    end else if (ce) begin
      m_q   <= USE_MULT ? 48'(a_q[AB_REGS-1][26:0] * b_q[AB_REGS-1]) : '0;
      c_m_q <= c_q[AB_REGS-1];
    end
  end

  always_comb begin
    unique case (ZSEL)
      1:       z = pcin;
      2:       z = pcin >> 17;
      default: z = '0;
    endcase
    if (USE_MULT) begin
      x_y    = m_q;
      c_at_p = c_m_q;
    end else begin
      x_y    = {a_q[AB_REGS-1], b_q[AB_REGS-1]};
      c_at_p = c_q[AB_REGS-1];
    end
    sum = {1'b0, x_y} + {1'b0, c_at_p} + {1'b0, z} + 49'(CARRY_FB & carryout);
  end

  // Output (P) register and carry cascade register
  always_ff @(posedge clk) begin
    if (rst) begin
      p        <= '0;
      carryout <= 1'b0;
    end else if (ce) begin
      p        <= sum[47:0];
      carryout <= sum[48];
    end
  end

  assign pcout = p;

endmodule
