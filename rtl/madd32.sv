// madd32: MADD_32, a pipelined 32-bit multiply-and-add, p = a * b + c.
//
// The 32-bit operands are cut into 17-bit limbs a = a1:a0, b = b1:b0
// (a0 = a[16:0], a1 = a[31:17], likewise b) and the four partial products
// are summed along a cascade of four DSP slices:
//   DSP0: P0 = a0*b0 + c            -> p[16:0]  = P0[16:0]
//   DSP1: P1 = a0*b1 + (P0 >> 17)
//   DSP2: P2 = a1*b0 + P1           -> p[33:17] = P2[16:0]
//   DSP3: P3 = a1*b1 + (P2 >> 17)   -> p[63:34] = P3[29:0]
// Each slice's inputs pass one register more than its predecessor's, so the
// cascade lines up; the low result slices are delayed in fabric registers
// (three for P0, one for P2) to leave together with P3.
//
// Timing: fully pipelined, one new (a, b, c) per enabled clock, result valid
// LATENCY = 6 enabled clocks after the inputs are sampled. With c = 0 the unit
// is the MUL_32 multiplier; the third operand goes into the C port of the
// first slice, as the paper does for the 24/32-bit word sizes. The limb split,
// slice order, shifts, output registers and latency follow the paper; the
// reset and clock enable are this design's additions.
module madd32
  import mmm_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   ce,
  input  word_t  a,
  input  word_t  b,
  input  word_t  c,
  output dword_t p
);


  logic [47:0] p0, p1, p2, p3;
  logic [47:0] pc0, pc1, pc2, pc3;
  logic        co0, co1, co2, co3;
  logic [16:0] lo_q [3];   // P0[16:0] delay line
  logic [16:0] mid_q;      // P2[16:0] register

  dsp48_lite #(.AB_REGS(1), .USE_MULT(1'b1), .ZSEL(0)) u_dsp0 (
    .clk, .rst, .ce,
    .a({13'd0, a[16:0]}), .b({1'b0, b[16:0]}), .c({16'd0, c}),
    .pcin('0), .p(p0), .pcout(pc0), .carryout(co0)
  );

  dsp48_lite #(.AB_REGS(2), .USE_MULT(1'b1), .ZSEL(2)) u_dsp1 (
    .clk, .rst, .ce,
    .a({13'd0, a[16:0]}), .b({3'd0, b[31:17]}), .c('0),
    .pcin(pc0), .p(p1), .pcout(pc1), .carryout(co1)
  );

  dsp48_lite #(.AB_REGS(3), .USE_MULT(1'b1), .ZSEL(1)) u_dsp2 (
    .clk, .rst, .ce,
    .a({15'd0, a[31:17]}), .b({1'b0, b[16:0]}), .c('0),
    .pcin(pc1), .p(p2), .pcout(pc2), .carryout(co2)
  );

  dsp48_lite #(.AB_REGS(4), .USE_MULT(1'b1), .ZSEL(2)) u_dsp3 (
    .clk, .rst, .ce,
    .a({15'd0, a[31:17]}), .b({3'd0, b[31:17]}), .c('0),
    .pcin(pc2), .p(p3), .pcout(pc3), .carryout(co3)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      lo_q  <= '{default: '0};
      mid_q <= '0;
    end else if (ce) begin
      lo_q[0] <= p0[16:0];
      lo_q[1] <= lo_q[0];
      lo_q[2] <= lo_q[1];
      mid_q   <= p2[16:0];
    end
  end

  assign p = {p3[29:0], mid_q, lo_q[2]};

endmodule
