// tb_dsp48_lite: self-checking test of the DSP slice model.
// Three slices are driven with random values every cycle:
//   s0: multiplier, 1 input register   -> p = a*b + c, 3 cycles later
//   s1: multiplier, 2 input registers, pcin = s0.p >> 17 of the same
//       cycle's inputs (the cascade alignment)            -> 4 cycles later
//   s2: A:B + C with its carry-out fed back as carry-in -> 2 cycles later
// Expected values come from the input history kept in the testbench.
module tb_dsp48_lite;
  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  localparam int N = 400;

  logic [29:0] a0, a1, a2;
  logic [17:0] b0, b1, b2;
  logic [47:0] c0, c2;
  logic [47:0] p0, p1, p2, pc0, pc1, pc2;
  logic        co0, co1, co2;

  logic [29:0] ha0[N], ha1[N], ha2[N];
  logic [17:0] hb0[N], hb1[N], hb2[N];
  logic [47:0] hc0[N], hc2[N];
  logic [48:0] exp0[N], exp1[N], exp2[N];
  logic        ecarry;

  dsp48_lite #(.AB_REGS(1), .USE_MULT(1'b1), .ZSEL(0)) s0 (.clk, .rst, .ce(1'b1), .a(a0), .b(b0), .c(c0), .pcin('0), .p(p0), .pcout(pc0), .carryout(co0));
  dsp48_lite #(.AB_REGS(2), .USE_MULT(1'b1), .ZSEL(2)) s1 (.clk, .rst, .ce(1'b1), .a(a1), .b(b1), .c('0), .pcin(pc0), .p(p1), .pcout(pc1), .carryout(co1));
  dsp48_lite #(.AB_REGS(1), .USE_MULT(1'b0), .ZSEL(0), .CARRY_FB(1'b1)) s2 (.clk, .rst, .ce(1'b1), .a(a2), .b(b2), .c(c2), .pcin('0), .p(p2), .pcout(pc2), .carryout(co2));

  initial begin
    a0 = '0; b0 = '0; c0 = '0; a1 = '0; b1 = '0; a2 = '0; b2 = '0; c2 = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (cyc = 0; cyc < N; cyc++) begin
      @(negedge clk);
      // check results of earlier inputs
      if (cyc >= 3) begin
        checks++;
        if (p0 !== exp0[cyc-3][47:0]) begin failures++; $display("s0 mismatch cyc %0d: %h vs %h", cyc, p0, exp0[cyc-3]); end
      end
      if (cyc >= 4) begin
        checks++;
        if (p1 !== exp1[cyc-4][47:0]) begin failures++; $display("s1 mismatch cyc %0d: %h vs %h", cyc, p1, exp1[cyc-4]); end
      end
      if (cyc >= 2) begin
        checks++;
        if (p2 !== exp2[cyc-2][47:0]) begin failures++; $display("s2 mismatch cyc %0d: %h vs %h", cyc, p2, exp2[cyc-2]); end
      end
      // new random inputs (17-bit multiplier limbs as the word units use)
      a0 = 30'($urandom_range(0, 131071)); b0 = 18'($urandom_range(0, 131071));
      c0 = {16'd0, $urandom()};
      a1 = 30'($urandom_range(0, 131071)); b1 = 18'($urandom_range(0, 131071));
      a2 = $urandom(); b2 = 18'($urandom()); c2 = {$urandom(), 16'($urandom())};
      if (cyc % 7 == 0) begin a2 = '1; b2 = '1; end   // force carries
      ha0[cyc] = a0; hb0[cyc] = b0; hc0[cyc] = c0; ha1[cyc] = a1; hb1[cyc] = b1;
      ha2[cyc] = a2; hb2[cyc] = b2; hc2[cyc] = c2;
      exp0[cyc] = 49'(a0[26:0] * b0) + 49'(c0);
      exp2[cyc] = {1'b0, a2, b2} + {1'b0, c2} + 49'(ecarry);
      ecarry    = exp2[cyc][48];
      exp1[cyc] = 49'(a1[26:0] * b1) + 49'(exp0[cyc][47:0] >> 17);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial ecarry = 1'b0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
