// tb_maddcarry32: self-checking test of the MADDCARRY_32 unit.
// It issues CIOS-like inner loops back to back: s random (a, b, c) words,
// one (0, 0, t) word for the final carry addition, then one all-zero word that
// must return the pending carry and clear the unit. The reference keeps the
// running carry of (carry, t) = a*b + c + carry in the testbench. Outputs are
// checked exactly 8 cycles after issue (latency D) together with done; loops
// use all-ones words too, the worst case for the carry. Idle cycles between
// loops drive zeros with start low.
module tb_maddcarry32;
  import mmm_pkg::*;
  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  localparam int LOOPS = 150;
  localparam int LAT   = 8;
  localparam int MAXC  = LOOPS * 20 + 50;
  int checks = 0, failures = 0, done_count = 0, issued = 0;

  logic  start, done;
  word_t a, b, c, p;
  word_t  exp_p  [MAXC];
  logic   exp_v  [MAXC];
  dword_t carry, v;

  maddcarry32 dut (.clk, .rst, .ce(1'b1), .start, .a, .b, .c, .p, .done);

  task automatic issue(input logic st, input word_t ia, ib, ic, input int cyc);
    start = st; a = ia; b = ib; c = ic;
    v = dword_t'(ia) * dword_t'(ib) + dword_t'(ic) + carry;
    exp_p[cyc] = v[W-1:0];
    exp_v[cyc] = st;
    carry = v >> W;
  endtask

  initial begin
    int cyc;
    start = 1'b0; a = '0; b = '0; c = '0; carry = '0;
    for (int k = 0; k < MAXC; k++) exp_v[k] = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    cyc = 0;
    fork
      begin : driver
        for (int l = 0; l < LOOPS; l++) begin
          word_t bi;
          bi = (l % 4 == 0) ? '1 : $urandom();
          for (int j = 0; j < S; j++) begin
            if (l % 4 == 0) issue(1'b1, '1, bi, '1, cyc);
            else            issue(1'b1, $urandom(), bi, $urandom(), cyc);
            @(negedge clk); cyc++;
          end
          issue(1'b1, '0, '0, (l % 4 == 0) ? '1 : $urandom(), cyc); @(negedge clk); cyc++;
          issue(1'b1, '0, '0, '0, cyc); @(negedge clk); cyc++;
          // carry must now be clear
          if (carry != '0) $display("reference carry not cleared");
          for (int g = 0; g < (l % 3); g++) begin
            issue(1'b0, '0, '0, '0, cyc); @(negedge clk); cyc++;
          end
        end
        issue(1'b0, '0, '0, '0, cyc);
        issued = cyc;
        repeat (LAT + 2) @(negedge clk);
      end
      begin : monitor
        int t;
        t = 1;
        @(negedge clk);
        forever begin
          if (t >= LAT) begin
            if (exp_v[t-LAT]) begin
              checks++;
              if (!done || p !== exp_p[t-LAT]) begin
                failures++;
                if (failures < 10) $display("mismatch t=%0d: done=%b p=%h exp %h", t, done, p, exp_p[t-LAT]);
              end
            end else begin
              checks++;
              if (done) begin failures++; $display("spurious done t=%0d", t); end
            end
          end
          if (done) done_count++;
          @(negedge clk); t++;
        end
      end
    join_any
    disable fork;
    $display("results seen: %0d", done_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
