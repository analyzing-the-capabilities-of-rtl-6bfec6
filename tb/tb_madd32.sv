// tb_madd32: self-checking test of the MADD_32 multiply-and-add unit.
// A new random (a, b, c) enters every cycle (with corner values mixed in);
// the product a*b + c computed in the testbench must appear exactly 6 cycles
// later, which checks both the arithmetic and the one-per-cycle pipelining.
// A stretch with the clock enable low checks that the pipeline holds.
module tb_madd32;
  import mmm_pkg::*;
  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  localparam int N   = 2000;
  localparam int LAT = 6;
  int checks = 0, failures = 0;

  word_t  a, b, c;
  dword_t p;
  logic   ce;
  dword_t expq [N];

  madd32 dut (.clk, .rst, .ce, .a, .b, .c, .p);

  initial begin
    a = '0; b = '0; c = '0; ce = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int cyc = 0; cyc < N + LAT; cyc++) begin
      if (cyc >= LAT) begin
        checks++;
        if (p !== expq[cyc-LAT]) begin
          failures++;
          if (failures < 10) $display("mismatch cyc %0d: got %h exp %h", cyc, p, expq[cyc-LAT]);
        end
      end
      if (cyc < N) begin
        unique case (cyc % 5)
          0: begin a = '1; b = '1; c = '1; end
          1: begin a = $urandom(); b = '1; c = $urandom(); end
          default: begin a = $urandom(); b = $urandom(); c = $urandom(); end
        endcase
        expq[cyc] = dword_t'(a) * dword_t'(b) + dword_t'(c);
      end
      @(negedge clk);
    end
    // clock enable low: the output must not move
    ce = 1'b0;
    a = $urandom(); b = $urandom(); c = $urandom();
    begin
      dword_t held;
      held = p;
      repeat (10) @(negedge clk);
      checks++;
      if (p !== held) begin failures++; $display("output moved with ce low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
