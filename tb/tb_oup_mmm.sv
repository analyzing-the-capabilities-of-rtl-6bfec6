// tb_oup_mmm: self-checking test of the 12-stage OUP Montgomery multiplier.
// Random a, b below 2p (and corner values 0, 1, 2p-1) are offered on the
// ap_ctrl_chain interface. The reference is an independent bit-serial
// Montgomery reduction (add b per bit of a, add p when odd, halve), which
// yields a*b*2^-384 mod p; results are compared after reduction into
// [0, p), and the unit's raw result must be below 2p. Timing checks: the
// first result arrives 576 cycles after the first start is taken and, with
// operands always offered and ap_continue high, results follow every 48
// cycles. A later phase drives ap_continue low at random to stall the
// pipeline from its tail; results must stay correct and in order.
module tb_oup_mmm;
  import mmm_pkg::*;
  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  localparam int OPS = 40;
  localparam int FIRST_LAT = S * STAGE_PERIOD;   // 576
  int checks = 0, failures = 0, stall_cycles = 0, steady = 0;

  logic ap_start, ap_ready, ap_done, ap_continue;
  big_t a, b, result;
  big_t qe[$];
  longint t_first_start = -1;
  longint cycle = 0;
  bit     stall_phase = 0;

  oup_mmm dut (.clk, .rst, .ap_start, .ap_ready, .ap_done, .ap_continue, .a, .b, .result);

  always @(posedge clk) cycle <= cycle + 1;

  function automatic big_t rand_big();
    big_t x;
    for (int k = 0; k < S; k++) x[W*k +: W] = $urandom();
    return x;
  endfunction

  function automatic big_t mont_ref(big_t x, big_t y);
    logic [N_BITS+1:0] acc;
    acc = '0;
    for (int i = 0; i < N_BITS; i++) begin
      if (x[i]) acc = acc + (N_BITS+2)'(y);
      if (acc[0]) acc = acc + (N_BITS+2)'(P_MOD);
      acc = acc >> 1;
    end
    while (acc >= (N_BITS+2)'(P_MOD)) acc = acc - (N_BITS+2)'(P_MOD);
    return big_t'(acc);
  endfunction

  initial begin
    ap_start = 1'b0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < OPS; n++) begin
      a = rand_big() % (P_MOD << 1);
      b = rand_big() % (P_MOD << 1);
      if (n == 1) a = '0;
      if (n == 2) begin a = big_t'(1); b = (P_MOD << 1) - 1; end
      if (n == 3) begin a = (P_MOD << 1) - 1; b = (P_MOD << 1) - 1; end
      ap_start = 1'b1;
      @(posedge clk);
      while (!ap_ready) @(posedge clk);
      if (t_first_start < 0) t_first_start = cycle;
      qe.push_back(mont_ref(a, b));
      @(negedge clk);
      ap_start = 1'b0;
    end
  end

  initial begin
    ap_continue = 1'b1;
    forever begin
      @(negedge clk);
      ap_continue = stall_phase ? ($urandom_range(0, 3) != 0) : 1'b1;
    end
  end

  initial begin
    longint t_prev;
    int n;
    n = 0;
    t_prev = -1;
    @(negedge rst);
    while (n < OPS) begin
      @(posedge clk);
      if (ap_done && !ap_continue) stall_cycles++;
      if (ap_done && ap_continue) begin
        big_t e, r;
        e = qe.pop_front();
        r = result;
        checks++;
        if (r >= (P_MOD << 1)) begin failures++; $display("op %0d: result not below 2p", n); end
        if (r >= P_MOD) r = r - P_MOD;
        checks++;
        if (r !== e) begin failures++; $display("op %0d: mismatch\n got %h\n exp %h", n, r, e); end
        if (n == 0) begin
          checks++;
          if (cycle - t_first_start != FIRST_LAT) begin
            failures++; $display("first result after %0d cycles, expected %0d", cycle - t_first_start, FIRST_LAT);
          end
        end else if (!stall_phase) begin
          checks++;
          if (cycle - t_prev != STAGE_PERIOD) begin
            failures++; $display("op %0d: %0d cycles after previous, expected %0d", n, cycle - t_prev, STAGE_PERIOD);
          end else steady++;
        end
        t_prev = cycle;
        n++;
        if (n == OPS / 2) stall_phase = 1;
      end
    end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no stall observed"); end
    $display("steady-rate results: %0d, stall cycles: %0d", steady, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (FIRST_LAT + OPS * 120 + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
