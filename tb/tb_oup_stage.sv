// tb_oup_stage: self-checking test of one Outer Unrolled Pipeline stage.
// Random operands a < 2p, b, and partial results r are fed through the
// stage. The testbench computes one CIOS outer iteration itself with wide
// integers: T = r + a * b[31:0]; m = T mod 2^32 * p' mod 2^32;
// T = T + m * p; the stage must return r' = T / 2^32 (the division is
// exact), a unchanged and b >> 32. It also checks the stage's timing: done
// comes 48 cycles after start is taken, and with start held high a new
// operation is taken in the done cycle, i.e. every 48 cycles. Some operations
// see cont low for a while: the stage must hold done and its outputs.
module tb_oup_stage;
  import mmm_pkg::*;
  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  localparam int OPS = 40;
  int checks = 0, failures = 0, stalls = 0, b2b = 0;

  logic start, ready, done, cont;
  big_t a_in, b_in, r_in, a_out, b_out, r_out;
  big_t qa[$], qb[$], qr[$];
  longint t_start[$];
  longint cycle = 0;

  oup_stage dut (.clk, .rst, .start, .ready, .done, .cont,
                 .a_in, .b_in, .r_in, .a_out, .b_out, .r_out);

  always @(posedge clk) cycle <= cycle + 1;

  function automatic big_t rand_big();
    big_t x;
    for (int k = 0; k < S; k++) x[W*k +: W] = $urandom();
    return x;
  endfunction

  function automatic big_t ref_step(big_t a, big_t b, big_t r);
    logic [N_BITS+2*W-1:0] t;
    word_t m;
    t = (N_BITS+2*W)'(r) + (N_BITS+2*W)'(a) * (N_BITS+2*W)'(b[W-1:0]);
    m = word_t'(t[W-1:0] * P_PRIME);
    t = t + (N_BITS+2*W)'(P_MOD) * (N_BITS+2*W)'(m);
    if (t[W-1:0] != '0) $display("reference: low word not zero");
    return big_t'(t >> W);
  endfunction

  // driver: offers operations, sometimes back to back
  initial begin
    start = 1'b0; a_in = '0; b_in = '0; r_in = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < OPS; n++) begin
      a_in  = rand_big() % (P_MOD << 1);
      b_in  = rand_big();
      r_in  = rand_big() % (P_MOD << 1);
      if (n % 5 == 0) begin a_in = (P_MOD << 1) - 1; b_in = '1; end
      start = 1'b1;
      @(posedge clk);
      while (!ready) @(posedge clk);
      qa.push_back(a_in); qb.push_back(b_in); qr.push_back(r_in);
      t_start.push_back(cycle);
      @(negedge clk);
      start = 1'b0;
      if (n % 3 == 2) repeat ($urandom_range(1, 60)) @(negedge clk);
      start = 1'b0;
    end
  end

  // downstream: cont sometimes low
  initial begin
    cont = 1'b1;
    forever begin
      @(negedge clk);
      cont = ($urandom_range(0, 9) != 0);
    end
  end

  // checker
  initial begin
    longint t_prev_done, dt;
    int n;
    t_prev_done = -1000;
    n = 0;
    @(negedge rst);
    while (n < OPS) begin
      @(posedge clk);
      if (done) begin
        big_t ea, eb, er;
        longint ts;
        ts = t_start.pop_front();
        ea = qa.pop_front(); eb = qb.pop_front(); er = ref_step(ea, eb, qr.pop_front());
        checks++;
        if (cycle - ts != STAGE_PERIOD) begin
          failures++; $display("op %0d: start-to-done %0d cycles, expected %0d", n, cycle - ts, STAGE_PERIOD);
        end
        checks++;
        if (r_out !== er || a_out !== ea || b_out !== (eb >> W)) begin
          failures++; $display("op %0d: data mismatch\n r=%h\n e=%h", n, r_out, er);
        end
        dt = cycle - t_prev_done;
        if (dt == STAGE_PERIOD) b2b++;
        checks++;
        if (dt < STAGE_PERIOD) begin failures++; $display("op %0d: done %0d cycles after previous", n, dt); end
        // hold while cont is low
        while (!cont) begin
          stalls++;
          @(posedge clk);
          checks++;
          if (!done || r_out !== er) begin failures++; $display("op %0d: output not held during stall", n); end
        end
        t_prev_done = cycle;
        n++;
      end
    end
    checks++;
    if (b2b == 0) begin failures++; $display("no back-to-back operation observed"); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall observed"); end
    $display("back-to-back: %0d, stall cycles: %0d", b2b, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (OPS * 120 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
