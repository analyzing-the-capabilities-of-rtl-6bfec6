// tb_mmm_stream_kernel: end-to-end test of the streaming Montgomery kernel at
// its default parameters (12 stages, 32-deep FIFOs of 512-bit beats).
// Two producers send operands a and b on their own AXI-Stream inputs with
// independent random gaps; the consumer takes results with random
// back-pressure and one long pause; for a while operand b is withheld
// until its FIFO runs dry. Every result is checked, in order,
// against an independent bit-serial Montgomery reduction
// (a*b*2^-384 mod p, compared after reduction into [0, p); the raw
// result must be below 2p and its upper 128 bits zero).
// Timing: the first pair, sent on both inputs in the same cycle into an idle
// kernel, must show its result 578 cycles later (1 cycle input FIFO, 576
// cycles pipeline, 1 cycle output FIFO); during the first burst results must
// follow every 48 cycles.
// Mechanisms counted, each must occur at least once: pipeline stall from a
// full output FIFO, full input FIFO back-pressure, one operand waiting for
// the other, the first stage busy while a pair waits, and back-to-back
// results at the 48-cycle rate.
module tb_mmm_stream_kernel;
  import mmm_pkg::*;
  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  localparam int OPS = 160;
  int checks = 0, failures = 0;

  logic              a_valid, a_ready, b_valid, b_ready, r_valid, r_ready;
  logic [AXIS_W-1:0] a_data, b_data, r_data;

  big_t va[OPS], vb[OPS], ve[OPS];
  int   na = 0, nb = 0, nr = 0;
  longint cycle = 0, t_first_in = -1, t_prev = -1;
  bit   pause = 0, gaps = 0, hold_b = 0;

  // mechanism counters
  int c_stall = 0, c_out_full = 0, c_in_full = 0, c_wait_other = 0, c_busy = 0, c_b2b = 0;

  mmm_stream_kernel dut (
    .clk, .rst,
    .s_axis_a_tvalid(a_valid), .s_axis_a_tready(a_ready), .s_axis_a_tdata(a_data),
    .s_axis_b_tvalid(b_valid), .s_axis_b_tready(b_ready), .s_axis_b_tdata(b_data),
    .m_axis_r_tvalid(r_valid), .m_axis_r_tready(r_ready), .m_axis_r_tdata(r_data)
  );

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

  assign a_data = {{(AXIS_W-N_BITS){1'b1}}, (na < OPS) ? va[na] : '0};  // junk in upper bits
  assign b_data = {{(AXIS_W-N_BITS){1'b1}}, (nb < OPS) ? vb[nb] : '0};

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst) begin
      // producers: change only after a transfer or while idle
      if (a_valid && a_ready) na <= na + 1;
      if (b_valid && b_ready) nb <= nb + 1;
      if (!a_valid || a_ready)
        a_valid <= (na + (a_valid && a_ready ? 1 : 0) < OPS) && (!gaps || $urandom_range(0, 40) == 0);
      if (!b_valid || b_ready)
        b_valid <= !hold_b && (nb + (b_valid && b_ready ? 1 : 0) < OPS) && (!gaps || $urandom_range(0, 70) == 0);
      if (a_valid && a_ready && t_first_in < 0) t_first_in = cycle;
      // consumer
      r_ready <= !pause && (!gaps || $urandom_range(0, 3) != 0);
      // mechanisms
      if (dut.ap_done && !dut.ap_continue) c_stall++;
      if (dut.fr_full) c_out_full++;
      if ((a_valid && !a_ready) || (b_valid && !b_ready)) c_in_full++;
      if (dut.fa_valid != dut.fb_valid) c_wait_other++;
      if (dut.ap_start && !dut.ap_ready) c_busy++;
    end
  end

  // result checker
  always @(posedge clk) begin
    if (!rst && r_valid && r_ready) begin
      big_t r;
      r = r_data[N_BITS-1:0];
      checks++;
      if (r_data[AXIS_W-1:N_BITS] != '0 || r >= (P_MOD << 1)) begin
        failures++; $display("result %0d out of range", nr);
      end
      if (r >= P_MOD) r = r - P_MOD;
      checks++;
      if (r !== ve[nr]) begin
        failures++;
        if (failures < 10) $display("result %0d mismatch\n got %h\n exp %h", nr, r, ve[nr]);
      end
      if (nr == 0) begin
        checks++;
        if (cycle - t_first_in != 578) begin
          failures++; $display("first result after %0d cycles, expected 578", cycle - t_first_in);
        end
      end else if (nr < 12) begin
        checks++;
        if (cycle - t_prev != STAGE_PERIOD) begin
          failures++; $display("result %0d came %0d cycles after the previous", nr, cycle - t_prev);
        end
      end
      if (nr > 0 && cycle - t_prev == STAGE_PERIOD) c_b2b++;
      t_prev = cycle;
      nr = nr + 1;
    end
  end

  task automatic need(string what, int count);
    checks++;
    if (count == 0) begin failures++; $display("mechanism never seen: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < OPS; n++) begin
      va[n] = rand_big() % (P_MOD << 1);
      vb[n] = rand_big() % (P_MOD << 1);
      if (n == 5) begin va[n] = (P_MOD << 1) - 1; vb[n] = (P_MOD << 1) - 1; end
      if (n == 6) begin va[n] = '0; end
      ve[n] = mont_ref(va[n], vb[n]);
    end
    a_valid = 1'b0; b_valid = 1'b0; r_ready = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // phase 1: saturate inputs, consumer always ready
    while (nr < 14) @(posedge clk);
    // phase 2: consumer pauses long enough to fill the output FIFO
    pause = 1;
    while (!dut.fr_full) @(posedge clk);
    repeat (300) @(posedge clk);
    pause = 0;
    // phase 3: operand b withheld until its FIFO runs dry, a keeps coming
    hold_b = 1;
    while (dut.fb_valid) @(posedge clk);
    repeat (100) @(posedge clk);
    hold_b = 0;
    // phase 4: random gaps on all streams
    gaps = 1;
    while (nr < OPS) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (r_valid) begin failures++; $display("extra result"); end
    need("pipeline stall (output FIFO full)", c_stall);
    need("output FIFO full", c_out_full);
    need("input FIFO full", c_in_full);
    need("one operand waiting for the other", c_wait_other);
    need("pair waiting on a busy first stage", c_busy);
    need("back-to-back results", c_b2b);
    $display("results %0d; stall %0d, out_full %0d, in_full %0d, wait_other %0d, busy %0d, b2b %0d",
             nr, c_stall, c_out_full, c_in_full, c_wait_other, c_busy, c_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (OPS * 48 * 4 + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
