// tb_axis_fifo: self-checking test of the AXI-Stream FIFO at its default
// size (32 x 512 bits). A random producer and a random consumer exchange
// numbered beats; the consumer must see every beat once and in order.
// Phases: fill with the consumer stopped (s_tready must drop after exactly 32
// beats and full must be set), drain completely (m_tvalid must drop), then
// random traffic on both sides including simultaneous push and pop.
module tb_axis_fifo;
  localparam int WIDTH = 512;
  localparam int DEPTH = 32;
  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic s_tvalid, s_tready, m_tvalid, m_tready, full;
  logic [WIDTH-1:0] s_tdata, m_tdata;
  logic [$clog2(DEPTH+1)-1:0] count;
  int sent = 0, got = 0, both = 0;
  bit p_en = 0, c_en = 0;
  int total;

  axis_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  function automatic logic [WIDTH-1:0] beat(int n);
    return {16{32'(n) ^ 32'h5a5a_0000}};
  endfunction

  // producer: changes valid and data only after a transfer or while idle
  always @(posedge clk) begin
    if (!rst) begin
      if (!s_tvalid || s_tready)
        s_tvalid <= p_en && (sent + (s_tvalid ? 1 : 0) < total) &&
                    ($urandom_range(0, 3) != 0 || c_en == 0);
      if (s_tvalid && s_tready) sent <= sent + 1;
    end
  end
  assign s_tdata = beat(sent);

  // consumer
  always @(negedge clk) m_tready <= c_en && ($urandom_range(0, 2) != 0 || !p_en);
  always @(posedge clk) begin
    if (!rst && m_tvalid && m_tready) begin
      checks++;
      if (m_tdata !== beat(got)) begin failures++; $display("beat %0d wrong", got); end
      got <= got + 1;
      if (s_tvalid && s_tready) both++;
    end
  end

  initial begin
    s_tvalid = 1'b0; m_tready = 1'b0; total = DEPTH + 5;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // fill
    p_en = 1;
    repeat (3 * DEPTH) @(negedge clk);
    checks++;
    if (sent != DEPTH || !full || s_tready) begin
      failures++; $display("fill: sent=%0d full=%b tready=%b", sent, full, s_tready);
    end
    // drain
    p_en = 0; c_en = 1;
    repeat (3 * DEPTH + 20) @(negedge clk);
    checks++;
    if (got != sent || m_tvalid || count != 0) begin failures++; $display("drain: got %0d of %0d", got, sent); end
    // random traffic
    total = 3000;
    p_en = 1;
    wait (got == total);
    checks++;
    if (both == 0) begin failures++; $display("no simultaneous push and pop"); end
    $display("beats: %0d, simultaneous push/pop: %0d", got, both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
