// axis_fifo: synchronous AXI-Stream FIFO, DEPTH entries of WIDTH bits.
//
// It plays the part of the vendor AXI-Stream FIFO macro the streaming kernel
// uses (32 entries of 512 bits, kept in LUT memory). Entries are written when
// s_tvalid and s_tready are both high and read when m_tvalid and m_tready are
// both high; s_tready is low only when the FIFO is full. The head entry is
// shown on m_tdata without a read latency (first-word fall-through), so an
// entry written in one cycle is visible on the output the next cycle. A write
// and a read in the same cycle are both allowed, also when full (s_tready is
// then low, so no write happens). Depth, width and the full flag used for
// back-pressure follow the paper; the internal organisation (a register array
// with read and write pointers and an occupancy counter) is this design's, as
// the paper takes the FIFO from the vendor library. The assertions state the
// AXI-Stream rule that a producer holds tvalid and tdata until accepted.
module axis_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             s_tvalid,
  output logic             s_tready,
  input  logic [WIDTH-1:0] s_tdata,
  output logic             m_tvalid,
  input  logic             m_tready,
  output logic [WIDTH-1:0] m_tdata,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign full     = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign s_tready = !full;
  assign m_tvalid = (count != '0);
  assign m_tdata  = mem[rd_ptr];
  assign push     = s_tvalid && s_tready;
  assign pop      = m_tvalid && m_tready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= s_tdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  a_s_hold: assert property (@(posedge clk) disable iff (rst)
                             s_tvalid && !s_tready |=> s_tvalid && $stable(s_tdata));
  a_no_overflow: assert property (@(posedge clk) disable iff (rst)
                                  count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule
