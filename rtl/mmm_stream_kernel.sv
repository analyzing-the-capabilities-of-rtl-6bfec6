// mmm_stream_kernel: streaming BLS12-381 Montgomery multiplication kernel.
//
// Two AXI-Stream inputs carry the operands a and b, one AXI-Stream output
// carries result = a * b * 2^-384 mod p (in [0, 2p)); each beat is 512 bits
// with the 384-bit number in bits [383:0] (the upper bits are ignored on
// input and zero on output). Operands i of the two inputs form pair i, and
// results leave in the order the pairs arrived.
//
// Structure: input FIFO a, input FIFO b -> OUP-MMM unit -> output FIFO, each
// FIFO 32 entries deep. The unit's block control is wired to the FIFOs:
//   ap_start    = both input FIFOs hold an operand (their tvalid)
//   ap_ready    -> tready of both input FIFOs (pop a pair on a start)
//   ap_done     -> tvalid of the output FIFO's write side
//   ap_continue = output FIFO not full; a full output FIFO holds the last
//                 stage in its done state and stalls the pipeline.
// Timing: a pair reaching the heads of the input FIFOs starts at once if the
// first stage is free; its result enters the output FIFO 576 cycles later and
// is visible on m_axis_r one cycle after that. Sustained rate: one result per
// 48 cycles. The FIFO arrangement, depth, width and control wiring follow the
// paper; the port names, the upper-bit convention and the reset are this
// design's. Reset is synchronous and active high.
module mmm_stream_kernel
  import mmm_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  // operand a stream
  input  logic              s_axis_a_tvalid,
  output logic              s_axis_a_tready,
  input  logic [AXIS_W-1:0] s_axis_a_tdata,
  // operand b stream
  input  logic              s_axis_b_tvalid,
  output logic              s_axis_b_tready,
  input  logic [AXIS_W-1:0] s_axis_b_tdata,
  // result stream
  output logic              m_axis_r_tvalid,
  input  logic              m_axis_r_tready,
  output logic [AXIS_W-1:0] m_axis_r_tdata
);

  localparam int unsigned CNT_W = $clog2(FIFO_DEPTH + 1);

  logic              fa_valid, fb_valid, fr_ready, fr_full;
  logic [AXIS_W-1:0] fa_data, fb_data;
  logic              ap_start, ap_ready, ap_done, ap_continue;
  logic              pop_ab;
  big_t              result;
  logic [CNT_W-1:0]  fa_count, fb_count, fr_count;
  logic              fa_full, fb_full;

  axis_fifo #(.WIDTH(AXIS_W), .DEPTH(FIFO_DEPTH)) u_fifo_a (
    .clk, .rst,
    .s_tvalid(s_axis_a_tvalid), .s_tready(s_axis_a_tready), .s_tdata(s_axis_a_tdata),
    .m_tvalid(fa_valid), .m_tready(pop_ab), .m_tdata(fa_data),
    .full(fa_full), .count(fa_count)
  );

  axis_fifo #(.WIDTH(AXIS_W), .DEPTH(FIFO_DEPTH)) u_fifo_b (
    .clk, .rst,
    .s_tvalid(s_axis_b_tvalid), .s_tready(s_axis_b_tready), .s_tdata(s_axis_b_tdata),
    .m_tvalid(fb_valid), .m_tready(pop_ab), .m_tdata(fb_data),
    .full(fb_full), .count(fb_count)
  );

  assign ap_start = fa_valid && fb_valid;
  assign pop_ab   = ap_start && ap_ready;

  oup_mmm u_oup (
    .clk, .rst,
    .ap_start, .ap_ready, .ap_done, .ap_continue,
    .a(fa_data[N_BITS-1:0]), .b(fb_data[N_BITS-1:0]),
    .result
  );

  assign ap_continue = !fr_full;

  axis_fifo #(.WIDTH(AXIS_W), .DEPTH(FIFO_DEPTH)) u_fifo_r (
    .clk, .rst,
    .s_tvalid(ap_done), .s_tready(fr_ready), .s_tdata({{(AXIS_W-N_BITS){1'b0}}, result}),
    .m_tvalid(m_axis_r_tvalid), .m_tready(m_axis_r_tready), .m_tdata(m_axis_r_tdata),
    .full(fr_full), .count(fr_count)
  );

endmodule
