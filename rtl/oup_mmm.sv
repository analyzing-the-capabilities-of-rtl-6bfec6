// oup_mmm: Outer Unrolled Pipeline Montgomery multiplier (OUP-MMM), 384-bit
// operands, 32-bit words, BLS12-381 modulus.
//
// result = a * b * 2^-384 mod p, left in [0, 2p) without the final
// conditional subtraction: with R = 2^384 > 4p, inputs below 2p give outputs
// below 2p, so results can be chained and are exact after conversion out of
// the Montgomery domain.
//
// The outer loop of CIOS is unrolled into S = 12 oup_stage instances; stage k
// handles word b[k]. Each stage passes a, b >> 32 and the running result r to
// the next; stage 1 starts from r = 0 and stage S's r is the result. The
// start/done pairs chain the stages; a stage leaves its done state only when
// the next stage is ready, so back-pressure on ap_continue stalls the whole
// pipeline from the tail, stage by stage.
//
// Interface (ap_ctrl_chain style): operands are taken in the cycle where
// ap_start and ap_ready are both high; result is valid while ap_done is high
// and is consumed in the cycle where ap_continue is high too.
// Timing: first result 12 x 48 = 576 cycles after ap_start is taken; then one
// result every 48 cycles while inputs and output space are available; up to
// 12 operations are in flight.
// The stage count, chaining signals and ends of the chain follow the paper;
// the per-stage ready path used for stalling is this design's.
module oup_mmm
  import mmm_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic ap_start,
  output logic ap_ready,
  output logic ap_done,
  input  logic ap_continue,
  input  big_t a,
  input  big_t b,
  output big_t result
);

  logic start_s [S];
  logic ready_s [S];
  logic done_s  [S];
  logic cont_s  [S];
  big_t a_s     [S+1];
  big_t b_s     [S+1];
  big_t r_s     [S+1];

  assign a_s[0] = a;
  assign b_s[0] = b;
  assign r_s[0] = '0;

  for (genvar k = 0; k < S; k++) begin : g_stage
    assign start_s[k] = (k == 0) ? ap_start : done_s[(k == 0) ? 0 : k-1];
    assign cont_s[k]  = (k == S-1) ? ap_continue : ready_s[(k == S-1) ? k : k+1];

    oup_stage u_stage (
      .clk, .rst,
      .start(start_s[k]), .ready(ready_s[k]), .done(done_s[k]), .cont(cont_s[k]),
      .a_in(a_s[k]), .b_in(b_s[k]), .r_in(r_s[k]),
      .a_out(a_s[k+1]), .b_out(b_s[k+1]), .r_out(r_s[k+1])
    );
  end

  assign ap_ready = ready_s[0];
  assign ap_done  = done_s[S-1];
  assign result   = r_s[S];

endmodule
