// oup_stage: one stage of the Outer Unrolled Pipeline, i.e. one outer-loop
// iteration i of CIOS Montgomery multiplication on a single MADDCARRY_32.
//
// The stage receives the full operand a, the operand b already shifted so that
// its low word is b[i], and the running result r (s = 12 words). It loads r
// into the word array t[0..s] (t[s] = 0) and runs two inner loops through the
// word unit, words issued one per cycle (counter cnt, the inner loop counter):
//   LOOP_1, cnt = 0..s-1 : (a[j], b[i], t[j])   -> t[j]        multiply row
//           cnt = s      : (0, 0, t[s])          -> t[s]        final carry
//           cnt = s+1    : (t[0], p', 0)         -> m           quotient
//           cnt = s+2    : (0, 0, 0)             clears the unit's carry
//   LOOP_2, cnt = 0..s-1 : (p[j], m, t[j])      -> t[j]        reduction row
//           cnt = s      : (0, 0, t[s])          -> t[s]
//           cnt = s+1    : (0, 0, 0)             clears the unit's carry
// A result issued at cnt returns at cnt + 8 (unit latency D) and is written
// back while the loop counter runs on. Each loop lasts LOOP_LEN = s + D + 3 =
// 23 cycles: the last word (m) returns at cnt = s + D + 1 and one cycle is the
// controller's step to the next state. After LOOP_2 t[0] is zero and the new
// result is r = t[s:1]; a and b >> 32 are passed on with it (so the top word
// of b_out is always zero: the b bus keeps its full width from stage to stage
// instead of narrowing by one word per stage).
//
// Handshake (ap_ctrl_chain style): the stage takes start while ready, spends
// one LOAD cycle, 2 x 23 loop cycles, then shows done with its outputs until
// cont is high. ready is high in IDLE and in DONE when cont is high, so a
// stage can hand over and accept the next operands in the same cycle: start
// to done is 48 cycles and a stage accepts one operation every 48 cycles.
//
// From the paper: the per-stage datapath of its figure (operand registers A,
// B, modulus P and p' registers, m register, word muxes on the unit's A, B,
// C ports, T register file loaded from r in one cycle), the word schedule of
// the 32-bit variant, the blocking two-loop stage and its 48-cycle period.
// This design's choices: word selection by index instead of explicit shifters,
// an s+1 word array so t[s] has a home, the exact cycle split of the 48
// cycles (1 load + 2 x 23 + 1 done) and the done/cont/ready handshake.
module oup_stage
  import mmm_pkg::*;
(
  input  logic clk,
  input  logic rst,
  // block control
  input  logic start,
  output logic ready,
  output logic done,
  input  logic cont,
  // data in (from previous stage)
  input  big_t a_in,
  input  big_t b_in,
  input  big_t r_in,
  // data out (to next stage), valid while done
  output big_t a_out,
  output big_t b_out,
  output big_t r_out
);

  localparam int unsigned CW = $clog2(LOOP_LEN);

  stage_state_t   state;
  logic [CW-1:0]  cnt;        // inner loop counter (counter_j)
  big_t           a_q, b_q;
  word_t          t_q [S+1];  // T register file
  word_t          m_q;        // Montgomery quotient

  logic  mc_start, mc_done;
  word_t mc_a, mc_b, mc_c, mc_p;
  int unsigned    k_out;      // word index of the result leaving the unit

  assign ready = (state == ST_IDLE) || (state == ST_DONE && cont);
  assign done  = (state == ST_DONE);

  // ---------------- controller ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ST_IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) state <= ST_LOAD;
        ST_LOAD: begin
          cnt   <= '0;
          state <= ST_LOOP_1;
        end
        ST_LOOP_1: begin
          if (cnt == CW'(LOOP_LEN - 1)) begin
            cnt   <= '0;
            state <= ST_LOOP_2;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_LOOP_2: begin
          if (cnt == CW'(LOOP_LEN - 1)) begin
            cnt   <= '0;
            state <= ST_DONE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_DONE: begin
          if (cont) state <= start ? ST_LOAD : ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // ---------------- word unit input muxes ----------------
  always_comb begin
    mc_start = 1'b0;
    mc_a     = '0;
    mc_b     = '0;
    mc_c     = '0;
    if (state == ST_LOOP_1) begin
      if (cnt < CW'(S)) begin
        mc_start = 1'b1;
        mc_a     = a_q[W*cnt +: W];
        mc_b     = b_q[W-1:0];
        mc_c     = t_q[cnt[$clog2(S+1)-1:0]];
      end else if (cnt == CW'(S)) begin
        mc_start = 1'b1;
        mc_c     = t_q[S];
      end else if (cnt == CW'(S + 1)) begin
        mc_start = 1'b1;
        mc_a     = t_q[0];
        mc_b     = P_PRIME;
      end else if (cnt == CW'(S + 2)) begin
        mc_start = 1'b1;               // zeros: flush and clear carry
      end
    end else if (state == ST_LOOP_2) begin
      if (cnt < CW'(S)) begin
        mc_start = 1'b1;
        mc_a     = P_MOD[W*cnt +: W];
        mc_b     = m_q;
        mc_c     = t_q[cnt[$clog2(S+1)-1:0]];
      end else if (cnt == CW'(S)) begin
        mc_start = 1'b1;
        mc_c     = t_q[S];
      end else if (cnt == CW'(S + 1)) begin
        mc_start = 1'b1;               // zeros: flush and clear carry
      end
    end
  end

  maddcarry32 u_mc (
    .clk, .rst, .ce(1'b1),
    .start(mc_start), .a(mc_a), .b(mc_b), .c(mc_c),
    .p(mc_p), .done(mc_done)
  );

  assign k_out = int'(cnt) - MC_LATENCY;

  // ---------------- operand registers, T array, m ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      a_q <= '0;
      b_q <= '0;
      m_q <= '0;
      t_q <= '{default: '0};
    end else if (ready && start) begin
      a_q <= a_in;
      b_q <= b_in;
      for (int j = 0; j < S; j++) t_q[j] <= r_in[W*j +: W];
      t_q[S] <= '0;
    end else if (mc_done && (state == ST_LOOP_1 || state == ST_LOOP_2)) begin
      if (k_out <= S)
        t_q[k_out] <= mc_p;
      else if (k_out == S + 1 && state == ST_LOOP_1)
        m_q <= mc_p;
    end
  end

  always_comb begin
    for (int j = 0; j < S; j++) r_out[W*j +: W] = t_q[j+1];
  end
  assign a_out = a_q;
  assign b_out = b_q >> W;

  // After the reduction row the low word must have been cancelled.
  a_t0_zero: assert property (@(posedge clk) disable iff (rst)
                              state == ST_DONE |-> t_q[0] == '0);
  // Unit results only come back while an inner loop is running.
  a_mc_in_loop: assert property (@(posedge clk) disable iff (rst)
                                 mc_done |-> (state == ST_LOOP_1 || state == ST_LOOP_2));

endmodule
