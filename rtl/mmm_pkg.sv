// mmm_pkg: constants and types shared by the BLS12-381 Montgomery multiplier.
//
// The operands are 384-bit integers split into S = 12 words of W = 32 bits,
// the word size of the outer-unrolled-pipeline configuration built here. The
// field modulus P is the 381-bit BLS12-381 prime and P_PRIME = -P^-1 mod 2^32,
// the per-word Montgomery constant of the CIOS algorithm. Both are fixed
// constants (the paper keeps them in ROM-style registers). R = 2^384.
// MC_LATENCY is the latency of the MADDCARRY_32 word unit and LOOP_LEN the
// number of cycles the stage controller spends on one inner loop
// (S + MC_LATENCY + 3), which together give the 48-cycle stage period of the
// 32-bit pipeline.
package mmm_pkg;

  localparam int unsigned N_BITS = 384;            // operand size
  localparam int unsigned W      = 32;             // word size X
  localparam int unsigned S      = N_BITS / W;     // words per operand (12)

  localparam int unsigned MADD_LATENCY = 6;        // MADD_32
  localparam int unsigned MC_LATENCY   = 8;        // MADDCARRY_32 (D)
  localparam int unsigned LOOP_LEN     = S + MC_LATENCY + 3;  // 23 cycles
  localparam int unsigned STAGE_PERIOD = 2 * LOOP_LEN + 2;    // 48 cycles

  localparam int unsigned AXIS_W     = 512;        // AXI-Stream data width
  localparam int unsigned FIFO_DEPTH = 32;         // entries per AXIS FIFO

  typedef logic [W-1:0]      word_t;
  typedef logic [2*W-1:0]    dword_t;
  typedef logic [N_BITS-1:0] big_t;

  // BLS12-381 base field modulus p (381 bits)
  localparam big_t P_MOD = 384'h1a0111ea397fe69a4b1ba7b6434bacd764774b84f38512bf6730d2a0f6b0f6241eabfffeb153ffffb9feffffffffaaab;
  // p' = -p^-1 mod 2^32
  localparam word_t P_PRIME = 32'hfffcfffd;

  // Pipeline stage controller states
  typedef enum logic [2:0] {
    ST_IDLE,
    ST_LOAD,
    ST_LOOP_1,
    ST_LOOP_2,
    ST_DONE
  } stage_state_t;

endpackage
