// ita_pkg: constants and types shared by the ITA integer transformer accelerator.
//
// The accelerator is sized by three design-time numbers: N processing engines,
// each taking the dot product of two M-element 8-bit vectors into a D-bit result.
// The defaults N=16, M=64, D=24 and the quantisation width B=8 are the evaluated
// configuration. The softmax widths (15-bit denominator accumulation, 16-bit
// inversion) and the shift of B - log2(B) = 5 are also the published ones; the
// softmax constant, the divider's dividend and the configuration/requantisation
// fields are this design's choices and are documented where they are used.
package ita_pkg;

  // Array size (evaluated configuration).
  parameter int unsigned N = 16;   // processing engines
  parameter int unsigned M = 64;   // vector length / tile size
  parameter int unsigned D = 24;   // dot-product and partial-sum width
  parameter int unsigned B = 8;    // quantised data width

  // Softmax arithmetic.
  parameter int unsigned SM_SHIFT  = B - $clog2(B);   // 5: only the top 3 bits of (max - x) matter
  parameter int unsigned SUM_W     = 15;              // denominator accumulation width
  parameter int unsigned INV_W     = 16;              // inverted denominator width
  // Numerator of one element at the running maximum: 2^(B-1), i.e. probability 1.0
  // is represented as 128 on the int8 output scale (chosen, see README).
  parameter int unsigned SM_CONST  = 1 << (B - 1);
  // Dividend of the inversion: SM_CONST * 2^(B-1) = 2^14, so that
  // inverse >> shift = 128 * (SM_CONST >> shift) / sum.
  parameter int unsigned SM_DIVIDEND = SM_CONST << (B - 1);

  // What the accelerator is asked to run.
  typedef enum logic [0:0] {
    MODE_LINEAR    = 1'b0,   // one matrix product Input(I x L) * Weight(L x J)
    MODE_ATTENTION = 1'b1    // fused Q x K^T (with softmax) then A x V, per i tile
  } ita_mode_e;

  // Which matrix product an issued row belongs to.
  typedef enum logic [1:0] {
    PH_LINEAR = 2'd0,
    PH_QK     = 2'd1,
    PH_AV     = 2'd2
  } ita_phase_e;

  // Requantisation: y = clip((x * mult + round) >>> shift + add, -128, 127).
  typedef struct packed {
    logic        [7:0] mult;
    logic        [4:0] shift;
    logic signed [7:0] add;
  } ita_rq_t;

  // Tile counts are in units of M (1..255). For MODE_ATTENTION:
  // tiles_i = S/M, tiles_j = S/M, tiles_l = P/M; rq_main requantises Q x K^T,
  // rq_av requantises A x V. For MODE_LINEAR only rq_main is used.
  typedef struct packed {
    ita_mode_e  mode;
    logic [7:0] tiles_i;
    logic [7:0] tiles_j;
    logic [7:0] tiles_l;
    ita_rq_t    rq_main;
    ita_rq_t    rq_av;
  } ita_cfg_t;

  // Tag that travels with every issued input row through the pipeline.
  typedef struct packed {
    ita_phase_e phase;
    logic [7:0] s;          // row inside the M x M tile
    logic       p_first;    // first L tile: no partial sum to read
    logic       p_last;     // last L tile: add bias, requantise, emit output
    logic       w_last;     // last use of the current weight bank
    logic       sm_clear;   // first row of a new i iteration of attention
    logic       da_en;      // result feeds softmax denominator accumulation
    logic       row_done;   // this chunk completes row s of the attention tile
    logic       en_en;      // input is A and is normalised by the softmax
  } ita_tag_t;

endpackage
