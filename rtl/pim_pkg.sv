// pim_pkg: sizes, types and helper functions shared by the PIM Transformer core.
//
// The model sizes (768-wide hidden vector, 64-element head slices, so 12 heads)
// are the numbers printed on the core architecture diagram. The FFN width,
// the number of HQE levels, the KV capacity and the requantisation shifts are
// this design's own choices; the paper gives none of them.
package pim_pkg;

  parameter int D_MODEL    = 768;   // hidden width printed on the core diagram
  parameter int HEAD_DIM   = 64;    // per-head slice printed on the core diagram (64|64|64...)
  parameter int N_HEADS    = D_MODEL / HEAD_DIM;
  parameter int FFN_DIM    = 3072;  // 4 x D_MODEL, usual for a 768-wide model (assumed)
  parameter int DW         = 8;     // int8 activations, weights and KV cache
  parameter int ACC_W      = 32;    // accumulator width of the DCIM / CE adders
  parameter int QBITS      = 2;     // compressed KV cache precision (int2)
  parameter int MAX_LEVELS = 4;     // HQE levels per channel (assumed)
  parameter int MAX_TOKENS = 128;   // KV cache capacity of the global buffer, in tokens (assumed)
  parameter int SCALE_W    = 8;     // integer scale factor width
  parameter int ZERO_W     = 10;    // signed zero-point width
  parameter int TOK_W      = 16;    // token index width

  // One quantisation level of one channel, as held in the SZ buffer.
  typedef struct packed {
    logic [SCALE_W-1:0]       scale;      // integer step size, >= 1
    logic signed [ZERO_W-1:0] zero;       // zero point in the quantised domain
    logic [TOK_W-1:0]         start_tok;  // first token quantised with this level
  } sz_entry_t;

  // Commands accepted by the core.
  typedef enum logic [1:0] {
    CMD_CALIB    = 2'd0,  // prefill token: update per-channel ranges only
    CMD_FINALIZE = 2'd1,  // turn the prefill ranges into level-0 scale/zero
    CMD_APPEND   = 2'd2,  // prefill token: compress its K/V into the cache
    CMD_DECODE   = 2'd3   // decode token: compress K/V, attend, FFN, output
  } cmd_e;

  // Saturate a wide signed value to int8.
  function automatic logic signed [7:0] sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return 8'sd127;
    else if (v < -48'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

endpackage
