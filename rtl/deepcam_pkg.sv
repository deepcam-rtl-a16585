// deepcam_pkg: constants, types and number-format helpers shared by the
// DeepCAM accelerator RTL.
//
// Contexts. Every weight kernel and every activation window is represented
// by a "context": the L2 norm of the vector as an 8-bit minifloat and a
// binary hash sign(x*C) of up to 1024 bits. The CAM word is split into four
// 256-bit chunks (the paper's numbers); a layer uses 1..4 chunks, i.e. a hash
// length k of 256, 512, 768 or 1024 bits.
//
// Number formats (choices of this design; the paper only says "8-bit
// minifloat" for the norm):
//   norm_t  unsigned minifloat, 4-bit exponent (bias 7) and 4-bit mantissa,
//           exponent 0 is subnormal: value = m/16 * 2^-6.
//   act_t   signed fixed point, ACT_W bits with ACT_FRAC fraction bits, used
//           for dot products and activations.
//   cos_t   signed Q2.14 cosine.
package deepcam_pkg;

  localparam int unsigned CHUNK_W   = 256;  // word size of one chunk (paper)
  localparam int unsigned N_CHUNKS  = 4;    // chunks per CAM word (paper)
  localparam int unsigned HASH_W    = CHUNK_W * N_CHUNKS; // 1024 (paper)
  localparam int unsigned HD_W      = $clog2(HASH_W + 1);  // 11 bits
  localparam int unsigned CHUNK_HD_W = $clog2(CHUNK_W + 1); // 9 bits

  localparam int unsigned NORM_W    = 8;    // minifloat norm (paper: 8 bit)
  localparam int unsigned NORM_EW   = 4;
  localparam int unsigned NORM_MW   = 4;
  localparam int          NORM_BIAS = 7;

  localparam int unsigned ACT_W     = 24;
  localparam int unsigned ACT_FRAC  = 8;
  localparam int unsigned COS_W     = 16;
  localparam int unsigned COS_FRAC  = 14;
  localparam int unsigned GAMMA_W   = 16;   // batchnorm scale, Q8.8
  localparam int unsigned GAMMA_FRAC = 8;

  typedef logic [NORM_W-1:0]        norm_t;
  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [COS_W-1:0]  cos_t;
  typedef logic [HD_W-1:0]          hd_t;
  // number of chunks in use, 1..4 (hash length = 256 * nchunks)
  typedef logic [2:0]               nchunk_t;

  typedef struct packed {
    norm_t             norm;
    logic [HASH_W-1:0] hash;
  } context_t;

  localparam int unsigned CTX_W = $bits(context_t);

  // Dataflow of a layer (paper, Sec. IV-A).
  typedef enum logic {
    DF_WEIGHT_STAT = 1'b0,   // CAM rows hold weight contexts, activations searched
    DF_ACT_STAT    = 1'b1    // CAM rows hold activation contexts, weights searched
  } dataflow_e;

  // Configuration of one tile of a layer: n_rows stationary contexts are
  // loaded into the CAM rows from stat_base, then n_search contexts from
  // strm_base are searched one after another. Outputs go to the result port
  // or, with xform_en, to the activation context generator, whose contexts
  // are written back to the buffer from out_base.
  typedef struct packed {
    dataflow_e   df;
    nchunk_t     nchunks;
    logic [15:0] n_rows;
    logic [15:0] stat_base;
    logic [15:0] n_search;
    logic [15:0] strm_base;
    logic        bn_en;
    logic        relu_en;
    logic        pool_en;
    logic [3:0]  pool_win;
    logic        xform_en;
    logic [15:0] vlen;
    logic [15:0] out_base;
  } layer_cfg_t;

  localparam act_t ACT_MAX = {1'b0, {(ACT_W-1){1'b1}}};
  localparam act_t ACT_MIN = {1'b1, {(ACT_W-1){1'b0}}};

  // Saturate a wide signed value to act_t.
  function automatic act_t sat_act(input logic signed [63:0] v);
    if (v > 64'(signed'(ACT_MAX)))      return ACT_MAX;
    else if (v < 64'(signed'(ACT_MIN))) return ACT_MIN;
    else                                return act_t'(v);
  endfunction

  // Significand of a minifloat with the hidden bit, 5 bits (value/16).
  function automatic logic [NORM_MW:0] norm_sig(input norm_t n);
    logic [NORM_EW-1:0] e;
    e = n[NORM_W-1 -: NORM_EW];
    return (e == '0) ? {1'b0, n[NORM_MW-1:0]} : {1'b1, n[NORM_MW-1:0]};
  endfunction

  // Effective exponent of the exponent field e (subnormals use 1), biased.
  function automatic logic [NORM_EW-1:0] norm_exp(input logic [NORM_EW-1:0] e);
    return (e == '0) ? NORM_EW'(1) : e;
  endfunction

endpackage
