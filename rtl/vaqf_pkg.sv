// vaqf_pkg: shared constants and the layer descriptor of the binary-weight
// ViT accelerator.
//
// The accelerator computes one matrix-multiplication layer at a time (an FC
// layer, a multi-head-attention product, or the patch-embedding convolution
// recast as an FC layer).  A layer is described by layer_cfg_t, which the
// host holds stable from `start` until `done`.  The constants below are the
// defaults of every module: 64-bit memory words, 16-bit unquantized fixed
// point (4 values per word), 8-bit quantized activations (8 per word), 12
// heads of which 4 are computed in parallel.  The tile sizes TN=16 and TM=24
// are this design's own choice (the paper gives none); TNQ follows the rule
// TNQ = floor(TN*GQ/G).
package vaqf_pkg;

  parameter int S_PORT     = 64;            // width of one memory port word
  parameter int ACT_W      = 16;            // unquantized fixed-point width
  parameter int DEF_BQ     = 8;             // quantized activation width (W1A8)
  parameter int DEF_NH     = 12;            // heads / input-channel groups
  parameter int DEF_PH     = 4;             // heads computed in parallel
  parameter int DEF_TN     = 16;            // input-channel tile, unquantized
  parameter int DEF_TM     = 24;            // output-channel tile, unquantized
  parameter int DEF_TMQ    = 24;            // output-channel tile, quantized
  parameter int DEF_F_MAX  = 197;           // tokens: 196 patches + [CLS]
  parameter int DEF_P_IN   = 16;            // input load ports (keeps J_in near J_cmpt)
  parameter int DEF_P_WGT  = 4;             // weight load ports
  parameter int DEF_P_OUT  = 4;             // output store ports
  parameter int DEF_ACC_W  = 32;            // accumulator width
  parameter int ADDR_W     = 32;            // word address width

  // Packing factors: values of one kind that fit in one port word.
  function automatic int pack_g(int bits);
    return S_PORT / bits;                   // floor: 6-bit -> 10 values, 60 bits used
  endfunction

  function automatic int imax(int a, int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int cdiv(int a, int b);
    return (a + b - 1) / b;
  endfunction

  // One layer of work.  Channel counts are those of the matrix product
  // O[M][F] = W[M][N] x I[N][F].
  typedef struct packed {
    logic [15:0]       n_ch;       // N, input channels (multiple of NH*TN and NH*TNQ)
    logic [15:0]       m_ch;       // M, output channels
    logic [8:0]        f_tok;      // F, tokens (1..F_MAX)
    logic              quant_in;   // alpha: inputs and weights quantized (LUT path)
    logic              quant_out;  // beta: outputs written as BQ-bit values
    logic              mha;        // multi-head attention: keep heads apart
    logic              conv;       // patch embedding: input is an image (unquantized)
    logic              residual;   // add the 16-bit skip-connection input to the output
    logic [5:0]        shift;      // arithmetic right shift applied before saturation
    logic [3:0]        patch_lg;   // log2 of the patch size P (conv only)
    logic [7:0]        img_wp;     // image width in patches, W/P (conv only)
    logic [11:0]       img_h;      // image height in pixels H (conv only)
    logic [ADDR_W-1:0] in_base;    // word address of the input tensor / image
    logic [ADDR_W-1:0] wgt_base;   // word address of the weight matrix
    logic [ADDR_W-1:0] out_base;   // word address of the output tensor
    logic [ADDR_W-1:0] skip_base;  // word address of the skip-connection tensor
  } layer_cfg_t;

endpackage
