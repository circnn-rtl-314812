// circnn_pkg: types and constants shared by the block-circulant inference engine.
//
// Data are 16-bit two's-complement fixed-point numbers (the 16-bit width is the
// published choice; the split into 8 fractional bits is this design's choice).
// Twiddle factors W = exp(-j*2*pi*i/K) are 16-bit with 14 fractional bits
// (also this design's choice). A complex sample is a packed struct {re, im}.
// layer_cfg_t is the layer descriptor the host writes before starting a layer.
package circnn_pkg;

  localparam int DATA_W  = 16;   // input / weight word width
  localparam int FRAC_W  = 8;    // fractional bits of data words
  localparam int TW_W    = 16;   // twiddle word width
  localparam int TW_FRAC = 14;   // fractional bits of twiddles
  localparam int ACC_W   = 48;   // accumulator width in the peripheral block

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef struct packed {
    data_t re;
    data_t im;
  } cplx_t;

  typedef struct packed {
    logic signed [TW_W-1:0] re;
    logic signed [TW_W-1:0] im;
  } tw_t;

  typedef struct packed {
    acc_t re;
    acc_t im;
  } cacc_t;

  // Layer descriptor. k = 2**log2k is the circulant block size, the weight
  // matrix has p_blk x q_blk blocks (m = p_blk*k outputs, n = q_blk*k inputs).
  // n_vec input vectors are processed with the same weights (1 for an FC
  // layer, the number of output pixels for a CONV layer in matrix form).
  typedef struct packed {
    logic [3:0]  log2k;
    logic [7:0]  p_blk;
    logic [7:0]  q_blk;
    logic [15:0] n_vec;
    logic        relu_en;
    logic [3:0]  pool_n;    // max over pool_n consecutive output vectors, 0/1 = off
    logic [19:0] w_base;    // first weight-RAM word of this layer
    logic [15:0] b_base;    // first bias-RAM word of this layer
  } layer_cfg_t;

  // Command travelling with a group of p points through the basic computing
  // block: s0 is the FFT stage done by level 1 (level j does stage s0+j-1),
  // lvl_en[j] = 0 lets level j+1 pass its data through unchanged (bypass).
  typedef struct packed {
    logic [3:0] s0;
    logic [7:0] lvl_en;
    logic       inverse;
  } bcb_cmd_t;

  // Saturate a wide signed value to a data word.
  function automatic data_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sd32767;
    else if (v < -48'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

  // Reverse the low nbits bits of a value (bits above are dropped).
  function automatic logic [7:0] bitrev(input logic [7:0] v, input logic [3:0] nbits);
    logic [7:0] r;
    r = '0;
    for (int b = 0; b < 8; b++)
      if (b < int'(nbits)) r[int'(nbits) - 1 - b] = v[b];
    return r;
  endfunction

endpackage
