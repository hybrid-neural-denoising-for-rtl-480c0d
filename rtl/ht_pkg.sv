// ht_pkg: types, constants and fixed-point helpers shared by the hybrid
// denoiser-classifier radio trigger.
//
// The trigger works on frames of TRACE_LEN = 128 samples. All arithmetic is
// two's-complement fixed point in the ap_fixed<W,I,RND,SAT> convention: W total
// bits, I integer bits (sign included), W-I fractional bits, rounding to the
// nearest value with ties toward +infinity, and saturation on overflow.
// fx_requant() performs exactly that conversion and is used by every layer.
//
// Trained weights are not part of the RTL. They are written at run time over
// a simple configuration bus (cfg_wr_t). The address map places the denoiser
// layers from DEN_BASE and the classifier layers from CLF_BASE; inside a layer
// the weights come first in [out][in][tap] order, then one bias per output
// channel. Each 16-bit data word carries one value, right-aligned and
// sign-extended to the field's width.
package ht_pkg;

  localparam int TRACE_LEN = 128;
  localparam int SAMPLE_W  = 16;   // raw ADC sample width
  localparam int CFG_AW    = 12;
  localparam int CFG_DW    = 16;

  // Denoiser: global ap_fixed<14,8>
  localparam int DEN_W = 14;
  localparam int DEN_I = 8;
  localparam int DEN_F = DEN_W - DEN_I;
  localparam int DEN_NL   = 11;
  localparam int DEN_BASE = 0;
  localparam int CLF_BASE = 512;

  // Classifier score: Dense result ap_fixed<15,6>
  localparam int SCORE_W = 15;
  localparam int SCORE_F = 9;

  // Denoiser layer table (network order): kernel size, input and output
  // channels, ReLU. The last entry is the k=1, f=1 output projection.
  localparam int DEN_K    [DEN_NL] = '{3, 3, 3, 3, 2, 3, 3, 2, 3, 2, 1};
  localparam int DEN_CIN  [DEN_NL] = '{1, 4, 4, 4, 4, 4, 4, 4, 4, 4, 4};
  localparam int DEN_COUT [DEN_NL] = '{4, 4, 4, 4, 4, 4, 4, 4, 4, 4, 1};

  // Classifier block table: kernel, channels and Table-4 precisions
  // (weight, bias, Conv1D result, ReLU/MaxPool result) as <total, integer>.
  localparam int CLF_NB = 6;
  localparam int CLF_K    [CLF_NB] = '{3, 3, 3, 3, 3, 3};
  localparam int CLF_CIN  [CLF_NB] = '{1, 4, 4, 2, 2, 6};
  localparam int CLF_COUT [CLF_NB] = '{4, 4, 2, 2, 6, 4};
  localparam int CLF_WW [CLF_NB] = '{ 5,  6,  6,  5,  7,  6};
  localparam int CLF_WI [CLF_NB] = '{ 2,  2,  2,  2,  2,  2};
  localparam int CLF_BW [CLF_NB] = '{ 4,  7,  4,  7,  7,  7};
  localparam int CLF_BI [CLF_NB] = '{ 1,  1,  1,  1,  2,  1};
  localparam int CLF_RW [CLF_NB] = '{14, 17, 16, 16, 19, 19};
  localparam int CLF_RI [CLF_NB] = '{ 4,  6,  6,  7,  8,  8};
  localparam int CLF_AW [CLF_NB] = '{11, 13, 14, 14, 15, 15};
  localparam int CLF_AI [CLF_NB] = '{ 4,  5,  6,  7,  7,  7};
  // Head: GAP result <15,7>, Dense weight <6,1>, bias <6,1>, result <15,6>
  localparam int GAP_W = 15, GAP_I = 7;
  localparam int HD_WW = 6,  HD_WI = 1;
  localparam int HD_BW = 6,  HD_BI = 1;

  typedef struct packed {
    logic              we;
    logic [CFG_AW-1:0] addr;
    logic [CFG_DW-1:0] data;
  } cfg_wr_t;

  // Number of configuration words used by a Conv1D/Dense layer
  function automatic int layer_words(input int k, input int cin, input int cout);
    return k * cin * cout + cout;
  endfunction

  function automatic int den_base(input int i);
    int a;
    a = DEN_BASE;
    for (int j = 0; j < i; j++) a += layer_words(DEN_K[j], DEN_CIN[j], DEN_COUT[j]);
    return a;
  endfunction

  function automatic int clf_base(input int i);
    int a;
    a = CLF_BASE;
    for (int j = 0; j < i; j++) a += layer_words(CLF_K[j], CLF_CIN[j], CLF_COUT[j]);
    return a;
  endfunction

  // Convert value v with from_f fractional bits to to_w total / to_f fractional
  // bits: round half toward +inf, then saturate. Result sign-extended to 64 bits.
  function automatic logic signed [63:0] fx_requant(input logic signed [63:0] v,
                                                    input int from_f,
                                                    input int to_w,
                                                    input int to_f);
    logic signed [63:0] r, hi, lo;
    if (to_f < from_f) begin
      r = (v + (64'sd1 <<< (from_f - to_f - 1))) >>> (from_f - to_f);
    end else begin
      r = v <<< (to_f - from_f);
    end
    hi = (64'sd1 <<< (to_w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (to_w - 1));
    if (r > hi) r = hi;
    else if (r < lo) r = lo;
    return r;
  endfunction

endpackage
