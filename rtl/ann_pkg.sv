// ann_pkg: sizes, fixed-point formats, pipeline latencies and the tansig
// table formula shared by the pipelined neural-network trigger.
//
// The network is a 16-input, 12-8-1 feed-forward net: 12 tansig neurons see a
// 16-sample window of the ADC trace, 8 tansig neurons see the 12 first-layer
// outputs, and one linear output neuron sees the 8 second-layer outputs. All
// numbers are two's-complement fixed point. The layer sizes, the 12-bit ADC
// data, the 18-bit first-layer coefficients, the 32-bit neuron sum, the
// 16384 x 14-bit tansig table with scaling factor sf = 1536 and the per-layer
// shift factors SHP/SHN and coefficient scales SFS/SFL/SFX/SFB follow the
// published design. The bias widths, the order of words in the coefficient
// stream and all latencies are this implementation's choices.
package ann_pkg;

  // ---- network shape -------------------------------------------------------
  localparam int N_IN = 16;  // samples per window (first-layer inputs)
  localparam int N_L1 = 12;  // first (tansig) layer
  localparam int N_L2 = 8;   // second (tansig) layer
  localparam int N_L3 = 1;   // output (linear) layer, feeds the comparator

  // ---- data formats --------------------------------------------------------
  localparam int ADC_W      = 12;  // ADC sample, unsigned code
  localparam int T_AW       = 14;  // tansig table address (16384 words)
  localparam int T_DW       = 14;  // tansig table output, signed
  localparam int L1_COEF_W  = 18;  // first-layer coefficient (SFL = 2^17)
  localparam int L1_BIAS_W  = 20;  // first-layer bias        (SFB = 2^19)
  localparam int L23_COEF_W = 16;  // layers 2, 3 coefficient (SFL = 2^15)
  localparam int L23_BIAS_W = 16;  // layers 2, 3 bias        (SFB = 2^15)
  localparam int L1_GROUP_W  = 30; // multiply-adder result bits kept by the parallel adder, layer 1
  localparam int L23_GROUP_W = 32; // same for layers 2 and 3 (kept whole)

  // ---- shift factors (right shifts, arithmetic) ------------------------------
  localparam int L1_SHP = 0,  L1_SHN = 6;
  localparam int L2_SHP = 14, L2_SHN = 1;
  localparam int L3_SHP = 13, L3_SHN = 1;

  // ---- coefficient conversion factors (per layer 1, 2, 3) --------------------
  // fixed coefficient = coeff / SFS * SFL, fixed bias = bias / SFX * SFB
  localparam int L1_SFS = 2, L1_SFL = 131072, L1_SFX = 8, L1_SFB = 524288;
  localparam int L2_SFS = 4, L2_SFL = 32768,  L2_SFX = 8, L2_SFB = 32768;
  localparam int L3_SFS = 2, L3_SFL = 32768,  L3_SFX = 2, L3_SFB = 32768;

  // ---- tansig table ---------------------------------------------------------
  localparam int TANSIG_SF = 1536;

  // ---- coefficient stream ------------------------------------------------------
  // Per neuron: its N coefficients (input 0 first), then its bias; layer 1
  // neurons first, then layer 2, then the output neuron.
  localparam int L1_WORDS   = N_L1 * (N_IN + 1);
  localparam int L2_WORDS   = N_L2 * (N_L1 + 1);
  localparam int L3_WORDS   = N_L3 * (N_L2 + 1);
  localparam int COEF_WORDS = L1_WORDS + L2_WORDS + L3_WORDS;   // 317
  localparam int COEF_IDX_W = $clog2(COEF_WORDS + 1);
  localparam int WR_W       = 20;  // widest field (layer 1 bias)

  typedef logic signed [L1_COEF_W-1:0]  l1_coef_t;
  typedef logic signed [L1_BIAS_W-1:0]  l1_bias_t;
  typedef logic signed [L23_COEF_W-1:0] l23_coef_t;
  typedef logic signed [L23_BIAS_W-1:0] l23_bias_t;
  typedef logic signed [T_DW-1:0]       act_t;     // tansig output / network output
  typedef logic        [ADC_W-1:0]      sample_t;
  typedef logic signed [WR_W-1:0]       coef_word_t;

  // ---- pipeline latencies (clock cycles) -----------------------------------------
  localparam int SHIFT_LAT  = 1;  // sample in -> window on the taps
  localparam int NEURON_LAT = 2;  // multiply-adders, parallel adder
  localparam int ADDR_LAT   = 1;  // shift, bias, crop
  localparam int RAM_LAT    = 2;  // registered address, registered data
  localparam int CMP_LAT    = 1;
  localparam int TANSIG_LAYER_LAT = NEURON_LAT + ADDR_LAT + RAM_LAT;  // 5
  localparam int LINEAR_LAYER_LAT = NEURON_LAT + ADDR_LAT;            // 3
  // taps valid -> network output valid
  localparam int NET_LAT = 2 * TANSIG_LAYER_LAT + LINEAR_LAYER_LAT;  // 13

  // Tansig table word at address idx:
  //   f = 2 / (1 + exp(-2 (idx - 2^(aw-1)) / sf)) - 1,
  // scaled by 2^(dw-1), rounded to nearest, clipped to the signed dw-bit range.
  function automatic int tansig_word(int idx, int aw, int dw, int sf);
    real x, f, v;
    int  r, hi, lo;
    x  = 2.0 * real'(idx - (1 << (aw - 1))) / real'(sf);
    f  = 2.0 / (1.0 + $exp(-x)) - 1.0;
    v  = f * real'(1 << (dw - 1));
    r  = (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
    hi = (1 << (dw - 1)) - 1;
    lo = -(1 << (dw - 1));
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return r;
  endfunction

  // MATLAB floating-point coefficient -> fixed point: divide by the
  // suppression factor (SFS for coefficients, SFX for biases), multiply by the
  // scale (SFL / SFB), round to nearest. Used by testbenches and by software
  // that prepares the coefficient stream.
  function automatic int to_fixed(real value, real suppress, real scale);
    real v;
    v = value / suppress * scale;
    return (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction

endpackage
