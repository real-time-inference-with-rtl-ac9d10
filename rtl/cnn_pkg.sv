// cnn_pkg: types and constants shared by the LArTPC frame-selection pipeline.
//
// The network is the quantised two-layer CNN "Q-CNN02-DS-OP": 64x64x1 input,
// 3x3 convolution to 8 maps, 4x4 max pool, 3x3 convolution to 16 maps, 4x4
// max pool, dense 256->12 with ReLU, dense 12->3, softmax. Its numeric formats
// follow the published precision configuration:
//   * ap_fixed<16,6>  (16 bits, 6 integer bits incl. sign, 10 fraction bits):
//     network input, convolution/dense outputs, biases of the convolutions,
//     softmax output  -> fx16_t
//   * ap_fixed<7,1>   (7 bits, sign only, 6 fraction bits): all weights, the
//     dense biases and every ReLU output (AP_RND, AP_SAT)        -> fx7_t
// The weight address map, the class encoding and the ADC scaling are this
// design's own choices.
package cnn_pkg;

  // ---------------------------------------------------------------- formats
  localparam int FX16_W    = 16;
  localparam int FX16_FRAC = 10;
  localparam int FX7_W     = 7;
  localparam int FX7_FRAC  = 6;
  localparam int ADC_W     = 12;

  typedef logic signed [FX16_W-1:0] fx16_t;   // ap_fixed<16,6>
  typedef logic signed [FX7_W-1:0]  fx7_t;    // ap_fixed<7,1>
  typedef logic        [ADC_W-1:0]  adc_t;    // raw 12-bit ADC sample

  // ---------------------------------------------------------------- geometry
  localparam int IMG  = 64;   // network input is IMG x IMG
  localparam int C1   = 8;    // first convolution depth
  localparam int C2   = 16;   // second convolution depth
  localparam int FC   = 12;   // dense layer size
  localparam int NCLS = 3;    // NB, LE, HE
  localparam int POOL = 4;    // max-pool window (both layers)
  localparam int P1   = IMG / POOL;          // 16: pooled size after layer 1
  localparam int P2   = P1 / POOL;           // 4 : pooled size after layer 2
  localparam int FLAT = P2 * P2 * C2;        // 256 inputs to the dense layer

  // Default pre-processing thresholds (absolute ADC counts).
  localparam int DENOISE_THR_DEFAULT = 520;
  localparam int ROI_THR_DEFAULT     = 560;

  // ---------------------------------------------------------------- classes
  typedef enum logic [1:0] {
    CLS_NB = 2'd0,   // noise and radiological background only
    CLS_LE = 2'd1,   // low-energy (supernova neutrino) interaction
    CLS_HE = 2'd2    // high-energy interaction
  } cls_e;

  // ---------------------------------------------------------------- parameter map
  // wt_addr[14:12] selects the layer, wt_addr[11:0] is the index inside it:
  // weights first in Keras order, then the biases.
  localparam logic [2:0] WSEL_CONV1  = 3'd0;
  localparam logic [2:0] WSEL_CONV2  = 3'd1;
  localparam logic [2:0] WSEL_DENSE1 = 3'd2;
  localparam logic [2:0] WSEL_DENSE2 = 3'd3;
  localparam int WT_ADDR_W = 15;

  // ---------------------------------------------------------------- ROI
  typedef struct packed {
    logic [15:0] ch_lo;
    logic [15:0] ch_hi;
    logic [15:0] t_lo;
    logic [15:0] t_hi;
  } roi_t;

  // ---------------------------------------------------------------- decision
  typedef struct packed {
    logic [15:0]         frame;     // frame sequence number
    cls_e                cls;       // class (NB for empty or dropped frames)
    logic                keep;      // forward the full image (LE or HE)
    logic                empty;     // ROI empty: CNN bypassed
    logic                dropped;   // CNN side busy: frame not classified
    fx16_t [NCLS-1:0]    prob;      // softmax outputs (0 when not classified)
  } decision_t;

  // ---------------------------------------------------------------- helpers
  // ReLU followed by conversion to ap_fixed<7,1,AP_RND,AP_SAT>. 'v' holds a
  // value with 'frac' fraction bits (frac >= 6). AP_RND adds half an LSB of
  // the target and truncates; AP_SAT clamps to 63/64.
  function automatic fx7_t relu_fx7(input logic signed [47:0] v, input int frac);
    logic signed [47:0] r;
    if (v <= 0) return '0;
    if (frac > FX7_FRAC)
      r = (v + (48'sd1 <<< (frac - FX7_FRAC - 1))) >>> (frac - FX7_FRAC);
    else
      r = v;
    if (r > 63) r = 63;
    return fx7_t'(r[6:0]);
  endfunction

  // Conversion of a value with 'frac' fraction bits to ap_fixed<16,6> with the
  // ap_fixed defaults AP_TRN (floor) and AP_WRAP (keep the low 16 bits).
  function automatic fx16_t cast_fx16(input logic signed [47:0] v, input int frac);
    logic signed [47:0] r;
    if (frac >= FX16_FRAC) r = v >>> (frac - FX16_FRAC);
    else                   r = v <<< (FX16_FRAC - frac);
    return fx16_t'(r);   // AP_WRAP: keep the low 16 bits
  endfunction

endpackage
