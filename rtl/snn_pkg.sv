// snn_pkg: constants and types shared by the spiking-network datapath.
//
// Potentials and weights are 24-bit two's-complement fixed point with 12
// fraction bits (Q11.12); 1.0 is 4096. STDP factors from the exponent tables
// are Q16 (1.0 = 65536). The network size (784 inputs from a 28x28 image,
// 16 output neurons, 24-bit words) follows the paper; the neuron constants
// (leak, rest, refractory time, weight bounds, STDP shape) are not given
// there and are this design's choices, kept in one place here.
package snn_pkg;
  localparam int N_IN    = 784;   // input neurons (28 x 28 pixels)
  localparam int N_OUT   = 16;    // output neurons
  localparam int W       = 24;    // potential and weight width
  localparam int FRAC    = 12;    // fraction bits of potentials and weights
  localparam int T_UNITS = 200;   // time units per image
  localparam int PIX_W   = 8;     // pixel and receptive-field width
  localparam int PER_W   = 16;    // spike period width, in time units
  localparam int AGE_W   = 5;     // time since last input spike, saturating
  localparam int CNT_W   = 8;     // output spike counter width
  localparam int LUT_W   = 18;    // signed Q16 STDP factor

  localparam int DT_LO   = 2;     // STDP window, both directions
  localparam int DT_HI   = 20;

  typedef logic signed [W-1:0]     word_t;
  typedef logic signed [LUT_W-1:0] dw_t;

  // Neuron constants (Q11.12)
  localparam word_t D_LEAK    = word_t'(1024);    // 0.25 per time unit
  localparam word_t P_MIN     = -word_t'(16384);  // -4.0
  localparam word_t R_P       = '0;               // resting potential
  localparam word_t P_REFRACT = '0;               // potential while refractory
  localparam int    T_REFRACT = 15;               // refractory time units
  localparam word_t W_MAX     = word_t'(8192);    // 2.0
  localparam word_t W_MIN     = -word_t'(4915);   // -1.2
  localparam int    V_UNIT    = 4096;             // threshold per input spike

  // Controller phase, also brought out of the top for observation.
  typedef enum logic [3:0] {
    PH_IDLE    = 4'd0,
    PH_PREP    = 4'd1,   // receptive field + spike periods, one pixel per cycle
    PH_THR     = 4'd2,   // threshold pre-pass, one time unit per cycle
    PH_INIT    = 4'd3,   // restart generators and neurons for the image
    PH_DECAY   = 4'd4,   // tpd: new time unit, potential decay
    PH_ADD     = 4'd5,   // tpa: pass over all synapses, accumulate
    PH_ADD_END = 4'd6,   // last weight of the pass
    PH_FIRE    = 4'd7,   // threshold test, lateral inhibition
    PH_WC      = 4'd8,   // twc: pass over all synapses, STDP
    PH_WC_END  = 4'd9,
    PH_SC      = 4'd10,  // tsc: spike counters
    PH_DONE    = 4'd11   // classify
  } phase_e;
endpackage
