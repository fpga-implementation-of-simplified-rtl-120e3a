// weight_change_unit: STDP weight update of one synapse.
//
// Applies the paper's bounded update, first for a potentiating factor and then
// for a depressing one (either may be 0):
//   w1 = w  + dw_pot * (W_MAX - w)    (dw_pot >= 0)
//   w2 = w1 + dw_dep * (w1 - W_MIN)   (dw_dep <= 0)
// The factors already include the learning rate and are signed Q16; products
// are shifted back arithmetically (rounding toward minus infinity). Because
// |factor| < 1 the weight stays inside [W_MIN, W_MAX]. en = 0 (neuron did not
// fire) passes the weight through unchanged. Combinational; the paper maps
// this onto DSP slices. Weights are fixed point here, where the paper speaks
// of floating point without giving a format.
module weight_change_unit #(
  parameter int W     = snn_pkg::W,
  parameter int LUT_W = snn_pkg::LUT_W,
  parameter logic signed [W-1:0] W_MAX = snn_pkg::W_MAX,
  parameter logic signed [W-1:0] W_MIN = snn_pkg::W_MIN
) (
  input  logic                    en,
  input  logic signed [W-1:0]     w_in,
  input  logic signed [LUT_W-1:0] dw_pot,
  input  logic signed [LUT_W-1:0] dw_dep,
  output logic signed [W-1:0]     w_out
);
  localparam int PW = W + LUT_W + 2;

  always_comb begin
    logic signed [PW-1:0] prod;
    logic signed [W-1:0]  w1;
    prod  = PW'(dw_pot) * PW'(W_MAX - w_in);
    w1    = w_in + W'(prod >>> 16);
    prod  = PW'(dw_dep) * PW'(w1 - W_MIN);
    w_out = en ? w1 + W'(prod >>> 16) : w_in;
  end
endmodule
