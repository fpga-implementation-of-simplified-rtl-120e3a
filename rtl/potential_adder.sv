// potential_adder: membrane potential of one output neuron.
//
// Implements the simplified leaky integrate-and-fire rule:
//  * decay (once per time unit, the tpd step): a refractory neuron counts
//    down its refractory time and holds P_REFRACT; otherwise a potential at or
//    below P_MIN returns to the resting value R_P, and a potential above R_P
//    leaks by D, never below R_P.
//  * add_en (during the synapse pass): adds the weight of a spiking input,
//    unless the neuron is refractory, which blocks all input.
//  * above: P >= vth, combinational, never while refractory.
//  * fire: the neuron spikes, P becomes P_REFRACT and input is blocked for
//    the next T_REFRACT time units.
//  * inhibit: lateral inhibition, P drops by vth/2.
//  * init: start of an image, P = R_P, not refractory.
// The rule and the inhibition amount are the paper's; the constants are this
// design's. The threshold is tested after the adder pass of a time unit, in
// the order of the paper's time-unit breakdown. No saturation is needed at
// W = 24: a pass adds at most 784 * W_MAX = 1568.0, far below the 2048.0
// range of Q11.12 on top of a sub-threshold potential.
module potential_adder #(
  parameter int W = snn_pkg::W,
  parameter logic signed [W-1:0] D_LEAK    = snn_pkg::D_LEAK,
  parameter logic signed [W-1:0] P_MIN     = snn_pkg::P_MIN,
  parameter logic signed [W-1:0] R_P       = snn_pkg::R_P,
  parameter logic signed [W-1:0] P_REFRACT = snn_pkg::P_REFRACT,
  parameter int T_REFRACT = snn_pkg::T_REFRACT,
  localparam int RW = $clog2(T_REFRACT + 1)
) (
  input  logic                clk,
  input  logic                init,
  input  logic                decay,
  input  logic                add_en,
  input  logic signed [W-1:0] w,
  input  logic signed [W-1:0] vth,
  input  logic                fire,
  input  logic                inhibit,
  output logic signed [W-1:0] p,
  output logic                above,
  output logic                blocked
);
  logic [RW-1:0] refr;

  always_ff @(posedge clk)
    if (init) begin
      p       <= R_P;
      refr    <= '0;
      blocked <= 1'b0;
    end else if (decay) begin
      blocked <= (refr != '0);
      if (refr != '0) begin
        refr <= refr - RW'(1);
        p    <= P_REFRACT;
      end else if (p <= P_MIN) begin
        p <= R_P;
      end else if (p > R_P) begin
        p <= (p - D_LEAK < R_P) ? R_P : p - D_LEAK;
      end
    end else if (fire) begin
      p       <= P_REFRACT;
      refr    <= RW'(T_REFRACT);
      blocked <= 1'b1;
    end else if (inhibit) begin
      p <= p - (vth >>> 1);
    end else if (add_en && !blocked) begin
      p <= p + w;
    end

  assign above = !blocked && (p >= vth);
endmodule
