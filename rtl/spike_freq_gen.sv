// spike_freq_gen: input spike frequency generator.
//
// Converts a receptive-field value into the period, in time units, of the
// regular spike train of one input neuron. The firing rate is proportional to
// the excitation: period = RP_MIN * R_MAX / RF, so the strongest input
// (RF = R_MAX) fires every RP_MIN time units, the minimum refractory period.
// RF <= 0 produces no spikes, reported as period 0. The paper's printed rate
// formula has RF and R_MAX the other way up; this design follows its prose
// ("frequency ... proportional to the excitation"). RP_MIN and R_MAX are this
// design's choices. Purely combinational (one divider); periods above the
// PER_W range saturate.
module spike_freq_gen #(
  parameter int RP_MIN = 5,
  parameter int R_MAX  = 255,
  parameter int PIX_W  = snn_pkg::PIX_W,
  parameter int PER_W  = snn_pkg::PER_W
) (
  input  logic signed [PIX_W:0] rf,      // signed so RF <= 0 can be expressed
  output logic [PER_W-1:0]      period   // 0 = never fires
);
  localparam longint NUM  = longint'(RP_MIN) * longint'(R_MAX);
  localparam longint PMAX = (longint'(1) << PER_W) - 1;

  always_comb begin
    longint q;
    q = 0;
    if (rf <= 0) begin
      period = '0;
    end else begin
      q = NUM / longint'(rf);
      if (q < 1)         q = 1;
      else if (q > PMAX) q = PMAX;
      period = PER_W'(q);
    end
  end
endmodule
