// threshold_unit: variable firing threshold of the output layer.
//
// The threshold is set per image to one third of the maximum input spike
// activity of the layer, so bright and faint images drive the output layer
// alike. Here that activity is the number of input neurons firing in one time
// unit: during a pre-pass over the image's time units (sample high once per
// time unit) the unit keeps the largest population count, and vth is
// max * V_UNIT / 3, V_UNIT being the potential worth of one spike. clear
// starts a new image. vth is derived from the registered maximum and is
// stable once the pre-pass ends.
// Counting per time unit and V_UNIT are this design's reading of the paper's
// one-sentence rule.
module threshold_unit #(
  parameter int N_IN   = snn_pkg::N_IN,
  parameter int W      = snn_pkg::W,
  parameter int V_UNIT = snn_pkg::V_UNIT,
  localparam int CW    = $clog2(N_IN + 1)
) (
  input  logic                clk,
  input  logic                clear,
  input  logic                sample,
  input  logic [N_IN-1:0]     spikes,
  output logic [CW-1:0]       max_count,
  output logic signed [W-1:0] vth
);
  logic [CW-1:0] pop;

  always_comb begin
    pop = '0;
    for (int i = 0; i < N_IN; i++) pop += CW'(spikes[i]);
  end

  always_ff @(posedge clk)
    if (clear)                        max_count <= '0;
    else if (sample && pop > max_count) max_count <= pop;

  assign vth = W'((longint'(max_count) * longint'(V_UNIT)) / 3);
endmodule
