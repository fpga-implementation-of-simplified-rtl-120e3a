// input_neuron_block: the layer of input neurons.
//
// On each tick (start of a time unit) every input neuron latches whether it
// spiked and updates its age, the number of time units since its last spike
// (0 in the time unit of the spike, saturating at 2^AGE_W-1, which lies
// outside the STDP window). restart clears all spikes and sets every age to
// the saturated value for a new image. The output-neuron passes read one
// input per cycle through sel: spk_sel and age_sel are combinational.
// any_spike tells the controller whether the current time unit has input.
// What an input neuron stores is not described in the paper; a spike flag
// and an age counter are what the adder and the STDP rule need.
module input_neuron_block #(
  parameter int N_IN  = snn_pkg::N_IN,
  parameter int AGE_W = snn_pkg::AGE_W,
  localparam int AW   = $clog2(N_IN)
) (
  input  logic             clk,
  input  logic             restart,
  input  logic             tick,
  input  logic [N_IN-1:0]  spikes_in,
  input  logic [AW-1:0]    sel,
  output logic             spk_sel,
  output logic [AGE_W-1:0] age_sel,
  output logic             any_spike
);
  localparam logic [AGE_W-1:0] AGE_SAT = '1;

  logic [N_IN-1:0]  spk;
  logic [AGE_W-1:0] age [N_IN];

  always_ff @(posedge clk)
    if (restart) begin
      spk <= '0;
      for (int i = 0; i < N_IN; i++) age[i] <= AGE_SAT;
    end else if (tick) begin
      spk <= spikes_in;
      for (int i = 0; i < N_IN; i++)
        if (spikes_in[i])          age[i] <= '0;
        else if (age[i] != AGE_SAT) age[i] <= age[i] + AGE_W'(1);
    end

  assign spk_sel   = spk[sel];
  assign age_sel   = age[sel];
  assign any_spike = |spk;
endmodule
