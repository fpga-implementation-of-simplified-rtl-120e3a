// input_spike_gen: input spike generator.
//
// Each input neuron owns a period register (written once per image by the
// spike frequency generator) and a countdown. restart loads every countdown
// with its period; each tick (one time unit) decrements it, and an input
// spikes on the tick where its countdown is 1, which reloads the period. An
// input with period P therefore fires in time units P-1, 2P-1, ... counted
// from 0 after restart; period 0 never fires. spikes is combinational and
// valid in the cycle tick is high. After a tick, next_dt is the number of
// time units until input sel fires again (0 when it never will), which the
// STDP depression rule uses. Spike trains are strictly periodic: the paper
// gives the rate only, so regular trains are this design's choice.
module input_spike_gen #(
  parameter int N_IN  = snn_pkg::N_IN,
  parameter int PER_W = snn_pkg::PER_W,
  localparam int AW   = $clog2(N_IN)
) (
  input  logic             clk,
  input  logic             per_we,
  input  logic [AW-1:0]    per_idx,
  input  logic [PER_W-1:0] per_data,
  input  logic             restart,
  input  logic             tick,
  output logic [N_IN-1:0]  spikes,
  input  logic [AW-1:0]    sel,
  output logic [PER_W-1:0] next_dt
);
  logic [PER_W-1:0] period [N_IN];
  logic [PER_W-1:0] cnt    [N_IN];

  always_ff @(posedge clk)
    if (per_we && int'(per_idx) < N_IN) period[per_idx] <= per_data;

  always_comb
    for (int i = 0; i < N_IN; i++)
      spikes[i] = tick && period[i] != '0 && cnt[i] == PER_W'(1);

  always_ff @(posedge clk)
    for (int i = 0; i < N_IN; i++) begin
      if (restart)                 cnt[i] <= period[i];
      else if (tick) begin
        if (cnt[i] == PER_W'(1))   cnt[i] <= period[i];
        else if (cnt[i] != '0)     cnt[i] <= cnt[i] - PER_W'(1);
      end
    end

  assign next_dt = cnt[sel];
endmodule
