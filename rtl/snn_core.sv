// snn_core: the fully connected two-layer spiking network.
//
// Holds the input neuron block, the shared STDP exponent tables, the lateral
// inhibition unit and N_OUT output neurons, each connected to all N_IN inputs
// (784 x 16 = 12,544 synapses at the defaults). All output neurons work in
// lock step: in a synapse pass the controller presents input idx in one
// cycle; its spike bit and STDP factors (from its age and from next_dt, the
// time to its next spike) are registered here so they meet the weight that
// each neuron's FIFO delivers one cycle later. Because the factors depend
// only on the input's timing, one table serves all neurons. fire_eval runs
// the threshold test through lateral inhibition. Host weight access selects
// one neuron by h_sel; h_rdata is valid one cycle after h_rot. The structure
// follows the paper's core; the lock-step pass and the registering are this
// design's.
module snn_core #(
  parameter int N_IN  = snn_pkg::N_IN,
  parameter int N_OUT = snn_pkg::N_OUT,
  parameter int W     = snn_pkg::W,
  parameter int CNT_W = snn_pkg::CNT_W,
  localparam int AW   = $clog2(N_IN),
  localparam int OW   = $clog2(N_OUT),
  localparam int LUT_W = snn_pkg::LUT_W,
  localparam int AGE_W = snn_pkg::AGE_W,
  localparam int PER_W = snn_pkg::PER_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                h_push,
  input  logic                h_rot,
  input  logic [OW-1:0]       h_sel,
  input  logic signed [W-1:0] h_wdata,
  output logic signed [W-1:0] h_rdata,
  output logic                h_rvalid,
  input  logic                init,
  input  logic                tick,
  input  logic [N_IN-1:0]     spikes_in,
  input  logic [PER_W-1:0]    next_dt,
  input  logic [AW-1:0]       idx,
  input  logic                pass_pop,
  input  logic                pass_wc,
  input  logic                fire_eval,
  input  logic                sc,
  input  logic signed [W-1:0] vth,
  output logic                any_spike,
  output logic                any_fire,
  output logic [N_OUT-1:0]    fire,
  output logic                li_event,
  output logic [CNT_W-1:0]    spike_cnt [N_OUT]
);
  logic                    spk_sel;
  logic [AGE_W-1:0]        age_sel;
  logic signed [LUT_W-1:0] dw_pot, dw_dep, d_dw_pot, d_dw_dep;
  logic                    d_spk;
  logic [N_OUT-1:0]        above, inhibit, fired, rvalid;
  logic signed [W-1:0]     pot    [N_OUT];
  logic signed [W-1:0]     rdata  [N_OUT];

  input_neuron_block #(.N_IN(N_IN), .AGE_W(AGE_W)) u_in (
    .clk, .restart(init), .tick, .spikes_in, .sel(idx),
    .spk_sel, .age_sel, .any_spike
  );

  exp_lut u_lut (.age(age_sel), .next_dt, .dw_pot, .dw_dep);

  always_ff @(posedge clk) begin
    d_spk    <= spk_sel;
    d_dw_pot <= dw_pot;
    d_dw_dep <= dw_dep;
  end

  lateral_inhibition #(.N_OUT(N_OUT), .W(W)) u_li (
    .clk, .init, .eval(fire_eval), .above, .pot, .fire, .inhibit, .event_o(li_event)
  );

  for (genvar j = 0; j < N_OUT; j++) begin : g_out
    output_neuron #(.N_IN(N_IN), .W(W), .CNT_W(CNT_W)) u_on (
      .clk, .rst_n,
      .h_push  (h_push && int'(h_sel) == j),
      .h_wdata,
      .h_rot   (h_rot && int'(h_sel) == j),
      .h_rdata (rdata[j]),
      .h_rvalid(rvalid[j]),
      .init, .decay(tick), .pass_pop, .pass_wc,
      .d_spk, .d_dw_pot, .d_dw_dep, .vth,
      .fire(fire[j]), .inhibit(inhibit[j]), .sc,
      .p(pot[j]), .above(above[j]), .fired(fired[j]), .spike_cnt(spike_cnt[j])
    );
  end

  always_comb begin
    h_rdata = '0;
    for (int j = 0; j < N_OUT; j++) if (rvalid[j]) h_rdata = rdata[j];
  end
  assign h_rvalid = |rvalid;
  assign any_fire = |fire;
endmodule
