// output_neuron: one neuron of the output layer with its synapses.
//
// Combines the neuron's weight FIFO (weights_memory), its membrane potential
// (potential_adder), its STDP update (weight_change_unit) and its spike
// counter. During a synapse pass the controller pops one weight per cycle
// (pass_pop); one cycle later the weight is in rdata and the caller supplies
// the matching input's spike (d_spk) and STDP factors (d_dw_pot, d_dw_dep).
// In an adder pass (pass_wc = 0) the weight is added when the input spiked
// and pushed back unchanged; in a weight-change pass (pass_wc = 1) it is
// pushed back updated if this neuron fired in the current time unit. The host
// can push initial weights (h_push) and, when idle, rotate the FIFO by one
// word (h_rot) to read weights back on h_rdata one cycle later. sc, the spike
// counter step at the end of a time unit, adds this time unit's spike to the
// image's count. The paper places potential adder, weight change unit and
// weights memory inside each output neuron; the spike counter's place is this
// design's choice.
module output_neuron #(
  parameter int N_IN  = snn_pkg::N_IN,
  parameter int W     = snn_pkg::W,
  parameter int LUT_W = snn_pkg::LUT_W,
  parameter int CNT_W = snn_pkg::CNT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host access to the weight FIFO
  input  logic                    h_push,
  input  logic signed [W-1:0]     h_wdata,
  input  logic                    h_rot,
  output logic signed [W-1:0]     h_rdata,
  output logic                    h_rvalid,
  // time-unit control
  input  logic                    init,
  input  logic                    decay,
  input  logic                    pass_pop,
  input  logic                    pass_wc,
  input  logic                    d_spk,
  input  logic signed [LUT_W-1:0] d_dw_pot,
  input  logic signed [LUT_W-1:0] d_dw_dep,
  input  logic signed [W-1:0]     vth,
  input  logic                    fire,
  input  logic                    inhibit,
  input  logic                    sc,
  output logic signed [W-1:0]     p,
  output logic                    above,
  output logic                    fired,
  output logic [CNT_W-1:0]        spike_cnt
);
  logic                pop, pop_d, wc_d, host_d, blocked;
  logic [W-1:0]        rdata_u;
  logic signed [W-1:0] rdata, w_upd, push_data;
  logic [$clog2(N_IN+1)-1:0] count;
  logic                full, empty;

  assign pop = pass_pop | h_rot;

  always_ff @(posedge clk)
    if (!rst_n) begin
      pop_d  <= 1'b0;
      wc_d   <= 1'b0;
      host_d <= 1'b0;
    end else begin
      pop_d  <= pop;
      wc_d   <= pass_pop & pass_wc;
      host_d <= h_rot;
    end

  weights_memory #(.DEPTH(N_IN), .W(W)) u_mem (
    .clk, .rst_n,
    .push (h_push | pop_d),
    .wdata(pop_d ? push_data : h_wdata),
    .pop,
    .rdata(rdata_u), .count, .full, .empty
  );
  assign rdata = signed'(rdata_u);

  weight_change_unit #(.W(W), .LUT_W(LUT_W)) u_wcu (
    .en(fired), .w_in(rdata), .dw_pot(d_dw_pot), .dw_dep(d_dw_dep), .w_out(w_upd)
  );

  assign push_data = wc_d ? w_upd : rdata;

  potential_adder #(.W(W)) u_pa (
    .clk, .init, .decay,
    .add_en (pop_d && !wc_d && !host_d && d_spk),
    .w      (rdata),
    .vth, .fire, .inhibit,
    .p, .above, .blocked
  );

  always_ff @(posedge clk)
    if (!rst_n || init) begin
      fired     <= 1'b0;
      spike_cnt <= '0;
    end else if (decay) begin
      fired <= 1'b0;
    end else if (fire) begin
      fired <= 1'b1;
    end else if (sc && fired && spike_cnt != '1) begin
      spike_cnt <= spike_cnt + CNT_W'(1);
    end

  assign h_rdata  = rdata;
  assign h_rvalid = host_d;

  // Host traffic and a synapse pass never overlap.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) !(pass_pop && (h_rot || h_push)));
endmodule
