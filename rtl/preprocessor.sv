// preprocessor: from image to input spike trains and firing threshold.
//
// Chains the receptive field window, the spike frequency generator and the
// input spike generator, and computes the variable threshold. While the
// controller steps idx through the pixels with prep_we high, the blurred value
// of pixel idx is turned into a spike period and stored for input neuron idx
// (one pixel per cycle). After that the controller restarts and ticks the
// spike generator; spikes is the spike vector of the time unit being ticked.
// The threshold unit counts spikes while thr_sample is high (the pre-pass).
// next_dt reports, for input idx, the time units until its next spike. The
// three stages are the paper's; the threshold unit's place is this design's.
module preprocessor #(
  parameter int N_IN  = snn_pkg::N_IN,
  parameter int IMG_W = 28,
  parameter int W     = snn_pkg::W,
  parameter int PIX_W = snn_pkg::PIX_W,
  parameter int PER_W = snn_pkg::PER_W,
  localparam int AW   = $clog2(N_IN)
) (
  input  logic                clk,
  input  logic                pix_we,
  input  logic [AW-1:0]       pix_addr,
  input  logic [PIX_W-1:0]    pix_data,
  input  logic [AW-1:0]       idx,
  input  logic                prep_we,
  input  logic                gen_restart,
  input  logic                gen_tick,
  input  logic                thr_clear,
  input  logic                thr_sample,
  output logic [N_IN-1:0]     spikes,
  output logic [PER_W-1:0]    next_dt,
  output logic signed [W-1:0] vth
);
  logic [PIX_W-1:0] rf;
  logic [PER_W-1:0] period;
  logic [$clog2(N_IN+1)-1:0] max_count;

  receptive_field #(.IMG_W(IMG_W), .PIX_W(PIX_W)) u_rf (
    .clk, .pix_we, .pix_addr, .pix_data, .rd_idx(idx), .rf
  );

  spike_freq_gen #(.PIX_W(PIX_W), .PER_W(PER_W)) u_sfg (
    .rf({1'b0, rf}), .period
  );

  input_spike_gen #(.N_IN(N_IN), .PER_W(PER_W)) u_isg (
    .clk, .per_we(prep_we), .per_idx(idx), .per_data(period),
    .restart(gen_restart), .tick(gen_tick), .spikes, .sel(idx), .next_dt
  );

  threshold_unit #(.N_IN(N_IN), .W(W)) u_thr (
    .clk, .clear(thr_clear), .sample(thr_sample), .spikes, .max_count, .vth
  );

  initial assert (IMG_W * IMG_W == N_IN) else $error("N_IN must equal IMG_W^2");
endmodule
