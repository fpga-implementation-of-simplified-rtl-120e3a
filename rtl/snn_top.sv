// snn_top: simplified spiking neural network, 784 inputs x 16 outputs.
//
// An image is written pixel by pixel, then start runs it through the
// preprocessor (receptive field blur, spike periods, threshold pre-pass) and
// T_UNITS event-driven time units in the core; with train high, STDP adapts
// the weights whenever an output neuron fires. At the end the output
// classifier picks the output neuron with the most spikes and decodes its
// class label; done pulses, and out_class / winner / out_valid (some neuron
// fired) hold the result until the next image.
// Before use the host fills each output neuron's weight FIFO with N_IN
// weights (w_we, w_sel, w_wdata, input order) and writes the class labels
// (lbl_we). When idle, w_rd rotates neuron w_sel's FIFO by one word and shows
// it on w_rdata one cycle later, so N_IN reads return all its weights and
// leave the FIFO as it was. Pixel, weight and label writes are ignored while
// busy. phase, tu (time unit), fire, li_event and threshold are for
// observation. The block structure follows the paper's block diagram; the
// host ports are this design's.
module snn_top #(
  parameter int N_IN    = snn_pkg::N_IN,
  parameter int N_OUT   = snn_pkg::N_OUT,
  parameter int T_UNITS = snn_pkg::T_UNITS,
  parameter int IMG_W   = 28,
  localparam int AW     = $clog2(N_IN),
  localparam int OW     = $clog2(N_OUT)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pix_we,
  input  logic [AW-1:0]       pix_addr,
  input  logic [snn_pkg::PIX_W-1:0] pix_data,
  input  logic                w_we,
  input  logic                w_rd,
  input  logic [OW-1:0]       w_sel,
  input  logic signed [snn_pkg::W-1:0] w_wdata,
  output logic signed [snn_pkg::W-1:0] w_rdata,
  output logic                w_rvalid,
  input  logic                lbl_we,
  input  logic [OW-1:0]       lbl_idx,
  input  logic [3:0]          lbl_data,
  input  logic                start,
  input  logic                train,
  output logic                busy,
  output logic                done,
  output logic [3:0]          out_class,
  output logic                out_valid,
  output logic [OW-1:0]       winner,
  output logic [snn_pkg::CNT_W-1:0] spike_count [N_OUT],
  output logic signed [snn_pkg::W-1:0] threshold,
  output snn_pkg::phase_e              phase,
  output logic [N_OUT-1:0]    fire,
  output logic                li_event,
  output logic [$clog2(T_UNITS+1)-1:0] tu
);
  import snn_pkg::*;

  logic [AW-1:0]    idx;
  logic             prep_we, gen_restart, gen_tick, thr_clear, thr_sample;
  logic             init, decay, pass_pop, pass_wc, fire_eval, sc;
  logic             any_fire, core_any_spike;
  logic [N_IN-1:0]  spikes;
  logic [PER_W-1:0] next_dt;
  logic [OW-1:0]    win_idx;
  logic [CNT_W-1:0] max_cnt;
  logic [3:0]       cls;

  controller #(.N_IN(N_IN), .T_UNITS(T_UNITS)) u_ctl (
    .clk, .rst_n, .start, .train,
    .any_spike(|spikes), .any_fire,
    .phase, .idx, .tu, .prep_we, .gen_restart, .gen_tick, .thr_clear, .thr_sample,
    .init, .decay, .pass_pop, .pass_wc, .fire_eval, .sc, .done, .busy
  );

  preprocessor #(.N_IN(N_IN), .IMG_W(IMG_W)) u_pre (
    .clk, .pix_we(pix_we && !busy), .pix_addr, .pix_data, .idx, .prep_we,
    .gen_restart, .gen_tick, .thr_clear, .thr_sample,
    .spikes, .next_dt, .vth(threshold)
  );

  snn_core #(.N_IN(N_IN), .N_OUT(N_OUT)) u_core (
    .clk, .rst_n,
    .h_push(w_we && !busy), .h_rot(w_rd && !busy), .h_sel(w_sel), .h_wdata(w_wdata),
    .h_rdata(w_rdata), .h_rvalid(w_rvalid),
    .init, .tick(decay), .spikes_in(spikes), .next_dt, .idx,
    .pass_pop, .pass_wc, .fire_eval, .sc, .vth(threshold),
    .any_spike(core_any_spike), .any_fire, .fire, .li_event, .spike_cnt(spike_count)
  );

  max_spike_detect #(.N_OUT(N_OUT)) u_max (.counts(spike_count), .idx(win_idx), .max_cnt);

  class_decoder #(.N_OUT(N_OUT)) u_dec (
    .clk, .rst_n, .lbl_we(lbl_we && !busy), .lbl_idx, .lbl_data,
    .idx(win_idx), .cls
  );

  always_ff @(posedge clk)
    if (!rst_n) begin
      out_class <= '0;
      out_valid <= 1'b0;
      winner    <= '0;
    end else if (done) begin
      out_class <= cls;
      out_valid <= (max_cnt != '0);
      winner    <= win_idx;
    end

  // The controller decides ADD vs SC from the generator's spikes; the input
  // neurons latch the same vector, so both views agree one cycle later.
  a_spike_view: assert property (@(posedge clk) disable iff (!rst_n)
    decay |=> core_any_spike == $past(|spikes));
endmodule
