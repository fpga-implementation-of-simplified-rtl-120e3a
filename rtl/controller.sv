// controller: image sequencer and time-unit generator.
//
// Runs one image after start:
//   PREP   one cycle per pixel: receptive field -> spike period, stored.
//   INIT   restart spike generators (and neurons, counters, inhibition).
//   THR    threshold pre-pass: one cycle per time unit, spikes only counted;
//          followed by a second INIT so the real run sees the same trains.
//   then T_UNITS time units, each built from the processes of the paper's
//   time-unit breakdown:
//   DECAY  (tpd, 1 cycle) new time unit: spike generators tick, input
//          neurons latch their spikes, every output neuron leaks.
//   ADD    (tpa, N_IN+2 cycles incl. ADD_END and FIRE) only if some input
//          spiked: one synapse per cycle through all weight FIFOs, then the
//          threshold test with lateral inhibition (FIRE).
//   WC     (twc, N_IN+1 cycles incl. WC_END) only when training and some
//          output neuron fired: one synapse per cycle through the STDP unit.
//   SC     (tsc, 1 cycle) spike counters add the time unit's spikes.
//   DONE   classification result is taken; back to IDLE.
// A time unit thus lasts 2 cycles without input, N_IN+4 with input and
// 2*N_IN+5 with input and output spikes while training. The order and the
// conditional processes follow the paper; the threshold pre-pass, the cycle
// counts and a spike-counter step in every time unit are this design's.
// any_spike must be valid (combinationally) in the DECAY cycle and any_fire
// in the FIRE cycle.
module controller #(
  parameter int N_IN    = snn_pkg::N_IN,
  parameter int T_UNITS = snn_pkg::T_UNITS,
  localparam int AW     = $clog2(N_IN),
  localparam int TW     = $clog2(T_UNITS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          train,
  input  logic          any_spike,
  input  logic          any_fire,
  output snn_pkg::phase_e        phase,
  output logic [AW-1:0] idx,
  output logic [TW-1:0] tu,
  output logic          prep_we,
  output logic          gen_restart,
  output logic          gen_tick,
  output logic          thr_clear,
  output logic          thr_sample,
  output logic          init,
  output logic          decay,
  output logic          pass_pop,
  output logic          pass_wc,
  output logic          fire_eval,
  output logic          sc,
  output logic          done,
  output logic          busy
);
  import snn_pkg::*;

  logic thr_pending, train_q;
  wire  last_idx = (int'(idx) == N_IN - 1);
  wire  last_tu  = (int'(tu) == T_UNITS - 1);

  always_ff @(posedge clk)
    if (!rst_n) begin
      phase       <= PH_IDLE;
      idx         <= '0;
      tu          <= '0;
      thr_pending <= 1'b0;
      train_q     <= 1'b0;
    end else begin
      unique case (phase)
        PH_IDLE: if (start) begin
          phase   <= PH_PREP;
          idx     <= '0;
          train_q <= train;
        end
        PH_PREP: begin
          idx <= idx + AW'(1);
          if (last_idx) begin
            phase       <= PH_INIT;
            thr_pending <= 1'b1;
          end
        end
        PH_INIT: begin
          tu  <= '0;
          idx <= '0;
          phase <= thr_pending ? PH_THR : PH_DECAY;
        end
        PH_THR: begin
          tu <= tu + TW'(1);
          if (last_tu) begin
            phase       <= PH_INIT;
            thr_pending <= 1'b0;
          end
        end
        PH_DECAY: begin
          idx   <= '0;
          phase <= any_spike ? PH_ADD : PH_SC;
        end
        PH_ADD: begin
          idx <= idx + AW'(1);
          if (last_idx) phase <= PH_ADD_END;
        end
        PH_ADD_END: phase <= PH_FIRE;
        PH_FIRE: begin
          idx   <= '0;
          phase <= (train_q && any_fire) ? PH_WC : PH_SC;
        end
        PH_WC: begin
          idx <= idx + AW'(1);
          if (last_idx) phase <= PH_WC_END;
        end
        PH_WC_END: phase <= PH_SC;
        PH_SC: begin
          tu    <= tu + TW'(1);
          phase <= last_tu ? PH_DONE : PH_DECAY;
        end
        PH_DONE: phase <= PH_IDLE;
        default: phase <= PH_IDLE;
      endcase
    end

  always_comb begin
    prep_we     = (phase == PH_PREP);
    gen_restart = (phase == PH_INIT);
    init        = (phase == PH_INIT);
    gen_tick    = (phase == PH_THR) || (phase == PH_DECAY);
    thr_clear   = (phase == PH_IDLE) && start;
    thr_sample  = (phase == PH_THR);
    decay       = (phase == PH_DECAY);
    pass_pop    = (phase == PH_ADD) || (phase == PH_WC);
    pass_wc     = (phase == PH_WC);
    fire_eval   = (phase == PH_FIRE);
    sc          = (phase == PH_SC);
    done        = (phase == PH_DONE);
    busy        = (phase != PH_IDLE);
  end
endmodule
