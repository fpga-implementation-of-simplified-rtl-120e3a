// lateral_inhibition: winner-take-all among the output neurons.
//
// Evaluated once per time unit after the adder pass (eval). above[j] says
// output neuron j reached the threshold. Until the first output spike of an
// image, a time unit with crossings lets only one winner fire (highest
// potential, lowest index on a tie) and tells every other neuron to lose half
// the threshold (inhibit). After that first spike, every crossing neuron
// fires and nobody is inhibited. init clears the first-spike flag for a new
// image. fire and inhibit are combinational and valid while eval is high;
// event pulses when inhibition is applied. The first-spike rule and the half
// threshold are the paper's; the tie-break is this design's.
module lateral_inhibition #(
  parameter int N_OUT = snn_pkg::N_OUT,
  parameter int W     = snn_pkg::W
) (
  input  logic                clk,
  input  logic                init,
  input  logic                eval,
  input  logic [N_OUT-1:0]    above,
  input  logic signed [W-1:0] pot [N_OUT],
  output logic [N_OUT-1:0]    fire,
  output logic [N_OUT-1:0]    inhibit,
  output logic                event_o
);
  logic first_done;
  logic [$clog2(N_OUT)-1:0] win;

  always_comb begin
    logic found;
    found = 1'b0;
    win   = '0;
    for (int j = 0; j < N_OUT; j++)
      if (above[j] && (!found || pot[j] > pot[win])) begin
        win   = ($clog2(N_OUT))'(j);
        found = 1'b1;
      end
    fire    = '0;
    inhibit = '0;
    event_o = 1'b0;
    if (eval && |above) begin
      if (first_done) begin
        fire = above;
      end else begin
        fire[win] = 1'b1;
        inhibit   = ~fire;
        event_o   = 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (init)                first_done <= 1'b0;
    else if (eval && |above) first_done <= 1'b1;
endmodule
