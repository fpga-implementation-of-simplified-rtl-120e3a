// max_spike_detect: maximum spike detection of the output classifier.
//
// Returns the index of the output neuron with the largest spike count of the
// image and that count; ties go to the lowest index. Combinational
// comparison chain. The paper names the block; the tie rule is this design's.
module max_spike_detect #(
  parameter int N_OUT = snn_pkg::N_OUT,
  parameter int CNT_W = snn_pkg::CNT_W,
  localparam int IW   = $clog2(N_OUT)
) (
  input  logic [CNT_W-1:0] counts [N_OUT],
  output logic [IW-1:0]    idx,
  output logic [CNT_W-1:0] max_cnt
);
  always_comb begin
    idx     = '0;
    max_cnt = counts[0];
    for (int j = 1; j < N_OUT; j++)
      if (counts[j] > max_cnt) begin
        idx     = IW'(j);
        max_cnt = counts[j];
      end
  end
endmodule
