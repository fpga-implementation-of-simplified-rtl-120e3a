// class_decoder: class decoder of the output classifier.
//
// There are more output neurons (16) than classes, and which neuron learns
// which class is only known after training, so the decoder is a small label
// table: the host writes a class label for each output neuron (lbl_we), and
// the winning neuron's label is presented on cls (combinational). The table
// form is this design's; the paper only names the block. Labels reset to 0.
module class_decoder #(
  parameter int N_OUT = snn_pkg::N_OUT,
  parameter int CLS_W = 4,
  localparam int IW   = $clog2(N_OUT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lbl_we,
  input  logic [IW-1:0]    lbl_idx,
  input  logic [CLS_W-1:0] lbl_data,
  input  logic [IW-1:0]    idx,
  output logic [CLS_W-1:0] cls
);
  logic [CLS_W-1:0] label [N_OUT];

  always_ff @(posedge clk)
    if (!rst_n)      for (int j = 0; j < N_OUT; j++) label[j] <= '0;
    else if (lbl_we) label[lbl_idx] <= lbl_data;

  assign cls   = label[idx];
endmodule
