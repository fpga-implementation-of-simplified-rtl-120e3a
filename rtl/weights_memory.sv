// weights_memory: synapse weight store of one output neuron, used as a FIFO.
//
// A circular FIFO of DEPTH words with a synchronous read port, the shape of
// one block RAM. Every pass over the synapses pops the DEPTH weights in input
// order and pushes each one (updated or not) back, so the FIFO turns once per
// pass and weight i is always the i-th word popped. rdata is registered: the
// word popped in cycle n appears in cycle n+1. A push is accepted when the
// FIFO is full only together with a pop. Filling after reset is done by DEPTH
// pushes from the host. The FIFO organisation is the paper's; pointer and
// count logic are this design's.
module weights_memory #(
  parameter int DEPTH = snn_pkg::N_IN,
  parameter int W     = snn_pkg::W,
  localparam int AW   = $clog2(DEPTH),
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic [CW-1:0] count,
  output logic         full,
  output logic         empty
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + AW'(1);
  endfunction

  assign full  = (int'(count) == DEPTH);
  assign empty = (count == '0);

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wdata;
    if (pop)  rdata       <= mem[rd_ptr];
  end

  always_ff @(posedge clk)
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end

  // A pop from an empty FIFO or a push into a full one loses data.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push && !pop |-> !full);
endmodule
