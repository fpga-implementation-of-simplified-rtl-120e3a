// exp_lut: STDP exponent lookup tables, shared by all output neurons.
//
// When output neurons fire, every synapse i gets the same two factors, as
// they depend only on input i's spike timing relative to the present time
// unit:
//   dw_pot = +SIGMA*A_PLUS *exp(-age/TAU_PLUS)      if DT_LO <= age <= DT_HI
//   dw_dep = -SIGMA*A_MINUS*exp(-next_dt/TAU_MINUS) if DT_LO <= next_dt <= DT_HI
// and 0 otherwise, where age is the time since input i last fired (pre
// before post) and next_dt the time until it fires next (post before pre).
// Each table has DT_HI-DT_LO+1 = 19 entries, as in the paper; the learning
// rate SIGMA is folded into the entries. Values are signed Q16, computed at
// elaboration. The window is the paper's; the amplitudes and time constants
// are this design's choices. Combinational.
module exp_lut #(
  parameter int  AGE_W     = snn_pkg::AGE_W,
  parameter int  PER_W     = snn_pkg::PER_W,
  parameter int  LUT_W     = snn_pkg::LUT_W,
  parameter int  DT_LO     = snn_pkg::DT_LO,
  parameter int  DT_HI     = snn_pkg::DT_HI,
  parameter real SIGMA     = 0.1,
  parameter real A_PLUS    = 0.8,
  parameter real A_MINUS   = 0.3,
  parameter real TAU_PLUS  = 8.0,
  parameter real TAU_MINUS = 5.0
) (
  input  logic [AGE_W-1:0]        age,
  input  logic [PER_W-1:0]        next_dt,
  output logic signed [LUT_W-1:0] dw_pot,
  output logic signed [LUT_W-1:0] dw_dep
);
  localparam int NE = DT_HI - DT_LO + 1;
  typedef int tab_t [NE];

  function automatic tab_t mk_tab(real amp, real tau, int sgn);
    tab_t t;
    for (int k = 0; k < NE; k++)
      t[k] = sgn * int'(amp * $exp(-real'(k + DT_LO) / tau) * 65536.0);
    return t;
  endfunction

  localparam tab_t POT = mk_tab(SIGMA * A_PLUS,  TAU_PLUS,  1);
  localparam tab_t DEP = mk_tab(SIGMA * A_MINUS, TAU_MINUS, -1);

  always_comb begin
    dw_pot = '0;
    dw_dep = '0;
    if (int'(age) >= DT_LO && int'(age) <= DT_HI)
      dw_pot = LUT_W'(POT[int'(age) - DT_LO]);
    if (int'(next_dt) >= DT_LO && int'(next_dt) <= DT_HI)
      dw_dep = LUT_W'(DEP[int'(next_dt) - DT_LO]);
  end
endmodule
