// tanh_lut: fixed-point hyperbolic tangent, the MLP activation function.
//
// The paper's neurons evaluate their weighted input sum with tanh. This unit
// takes the sum in the 12-fraction-bit format (any width IN_W), saturates it
// to [-4, 4), and looks the result up in a table of 2^ABITS entries spread
// evenly over that interval (1/128 steps for the default 10 address bits).
// Entry e holds round(4096 * tanh(c_e)) where c_e is the centre of the e-th
// interval; beyond |x| = 4 tanh differs from +-1 by less than 0.0007. The
// table is computed at elaboration from $tanh, so no data file is needed.
// Table size and input range are this design's choice.
//
// Timing: one register stage (the table read), y follows x by one clock.
module tanh_lut
  import nt_pkg::*;
#(
  parameter int IN_W  = 28,
  parameter int ABITS = 10
) (
  input  logic                   clk,
  input  logic signed [IN_W-1:0] x,
  output fx_t                    y
);

  localparam int DEPTH = 1 << ABITS;
  localparam int XMAX  = 4 * FX_ONE;               // saturation point
  localparam int STEP  = (2 * XMAX) / DEPTH;       // LSBs per table entry

  fx_t table_q [DEPTH];

  initial begin
    for (int e = 0; e < DEPTH; e++) begin
      real c;
      c = (real'(e * STEP) + real'(STEP) / 2.0 - real'(XMAX)) / real'(FX_ONE);
      table_q[e] = fx_t'($rtoi($tanh(c) * real'(FX_ONE) + ($tanh(c) >= 0.0 ? 0.5 : -0.5)));
    end
  end

  logic [ABITS-1:0] addr;

  // IN_W must not exceed 32.
  always_comb begin
    int xi;
    if (x >= IN_W'(XMAX))       xi = XMAX - 1;
    else if (x < -IN_W'(XMAX))  xi = -XMAX;
    else                        xi = int'(x);
    addr = ABITS'((xi + XMAX) / STEP);
  end

  always_ff @(posedge clk) y <= table_q[addr];

endmodule
