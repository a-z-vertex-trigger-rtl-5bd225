// topo_formatter: inputs of the MLP with topological input distribution.
//
// One MLP input per relevant TS of the sector. The input is the TS drift time
// with the event time subtracted (the TSF drift times carry a random offset
// that the event time estimate removes), scaled from 0..255 (2 ns LSB) to
// [-1,1]. A relevant TS with no hit in the event gets the maximal drift time,
// as if the track were far away from it (both rules are the paper's).
//
// This design's choices: a corrected time below 0 is clamped to 0, the scaling
// is x = (2*t - 255) * 16 in the 12-fraction-bit format (t = 255 gives 4080,
// just below 1.0), and a relevant-list slot with id 0 (an unused slot) is
// treated as a TS without hit.
//
// Timing: one register stage; x follows the inputs by one clock.
module topo_formatter
  import nt_pkg::*;
#(
  parameter int NREL = N_REL
) (
  input  logic            clk,
  input  logic            rst_n,
  input  dt_t             event_time,
  input  logic [NREL-1:0] hit_valid,
  input  dt_t             hit_t [NREL],
  output fx_t             x     [NREL]
);

  function automatic fx_t scale_dt(input int t);
    return fx_t'((2 * t - DT_MAX) * 16);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREL; r++) x[r] <= scale_dt(DT_MAX);
    end else begin
      for (int r = 0; r < NREL; r++) begin
        int tc;
        tc = int'(hit_t[r]) - int'(event_time);
        if (tc < 0) tc = 0;
        x[r] <= hit_valid[r] ? scale_dt(tc) : scale_dt(DT_MAX);
      end
    end
  end

endmodule
