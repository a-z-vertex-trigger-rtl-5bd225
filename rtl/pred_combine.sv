// pred_combine: one step's prediction from the outputs of its two MLPs.
//
// Each step runs two MLPs trained on the same sector, one with topological
// inputs and one with TS ids as extra inputs; the paper averages their
// predictions because the combination resolves better than either. The MLP
// outputs lie in [-1,1] and are scaled to the sector's interval:
//   z     = avg(z outputs)     * z_half
//   theta = th_center + avg(theta outputs) * th_half
// (the paper's z ranges are symmetric about 0). Averaging before scaling is
// the same as scaling both and averaging; the rounding (towards minus
// infinity, 12 fraction bits) is this design's choice.
//
// Timing: one register stage; out_valid follows in_valid by one clock.
//
// The whole sector record is taken as one struct so that the step's sector
// travels as a unit; its index and step fields are not needed here and are
// reported unused by lint, which is expected.
module pred_combine
  import nt_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  fx_t     y_topo [N_OUT],
  input  fx_t     y_sl   [N_OUT],
  input  sector_t sector,
  output logic    out_valid,
  output pred_t   pred
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pred      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        int az, at;
        az = (int'(y_topo[0]) + int'(y_sl[0])) >>> 1;
        at = (int'(y_topo[1]) + int'(y_sl[1])) >>> 1;
        pred.z     <= zval_t'((az * int'(sector.z_half)) >>> FX_FRAC);
        pred.theta <= thval_t'(int'(sector.th_center) + ((at * int'(sector.th_half)) >>> FX_FRAC));
      end
    end
  end

endmodule
