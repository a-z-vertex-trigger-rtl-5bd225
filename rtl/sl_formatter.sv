// sl_formatter: inputs of the MLP with TS ids as additional inputs.
//
// Two inputs per superlayer: input 2*s is the drift time and input 2*s+1 the
// TS id of the hit in SL s, both scaled to [-1,1]. Only the sector's relevant
// TS are considered. Where an SL has more than one hit, the fastest (smallest
// event-time-corrected drift time) is used; where it has none, defaults are
// used (these rules are the paper's). The TS numbering inside an SL is
// continuous, so the scaled id works as a scaled azimuthal angle.
//
// This design's choices: the defaults (maximal drift time, id input 0), the
// scaling of the id over the whole SL, x = local * 8192 / (n - 1) - 4096 with
// local = 0..n-1 (done as a multiplication by a rounded reciprocal), the time
// scaling of topo_formatter, and that a tie goes to the lower list slot.
//
// Timing: one register stage; x follows the inputs by one clock.
module sl_formatter
  import nt_pkg::*;
#(
  parameter int NREL = N_REL
) (
  input  logic            clk,
  input  logic            rst_n,
  input  dt_t             event_time,
  input  ts_id_t          rel_id    [NREL],
  input  logic [NREL-1:0] hit_valid,
  input  dt_t             hit_t     [NREL],
  output fx_t             x         [2*N_SL]
);

  localparam int RSH = 10;

  function automatic int id_recip(input logic [3:0] sl);
    return (8192 * (1 << RSH) + (SL_NTS[sl] - 1) / 2) / (SL_NTS[sl] - 1);
  endfunction

  function automatic fx_t scale_dt(input int t);
    return fx_t'((2 * t - DT_MAX) * 16);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N_SL; s++) begin
        x[2*s]   <= scale_dt(DT_MAX);
        x[2*s+1] <= '0;
      end
    end else begin
      for (int s = 0; s < N_SL; s++) begin
        logic found;
        int   best_t, best_local, tc;
        found      = 1'b0;
        best_t     = DT_MAX;
        best_local = 0;
        for (int r = 0; r < NREL; r++) begin
          if (hit_valid[r] && rel_id[r] != '0 && sl_of(rel_id[r]) == s) begin
            tc = int'(hit_t[r]) - int'(event_time);
            if (tc < 0) tc = 0;
            if (!found || tc < best_t) begin
              best_t     = tc;
              best_local = int'(rel_id[r]) - sl_base(s) - 1;
            end
            found = 1'b1;
          end
        end
        x[2*s]   <= scale_dt(best_t);
        x[2*s+1] <= found ? fx_t'(((best_local * id_recip(4'(s))) >>> RSH) - FX_ONE) : '0;
      end
    end
  end

endmodule
