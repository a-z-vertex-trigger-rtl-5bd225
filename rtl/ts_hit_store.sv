// ts_hit_store: the TS hits of the current event, addressable by TS id.
//
// The trigger receives TS hits (TS id plus priority-wire drift time) from the
// stereo track segment finders and, with the 2D tracks, the axial ones. The
// MLP input formatters need, for every "relevant" TS of a sector, whether it
// has a hit and its drift time. This store keeps one entry per TS id
// (1..N_TS): a valid bit and an 8-bit drift time.
//
// Writes: NWR hit ports per cycle. When a TS is hit more than once in an event
// (in one cycle or over several) the smallest drift time is kept; the paper
// asks for the fastest hit where an SL has two hits, and this store applies
// the same rule per TS. Id 0 is ignored. `clear` empties the store for a new
// event; writes in the clear cycle already belong to the new event.
// Reads: NRD combinational read ports, id -> (valid, drift time), showing the
// state as of the last clock edge.
module ts_hit_store
  import nt_pkg::*;
#(
  parameter int NWR  = 5,        // 4 stereo TSF boards + axial TS from the 2D board
  parameter int NRD  = N_REL,
  parameter int NTS  = N_TS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic    [NWR-1:0] wr_valid,
  input  ts_hit_t           wr_hit   [NWR],
  input  ts_id_t            rd_id    [NRD],
  output logic    [NRD-1:0] rd_valid,
  output dt_t               rd_t     [NRD]
);

  logic [NTS:1] valid_q;
  dt_t          t_q [NTS:1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      for (int e = 1; e <= NTS; e++) t_q[e] <= dt_t'(DT_MAX);
    end else begin
      for (int e = 1; e <= NTS; e++) begin
        logic v;
        dt_t  t;
        v = clear ? 1'b0 : valid_q[e];
        t = t_q[e];
        for (int p = 0; p < NWR; p++) begin
          if (wr_valid[p] && int'(wr_hit[p].id) == e) begin
            if (!v || wr_hit[p].t < t) t = wr_hit[p].t;
            v = 1'b1;
          end
        end
        valid_q[e] <= v;
        t_q[e]     <= t;
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) begin
      if (int'(rd_id[r]) >= 1 && int'(rd_id[r]) <= NTS) begin
        rd_valid[r] = valid_q[rd_id[r]];
        rd_t[r]     = t_q[rd_id[r]];
      end else begin
        rd_valid[r] = 1'b0;
        rd_t[r]     = dt_t'(DT_MAX);
      end
    end
  end

endmodule
