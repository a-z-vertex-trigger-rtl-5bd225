// chain_ctrl: runs the prediction chain for one track at a time.
//
// The paper's trigger finds z in a chain of steps. Step 0 starts from the 2D
// track (pT, phi); its MLP pair predicts z and theta, which select a narrower
// sector for step 1, whose prediction selects the sector of step 2, whose z is
// the result. A track whose z prediction falls outside the next step's z range
// is dropped at once (the paper notes such tracks can be rejected already).
// After the last step the z-cut decision |z| <= 6 cm is made (the cut of the
// paper's efficiency study).
//
// Per step the controller
//   SEL   selects the sector (sector_select) or rejects the track,
//   LOAD  has weight_loader fetch the sector's TS list and weights,
//   FMT   waits one clock for the input formatters to see the new TS list,
//   RUN   starts both MLPs and waits for their outputs,
//   COMB  averages and scales them (pred_combine).
// Then the next step starts, or the result is sent (OUT).
//
// Interfaces: tracks by ready/valid (track_ready is high in IDLE), the loader
// and the MLPs by start/done pulses, the result as a one-clock res_valid
// pulse. Timing (FMT_WAIT = 1): a step takes D + 10 clocks, D being the
// clocks from ld_start to ld_done; a track that passes all three steps gives
// its result 3*D + 32 clocks after it was taken from the queue. With
// weight_loader D = LAT + REC_BEATS + 2 for a memory that returns the first
// word LAT clocks after accepting the request and then one word per clock.
// The FSM structure and the one-track-at-a-time schedule are this design's
// choice; the paper gives the chain, not its control.
module chain_ctrl
  import nt_pkg::*;
#(
  parameter int PHI0     = 0,
  parameter int FMT_WAIT = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  // 2D tracks
  input  logic       track_valid,
  output logic       track_ready,
  input  track2d_t   track,
  // parameter loader
  output logic       ld_start,
  output sec_t       ld_index,
  input  logic       ld_done,
  // MLPs
  output logic       mlp_start,
  input  logic       mlp_valid,
  input  fx_t        y_topo [N_OUT],
  input  fx_t        y_sl   [N_OUT],
  // result
  output logic       res_valid,
  output nt_result_t result
);

  typedef enum logic [2:0] {IDLE, SEL, LOAD, FMT, RUN, COMB, OUT} state_t;

  state_t   state;
  logic [1:0] step;
  track2d_t trk;
  pred_t    prev;
  sector_t  sec_q, sec_sel;
  logic     sel_reject;
  logic     comb_valid;
  pred_t    comb_pred;
  logic [3:0] wcnt;

  sector_select #(.PHI0(PHI0)) u_sel (
    .step(step), .track(trk), .prev(prev), .sector(sec_sel), .reject(sel_reject)
  );

  pred_combine u_comb (
    .clk(clk), .rst_n(rst_n), .in_valid(state == RUN && mlp_valid),
    .y_topo(y_topo), .y_sl(y_sl), .sector(sec_q),
    .out_valid(comb_valid), .pred(comb_pred)
  );

  assign track_ready = (state == IDLE);
  assign ld_index    = sec_q.index;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      step      <= '0;
      trk       <= '0;
      prev      <= '0;
      sec_q     <= '0;
      wcnt      <= '0;
      ld_start  <= 1'b0;
      mlp_start <= 1'b0;
      res_valid <= 1'b0;
      result    <= '0;
    end else begin
      ld_start  <= 1'b0;
      mlp_start <= 1'b0;
      res_valid <= 1'b0;
      unique case (state)
        IDLE: if (track_valid) begin
          trk   <= track;
          step  <= '0;
          prev  <= '0;
          state <= SEL;
        end
        SEL: if (sel_reject) begin
          result    <= '{rejected: 1'b1, last_step: step, z_trig: 1'b0,
                         z: prev.z, theta: prev.theta};
          res_valid <= 1'b1;
          state     <= IDLE;
        end else begin
          sec_q    <= sec_sel;
          ld_start <= 1'b1;
          state    <= LOAD;
        end
        LOAD: if (ld_done) begin
          wcnt  <= '0;
          state <= FMT;
        end
        FMT: begin
          wcnt <= wcnt + 1'b1;
          if (int'(wcnt) == FMT_WAIT - 1) begin
            mlp_start <= 1'b1;
            state     <= RUN;
          end
        end
        RUN: if (mlp_valid) state <= COMB;
        COMB: if (comb_valid) begin
          prev <= comb_pred;
          if (int'(step) == N_STEPS - 1) state <= OUT;
          else begin
            step  <= step + 1'b1;
            state <= SEL;
          end
        end
        OUT: begin
          result <= '{rejected: 1'b0, last_step: step,
                      z_trig: (int'(prev.z) <= Z_CUT) && (int'(prev.z) >= -Z_CUT),
                      z: prev.z, theta: prev.theta};
          res_valid <= 1'b1;
          state     <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
