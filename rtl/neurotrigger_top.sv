// neurotrigger_top: one board of the neural z-vertex trigger.
//
// The board receives, for every event, the track segment (TS) hits of the
// stereo superlayers from the track segment finders, the 2D tracks (pT, phi)
// with the axial TS from the 2D trigger, and the event time from the event
// timing board. For each 2D track it estimates the z position of the track's
// vertex with a chain of three MLP steps, each step's z/theta prediction
// selecting a narrower phase-space sector, and thus a more specialised pair of
// MLPs, for the next. It reports z, theta and the decision |z| <= 6 cm.
//
// Data path:
//   TS hits ──> ts_hit_store ──(relevant TS of the sector)──> topo_formatter ─> mlp (topological)
//                                                          └> sl_formatter   ─> mlp (TS ids)
//   2D tracks ─> track_fifo ─> chain_ctrl (sector_select, pred_combine) ─> result
//   external memory <─> weight_loader ─> TS list + weights of both MLPs
//
// The serial links (GTH), the DDR3 memory and its controller, the 2D fitter
// and the event time finder are outside this module: their data arrive and
// leave as plain ports. Event protocol (this design's choice): `event_start`
// empties the hit store and latches `event_time`; hits of the event follow
// (or come in the same clock); its tracks may come at any time after. The
// hits must stay until the event's last track has been processed, so a new
// event_start must wait until the queue is empty and `busy` is low.
// A track that passes all three steps gives its result 3 * (REC_BEATS + LAT)
// + 38 clocks after leaving the queue, LAT being the clocks from the memory
// accepting a request to its first word (353 clocks for LAT = 20).
//
// The asynchronous reset also disables the assertions (disable iff), which
// lint reports as a reset used both asynchronously and in a
// synchronous context; it concerns only the assertions and is left as is.
module neurotrigger_top
  import nt_pkg::*;
#(
  parameter int NWR      = 5,          // TS hit ports: 4 stereo TSF boards + axial
  parameter int FIFO_D   = 8,
  parameter int PHI0     = 0,
  parameter int MEM_BASE = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  // event
  input  logic               event_start,
  input  dt_t                event_time,
  input  logic [NWR-1:0]     ts_valid,
  input  ts_hit_t            ts_hit [NWR],
  // 2D tracks
  input  logic               track_valid,
  output logic               track_ready,
  input  track2d_t           track,
  // parameter memory
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [MADDR_W-1:0] mem_req_addr,
  output logic [15:0]        mem_req_len,
  input  logic               mem_rd_valid,
  input  logic [MEM_W-1:0]   mem_rd_data,
  // result towards the global decision logic
  output logic               res_valid,
  output nt_result_t         result,
  output logic               busy
);

  dt_t et_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           et_q <= '0;
    else if (event_start) et_q <= event_time;
  end

  // ---------------------------------------------------------------- tracks
  logic     q_valid, q_ready;
  track2d_t q_track;

  track_fifo #(.T(track2d_t), .DEPTH(FIFO_D)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(track_valid), .in_ready(track_ready), .in_data(track),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_track)
  );

  // ---------------------------------------------------------------- chain
  logic       ld_start, ld_done, ld_busy, mlp_start, v_topo, v_sl;
  sec_t       ld_index;
  fx_t        y_topo [N_OUT];
  fx_t        y_sl   [N_OUT];

  chain_ctrl #(.PHI0(PHI0)) u_chain (
    .clk(clk), .rst_n(rst_n),
    .track_valid(q_valid), .track_ready(q_ready), .track(q_track),
    .ld_start(ld_start), .ld_index(ld_index), .ld_done(ld_done),
    .mlp_start(mlp_start), .mlp_valid(v_topo && v_sl),
    .y_topo(y_topo), .y_sl(y_sl),
    .res_valid(res_valid), .result(result)
  );

  assign busy = !q_ready || q_valid;

  // ---------------------------------------------------------------- parameters
  ts_id_t             rel_id [N_REL];
  logic               topo_wr, slm_wr;
  logic [15:0]        wr_beat;
  logic [MEM_W-1:0]   wr_data;

  weight_loader #(.BASE(MEM_BASE)) u_loader (
    .clk(clk), .rst_n(rst_n), .start(ld_start), .index(ld_index),
    .busy(ld_busy), .done(ld_done),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready),
    .mem_req_addr(mem_req_addr), .mem_req_len(mem_req_len),
    .mem_rd_valid(mem_rd_valid), .mem_rd_data(mem_rd_data),
    .rel_id(rel_id), .topo_wr_en(topo_wr), .slm_wr_en(slm_wr),
    .wr_beat(wr_beat), .wr_data(wr_data)
  );

  // ---------------------------------------------------------------- hits
  logic [N_REL-1:0] hit_valid;
  dt_t              hit_t [N_REL];

  ts_hit_store #(.NWR(NWR), .NRD(N_REL)) u_hits (
    .clk(clk), .rst_n(rst_n), .clear(event_start),
    .wr_valid(ts_valid), .wr_hit(ts_hit),
    .rd_id(rel_id), .rd_valid(hit_valid), .rd_t(hit_t)
  );

  // ---------------------------------------------------------------- MLP inputs
  fx_t x_topo [N_IN_TOPO];
  fx_t x_sl   [N_IN_SL];

  topo_formatter #(.NREL(N_REL)) u_fmt_topo (
    .clk(clk), .rst_n(rst_n), .event_time(et_q),
    .hit_valid(hit_valid), .hit_t(hit_t), .x(x_topo)
  );

  sl_formatter #(.NREL(N_REL)) u_fmt_sl (
    .clk(clk), .rst_n(rst_n), .event_time(et_q), .rel_id(rel_id),
    .hit_valid(hit_valid), .hit_t(hit_t), .x(x_sl)
  );

  // ---------------------------------------------------------------- MLPs
  mlp #(.NIN(N_IN_TOPO), .NHID(N_HID), .NOUT(N_OUT)) u_mlp_topo (
    .clk(clk), .rst_n(rst_n),
    .wr_en(topo_wr), .wr_beat(wr_beat), .wr_data(wr_data),
    .start(mlp_start), .x(x_topo), .out_valid(v_topo), .y(y_topo)
  );

  mlp #(.NIN(N_IN_SL), .NHID(N_HID), .NOUT(N_OUT)) u_mlp_sl (
    .clk(clk), .rst_n(rst_n),
    .wr_en(slm_wr), .wr_beat(wr_beat), .wr_data(wr_data),
    .start(mlp_start), .x(x_sl), .out_valid(v_sl), .y(y_sl)
  );

  // The chain never starts the MLPs while their weights are being loaded.
  a_no_load_during_run: assert property (@(posedge clk) disable iff (!rst_n)
                                         mlp_start |-> !ld_busy);

endmodule
