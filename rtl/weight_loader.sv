// weight_loader: brings one sector's parameters from external memory.
//
// Every sector has its own pair of MLPs, about 2600 weights plus the list of
// its relevant TS; over all sectors this is far more than fits on chip, so the
// parameters live in the board's DDR3 memory and are fetched for each
// prediction step (the paper budgets this transfer, 223 ns for a 20-60-1
// network, next to 136 ns for the MLP itself).
//
// A sector's record is REC_BEATS consecutive memory words starting at
// BASE + index * REC_BEATS: first the relevant TS ids (16-bit slots, id in the
// low 12 bits, 0 = unused slot), then the weights of the topological MLP, then
// those of the TS-id MLP (layouts in nt_pkg and mlp). The loader issues one
// burst read for the whole record and steers each returning word: the TS list
// into its own register, the weight words straight into the MLP that owns them.
//
// Memory port (this design's choice, shaped like a memory controller's user
// port): a request (address, length in words) held until accepted with
// req_ready, then rd_valid words in order, one per clock when the memory can.
// Timing: `start` with `index` begins a load (ignored while busy); `done`
// pulses in the clock after the last word was written, when the weights and
// the TS list are in place.
//
// The assertions use the asynchronous reset in their disable iff; lint notes
// the reset as used in both an asynchronous and a synchronous context, which
// concerns only the assertions.
module weight_loader
  import nt_pkg::*;
#(
  parameter int BASE = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  sec_t               index,
  output logic               busy,
  output logic               done,
  // memory
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic [MADDR_W-1:0] mem_req_addr,
  output logic [15:0]        mem_req_len,
  input  logic               mem_rd_valid,
  input  logic [MEM_W-1:0]   mem_rd_data,
  // destinations
  output ts_id_t             rel_id [N_REL],
  output logic               topo_wr_en,
  output logic               slm_wr_en,
  output logic [15:0]        wr_beat,
  output logic [MEM_W-1:0]   wr_data
);

  logic [15:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      done          <= 1'b0;
      mem_req_valid <= 1'b0;
      mem_req_addr  <= '0;
      cnt           <= '0;
      for (int r = 0; r < N_REL; r++) rel_id[r] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy          <= 1'b1;
        mem_req_valid <= 1'b1;
        mem_req_addr  <= MADDR_W'(BASE + int'(index) * REC_BEATS);
        cnt           <= '0;
      end
      if (mem_req_valid && mem_req_ready) mem_req_valid <= 1'b0;
      if (busy && mem_rd_valid) begin
        cnt <= cnt + 1'b1;
        if (int'(cnt) < REL_BEATS) begin
          for (int r = 0; r < N_REL; r++)
            if (r / WPB == int'(cnt))
              rel_id[r] <= mem_rd_data[(r % WPB)*16 +: TS_ID_W];
        end
        if (int'(cnt) == REC_BEATS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign mem_req_len = 16'(REC_BEATS);
  assign wr_data     = mem_rd_data;

  always_comb begin
    topo_wr_en = 1'b0;
    slm_wr_en  = 1'b0;
    wr_beat    = '0;
    if (busy && mem_rd_valid) begin
      if (int'(cnt) >= REL_BEATS && int'(cnt) < REL_BEATS + TOPO_BEATS) begin
        topo_wr_en = 1'b1;
        wr_beat    = 16'(int'(cnt) - REL_BEATS);
      end else if (int'(cnt) >= REL_BEATS + TOPO_BEATS) begin
        slm_wr_en  = 1'b1;
        wr_beat    = 16'(int'(cnt) - REL_BEATS - TOPO_BEATS);
      end
    end
  end

  // Memory handshake: an accepted request is not repeated before its data has
  // arrived, and data only arrives for a load in progress.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               mem_req_valid && !mem_req_ready |=> mem_req_valid);
  a_rd_busy:  assert property (@(posedge clk) disable iff (!rst_n) mem_rd_valid |-> busy);

endmodule
