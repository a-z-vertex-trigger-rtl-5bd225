`timescale 1ns/1ps
// ddr_model: behavioural model of the external parameter memory and its
// controller, as seen through the trigger's memory port.
//
// Not synthesizable logic of the design: it stands in for the DDR3 memory and
// the vendor memory controller. A request (address, length in words) is
// accepted when the model is idle; LAT clocks later the words follow, one per
// clock, except that with GAP_EVERY > 0 the model inserts one idle clock after
// every GAP_EVERY words (to exercise a stalling memory). The contents are the
// synthetic image of nt_ref_pkg::mem_word. It counts requests and words.
module ddr_model
  import nt_pkg::*;
#(
  parameter int LAT       = 20,
  parameter int GAP_EVERY = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [MADDR_W-1:0] req_addr,
  input  logic [15:0]        req_len,
  output logic               rd_valid,
  output logic [MEM_W-1:0]   rd_data,
  output int                 n_req,
  output int                 n_words,
  output int                 n_gaps
);
  logic             active;
  longint unsigned  addr;
  int               left, wait_c, since_gap;

  assign req_ready = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; rd_valid <= 1'b0; rd_data <= '0;
      n_req <= 0; n_words <= 0; n_gaps <= 0;
      addr <= 0; left <= 0; wait_c <= 0; since_gap <= 0;
    end else begin
      rd_valid <= 1'b0;
      if (!active && req_valid) begin
        active    <= 1'b1;
        addr      <= longint'(req_addr);
        left      <= int'(req_len);
        wait_c    <= LAT;
        since_gap <= 0;
        n_req     <= n_req + 1;
      end else if (active) begin
        if (wait_c > 1) wait_c <= wait_c - 1;
        else if (GAP_EVERY > 0 && since_gap == GAP_EVERY) begin
          since_gap <= 0;
          n_gaps    <= n_gaps + 1;
        end else begin
          rd_valid  <= 1'b1;
          rd_data   <= nt_ref_pkg::mem_word(addr);
          addr      <= addr + 1;
          since_gap <= since_gap + 1;
          n_words   <= n_words + 1;
          left      <= left - 1;
          if (left == 1) active <= 1'b0;
        end
      end
    end
  end
endmodule
