`timescale 1ns/1ps
// tb_ts_hit_store: random hits through 5 write ports into the full 2336-entry
// store, compared through 4 read ports with a behavioural table. Covers hits
// to the same TS in one clock and in later clocks (smallest time kept), id 0
// (ignored), clearing for a new event, and writes in the clear clock.
module tb_ts_hit_store;
  import nt_pkg::*;
  localparam int NWR = 5, NRD = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic [NWR-1:0] wr_valid = '0;
  ts_hit_t wr_hit [NWR];
  ts_id_t  rd_id  [NRD];
  logic [NRD-1:0] rd_valid;
  dt_t rd_t [NRD];
  int checks = 0, failures = 0;
  bit refv [N_TS+1];
  int reft [N_TS+1];

  ts_hit_store #(.NWR(NWR), .NRD(NRD)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int id = 0; id <= N_TS; id += NRD) begin
      for (int r = 0; r < NRD; r++) rd_id[r] = ts_id_t'((id + r <= N_TS) ? id + r : 0);
      #1;
      for (int r = 0; r < NRD; r++) begin
        int i;
        i = int'(rd_id[r]);
        checks++;
        if (i == 0) begin
          if (rd_valid[r]) begin failures++; $display("id 0 reads valid"); end
        end else if (rd_valid[r] != refv[i] || (refv[i] && int'(rd_t[r]) != reft[i])) begin
          failures++;
          $display("id %0d: got %0d/%0d expected %0d/%0d", i, rd_valid[r], rd_t[r], refv[i], reft[i]);
        end
      end
    end
  endtask

  task automatic write_random(input int ncycles, input bit with_clear);
    for (int c = 0; c < ncycles; c++) begin
      @(negedge clk);
      clear = with_clear && (c == 0);
      if (clear) foreach (refv[i]) refv[i] = 0;
      for (int p = 0; p < NWR; p++) begin
        int id, t;
        id = (p == 1 && c % 3 == 0) ? int'(wr_hit[0].id) : int'($urandom_range(0, 40));  // small range -> repeats
        if (c % 2 == 1) id = int'($urandom_range(0, N_TS));
        t  = int'($urandom_range(0, 255));
        wr_valid[p]  = ($urandom_range(0, 3) != 0);
        wr_hit[p].id = ts_id_t'(id);
        wr_hit[p].t  = dt_t'(t);
        if (wr_valid[p] && id != 0) begin
          if (!refv[id] || t < reft[id]) reft[id] = t;
          refv[id] = 1;
        end
      end
    end
    @(negedge clk);
    wr_valid = '0; clear = 0;
  endtask

  initial begin
    foreach (wr_hit[p]) wr_hit[p] = '0;
    foreach (rd_id[r]) rd_id[r] = '0;
    foreach (refv[i]) begin refv[i] = 0; reft[i] = 255; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();                       // empty after reset
    write_random(300, 0);
    check_all();
    write_random(200, 0);              // more hits to the same event
    check_all();
    write_random(150, 1);              // new event, writes in the clear clock
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
