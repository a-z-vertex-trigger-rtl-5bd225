`timescale 1ns/1ps
// tb_weight_loader: loads several sector records from the behavioural memory,
// once without and once with memory stalls. Checks the request (address
// index * REC_BEATS, length REC_BEATS), that the relevant TS ids land in
// rel_id, that every weight word is steered to the right MLP with the right
// beat number and data, that done pulses once per load one clock after the
// last word, and that a start while busy is ignored.
module tb_weight_loader;
  import nt_pkg::*;
  import nt_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  sec_t index = '0;
  logic req_valid, req_ready, rd_valid;
  logic [MADDR_W-1:0] req_addr;
  logic [15:0] req_len;
  logic [MEM_W-1:0] rd_data;
  ts_id_t rel_id [N_REL];
  logic topo_wr, slm_wr;
  logic [15:0] wr_beat;
  logic [MEM_W-1:0] wr_data;
  int n_req [2], n_words [2], n_gaps [2];
  logic rr [2], rv [2];
  logic [MEM_W-1:0] rdd [2];
  logic use_gap = 0;

  assign req_ready = use_gap ? rr[1] : rr[0];
  assign rd_valid  = use_gap ? rv[1] : rv[0];
  assign rd_data   = use_gap ? rdd[1] : rdd[0];

  ddr_model #(.LAT(12))               m0 (.clk, .rst_n, .req_valid(req_valid && !use_gap), .req_ready(rr[0]),
      .req_addr, .req_len, .rd_valid(rv[0]), .rd_data(rdd[0]), .n_req(n_req[0]), .n_words(n_words[0]), .n_gaps(n_gaps[0]));
  ddr_model #(.LAT(7), .GAP_EVERY(5)) m1 (.clk, .rst_n, .req_valid(req_valid && use_gap), .req_ready(rr[1]),
      .req_addr, .req_len, .rd_valid(rv[1]), .rd_data(rdd[1]), .n_req(n_req[1]), .n_words(n_words[1]), .n_gaps(n_gaps[1]));

  weight_loader dut (.clk, .rst_n, .start, .index, .busy, .done,
    .mem_req_valid(req_valid), .mem_req_ready(req_ready), .mem_req_addr(req_addr), .mem_req_len(req_len),
    .mem_rd_valid(rd_valid), .mem_rd_data(rd_data),
    .rel_id, .topo_wr_en(topo_wr), .slm_wr_en(slm_wr), .wr_beat, .wr_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cur_idx, nt, ns, ndone, last_word_cycle, cyc;
  always @(posedge clk) cyc <= cyc + 1;

  // Check every steered word.
  always @(posedge clk) begin
    if (rst_n && (topo_wr || slm_wr)) begin
      int b;
      longint unsigned a;
      b = int'(wr_beat);
      a = longint'(cur_idx) * REC_BEATS + (topo_wr ? REL_BEATS + b : REL_BEATS + TOPO_BEATS + b);
      checks++;
      if ((topo_wr && slm_wr) || wr_data != mem_word(a) ||
          (topo_wr && b >= TOPO_BEATS) || (slm_wr && b >= SLM_BEATS)) begin
        failures++; $display("bad word: topo %0d slm %0d beat %0d", topo_wr, slm_wr, b);
      end
      if (topo_wr) nt++; else ns++;
    end
    if (rst_n && rd_valid) last_word_cycle <= cyc;
    if (rst_n && done) begin
      ndone++;
      checks++;
      if (cyc != last_word_cycle + 1) begin failures++; $display("done not one clock after the last word"); end
    end
    if (rst_n && req_valid && req_ready) begin
      checks++;
      if (int'(req_addr) != cur_idx * REC_BEATS || int'(req_len) != REC_BEATS) begin
        failures++; $display("request addr %0d len %0d", req_addr, req_len);
      end
    end
  end

  task automatic load(input int idx);
    cur_idx = idx; nt = 0; ns = 0; ndone = 0;
    @(negedge clk);
    index = sec_t'(idx); start = 1;
    @(negedge clk);
    start = 0;
    repeat (5) @(negedge clk);
    index = sec_t'(idx + 1); start = 1;       // ignored: loader busy
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (nt != TOPO_BEATS || ns != SLM_BEATS || ndone != 1) begin
      failures++; $display("sector %0d: %0d topo beats, %0d sl beats, %0d done", idx, nt, ns, ndone);
    end
    for (int r = 0; r < N_REL; r++) begin
      checks++;
      if (int'(rel_id[r]) != gen_rel_id(idx, r)) begin
        failures++; $display("rel_id[%0d] = %0d expected %0d", r, rel_id[r], gen_rel_id(idx, r));
      end
    end
  endtask

  initial begin
    cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(0); load(3601); load(75599); load(12345);
    use_gap = 1;
    load(15); load(40000);
    checks++;
    if (n_gaps[1] == 0) begin failures++; $display("no memory stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
