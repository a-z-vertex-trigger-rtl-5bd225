`timescale 1ns/1ps
// tb_neurotrigger_top: end-to-end test of one trigger board at full size.
//
// Runs a series of events through neurotrigger_top with its default
// parameters (20 relevant TS, 60 hidden neurons, 512-bit parameter words,
// 85-word sector records) and a behavioural parameter memory. Each event
// starts with an event time, then sends random TS hits over the 5 hit ports
// (about 40 % of all 2336 TS, some twice with different times), then its 2D
// tracks. For every track the reference model (nt_ref_pkg) computes the whole
// three-step chain from the same hits and memory image; the board's result
// must match it exactly, and tracks that pass all three steps must take
// exactly 3 * (LAT + REC_BEATS) + 38 clocks from leaving the track queue to
// the result.
//
// It also counts how often each mechanism of the design occurred and fails
// if one never did: rejection by the 2D sector range, rejection by the z range
// of step 1 and of step 2, a final z inside and outside the 6 cm cut, a
// relevant TS without hit (maximal drift time), an SL with several relevant
// hits (fastest chosen), a hit earlier than the event time (clamped), a step
// that selected the outermost theta sector, a TS hit twice (fastest
// kept) and a full track queue (backpressure).
module tb_neurotrigger_top;
  import nt_pkg::*;
  import nt_ref_pkg::*;

  localparam int LAT  = 20;
  localparam int NEV  = 30;
  localparam int NWR  = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2.5 clk = ~clk;

  logic               event_start;
  dt_t                event_time;
  logic [NWR-1:0]     ts_valid;
  ts_hit_t            ts_hit [NWR];
  logic               track_valid, track_ready;
  track2d_t           track;
  logic               mem_req_valid, mem_req_ready, mem_rd_valid;
  logic [MADDR_W-1:0] mem_req_addr;
  logic [15:0]        mem_req_len;
  logic [MEM_W-1:0]   mem_rd_data;
  logic               res_valid, busy;
  nt_result_t         result;
  int                 n_req, n_words, n_gaps;

  neurotrigger_top dut (
    .clk(clk), .rst_n(rst_n),
    .event_start(event_start), .event_time(event_time),
    .ts_valid(ts_valid), .ts_hit(ts_hit),
    .track_valid(track_valid), .track_ready(track_ready), .track(track),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready),
    .mem_req_addr(mem_req_addr), .mem_req_len(mem_req_len),
    .mem_rd_valid(mem_rd_valid), .mem_rd_data(mem_rd_data),
    .res_valid(res_valid), .result(result), .busy(busy)
  );

  ddr_model #(.LAT(LAT)) u_mem (
    .clk(clk), .rst_n(rst_n),
    .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_len(mem_req_len),
    .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .n_req(n_req), .n_words(n_words), .n_gaps(n_gaps)
  );

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- reference
  bit hv [];
  int ht [];
  int et_cur;
  ref_result_t exp_q [$];
  int          pop_cycle_q [$];

  // mechanism counters
  int m_rej2d = 0, m_rejz1 = 0, m_rejz2 = 0, m_trig = 0, m_notrig = 0;
  int m_missing = 0, m_multi = 0, m_early = 0, m_thclamp = 0, m_dup = 0, m_full = 0;
  int n_results = 0;

  // Queue pops: when the chain takes a track.
  always @(posedge clk) begin
    if (rst_n && dut.q_valid && dut.q_ready) pop_cycle_q.push_back(cycle);
    if (rst_n && track_valid && !track_ready) m_full++;
  end

  // Input-side mechanisms, seen when the MLPs start.
  always @(posedge clk) begin
    if (rst_n && dut.mlp_start) begin
      int per_sl [N_SL];
      foreach (per_sl[s]) per_sl[s] = 0;
      for (int r = 0; r < N_REL; r++) begin
        if (dut.rel_id[r] != 0) begin
          if (!dut.hit_valid[r]) m_missing++;
          else begin
            per_sl[sl_of(dut.rel_id[r])]++;
            if (int'(dut.hit_t[r]) < et_cur) m_early++;
          end
        end
      end
      foreach (per_sl[s]) if (per_sl[s] > 1) m_multi++;
    end
    if (rst_n && dut.ld_start) begin
      int st, c;
      st = int'(dut.u_chain.step);
      c  = int'(dut.u_chain.sec_q.th_center) - THETA_MID;
      if (st > 0) begin
        int lim;
        lim = ((N_THETA[st] - 1) / 2) * TH_SPACING[st];
        if (c == lim || c == -lim) m_thclamp++;
      end
    end
  end

  // Results
  always @(posedge clk) begin
    if (rst_n && res_valid) begin
      ref_result_t e;
      int pc, lat;
      n_results++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected result");
      end else begin
        e  = exp_q.pop_front();
        pc = pop_cycle_q.pop_front();
        lat = cycle - pc;
        checks++;
        if (result.rejected != e.rejected || int'(result.last_step) != e.last_step ||
            result.z_trig != e.z_trig || int'(result.z) != e.z || int'(result.theta) != e.theta) begin
          failures++;
          $display("result mismatch: got rej=%0d step=%0d trig=%0d z=%0d th=%0d, expected rej=%0d step=%0d trig=%0d z=%0d th=%0d",
                   result.rejected, result.last_step, result.z_trig, result.z, result.theta,
                   e.rejected, e.last_step, e.z_trig, e.z, e.theta);
        end
        if (!e.rejected) begin
          checks++;
          if (lat != 3 * (LAT + REC_BEATS) + 38) begin
            failures++;
            $display("latency %0d, expected %0d", lat, 3 * (LAT + REC_BEATS) + 38);
          end
        end
        if (e.rejected && e.last_step == 0) m_rej2d++;
        if (e.rejected && e.last_step == 1) m_rejz1++;
        if (e.rejected && e.last_step == 2) m_rejz2++;
        if (!e.rejected && e.z_trig)  m_trig++;
        if (!e.rejected && !e.z_trig) m_notrig++;
      end
    end
  end

  // --------------------------------------------------------------- stimulus
  task automatic send_hits(input int ids[$], input int ts[$]);
    int n = 0;
    while (n < ids.size()) begin
      @(negedge clk);
      ts_valid = '0;
      for (int p = 0; p < NWR; p++) begin
        if (n < ids.size()) begin
          ts_valid[p]    = 1'b1;
          ts_hit[p].id   = ts_id_t'(ids[n]);
          ts_hit[p].t    = dt_t'(ts[n]);
          n++;
        end
      end
    end
    @(negedge clk);
    ts_valid = '0;
  endtask

  task automatic send_track(input int phi, input int ipt);
    ref_result_t e;
    e = ref_chain(phi, ipt, hv, ht, et_cur, 0);
    @(negedge clk);
    track_valid  = 1'b1;
    track.phi    = 13'(phi);
    track.inv_pt = 11'(ipt);
    @(posedge clk);
    while (!track_ready) @(posedge clk);
    exp_q.push_back(e);
    @(negedge clk);
    track_valid = 1'b0;
  endtask

  initial begin
    int ids[$], tts[$], dup_ids[$], dup_ts[$];
    int ntrk, expected_results;
    hv = new[N_TS + 1];
    ht = new[N_TS + 1];
    event_start = 0; event_time = '0; ts_valid = '0; track_valid = 0; track = '0;
    foreach (ts_hit[p]) ts_hit[p] = '0;
    expected_results = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    for (int ev = 0; ev < NEV; ev++) begin
      // new event
      @(negedge clk);
      event_start = 1'b1;
      et_cur      = int'($urandom_range(0, 40));
      event_time  = dt_t'(et_cur);
      @(negedge clk);
      event_start = 1'b0;
      foreach (hv[i]) begin hv[i] = 0; ht[i] = 255; end
      ids.delete(); tts.delete(); dup_ids.delete(); dup_ts.delete();
      for (int id = 1; id <= N_TS; id++) begin
        if ($urandom_range(0, 99) < 40) begin
          int t;
          t = int'($urandom_range(0, 255));
          ids.push_back(id); tts.push_back(t);
          if (!hv[id] || t < ht[id]) ht[id] = t;
          hv[id] = 1;
          if ($urandom_range(0, 99) < 3) begin
            t = int'($urandom_range(0, 255));
            dup_ids.push_back(id); dup_ts.push_back(t);
            if (t < ht[id]) ht[id] = t;
            m_dup++;
          end
        end
      end
      send_hits(ids, tts);
      send_hits(dup_ids, dup_ts);
      // tracks of the event: one event fills the queue
      ntrk = (ev == 3) ? 11 : int'($urandom_range(1, 4));
      for (int k = 0; k < ntrk; k++) begin
        int phi, ipt;
        phi = ($urandom_range(0, 99) < 10) ? int'($urandom_range(2880, 5759)) : int'($urandom_range(0, 2879));
        ipt = ($urandom_range(0, 99) < 5)  ? int'($urandom_range(1280, 2047)) : int'($urandom_range(0, 1279));
        send_track(phi, ipt);
        expected_results++;
      end
      // wait until the board has finished the event
      @(negedge clk);
      while (busy || exp_q.size() != 0) @(negedge clk);
    end
    repeat (10) @(posedge clk);

    checks++;
    if (n_results != expected_results) begin
      failures++;
      $display("results %0d, expected %0d", n_results, expected_results);
    end
    $display("mechanisms: rej2d=%0d rejz1=%0d rejz2=%0d trig=%0d notrig=%0d missing=%0d multi=%0d early=%0d thclamp=%0d dup=%0d full=%0d",
             m_rej2d, m_rejz1, m_rejz2, m_trig, m_notrig, m_missing, m_multi, m_early, m_thclamp, m_dup, m_full);
    $display("memory: %0d requests, %0d words", n_req, n_words);
    checks++; if (m_rej2d   == 0) begin failures++; $display("no 2D-range rejection");  end
    checks++; if (m_rejz1   == 0) begin failures++; $display("no step-1 z rejection");  end
    checks++; if (m_rejz2   == 0) begin failures++; $display("no step-2 z rejection");  end
    checks++; if (m_trig    == 0) begin failures++; $display("no z inside the cut");     end
    checks++; if (m_notrig  == 0) begin failures++; $display("no z outside the cut");    end
    checks++; if (m_missing == 0) begin failures++; $display("no missing hit");          end
    checks++; if (m_multi   == 0) begin failures++; $display("no SL with several hits"); end
    checks++; if (m_early   == 0) begin failures++; $display("no hit before event time"); end
    checks++; if (m_thclamp == 0) begin failures++; $display("no outermost theta sector"); end
    checks++; if (m_dup     == 0) begin failures++; $display("no TS hit twice");         end
    checks++; if (m_full    == 0) begin failures++; $display("no full track queue");     end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
