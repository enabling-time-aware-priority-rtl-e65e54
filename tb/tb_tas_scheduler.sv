// tb_tas_scheduler: self-checking test of the time-aware scheduler.
//
// A reference model in this testbench counts microseconds since the start of
// each window and works out, from the programmed table alone, which slot (or
// free time) the port is in, how many microseconds are left, whether the
// guardband is active, and therefore whether a grant must be offered and for
// which queue. The microsecond pulse comes every 10 clocks; checks are made
// between pulses, away from the one-clock slot loads. Three configurations
// are run: plain round-robin (schedule disabled), a 90/5/5 split over
// queues 20, 21, 22 with free time and a guardband, and the two-entry table
// (queue 4 for 100 us, queue 1 for 500 us) with a zero-length entry skipped.
// Queue occupancy is random and changes every microsecond.
module tb_tas_scheduler;
  import tas_pkg::*;

  localparam int NQ = 32, NT = 8, NS = 8, QW = 5, TW = 3, SW = 3;
  localparam int TICK = 10;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic              us_tick;
  logic              cfg_en;
  logic [SW:0]       cfg_nslots;
  logic [US_W-1:0]   cfg_cycle_us, cfg_guard_us;
  logic [QW-1:0]     cfg_taq_base;
  logic [TW-1:0]     cfg_scr [NS];
  logic [US_W-1:0]   cfg_tqcr [NT];
  logic [NQ-1:0]     q_nonempty;
  logic              grant_valid, grant_ready, slot_start, in_guard;
  logic [QW-1:0]     grant_queue;
  logic [1:0]        phase;
  logic [31:0]       status;

  tas_scheduler dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  // microsecond pulse
  int tick_cnt = 0;
  always_ff @(posedge clk) begin
    tick_cnt <= (tick_cnt == TICK - 1) ? 0 : tick_cnt + 1;
  end
  assign us_tick = (tick_cnt == TICK - 1);

  // ---------------- reference model ----------------
  bit model_on = 0;
  int t_us = 0;                 // microseconds since window start
  int n_ent, dur[NS], qid[NS], cum[NS], sumd, wlen;
  int last_rr = NQ - 1;
  int cnt_idle_slot = 0, cnt_guard = 0, cnt_free_grant = 0, cnt_slot_grant = 0, cnt_rr = 0;

  function automatic void build_model();
    sumd = 0; n_ent = 0;
    for (int i = 0; i < cfg_nslots; i++) begin
      int d;
      d = cfg_tqcr[cfg_scr[i]];
      if (d != 0) begin
        dur[n_ent] = d;
        qid[n_ent] = (cfg_taq_base + cfg_scr[i]) % NQ;
        cum[n_ent] = sumd;
        sumd += d;
        n_ent++;
      end
    end
    wlen = (cfg_cycle_us > sumd) ? int'(cfg_cycle_us) : sumd;
  endfunction

  function automatic bit is_ta(int q);
    int off;
    off = (q - int'(cfg_taq_base) + NQ) % NQ;
    return off < NT;
  endfunction

  function automatic int rr_next(bit only_non_ta);
    for (int i = 1; i <= NQ; i++) begin
      int q;
      q = (last_rr + i) % NQ;
      if (q_nonempty[q] && !(only_non_ta && is_ta(q))) return q;
    end
    return -1;
  endfunction

  always @(posedge clk) begin
    if (model_on && us_tick) begin
      t_us = t_us + 1;
      if (t_us == wlen) t_us = 0;
    end
  end

  // checks between pulses
  always @(negedge clk) begin
    if (!rst && tick_cnt >= 2 && tick_cnt <= TICK - 2) begin
      if (!cfg_en) begin
        int e;
        e = rr_next(0);
        check(phase == 2'd0, "phase RR");
        check(grant_valid == (e >= 0), "RR grant valid");
        if (e >= 0) check(grant_queue == QW'(e), $sformatf("RR queue %0d exp %0d", grant_queue, e));
      end else if (model_on) begin
        int k, rem;
        k = -1;
        for (int i = 0; i < n_ent; i++) if (t_us >= cum[i] && t_us < cum[i] + dur[i]) k = i;
        if (k >= 0) begin
          bit g;
          rem = cum[k] + dur[k] - t_us;
          g = rem <= int'(cfg_guard_us);
          check(phase == 2'd2, $sformatf("slot phase t=%0d got %0d", t_us, phase));
          check(status[15:0] == 16'(rem), $sformatf("rem %0d exp %0d", status[15:0], rem));
          check(in_guard == g, "slot guard");
          check(grant_valid == (q_nonempty[qid[k]] && !g), "slot grant valid");
          if (grant_valid) check(grant_queue == QW'(qid[k]), "slot grant queue");
          if (!q_nonempty[qid[k]] && |(q_nonempty & ~(NQ'(1) << qid[k]))) cnt_idle_slot++;
          if (g) cnt_guard++;
        end else begin
          bit g;
          int e;
          g = (wlen - t_us) <= int'(cfg_guard_us);
          e = rr_next(1);
          check(phase == 2'd3, $sformatf("free phase t=%0d got %0d", t_us, phase));
          check(in_guard == g, "free guard");
          check(grant_valid == (e >= 0 && !g), "free grant valid");
          if (grant_valid && e >= 0) check(grant_queue == QW'(e), "free RR queue");
        end
      end
    end
  end

  // round-robin pointer of the model follows accepted non-slot grants
  always @(posedge clk) begin
    if (!rst && grant_valid && grant_ready) begin
      if (phase != 2'd2) begin
        last_rr = grant_queue;
        if (phase == 2'd3) cnt_free_grant++; else cnt_rr++;
      end else cnt_slot_grant++;
    end
  end

  // stimulus: random occupancy per microsecond, random acceptance
  always @(posedge clk) begin
    if (tick_cnt == 0) q_nonempty <= NQ'($urandom);
    grant_ready <= ($urandom % 3) != 0;
  end

  task automatic start_schedule();
    // switch on right after a pulse so the load clocks see no pulse
    @(posedge clk iff tick_cnt == 0);
    build_model();
    t_us = 0;
    cfg_en <= 1'b1;
    repeat (3) @(posedge clk);  // RR -> LOAD -> SLOT
    model_on = 1;
  endtask

  task automatic stop_schedule();
    @(posedge clk iff tick_cnt == 0);
    cfg_en <= 1'b0;
    model_on = 0;
  endtask

  int slot_starts = 0;
  always @(posedge clk) if (slot_start) slot_starts++;

  initial begin
    cfg_en = 0; cfg_nslots = 0; cfg_cycle_us = 0; cfg_guard_us = 0; cfg_taq_base = 0;
    for (int i = 0; i < NS; i++) cfg_scr[i] = 0;
    for (int i = 0; i < NT; i++) cfg_tqcr[i] = 0;
    q_nonempty = '0; grant_ready = 0;
    repeat (4) @(posedge clk);
    rst <= 0;
    // 1. schedule disabled: plain round-robin
    repeat (300) @(posedge clk);
    // 2. queues 20, 21, 22: 18 us, 1 us, 1 us in a 25 us window, guard 1 us
    cfg_taq_base = 20; cfg_nslots = 3; cfg_cycle_us = 25; cfg_guard_us = 1;
    cfg_scr[0] = 0; cfg_scr[1] = 1; cfg_scr[2] = 2;
    cfg_tqcr[0] = 18; cfg_tqcr[1] = 1; cfg_tqcr[2] = 1;
    start_schedule();
    repeat (25 * TICK * 6) @(posedge clk);
    stop_schedule();
    repeat (50) @(posedge clk);
    // 3. the two-entry table: queue 4 for 100 us, queue 1 for 500 us, a
    //    zero-length entry in between, 700 us window, guard 2 us
    cfg_nslots = 3; cfg_cycle_us = 700; cfg_guard_us = 2;
    cfg_scr[0] = 4; cfg_scr[1] = 7; cfg_scr[2] = 1;
    cfg_tqcr[4] = 100; cfg_tqcr[7] = 0; cfg_tqcr[1] = 500;
    start_schedule();
    repeat (700 * TICK * 2 + 100) @(posedge clk);
    // 4. no free time: window shorter than the slots
    stop_schedule();
    cfg_cycle_us = 0; cfg_tqcr[4] = 7; cfg_tqcr[1] = 5;
    start_schedule();
    repeat (12 * TICK * 5) @(posedge clk);
    check(cnt_idle_slot > 0, "an empty time-aware queue kept its slot idle");
    check(cnt_guard > 0, "guardband seen");
    check(cnt_free_grant > 0, "grant in free time");
    check(cnt_slot_grant > 0, "grant in a slot");
    check(cnt_rr > 0, "grant with schedule disabled");
    check(slot_starts >= 30, $sformatf("slot starts %0d", slot_starts));
    $display("idle_slot=%0d guard=%0d free=%0d slot=%0d rr=%0d starts=%0d",
             cnt_idle_slot, cnt_guard, cnt_free_grant, cnt_slot_grant, cnt_rr, slot_starts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
