// tb_asap_top -- end-to-end test of the ASAP persistence hardware at its
// default size (4 threads, 16 regions in flight, 32 line pointers and 4
// dependence slots per region, 1024 tag entries, 32-entry WPQ).
//
// Four core models run atomic regions shaped like the inserts of a
// persistent data structure: threads 0 and 1 write 64-byte values (one line),
// threads 2 and 3 write 2 KB values (32 lines), every region also updates a
// private node line twice, and one region in three takes a global lock and
// updates shared metadata lines (so regions of different threads depend on
// each other). Some regions nest, some stores fall outside regions, and
// thread 0 now and then writes a line whose tag entry is held by thread 1.
// A directed phase at the end backs commits up behind one long region so
// that every region entry is taken (see directed_phase).
// Persistent memory accepts writes at random, with a long slow stretch
// in the middle so the queue fills and regions pile up.
//
// A reference model in the testbench follows every accepted operation and
// checks: each undo record goes to the next log slot of its thread, in
// order; no line write-back is accepted while an undo record for that line
// is still outside the WPQ (write-ahead rule); a region commits only after
// it has ended, every line it wrote has been written back after its last
// store, and every region it depends on (previous region of its thread, the
// last writer of each line it wrote) has committed; LogHead moves to the
// log position where the committed region ended; every region commits in
// the end; and the counts of undo records and coalesced stores match the
// model. It also counts each mechanism (nesting, coalescing, control and
// data dependences, early write-back, every stall reason) and fails if one
// never happened.
module tb_asap_top;
  import asap_pkg::*;
  localparam int NT = 4;
  localparam int REGIONS = 24;           // regions per thread
  localparam int REC = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we;
  tid_t cfg_tid;
  addr_t cfg_log_addr;
  logidx_t cfg_log_size;
  logic [NT-1:0] op_valid, op_ready;
  core_op_t op [NT];
  logic pm_valid, pm_ready;
  pm_req_t pm_req;
  logic commit_valid;
  rid_t commit_rid;
  tid_t commit_tid;
  logidx_t log_head [NT];
  logidx_t log_tail [NT];
  logic [15:0] active;
  asap_ev_t ev;

  asap_top dut (
    .clk, .rst_n, .cfg_we, .cfg_tid, .cfg_log_addr, .cfg_log_size,
    .op_valid, .op, .op_ready, .pm_valid, .pm_req, .pm_ready,
    .commit_valid, .commit_rid, .commit_tid, .log_head, .log_tail, .active, .ev
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ---------------- log configuration ----------------
  function automatic addr_t log_base(int t); return addr_t'(64'h1000_0000) * addr_t'(t + 1); endfunction
  function automatic int log_size(int t); return (t == 3) ? 96 : 512; endfunction

  // ---------------- reference model ----------------
  int    cycle = 0;
  int    nseq = 0;
  int    rid2seq [16];
  int    r_thread [int];
  bit    r_ended [int];
  bit    r_committed [int];
  int    r_endtail [int];
  int    r_deps [int][$];
  int    r_last_store [int][line_t];
  int    owner [line_t];               // last writer region of a line
  int    last_dpo [line_t];            // cycle a write-back of the line entered the WPQ
  int    pend_lpo [line_t];            // undo records not yet in the WPQ
  addr_t exp_log [$];                  // expected undo-record addresses, in order
  int    tail [NT], exp_head [NT], nest [NT], cur_seq [NT], prev_seq [NT];
  int    m_lpo = 0, m_coal = 0, commits = 0, untracked = 0, regions_done [NT];
  int    ev_cnt [string];
  int    max_active = 0;
  int    n_slot = 0, n_conflict = 0, n_depfull = 0;

  function automatic bit live(int s); return s >= 0 && !r_committed[s]; endfunction

  function automatic void add_dep(int s, int d);
    foreach (r_deps[s][k]) if (r_deps[s][k] == d) return;
    r_deps[s].push_back(d);
  endfunction

  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int t = 0; t < NT; t++) check(int'(log_head[t]) == exp_head[t], $sformatf("LogHead of thread %0d", t));
    // commits first: the hardware treats a region committing in this cycle as gone
    if (commit_valid) begin
      int s, t;
      s = rid2seq[commit_rid];
      t = r_thread[s];
      commits++;
      check(int'(commit_tid) == t, "commit thread");
      check(r_ended[s] && !r_committed[s], $sformatf("region %0d commits once, after its end", s));
      foreach (r_deps[s][k]) check(r_committed[r_deps[s][k]],
        $sformatf("region %0d commits before its dependence %0d", s, r_deps[s][k]));
      foreach (r_last_store[s][l]) check(last_dpo.exists(l) && last_dpo[l] > r_last_store[s][l],
        $sformatf("region %0d commits before line %0h is persistent", s, l));
      r_committed[s] = 1;
      exp_head[t] = r_endtail[s];
    end
    // write-backs entering the WPQ (persistence point)
    if (dut.cl_dpo_v && dut.wpq_dpo_ready) begin
      line_t l;
      l = dut.cl_dpo_line;
      check(!pend_lpo.exists(l) || pend_lpo[l] == 0, $sformatf("write-back of %0h before its undo record", l));
      last_dpo[l] = cycle;
    end
    if (dut.lpo_pend_q && dut.wpq_lpo_ready) pend_lpo[dut.lpo_line_q]--;
    // the accepted core operation
    for (int t = 0; t < NT; t++) if (op_valid[t] && op_ready[t]) begin
      case (op[t].kind)
        OP_BEGIN: begin
          if (nest[t] == 0) begin
            int s;
            s = nseq++;
            rid2seq[dut.dl_free_rid] = s;
            r_thread[s] = t; r_ended[s] = 0; r_committed[s] = 0;
            r_deps[s] = {};
            if (live(prev_seq[t])) add_dep(s, prev_seq[t]);
            cur_seq[t] = s;
          end
          nest[t]++;
        end
        OP_END: begin
          if (nest[t] == 1) begin
            r_ended[cur_seq[t]] = 1;
            r_endtail[cur_seq[t]] = tail[t];
            prev_seq[t] = cur_seq[t];
            regions_done[t]++;
          end
          if (nest[t] > 0) nest[t]--;
        end
        default: begin
          line_t l;
          int s, o;
          l = op[t].addr[ADDR_W-1:LINE_OFF_W];
          if (nest[t] == 0) untracked++;
          else begin
            s = cur_seq[t];
            o = owner.exists(l) ? owner[l] : -1;
            if (live(o) && o == s) m_coal++;
            else begin
              m_lpo++;
              exp_log.push_back(log_base(t) + addr_t'(tail[t] * REC));
              tail[t] = (tail[t] + 1 == log_size(t)) ? 0 : tail[t] + 1;
              pend_lpo[l] = pend_lpo.exists(l) ? pend_lpo[l] + 1 : 1;
              if (live(o)) add_dep(s, o);
            end
            owner[l] = s;
            r_last_store[s][l] = cycle;
          end
        end
      endcase
    end
    // persistent-memory side: undo records arrive in order at the right slots
    if (pm_valid && pm_ready && pm_req.kind == PW_LOG) begin
      check(exp_log.size() > 0 && pm_req.addr == exp_log[0], $sformatf("undo record address %0h", pm_req.addr));
      if (exp_log.size() > 0) void'(exp_log.pop_front());
    end
    // mechanism counters
    if (ev.nested) ev_cnt["nested"]++;
    if (ev.coalesce) ev_cnt["coalesce"]++;
    if (ev.data_dep) ev_cnt["data_dep"]++;
    if (ev.ctrl_dep) ev_cnt["ctrl_dep"]++;
    if (ev.dpo) ev_cnt["dpo"]++;
    if (ev.early_dpo) ev_cnt["early_dpo"]++;
    if (ev.lpo) ev_cnt["lpo"]++;
    if (ev.commit) ev_cnt["commit"]++;
    if (ev.stall_slot) begin ev_cnt["stall_slot"]++; n_slot++; end
    if (ev.stall_log) ev_cnt["stall_log"]++;
    if (ev.stall_conflict) begin ev_cnt["stall_conflict"]++; n_conflict++; end
    if (ev.stall_clfull) ev_cnt["stall_clfull"]++;
    if (ev.stall_depfull) begin ev_cnt["stall_depfull"]++; n_depfull++; end
    if (ev.stall_lock) ev_cnt["stall_lock"]++;
    if ($countones(active) > max_active) max_active = $countones(active);
  end

  // ---------------- core models ----------------
  bit token = 0;        // global lock protecting the shared metadata lines
  localparam line_t HOT = line_t'(950);
  bit hot_end = 0, h_ready = 0;

  // Directed phase: thread 2 keeps region H open after writing HOT. Thread 1
  // runs small regions that also write HOT (data dependence on H), each with
  // its own node line, so they cannot commit and pile up until every region
  // entry is taken. Thread 0 writes all eight of those node lines in one
  // region (more owners than dependence slots) and thread 3 writes a line
  // whose tag entry is held by one of them. Then H ends and all unwinds.
  task automatic directed_phase();
    int t1_done = 0;
    int slot0, dep0, conf0;
    slot0 = n_slot; dep0 = n_depfull; conf0 = n_conflict;
    fork
      begin
        issue(2, OP_BEGIN, '0);
        issue(2, OP_STORE, HOT);
        h_ready = 1;
        wait (hot_end);
        issue(2, OP_END, '0);
      end
      begin
        wait (h_ready);
        for (int k = 0; k < 14; k++) begin
          issue(1, OP_BEGIN, '0);
          issue(1, OP_STORE, HOT);
          // the first eight own one node line each; later ones keep clear of
          // the lines thread 0 is writing (regions must not race on data)
          issue(1, OP_STORE, (k < 8) ? priv(1, 192 + k) : priv(1, 100 + k));
          issue(1, OP_END, '0);
          t1_done++;
          if (k == 7) begin
            wait (n_depfull > dep0 && n_conflict > conf0);
          end
        end
      end
      begin
        wait (t1_done == 8);
        issue(0, OP_BEGIN, '0);
        for (int k = 192; k < 200; k++) issue(0, OP_STORE, priv(1, k));
        issue(0, OP_END, '0);
      end
      begin
        wait (t1_done == 8);
        repeat (30) @(negedge clk);
        issue(3, OP_BEGIN, '0);
        issue(3, OP_STORE, line_t'(1024 + 200 + 199));
        issue(3, OP_END, '0);
      end
      begin
        wait (n_slot > slot0);
        repeat (50) @(negedge clk);
        hot_end = 1;
      end
    join
  endtask
  bit acc [NT];
  always @(posedge clk) for (int t = 0; t < NT; t++) acc[t] <= op_valid[t] && op_ready[t];

  task automatic issue(int t, op_kind_e k, line_t l);
    @(negedge clk);
    op_valid[t] = 1'b1;
    op[t] = '{kind: k, addr: {l, LINE_OFF_W'(t * 8)}};
    do @(negedge clk); while (!acc[t]);
    op_valid[t] = 1'b0;
  endtask

  function automatic line_t priv(int t, int k); return line_t'(t * 200 + k); endfunction
  function automatic line_t shared(int k); return line_t'(900 + k); endfunction

  task automatic run_thread(int t);
    int ntok = 0;
    for (int r = 0; r < REGIONS; r++) begin
      bit use_tok, nest2, confl;
      int vlines, voff, node;
      use_tok = ($urandom_range(0, 2) == 0);
      nest2   = ($urandom_range(0, 3) == 0);
      confl   = (t == 0) && !use_tok && ($urandom_range(0, 3) == 0);
      vlines  = (t < 2) ? 1 : 32;
      voff    = $urandom_range(0, 160);
      node    = $urandom_range(192, 199);
      if (use_tok) begin
        while (token) @(negedge clk);
        token = 1;
      end
      issue(t, OP_BEGIN, '0);
      for (int k = 0; k < vlines; k++) issue(t, OP_STORE, priv(t, voff + k));
      issue(t, OP_STORE, priv(t, node));
      if (nest2) begin
        issue(t, OP_BEGIN, '0);
        issue(t, OP_STORE, priv(t, 180 + (r % 10)));
        issue(t, OP_END, '0);
      end
      issue(t, OP_STORE, priv(t, node));           // second update: coalesced
      if (t >= 2) issue(t, OP_STORE, priv(t, 170 + (r % 8)));   // 34 lines: CL entry overflows
      if (confl) issue(t, OP_STORE, line_t'(1024 + 200 + $urandom_range(192, 199)));
      if (use_tok) begin
        ntok++;
        if (ntok % 6 == 0) for (int k = 0; k < 8; k++) issue(t, OP_STORE, shared(k));
        else issue(t, OP_STORE, shared($urandom_range(0, 7)));
      end
      issue(t, OP_END, '0);
      if (use_tok) token = 0;
      if ($urandom_range(0, 5) == 0) issue(t, OP_STORE, priv(t, 199));   // outside any region
    end
  endtask

  // ---------------- persistent memory ----------------
  // a stretch of slow memory in the middle lets regions pile up
  int slow_from = 1500, slow_len = 3000;
  always @(negedge clk) begin
    if (cycle >= slow_from && cycle < slow_from + slow_len) pm_ready <= ($urandom_range(0, 4) == 0);
    else pm_ready <= ($urandom_range(0, 2) != 0);
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (slot %0d depfull %0d conflict %0d; regions done %0d %0d %0d %0d, commits %0d)", n_slot, n_depfull, n_conflict,
             regions_done[0], regions_done[1], regions_done[2], regions_done[3], commits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_valid = '0; cfg_we = 0; cfg_tid = '0; cfg_log_addr = '0; cfg_log_size = '0;
    for (int t = 0; t < NT; t++) begin
      op[t] = '0; tail[t] = 0; exp_head[t] = 0; nest[t] = 0; cur_seq[t] = -1; prev_seq[t] = -1;
      regions_done[t] = 0; acc[t] = 0;
    end
    foreach (rid2seq[i]) rid2seq[i] = -1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      cfg_we = 1; cfg_tid = tid_t'(t); cfg_log_addr = log_base(t); cfg_log_size = logidx_t'(log_size(t));
    end
    @(negedge clk) cfg_we = 0;
    fork
      run_thread(0);
      run_thread(1);
      run_thread(2);
      run_thread(3);
    join
    wait (active == '0);
    directed_phase();
    // let every region commit and the queue drain
    wait (active == '0 && !pm_valid);
    repeat (5) @(posedge clk);
    check(commits == nseq && nseq == NT * REGIONS + 17, $sformatf("all %0d regions committed (%0d)", nseq, commits));
    check(exp_log.size() == 0, "every undo record reached persistent memory");
    check(m_lpo == ev_cnt["lpo"], $sformatf("undo records: model %0d, hardware %0d", m_lpo, ev_cnt["lpo"]));
    check(m_coal == ev_cnt["coalesce"], $sformatf("coalesced stores: model %0d, hardware %0d", m_coal, ev_cnt["coalesce"]));
    check(untracked > 0, "stores outside regions happened");
    foreach (ev_cnt[k]) $display("  %-15s %0d", k, ev_cnt[k]);
    $display("  max regions in flight %0d, untracked stores %0d, cycles %0d", max_active, untracked, cycle);
    begin
      string need [14] = '{"nested", "coalesce", "data_dep", "ctrl_dep", "dpo", "early_dpo", "lpo", "commit",
                           "stall_slot", "stall_log", "stall_conflict", "stall_clfull", "stall_depfull", "stall_lock"};
      foreach (need[k]) check(ev_cnt.exists(need[k]) && ev_cnt[need[k]] > 0, $sformatf("mechanism %s happened", need[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
