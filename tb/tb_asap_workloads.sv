// tb_asap_workloads -- insert workloads at the two value sizes of the
// published evaluation (64 B and 2 KB values), run on the default-size design.
//
// Two insert shapes are modelled, both this testbench's own simplification
// of persistent data-structure inserts:
//   hash map : lock a bucket, write the value lines and a node header into
//              fresh lines of the thread's pool, link the node into the
//              bucket line, unlock;
//   queue    : write the value and node lines, then, under the queue lock,
//              update the shared tail line and the element counter line.
// Each shape runs with 64 B values (1 line) and 2 KB values (32 lines), four
// threads, back to back, with persistent memory accepting two writes in
// three cycles. Between runs the design is reset.
//
// Checks, per run: every region commits; every asap_end is accepted within
// a few cycles of being presented, whatever persists are outstanding (the
// asynchronous end that is the point of the design); some regions really
// ended with persists outstanding; the number of undo records equals the
// number of distinct lines each region wrote (a region logs a line once);
// and write-backs never exceed that number (coalescing may lower it).
// Cycle counts and persist traffic are printed for each run.
module tb_asap_workloads;
  import asap_pkg::*;
  localparam int NT = 4;

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
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // per-run counters
  int cyc = 0, n_lpo = 0, n_dpo = 0, n_commit = 0, n_regions = 0, exp_lpo = 0;
  int async_ends = 0, max_end_wait = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ev.lpo) n_lpo++;
    if (ev.dpo) n_dpo++;
    if (ev.commit) n_commit++;
    // an end accepted while persists are still queued for memory
    if (ev.region_end && pm_valid) async_ends++;
  end
  always_ff @(posedge clk) pm_ready <= ($urandom_range(0, 2) != 0);

  bit acc [NT];
  always @(posedge clk) for (int t = 0; t < NT; t++) acc[t] <= op_valid[t] && op_ready[t];

  task automatic issue(int t, op_kind_e k, line_t l);
    int w = 0;
    @(negedge clk);
    op_valid[t] = 1'b1;
    op[t] = '{kind: k, addr: {l, {LINE_OFF_W{1'b0}}}};
    do begin @(negedge clk); w++; end while (!acc[t]);
    op_valid[t] = 1'b0;
    if (k == OP_END && w > max_end_wait) max_end_wait = w;
  endtask

  // line map (tag index = line mod 1024): thread t's pool uses indices
  // t*256 .. t*256+223; buckets and queue lines use 224..255 of thread 0's
  // range, so lines of different threads never share a tag entry
  function automatic line_t pool(int t, int k); return line_t'(4096 + t * 256 + (k % 224)); endfunction
  localparam line_t QTAIL = line_t'(224), QCOUNT = line_t'(225);
  function automatic line_t bucket(int b); return line_t'(226 + b); endfunction

  bit bucket_lock [30];
  bit qlock;

  task automatic run_thread(int t, bit queue, int vlines, int inserts);
    int next = 0;
    for (int i = 0; i < inserts; i++) begin
      int b, lines;
      b = $urandom_range(0, 29);
      lines = 0;
      if (!queue) begin
        while (bucket_lock[b]) @(negedge clk);
        bucket_lock[b] = 1;
      end
      issue(t, OP_BEGIN, '0);
      for (int k = 0; k < vlines; k++) issue(t, OP_STORE, pool(t, next + k));
      issue(t, OP_STORE, pool(t, next + vlines));          // node header
      issue(t, OP_STORE, pool(t, next + vlines));          // header update: coalesced
      lines = vlines + 1;
      if (!queue) begin
        issue(t, OP_STORE, bucket(b));
        lines++;
        issue(t, OP_END, '0);
        bucket_lock[b] = 0;
      end else begin
        while (qlock) @(negedge clk);
        qlock = 1;
        issue(t, OP_STORE, QTAIL);
        issue(t, OP_STORE, QCOUNT);
        lines += 2;
        issue(t, OP_END, '0);
        qlock = 0;
      end
      next += vlines + 1;
      exp_lpo += lines;
      n_regions++;
    end
  endtask

  task automatic run(string name, bit queue, int vlines, int inserts);
    op_valid = '0; cfg_we = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0; n_lpo = 0; n_dpo = 0; n_commit = 0; n_regions = 0; exp_lpo = 0; async_ends = 0; max_end_wait = 0;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      cfg_we = 1; cfg_tid = tid_t'(t); cfg_log_addr = addr_t'(64'h1000_0000) * addr_t'(t + 1); cfg_log_size = 1024;
    end
    @(negedge clk) cfg_we = 0;
    fork
      run_thread(0, queue, vlines, inserts);
      run_thread(1, queue, vlines, inserts);
      run_thread(2, queue, vlines, inserts);
      run_thread(3, queue, vlines, inserts);
    join
    begin
      int core_cycles;
      core_cycles = cyc;
      wait (active == '0 && !pm_valid);
      @(posedge clk); #1;
      check(n_commit == n_regions, $sformatf("%s: %0d of %0d regions committed", name, n_commit, n_regions));
      check(n_lpo == exp_lpo, $sformatf("%s: undo records %0d, expected %0d", name, n_lpo, exp_lpo));
      check(n_dpo > 0 && n_dpo <= exp_lpo, $sformatf("%s: write-backs %0d within 1..%0d", name, n_dpo, exp_lpo));
      check(max_end_wait <= NT + 1, $sformatf("%s: longest asap_end wait %0d cycles", name, max_end_wait));
      check(async_ends > 0, $sformatf("%s: regions ended with persists outstanding", name));
      $display("%-10s regions %0d  core cycles %0d  drained at %0d  undo records %0d  write-backs %0d  async ends %0d  max end wait %0d",
               name, n_regions, core_cycles, cyc, n_lpo, n_dpo, async_ends, max_end_wait);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_valid = '0; cfg_we = 0; cfg_tid = '0; cfg_log_addr = '0; cfg_log_size = '0;
    for (int t = 0; t < NT; t++) begin op[t] = '0; acc[t] = 0; end
    foreach (bucket_lock[b]) bucket_lock[b] = 0;
    qlock = 0;
    run("HM 64B", 0, 1, 40);
    run("HM 2KB", 0, 32, 8);
    run("Q 64B", 1, 1, 40);
    run("Q 2KB", 1, 32, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
