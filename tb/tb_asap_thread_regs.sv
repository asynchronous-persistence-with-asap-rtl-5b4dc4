// tb_asap_thread_regs -- self-checking test of the per-thread ASAP registers.
//
// Programs a small log, then checks against a reference model kept in the
// testbench: flattened nesting (only the outermost begin loads CurRID),
// LogTail advance and wrap, the log-full rule (one record kept free), the
// undo-record address LogAddress + LogTail*REC_BYTES, LogHead moving to the
// committed region's log end, and the previous-region tracking used for
// control dependences.
module tb_asap_thread_regs;
  import asap_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we, begin_i, end_i, lpo_i, commit_i;
  addr_t cfg_log_addr;
  logidx_t cfg_log_size, commit_logend;
  rid_t alloc_rid, commit_rid;
  logic [3:0] nest;
  rid_t cur_rid, prev_rid;
  logic in_region, outer_begin, outer_end, log_full, prev_valid;
  logidx_t head, tail;
  addr_t lpo_addr;

  asap_thread_regs #(.REC_BYTES(128)) dut (
    .clk, .rst_n, .cfg_we, .cfg_log_addr, .cfg_log_size,
    .begin_i, .end_i, .alloc_rid_i(alloc_rid), .lpo_i,
    .commit_i, .commit_rid_i(commit_rid), .commit_logend_i(commit_logend),
    .nest_depth_o(nest), .cur_rid_o(cur_rid), .in_region_o(in_region),
    .outer_begin_o(outer_begin), .outer_end_o(outer_end),
    .log_head_o(head), .log_tail_o(tail), .log_full_o(log_full), .lpo_addr_o(lpo_addr),
    .prev_valid_o(prev_valid), .prev_rid_o(prev_rid)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle();
    cfg_we = 0; begin_i = 0; end_i = 0; lpo_i = 0; commit_i = 0;
  endtask

  task automatic step();
    @(posedge clk); #1; idle();
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    cfg_log_addr = '0; cfg_log_size = '0; alloc_rid = '0; commit_rid = '0; commit_logend = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1; #1;
    check(nest == 0 && !in_region && outer_begin && !prev_valid, "reset state");
    // program a 5-record log at 0x1000
    cfg_we = 1; cfg_log_addr = 48'h1000; cfg_log_size = 5; step();
    check(head == 0 && tail == 0 && !log_full, "after cfg");
    check(lpo_addr == 48'h1000, "first record address");
    // outermost begin with RID 7, then nested begin with RID 3 (ignored)
    begin_i = 1; alloc_rid = 7; step();
    check(nest == 1 && in_region && cur_rid == 7 && outer_end, "outer begin");
    begin_i = 1; alloc_rid = 3; step();
    check(nest == 2 && cur_rid == 7 && !outer_end && !outer_begin, "nested begin keeps CurRID");
    // four records: 0x1000 + 128*k, log full after 4 of 5
    for (int k = 0; k < 4; k++) begin
      check(lpo_addr == 48'h1000 + 48'(128 * k), $sformatf("record %0d address", k));
      check(!log_full, "not full yet");
      lpo_i = 1; step();
    end
    check(tail == 4 && log_full, "log full with one free record");
    end_i = 1; step();
    check(nest == 1 && !prev_valid, "inner end");
    end_i = 1; step();
    check(nest == 0 && prev_valid && prev_rid == 7, "outer end remembers region");
    // commit of an unrelated RID does not clear prev
    commit_i = 1; commit_rid = 2; commit_logend = 1; step();
    check(prev_valid && head == 1, "head moves, prev kept");
    commit_i = 1; commit_rid = 7; commit_logend = 4; step();
    check(!prev_valid && head == 4 && !log_full, "commit frees log and prev");
    // tail wraps: 4 -> 0
    lpo_i = 1; step();
    check(tail == 0 && lpo_addr == 48'h1000, "tail wraps");
    // commit and begin in the same cycle
    begin_i = 1; alloc_rid = 9; step();
    end_i = 1; step();
    check(prev_valid && prev_rid == 9, "second region remembered");
    begin_i = 1; alloc_rid = 10; commit_i = 1; commit_rid = 9; commit_logend = 0; step();
    check(!prev_valid && cur_rid == 10 && nest == 1, "commit of prev while a new region opens");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
