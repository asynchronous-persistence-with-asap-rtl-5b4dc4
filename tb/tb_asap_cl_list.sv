// tb_asap_cl_list -- self-checking test of the Modified Cache Line List.
//
// Runs directed scenarios at NREG=4, NCLPTR=4 and checks the data persists
// (DPO) the list issues against what the scenario expects: no write-back
// while a region is open and not full; one write-back per distinct line
// after the region ends (coalescing of repeated stores); lines held back by
// LockBit until unlocked; early write-back of a full, still-open region; a
// write-back retiring the same line from another region's entry; no
// progress while the WPQ is not ready; persisted_o timing and free/realloc.
module tb_asap_cl_list;
  import asap_pkg::*;
  localparam int NR = 4, NP = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic alloc, endr, free, add, present, full, dpo_valid, dpo_early, dpo_ready, lock, lock_block;
  rid_t alloc_rid, end_rid, free_rid, add_rid;
  line_t add_line, dpo_line, lock_line;
  logic [NR-1:0] persisted;

  asap_cl_list #(.NREG(NR), .NCLPTR(NP)) dut (
    .clk, .rst_n, .alloc_i(alloc), .alloc_rid_i(alloc_rid), .end_i(endr), .end_rid_i(end_rid),
    .free_i(free), .free_rid_i(free_rid), .add_i(add), .add_rid_i(add_rid), .add_line_i(add_line),
    .add_present_o(present), .add_full_o(full), .dpo_valid_o(dpo_valid), .dpo_line_o(dpo_line),
    .dpo_early_o(dpo_early), .dpo_ready_i(dpo_ready), .lock_line_o(lock_line), .lock_i(lock),
    .lock_block_o(lock_block), .persisted_o(persisted)
  );

  // lines whose LockBit the testbench holds set
  line_t locked [$];
  always_comb begin
    lock = 1'b0;
    foreach (locked[k]) if (locked[k] == lock_line) lock = 1'b1;
  end

  // monitor of issued write-backs
  line_t issued [$];
  int    early_cnt = 0;
  always @(posedge clk) if (rst_n && dpo_valid && dpo_ready) begin
    issued.push_back(dpo_line);
    if (dpo_early) early_cnt++;
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle(); alloc = 0; endr = 0; free = 0; add = 0; endtask
  task automatic step(); @(posedge clk); #1; idle(); endtask
  task automatic do_add(rid_t r, line_t l, bit exp_present);
    add = 1; add_rid = r; add_line = l; #1;
    check(present == exp_present, $sformatf("present for r%0d line %0h", r, l));
    step();
  endtask
  function automatic int count_line(line_t l);
    int c = 0;
    foreach (issued[k]) if (issued[k] == l) c++;
    return c;
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); dpo_ready = 1; alloc_rid = 0; end_rid = 0; free_rid = 0; add_rid = 0; add_line = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    check(persisted == 0 && !dpo_valid, "reset");
    // 1: region 0 writes A, B, A -> after end exactly one DPO each
    alloc = 1; alloc_rid = 0; step();
    do_add(0, 42'hA, 0); do_add(0, 42'hB, 0); do_add(0, 42'hA, 1);
    repeat (3) step();
    check(issued.size() == 0, "no DPO while region open");
    endr = 1; end_rid = 0; #1;
    check(!persisted[0], "not persisted before end");
    step();
    check(!persisted[0], "not persisted right after end");
    repeat (4) step();
    check(count_line(42'hA) == 1 && count_line(42'hB) == 1 && issued.size() == 2, "one DPO per line");
    check(persisted[0], "persisted after DPOs");
    check(early_cnt == 0, "no early DPOs");
    free = 1; free_rid = 0; step();
    check(!persisted[0], "freed");
    // 2: LockBit holds a write-back back
    issued.delete();
    locked.push_back(42'hC);
    alloc = 1; alloc_rid = 1; step();
    do_add(1, 42'hC, 0);
    endr = 1; end_rid = 1; step();
    repeat (5) begin
      check(lock_block && !dpo_valid, "held by LockBit");
      step();
    end
    check(issued.size() == 0 && !persisted[1], "nothing issued while locked");
    locked.delete();
    repeat (2) step();
    check(count_line(42'hC) == 1 && persisted[1], "issued after unlock");
    free = 1; free_rid = 1; step();
    // 3: full, still-open region writes back early
    issued.delete(); early_cnt = 0;
    alloc = 1; alloc_rid = 2; step();
    dpo_ready = 0;
    for (int k = 0; k < NP; k++) do_add(2, line_t'(42'h100 + k), 0);
    #1 check(full && dpo_valid && dpo_early, "full entry requests early DPO");
    step();
    check(issued.size() == 0, "WPQ not ready: nothing retired");
    dpo_ready = 1; step(); dpo_ready = 0;
    check(issued.size() == 1 && early_cnt == 1, "one early DPO");
    #1 check(!full, "slot freed");
    check(!dpo_valid, "no more early DPO once not full");
    do_add(2, issued[0], 0);        // store to the written-back line re-adds it
    dpo_ready = 1;
    endr = 1; end_rid = 2; step();
    repeat (6) step();
    check(issued.size() == NP + 1 && persisted[2], "all lines of region 2 written back");
    free = 1; free_rid = 2; step();
    // 4: one write-back retires the line from two entries
    issued.delete();
    alloc = 1; alloc_rid = 0; step();
    alloc = 1; alloc_rid = 3; step();
    do_add(0, 42'hD, 0); do_add(3, 42'hD, 0); do_add(3, 42'hE, 0);
    endr = 1; end_rid = 0; step();
    repeat (3) step();
    check(count_line(42'hD) == 1 && persisted[0], "region 0 written back");
    endr = 1; end_rid = 3; step();
    repeat (3) step();
    check(count_line(42'hD) == 1 && count_line(42'hE) == 1 && persisted[3], "D not written twice");
    // 5: random regions against a reference count of distinct lines
    for (int it = 0; it < 20; it++) begin
      line_t mine [$];
      int r;
      r = it % NR;
      mine.delete();
      if (persisted[r]) begin free = 1; free_rid = rid_t'(r); step(); end
      issued.delete();
      alloc = 1; alloc_rid = rid_t'(r); step();
      dpo_ready = 0;   // hold early write-backs of a full entry while adding
      for (int k = 0; k < 6; k++) begin
        line_t l; bit p;
        l = line_t'($urandom_range(0, 5)) + 42'h200;
        p = 0;
        foreach (mine[j]) if (mine[j] == l) p = 1;
        if (!p && mine.size() == NP) continue;
        do_add(rid_t'(r), l, p);
        if (!p) mine.push_back(l);
      end
      dpo_ready = 1;
      endr = 1; end_rid = rid_t'(r); step();
      repeat (NP + 2) step();
      check(issued.size() == mine.size() && persisted[r], $sformatf("random region %0d", it));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
