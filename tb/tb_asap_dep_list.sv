// tb_asap_dep_list -- self-checking test of the Dependence List and commit logic.
//
// At NREG=4, NDEP=2 it checks: allocation of the lowest free entry; that a
// region commits only after it has ended, its lines are persistent and its
// dependences have committed; commit outputs (RID, thread, log end); the
// control dependence given at allocation; data dependences added later,
// duplicate adds taking no slot, add_ok_o once slots are full; commits in
// dependence order along a chain; and, in a random phase, that no region
// ever commits before a region it depends on (checked by a reference model).
module tb_asap_dep_list;
  import asap_pkg::*;
  localparam int NR = 4, ND = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic free_ok, alloc, alloc_dv, endr, add, add_ok, add_new, commit_v;
  rid_t free_rid, alloc_dr, end_rid, add_rid, add_dep, commit_rid;
  tid_t alloc_tid, commit_tid;
  logidx_t end_logend, commit_logend;
  logic [NR-1:0] persisted, active;

  asap_dep_list #(.NREG(NR), .NDEP(ND)) dut (
    .clk, .rst_n, .free_ok_o(free_ok), .free_rid_o(free_rid),
    .alloc_i(alloc), .alloc_tid_i(alloc_tid), .alloc_dep_valid_i(alloc_dv), .alloc_dep_rid_i(alloc_dr),
    .end_i(endr), .end_rid_i(end_rid), .end_logend_i(end_logend),
    .add_i(add), .add_rid_i(add_rid), .add_dep_i(add_dep), .add_ok_o(add_ok), .add_new_o(add_new),
    .persisted_i(persisted), .commit_valid_o(commit_v), .commit_rid_o(commit_rid),
    .commit_tid_o(commit_tid), .commit_logend_o(commit_logend), .active_o(active)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic idle(); alloc = 0; endr = 0; add = 0; alloc_dv = 0; endtask
  task automatic step(); @(posedge clk); #1; idle(); endtask

  // commit log
  int order [$];
  always @(posedge clk) if (rst_n && commit_v) order.push_back(int'(commit_rid));

  task automatic do_alloc(int exp_rid, int tid, bit dv, int dr);
    #1 check(free_ok && free_rid == rid_t'(exp_rid), $sformatf("alloc gets r%0d", exp_rid));
    alloc = 1; alloc_tid = tid_t'(tid); alloc_dv = dv; alloc_dr = rid_t'(dr); step();
  endtask

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); persisted = '0; alloc_tid = 0; alloc_dr = 0; end_rid = 0; end_logend = 0; add_rid = 0; add_dep = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    check(free_ok && free_rid == 0 && !commit_v && active == 0, "reset");
    // r0 (thread 1), r1 (thread 1, control dep on r0), r2 (thread 2)
    do_alloc(0, 1, 0, 0);
    do_alloc(1, 1, 1, 0);
    do_alloc(2, 2, 0, 0);
    check(active == 4'b0111, "three active");
    // r2 takes a data dependence on r0, twice (second add takes no slot)
    add = 1; add_rid = 2; add_dep = 0; #1 check(add_ok && add_new, "first add"); step();
    add = 1; add_rid = 2; add_dep = 0; #1 check(add_ok && !add_new, "duplicate add"); step();
    add = 1; add_rid = 2; add_dep = 1; #1 check(add_ok && add_new, "second slot"); step();
    add_rid = 2; add_dep = 3; #1 check(!add_ok, "slots full");
    // r1 and r2 end and are persistent: they must wait for r0
    endr = 1; end_rid = 1; end_logend = 20; step();
    endr = 1; end_rid = 2; end_logend = 30; step();
    persisted = 4'b0110;
    repeat (3) begin #1 check(!commit_v, "nothing commits before r0"); step(); end
    // r0 ends but is not persistent yet
    endr = 1; end_rid = 0; end_logend = 10; step();
    repeat (2) begin #1 check(!commit_v, "r0 waits for its lines"); step(); end
    persisted = 4'b0111;
    #1 check(commit_v && commit_rid == 0 && commit_tid == 1 && commit_logend == 10, "r0 commits");
    step();
    #1 check(commit_v && commit_rid == 1 && commit_tid == 1 && commit_logend == 20, "r1 commits next");
    step();
    #1 check(commit_v && commit_rid == 2 && commit_tid == 2 && commit_logend == 30, "r2 commits last");
    step();
    persisted = 4'b0000;   // the CL list drops persisted once the entry is freed
    check(active == 0 && order.size() == 3, "all free");
    // random phase: chains of regions with random dependences
    order.delete();
    begin
      bit dep_m [NR][NR];   // reference dependence matrix
      bit live [NR];
      bit ended [NR];
      int seq [NR];         // allocation order: dependences point to older regions
      int opened = 0;
      for (int r = 0; r < NR; r++) begin live[r] = 0; seq[r] = 0; ended[r] = 0; for (int q = 0; q < NR; q++) dep_m[r][q] = 0; end
      for (int n = 0; n < 600; n++) begin
        int a;
        a = $urandom_range(0, 3);
        if (a == 0 && free_ok) begin
          int r; int d; bit dv;
          r = int'(free_rid);
          d = $urandom_range(0, NR - 1);
          dv = live[d] && d != r && !(commit_v && commit_rid == rid_t'(d));
          alloc = 1; alloc_tid = 0; alloc_dv = dv; alloc_dr = rid_t'(d);
          live[r] = 1; ended[r] = 0; seq[r] = opened;
          for (int q = 0; q < NR; q++) dep_m[r][q] = 0;
          if (dv) dep_m[r][d] = 1;
          opened++;
        end else if (a == 1) begin
          int r, d;
          r = $urandom_range(0, NR - 1);
          d = $urandom_range(0, NR - 1);
          add_rid = rid_t'(r); add_dep = rid_t'(d); #1;
          // only open regions add; only on older live regions (keeps it acyclic)
          if (live[r] && !ended[r] && live[d] && d != r && seq[d] < seq[r] && add_ok &&
              !(commit_v && commit_rid == rid_t'(d))) begin
            add = 1; dep_m[r][d] = 1;
          end
        end else if (a == 2) begin
          int r;
          r = $urandom_range(0, NR - 1);
          if (live[r] && !ended[r]) begin endr = 1; end_rid = rid_t'(r); end_logend = logidx_t'(n); ended[r] = 1; end
        end else begin
          persisted = persisted | (4'b1 << $urandom_range(0, NR - 1));
        end
        #1;
        if (commit_v) begin
          int c;
          c = int'(commit_rid);
          check(live[c] && ended[c] && persisted[c], "commit only when ended and persisted");
          for (int q = 0; q < NR; q++) check(!dep_m[c][q], $sformatf("r%0d commits before its dependence r%0d", c, q));
          live[c] = 0; ended[c] = 0;
          for (int q = 0; q < NR; q++) dep_m[q][c] = 0;
        end
        step();
        for (int r = 0; r < NR; r++) if (!live[r]) persisted[r] = 1'b0;
      end
      check(opened > 20 && order.size() > 10, $sformatf("random phase made progress opened=%0d commits=%0d", opened, order.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
