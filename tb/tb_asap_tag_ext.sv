// tb_asap_tag_ext -- self-checking test of the cache-line tag extensions.
//
// Claims lines for regions and checks lookups (PBit, tag match, OwnerRID,
// LockBit) against a reference copy kept in the testbench, unlocking, the
// LockBit query port, index conflicts between lines with the same low bits,
// and the commit clear that drops a region's ownership of all its lines.
module tb_asap_tag_ext;
  import asap_pkg::*;
  localparam int NL = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  line_t lk_line, wr_line, ul_line, q_line;
  logic lk_live, lk_match, lk_lock, q_lock, wr_en, ul_en, clr_en;
  rid_t lk_owner, wr_owner, clr_rid;

  asap_tag_ext #(.NLINES(NL)) dut (
    .clk, .rst_n, .lk_line_i(lk_line), .lk_live_o(lk_live), .lk_match_o(lk_match),
    .lk_owner_o(lk_owner), .lk_lock_o(lk_lock),
    .wr_en_i(wr_en), .wr_line_i(wr_line), .wr_owner_i(wr_owner),
    .ul_en_i(ul_en), .ul_line_i(ul_line), .q_line_i(q_line), .q_lock_o(q_lock),
    .clr_en_i(clr_en), .clr_rid_i(clr_rid)
  );

  // reference model
  bit    m_live [NL];
  bit    m_lock [NL];
  rid_t  m_own  [NL];
  line_t m_line [NL];

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle(); wr_en = 0; ul_en = 0; clr_en = 0; endtask
  task automatic step(); @(posedge clk); #1; idle(); endtask

  task automatic lookup(line_t l);
    int i;
    i = int'(l % NL);
    lk_line = l; q_line = l; #1;
    check(lk_live == m_live[i], $sformatf("live of %0h", l));
    check(lk_match == (m_line[i] == l), $sformatf("match of %0h", l));
    if (m_live[i]) check(lk_owner == m_own[i], $sformatf("owner of %0h", l));
    check(lk_lock == (m_lock[i] && m_line[i] == l), $sformatf("lock of %0h", l));
    check(q_lock == (m_lock[i] && m_line[i] == l), $sformatf("q lock of %0h", l));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); lk_line = '0; wr_line = '0; ul_line = '0; q_line = '0; wr_owner = '0; clr_rid = '0;
    for (int i = 0; i < NL; i++) begin m_live[i] = 0; m_lock[i] = 0; m_own[i] = 0; m_line[i] = line_t'(i); end
    repeat (2) @(posedge clk); rst_n = 1; #1;
    lookup(42'h5);
    // claim line 0x105 (index 5) for region 3
    wr_en = 1; wr_line = 42'h105; wr_owner = 3; step();
    m_live[5] = 1; m_lock[5] = 1; m_own[5] = 3; m_line[5] = 42'h105;
    lookup(42'h105);
    lookup(42'h205);            // same index, other line: live but no match
    ul_en = 1; ul_line = 42'h205; step();   // wrong line: no effect
    lookup(42'h105);
    ul_en = 1; ul_line = 42'h105; step(); m_lock[5] = 0;
    lookup(42'h105);
    // random claims, unlocks and commit clears
    for (int n = 0; n < 400; n++) begin
      int op, i;
      line_t l;
      op = $urandom_range(0, 9);
      l  = line_t'($urandom_range(0, 4 * NL - 1));
      i  = int'(l % NL);
      if (op < 5) begin
        if (!m_lock[i] && (!m_live[i] || m_line[i] == l)) begin
          wr_en = 1; wr_line = l; wr_owner = rid_t'($urandom_range(0, 15));
          m_live[i] = 1; m_lock[i] = 1; m_own[i] = wr_owner; m_line[i] = l;
        end
      end else if (op < 8) begin
        if (m_live[i]) begin
          ul_en = 1; ul_line = m_line[i]; m_lock[i] = 0;
        end
      end else begin
        clr_en = 1; clr_rid = rid_t'($urandom_range(0, 15));
        for (int k = 0; k < NL; k++) if (m_live[k] && m_own[k] == clr_rid) m_live[k] = 0;
      end
      step();
      lookup(l);
      lookup(line_t'($urandom_range(0, 4 * NL - 1)));
    end
    // clear and claim the same entry in one cycle: the claim wins
    ul_en = 1; ul_line = m_line[7]; step();
    clr_en = 1; clr_rid = m_own[7]; step();
    wr_en = 1; wr_line = 42'h7; wr_owner = 9; step();
    ul_en = 1; ul_line = 42'h7; step();
    clr_en = 1; clr_rid = 9; wr_en = 1; wr_line = 42'h7; wr_owner = 4; step();
    m_live[7] = 1; m_lock[7] = 1; m_own[7] = 4; m_line[7] = 42'h7;
    lookup(42'h7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
