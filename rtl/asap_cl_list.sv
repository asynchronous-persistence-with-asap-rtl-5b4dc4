// asap_cl_list -- the ASAP Modified Cache Line List.
//
// One entry per region in flight (entry index = RID), holding the region's
// State and pointers CLPtr_0..CLPtr_{NCLPTR-1} to the cache lines it modified.
// Its job is to make sure every line a region modified is persistent before
// the region may commit.
//
// Adding a line that the entry already holds does nothing, so a line written
// many times is written back once (DPO coalescing). After the outermost
// asap_end (State ENDED) the list writes the region's lines back on its own,
// one data persist (DPO) per cycle, while the core runs on: this is the
// asynchronous DPO. A write-back retires the line from every entry holding
// it, since it carries every store made so far. If an active region fills
// all its pointers, its lines are written back early to make room; a later
// store re-adds the line. A line whose LockBit is set (undo record not yet
// persistent) is skipped, as is the line being added in the same cycle.
// persisted_o[r] rises once entry r has ended and holds no pointers.
//
// The pointer list and the paper's field names are the paper's; the State
// encoding, the early write-back on overflow, the cross-entry retirement
// and the rotating scan order are this design's choices.
//
// Timing: add/alloc/end/free update at the next edge; add_present_o,
// add_full_o and the DPO request are combinational from the registers and
// the current inputs. A DPO counts as persistent when dpo_ready_i is high
// (the WPQ is inside the persistence domain).
module asap_cl_list
  import asap_pkg::*;
#(
  parameter int unsigned NREG   = 16,
  parameter int unsigned NCLPTR = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    alloc_i,
  input  rid_t    alloc_rid_i,
  input  logic    end_i,
  input  rid_t    end_rid_i,
  input  logic    free_i,         // region committed
  input  rid_t    free_rid_i,
  input  logic    add_i,
  input  rid_t    add_rid_i,
  input  line_t   add_line_i,
  output logic    add_present_o,
  output logic    add_full_o,
  output logic    dpo_valid_o,
  output line_t   dpo_line_o,
  output logic    dpo_early_o,    // the DPO belongs to a full, still-active region
  input  logic    dpo_ready_i,
  output line_t   lock_line_o,    // LockBit lookup of the candidate line
  input  logic    lock_i,
  output logic    lock_block_o,   // a candidate exists but is held by its LockBit
  output logic [NREG-1:0] persisted_o
);

  localparam int unsigned NSLOT  = NREG * NCLPTR;
  localparam int unsigned SLOT_W = $clog2(NSLOT);
  localparam int unsigned PTR_W  = (NCLPTR > 1) ? $clog2(NCLPTR) : 1;
  typedef logic [SLOT_W-1:0] slot_t;

  rstate_e state_q [NREG];
  logic    pv_q    [NREG][NCLPTR];   // CLPtr valid
  line_t   ptr_q   [NREG][NCLPTR];   // CLPtr (line address)
  slot_t   scan_q;                   // rotating start of the write-back search

  logic [NREG-1:0] full;

  always_comb begin
    for (int r = 0; r < NREG; r++) begin
      logic any;
      full[r] = 1'b1;
      any     = 1'b0;
      for (int p = 0; p < NCLPTR; p++) begin
        full[r] = full[r] & pv_q[r][p];
        any     = any | pv_q[r][p];
      end
      persisted_o[r] = (state_q[r] == RS_ENDED) && !any;
    end
  end

  // query for the add port
  logic [PTR_W-1:0] add_slot;
  always_comb begin
    add_present_o = 1'b0;
    add_slot      = '0;
    for (int p = NCLPTR - 1; p >= 0; p--) begin
      if (pv_q[add_rid_i][p] && ptr_q[add_rid_i][p] == add_line_i) add_present_o = 1'b1;
      if (!pv_q[add_rid_i][p]) add_slot = PTR_W'(p);
    end
    add_full_o = full[add_rid_i];
  end

  // write-back candidate: first valid pointer of an eligible entry at or
  // after scan_q in flattened (entry, pointer) order
  logic  cand_ok;
  slot_t cand;
  always_comb begin
    cand_ok = 1'b0;
    cand    = '0;
    for (int k = NSLOT - 1; k >= 0; k--) begin
      int unsigned s, r, p;
      s = (int'(scan_q) + k) % NSLOT;
      r = s / NCLPTR;
      p = s % NCLPTR;
      if (pv_q[r][p] && (state_q[r] == RS_ENDED || (state_q[r] == RS_ACTIVE && full[r]))) begin
        cand_ok = 1'b1;
        cand    = slot_t'(s);
      end
    end
  end

  int unsigned cand_r, cand_p;
  assign cand_r      = int'(cand) / NCLPTR;
  assign cand_p      = int'(cand) % NCLPTR;
  assign lock_line_o = ptr_q[cand_r][cand_p];
  assign dpo_line_o  = ptr_q[cand_r][cand_p];
  assign dpo_early_o = (state_q[cand_r] == RS_ACTIVE);
  logic same_as_add;
  assign same_as_add  = add_i && (add_line_i == ptr_q[cand_r][cand_p]);
  assign dpo_valid_o  = cand_ok && !lock_i && !same_as_add;
  assign lock_block_o = cand_ok && lock_i;

  logic dpo_fire;
  assign dpo_fire = dpo_valid_o && dpo_ready_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_q <= '0;
      for (int r = 0; r < NREG; r++) begin
        state_q[r] <= RS_FREE;
        for (int p = 0; p < NCLPTR; p++) begin
          pv_q[r][p]  <= 1'b0;
          ptr_q[r][p] <= '0;
        end
      end
    end else begin
      if (cand_ok && (dpo_fire || lock_i || same_as_add))
        scan_q <= (int'(cand) == NSLOT - 1) ? '0 : cand + slot_t'(1);
      // a write-back retires its line from every entry
      if (dpo_fire) begin
        for (int r = 0; r < NREG; r++)
          for (int p = 0; p < NCLPTR; p++)
            if (pv_q[r][p] && ptr_q[r][p] == dpo_line_o) pv_q[r][p] <= 1'b0;
      end
      if (add_i && !add_present_o && !add_full_o) begin
        pv_q[add_rid_i][add_slot]  <= 1'b1;
        ptr_q[add_rid_i][add_slot] <= add_line_i;
      end
      if (end_i)   state_q[end_rid_i]   <= RS_ENDED;
      if (free_i)  state_q[free_rid_i]  <= RS_FREE;
      if (alloc_i) state_q[alloc_rid_i] <= RS_ACTIVE;
    end
  end

  a_add_active: assert property (@(posedge clk) disable iff (!rst_n)
    add_i |-> state_q[add_rid_i] == RS_ACTIVE);
  a_free_persisted: assert property (@(posedge clk) disable iff (!rst_n)
    free_i |-> persisted_o[free_rid_i]);
  a_alloc_free: assert property (@(posedge clk) disable iff (!rst_n)
    alloc_i |-> state_q[alloc_rid_i] == RS_FREE);

endmodule
