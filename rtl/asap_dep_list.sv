// asap_dep_list -- the ASAP Dependence List and commit logic.
//
// One entry per region in flight (entry index = RID) with its State and the
// RIDs it depends on, Dep_0..Dep_{NDEP-1}. A region may commit -- its undo
// log may be freed -- only when (1) it has ended, (2) every line it modified
// is persistent (persisted_i from the Modified Cache Line List) and (3) every
// region it depends on has committed. Committing a region clears it from the
// dependence slots of all other entries, which is how commits ripple in
// dependence order while the cores continue past the end of their regions.
//
// Dependences come from two places: a control dependence on the previous
// region of the same thread, given when the entry is allocated, and data
// dependences on the region that last wrote a line, added with the add
// port. The tracking itself follows the paper; the entry also keeps the
// thread number and the log position at the region's end (fields not in the
// paper's figure) so the commit can free the right part of the right log.
//
// Timing: free_ok_o/free_rid_o (lowest free entry), add_ok_o and the commit
// outputs are combinational from registers. At most one region commits per
// cycle, lowest RID first; the entry is free from the next cycle. The
// caller must not add a dependence on the region committing in that cycle.
module asap_dep_list
  import asap_pkg::*;
#(
  parameter int unsigned NREG = 16,
  parameter int unsigned NDEP = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    free_ok_o,
  output rid_t    free_rid_o,
  input  logic    alloc_i,          // allocates free_rid_o
  input  tid_t    alloc_tid_i,
  input  logic    alloc_dep_valid_i,
  input  rid_t    alloc_dep_rid_i,
  input  logic    end_i,
  input  rid_t    end_rid_i,
  input  logidx_t end_logend_i,
  input  logic    add_i,
  input  rid_t    add_rid_i,
  input  rid_t    add_dep_i,
  output logic    add_ok_o,
  output logic    add_new_o,        // the add would take a new slot
  input  logic [NREG-1:0] persisted_i,
  output logic    commit_valid_o,
  output rid_t    commit_rid_o,
  output tid_t    commit_tid_o,
  output logidx_t commit_logend_o,
  output logic [NREG-1:0] active_o
);

  localparam int unsigned DS_W = (NDEP > 1) ? $clog2(NDEP) : 1;

  rstate_e state_q  [NREG];
  tid_t    tid_q    [NREG];
  logidx_t logend_q [NREG];
  logic    dv_q     [NREG][NDEP];
  rid_t    dep_q    [NREG][NDEP];

  always_comb begin
    free_ok_o  = 1'b0;
    free_rid_o = '0;
    for (int r = NREG - 1; r >= 0; r--) begin
      if (state_q[r] == RS_FREE) begin
        free_ok_o  = 1'b1;
        free_rid_o = rid_t'(r);
      end
    end
  end

  logic            present, has_slot;
  logic [DS_W-1:0] slot;
  always_comb begin
    present  = 1'b0;
    has_slot = 1'b0;
    slot     = '0;
    for (int d = NDEP - 1; d >= 0; d--) begin
      if (dv_q[add_rid_i][d] && dep_q[add_rid_i][d] == add_dep_i) present = 1'b1;
      if (!dv_q[add_rid_i][d]) begin
        has_slot = 1'b1;
        slot     = DS_W'(d);
      end
    end
    add_ok_o  = present || has_slot;
    add_new_o = !present;
  end

  logic [NREG-1:0] ready;
  always_comb begin
    for (int r = 0; r < NREG; r++) begin
      logic waiting;
      waiting = 1'b0;
      for (int d = 0; d < NDEP; d++) waiting = waiting | dv_q[r][d];
      ready[r]    = (state_q[r] == RS_ENDED) && persisted_i[r] && !waiting;
      active_o[r] = (state_q[r] != RS_FREE);
    end
    commit_valid_o = 1'b0;
    commit_rid_o   = '0;
    for (int r = NREG - 1; r >= 0; r--) begin
      if (ready[r]) begin
        commit_valid_o = 1'b1;
        commit_rid_o   = rid_t'(r);
      end
    end
    commit_tid_o    = tid_q[commit_rid_o];
    commit_logend_o = logend_q[commit_rid_o];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) begin
        state_q[r]  <= RS_FREE;
        tid_q[r]    <= '0;
        logend_q[r] <= '0;
        for (int d = 0; d < NDEP; d++) begin
          dv_q[r][d]  <= 1'b0;
          dep_q[r][d] <= '0;
        end
      end
    end else begin
      if (commit_valid_o) begin
        state_q[commit_rid_o] <= RS_FREE;
        for (int r = 0; r < NREG; r++)
          for (int d = 0; d < NDEP; d++)
            if (dv_q[r][d] && dep_q[r][d] == commit_rid_o) dv_q[r][d] <= 1'b0;
      end
      if (add_i && !present && has_slot) begin
        dv_q[add_rid_i][slot]  <= 1'b1;
        dep_q[add_rid_i][slot] <= add_dep_i;
      end
      if (end_i) begin
        state_q[end_rid_i]  <= RS_ENDED;
        logend_q[end_rid_i] <= end_logend_i;
      end
      if (alloc_i) begin
        state_q[free_rid_o] <= RS_ACTIVE;
        tid_q[free_rid_o]   <= alloc_tid_i;
        for (int d = 0; d < NDEP; d++) dv_q[free_rid_o][d] <= 1'b0;
        dv_q[free_rid_o][0]  <= alloc_dep_valid_i;
        dep_q[free_rid_o][0] <= alloc_dep_rid_i;
      end
    end
  end

  a_alloc_has_free: assert property (@(posedge clk) disable iff (!rst_n) alloc_i |-> free_ok_o);
  a_no_dep_on_committing: assert property (@(posedge clk) disable iff (!rst_n)
    commit_valid_o |-> !(add_i && add_dep_i == commit_rid_o) &&
                       !(alloc_i && alloc_dep_valid_i && alloc_dep_rid_i == commit_rid_o));
  a_dep_on_active: assert property (@(posedge clk) disable iff (!rst_n)
    add_i |-> state_q[add_dep_i] != RS_FREE && add_dep_i != add_rid_i);
  a_end_active: assert property (@(posedge clk) disable iff (!rst_n)
    end_i |-> state_q[end_rid_i] == RS_ACTIVE);

endmodule
