// asap_top -- ASAP: hardware support for asynchronous persistence under undo logging.
//
// Cores run atomic regions (asap_begin ... asap_end) over persistent memory.
// The hardware keeps an undo log per thread and must free a region's log
// only after all of its data is persistent and every region it depends on
// has committed. ASAP lets both the log persists (LPO) and the data persists
// (DPO) complete after the core has moved past asap_end; correctness comes
// from tracking dependences between regions and committing in their order.
//
// Blocks (all instantiated here):
//   asap_thread_regs  x NTHREADS  LogAddress/LogSize/LogHead/LogTail/NestDepth/CurRID
//   asap_tag_ext                  PBit/LockBit/OwnerRID per tracked line
//   asap_cl_list                  lines each region modified; issues DPOs
//   asap_dep_list                 dependences; commits regions, frees logs
//   asap_wpq                      write pending queue to persistent memory
//   asap_rr_arb                   picks one core operation per cycle
//
// Flow of a store to line L by region R (thread t):
//   - L owned by R already: coalesced, only (re)listed in R's CL entry.
//   - otherwise an undo record is written at LogTail of thread t (LPO,
//     LockBit set until the WPQ takes it), R becomes L's owner and L is
//     listed in R's CL entry; if another live region R' owned L, R records a
//     data dependence on R'.
// asap_begin of a new region takes a free RID and a control dependence on
// the thread's previous region if that has not committed. asap_end only
// marks the region ENDED (the core continues); the CL list then writes its
// lines back, and the dependence list commits it once its lines are
// persistent and its dependences are gone, which moves LogHead of thread t
// and drops R's ownership of every line.
//
// Stalls (op_ready low): no free region entry; the log is full or an undo
// record is still waiting for the WPQ; the line's tag entry belongs to a
// different live line; the region's CL entry is full (its lines are then
// written back early); the region's dependence slots are full.
//
// Interface: per-core op_valid/op/op_ready (one operation accepted per
// cycle overall), a configuration port for each thread's log, and a
// valid/ready write port to persistent memory. commit_* and ev report
// events. The structures and their roles follow the paper; handshakes,
// sizes, encodings and the single-operation-per-cycle organisation are this
// design's choices.
module asap_top
  import asap_pkg::*;
#(
  parameter int unsigned NTHREADS  = 4,
  parameter int unsigned NREG      = 16,
  parameter int unsigned NCLPTR    = 32,
  parameter int unsigned NDEP      = 4,
  parameter int unsigned NLINES    = 1024,
  parameter int unsigned WPQ_DEPTH = 32,
  parameter int unsigned REC_BYTES = 128
) (
  input  logic     clk,
  input  logic     rst_n,
  // log configuration
  input  logic     cfg_we,
  input  tid_t     cfg_tid,
  input  addr_t    cfg_log_addr,
  input  logidx_t  cfg_log_size,
  // core operations
  input  logic     [NTHREADS-1:0] op_valid,
  input  core_op_t op [NTHREADS],
  output logic     [NTHREADS-1:0] op_ready,
  // persistent-memory write port
  output logic     pm_valid,
  output pm_req_t  pm_req,
  input  logic     pm_ready,
  // status
  output logic     commit_valid,
  output rid_t     commit_rid,
  output tid_t     commit_tid,
  output logidx_t  log_head [NTHREADS],
  output logidx_t  log_tail [NTHREADS],
  output logic     [NREG-1:0] active,
  output asap_ev_t ev
);

  if (NREG > MAX_REG || NREG < 2) begin : g_bad_nreg
    $error("NREG must be between 2 and asap_pkg::MAX_REG");
  end
  if (NTHREADS > 2**TID_W || NTHREADS < 2) begin : g_bad_nthreads
    $error("NTHREADS must be between 2 and 2**asap_pkg::TID_W");
  end

  localparam int unsigned TW = $clog2(NTHREADS);

  // ---------------- per-thread registers ----------------
  logic [3:0] t_nest      [NTHREADS];
  rid_t       t_cur_rid   [NTHREADS];
  logic       t_in_region [NTHREADS];
  logic       t_outer_beg [NTHREADS];
  logic       t_outer_end [NTHREADS];
  logic       t_log_full  [NTHREADS];
  addr_t      t_lpo_addr  [NTHREADS];
  logic       t_prev_v    [NTHREADS];
  rid_t       t_prev_rid  [NTHREADS];
  logic       t_begin     [NTHREADS];
  logic       t_end       [NTHREADS];
  logic       t_lpo       [NTHREADS];
  logic       t_commit    [NTHREADS];

  // ---------------- shared signals ----------------
  logic           gnt_v;
  logic [TW-1:0]  gnt;
  core_op_t       sel_op;
  line_t          sel_line;

  logic    dl_free_ok, dl_add_ok, dl_add_new, dl_commit_v;
  rid_t    dl_free_rid, dl_commit_rid;
  tid_t    dl_commit_tid;
  logidx_t dl_commit_logend;
  logic [NREG-1:0] cl_persisted;

  logic  tg_live, tg_match, tg_lock, tg_q_lock;
  rid_t  tg_owner;
  logic  cl_present, cl_full, cl_dpo_v, cl_dpo_early, cl_lock_block;
  line_t cl_dpo_line, cl_lock_line;

  logic    lpo_pend_q;
  line_t   lpo_line_q;
  addr_t   lpo_addr_q;
  logic    wpq_lpo_ready, wpq_dpo_ready;

  // decisions for the selected operation
  logic accept, do_alloc, do_end, do_claim, do_dep, do_add, ctrl_dep;
  logic st_slot, st_log, st_conflict, st_clfull, st_depfull;
  logic is_coalesce, nested_op;

  asap_rr_arb #(.N(NTHREADS)) u_arb (
    .clk, .rst_n, .req_i(op_valid), .gnt_valid_o(gnt_v), .gnt_o(gnt)
  );

  assign sel_op   = op[gnt];
  assign sel_line = sel_op.addr[ADDR_W-1:LINE_OFF_W];

  rid_t  cur_rid;
  assign cur_rid = t_cur_rid[gnt];

  always_comb begin
    logic live, need_lpo;
    accept = 1'b0; do_alloc = 1'b0; do_end = 1'b0; do_claim = 1'b0;
    do_dep = 1'b0; do_add = 1'b0; ctrl_dep = 1'b0; is_coalesce = 1'b0; nested_op = 1'b0;
    st_slot = 1'b0; st_log = 1'b0; st_conflict = 1'b0; st_clfull = 1'b0; st_depfull = 1'b0;
    // an owner that commits in this very cycle is no longer live
    live     = tg_live && !(dl_commit_v && tg_owner == dl_commit_rid);
    need_lpo = 1'b0;
    if (gnt_v) begin
      unique case (sel_op.kind)
        OP_BEGIN: begin
          if (!t_outer_beg[gnt]) begin
            accept    = 1'b1;
            nested_op = 1'b1;
          end else if (dl_free_ok) begin
            accept   = 1'b1;
            do_alloc = 1'b1;
            ctrl_dep = t_prev_v[gnt] && !(dl_commit_v && t_prev_rid[gnt] == dl_commit_rid);
          end else begin
            st_slot = 1'b1;
          end
        end
        OP_END: begin
          accept    = 1'b1;
          do_end    = t_outer_end[gnt];
          nested_op = !t_outer_end[gnt];
        end
        OP_STORE: begin
          if (!t_in_region[gnt]) begin
            accept = 1'b1;                       // untracked store
          end else if (live && !tg_match) begin
            st_conflict = 1'b1;
          end else begin
            is_coalesce = live && tg_owner == cur_rid;
            need_lpo    = !is_coalesce;
            do_dep      = need_lpo && live;
            if (!cl_present && cl_full)                  st_clfull   = 1'b1;
            else if (need_lpo && (lpo_pend_q || t_log_full[gnt])) st_log = 1'b1;
            else if (do_dep && !dl_add_ok)               st_depfull  = 1'b1;
            else begin
              accept   = 1'b1;
              do_add   = 1'b1;
              do_claim = need_lpo;
            end
          end
        end
        default: ;
      endcase
    end
    if (!accept) begin
      do_dep = 1'b0;
      is_coalesce = 1'b0;
    end
  end

  always_comb begin
    for (int t = 0; t < NTHREADS; t++) begin
      logic me;
      me          = gnt_v && (gnt == TW'(t));
      op_ready[t] = me && accept;
      t_begin[t]  = me && accept && sel_op.kind == OP_BEGIN;
      t_end[t]    = me && accept && sel_op.kind == OP_END;
      t_lpo[t]    = me && do_claim;
      t_commit[t] = dl_commit_v && dl_commit_tid == tid_t'(t);
    end
  end

  for (genvar t = 0; t < NTHREADS; t++) begin : g_thr
    asap_thread_regs #(.REC_BYTES(REC_BYTES)) u_regs (
      .clk, .rst_n,
      .cfg_we        (cfg_we && cfg_tid == tid_t'(t)),
      .cfg_log_addr, .cfg_log_size,
      .begin_i       (t_begin[t]),
      .end_i         (t_end[t]),
      .alloc_rid_i   (dl_free_rid),
      .lpo_i         (t_lpo[t]),
      .commit_i      (t_commit[t]),
      .commit_rid_i  (dl_commit_rid),
      .commit_logend_i(dl_commit_logend),
      .nest_depth_o  (t_nest[t]),
      .cur_rid_o     (t_cur_rid[t]),
      .in_region_o   (t_in_region[t]),
      .outer_begin_o (t_outer_beg[t]),
      .outer_end_o   (t_outer_end[t]),
      .log_head_o    (log_head[t]),
      .log_tail_o    (log_tail[t]),
      .log_full_o    (t_log_full[t]),
      .lpo_addr_o    (t_lpo_addr[t]),
      .prev_valid_o  (t_prev_v[t]),
      .prev_rid_o    (t_prev_rid[t])
    );
  end

  asap_tag_ext #(.NLINES(NLINES)) u_tag (
    .clk, .rst_n,
    .lk_line_i (sel_line),
    .lk_live_o (tg_live), .lk_match_o(tg_match), .lk_owner_o(tg_owner), .lk_lock_o(tg_lock),
    .wr_en_i   (do_claim), .wr_line_i(sel_line), .wr_owner_i(cur_rid),
    .ul_en_i   (lpo_pend_q && wpq_lpo_ready), .ul_line_i(lpo_line_q),
    .q_line_i  (cl_lock_line), .q_lock_o(tg_q_lock),
    .clr_en_i  (dl_commit_v), .clr_rid_i(dl_commit_rid)
  );

  asap_cl_list #(.NREG(NREG), .NCLPTR(NCLPTR)) u_cl (
    .clk, .rst_n,
    .alloc_i (do_alloc), .alloc_rid_i(dl_free_rid),
    .end_i   (do_end),   .end_rid_i  (cur_rid),
    .free_i  (dl_commit_v), .free_rid_i(dl_commit_rid),
    .add_i   (do_add),   .add_rid_i  (cur_rid), .add_line_i(sel_line),
    .add_present_o(cl_present), .add_full_o(cl_full),
    .dpo_valid_o(cl_dpo_v), .dpo_line_o(cl_dpo_line), .dpo_early_o(cl_dpo_early),
    .dpo_ready_i(wpq_dpo_ready),
    .lock_line_o(cl_lock_line), .lock_i(tg_q_lock), .lock_block_o(cl_lock_block),
    .persisted_o(cl_persisted)
  );

  asap_dep_list #(.NREG(NREG), .NDEP(NDEP)) u_dep (
    .clk, .rst_n,
    .free_ok_o (dl_free_ok), .free_rid_o(dl_free_rid),
    .alloc_i   (do_alloc), .alloc_tid_i(tid_t'(gnt)),
    .alloc_dep_valid_i(ctrl_dep), .alloc_dep_rid_i(t_prev_rid[gnt]),
    .end_i     (do_end), .end_rid_i(cur_rid), .end_logend_i(log_tail[gnt]),
    .add_i     (do_dep), .add_rid_i(cur_rid), .add_dep_i(tg_owner),
    .add_ok_o  (dl_add_ok), .add_new_o(dl_add_new),
    .persisted_i(cl_persisted),
    .commit_valid_o(dl_commit_v), .commit_rid_o(dl_commit_rid),
    .commit_tid_o(dl_commit_tid), .commit_logend_o(dl_commit_logend),
    .active_o  (active)
  );

  // one undo record may wait for the WPQ at a time
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lpo_pend_q <= 1'b0;
      lpo_line_q <= '0;
      lpo_addr_q <= '0;
    end else if (do_claim) begin
      lpo_pend_q <= 1'b1;
      lpo_line_q <= sel_line;
      lpo_addr_q <= t_lpo_addr[gnt];
    end else if (wpq_lpo_ready) begin
      lpo_pend_q <= 1'b0;
    end
  end

  asap_wpq #(.DEPTH(WPQ_DEPTH)) u_wpq (
    .clk, .rst_n,
    .lpo_valid_i(lpo_pend_q), .lpo_req_i('{kind: PW_LOG, addr: lpo_addr_q}),
    .lpo_ready_o(wpq_lpo_ready),
    .dpo_valid_i(cl_dpo_v), .dpo_req_i('{kind: PW_DATA, addr: {cl_dpo_line, {LINE_OFF_W{1'b0}}}}),
    .dpo_ready_o(wpq_dpo_ready),
    .pm_valid_o(pm_valid), .pm_req_o(pm_req), .pm_ready_i(pm_ready)
  );

  assign commit_valid = dl_commit_v;
  assign commit_rid   = dl_commit_rid;
  assign commit_tid   = dl_commit_tid;

  always_comb begin
    ev                = '0;
    ev.region_open    = do_alloc;
    ev.region_end     = do_end;
    ev.nested         = nested_op;
    ev.lpo            = do_claim;
    ev.coalesce       = is_coalesce;
    ev.data_dep       = do_dep && dl_add_new;
    ev.ctrl_dep       = do_alloc && ctrl_dep;
    ev.dpo            = cl_dpo_v && wpq_dpo_ready;
    ev.early_dpo      = cl_dpo_v && wpq_dpo_ready && cl_dpo_early;
    ev.commit         = dl_commit_v;
    ev.stall_slot     = st_slot;
    ev.stall_log      = st_log;
    ev.stall_conflict = st_conflict;
    ev.stall_clfull   = st_clfull;
    ev.stall_depfull  = st_depfull;
    ev.stall_lock     = cl_lock_block;
  end

  // a store needing an undo record never finds its line locked
  a_claim_unlocked: assert property (@(posedge clk) disable iff (!rst_n) do_claim |-> !tg_lock);

endmodule
