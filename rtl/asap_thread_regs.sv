// asap_thread_regs -- the per-thread ASAP registers of one hardware thread.
//
// Holds LogAddress, LogSize, LogHead, LogTail, NestDepth and CurRID (the six
// registers the paper lists per thread). The undo log is a circular buffer of
// LogSize fixed-size records starting at LogAddress; LogTail advances when an
// undo record is issued (lpo_i) and LogHead advances when one of this
// thread's regions commits, to the tail position that region ended at. A
// region opens at the outermost asap_begin (NestDepth 0 -> 1, CurRID loaded
// from alloc_rid_i) and ends at the outermost asap_end; inner begin/end pairs
// only count NestDepth (flattened nesting, this design's choice).
//
// The block also remembers the thread's previous region while it has not
// committed (prev_valid_o/prev_rid_o), so the next region can record a
// control dependence on it. Keeping that here, the record format and all
// widths are this design's choices; the register names are the paper's.
//
// Timing: all updates take effect at the next rising clock edge; outputs are
// registers or simple functions of them. log_full_o means one free record is
// left unused so a full log can be told from an empty one.
module asap_thread_regs
  import asap_pkg::*;
#(
  parameter int unsigned REC_BYTES = 128,   // bytes per undo record (line + header)
  parameter int unsigned NEST_W    = 4      // NestDepth width
) (
  input  logic    clk,
  input  logic    rst_n,
  // configuration (system software)
  input  logic    cfg_we,
  input  addr_t   cfg_log_addr,
  input  logidx_t cfg_log_size,
  // operations accepted from the core
  input  logic    begin_i,        // asap_begin accepted
  input  logic    end_i,          // asap_end accepted
  input  rid_t    alloc_rid_i,    // RID of the region opened by an outermost begin
  input  logic    lpo_i,          // one undo record appended
  // commit of one of this thread's regions
  input  logic    commit_i,
  input  rid_t    commit_rid_i,
  input  logidx_t commit_logend_i,
  // state
  output logic [NEST_W-1:0] nest_depth_o,
  output rid_t    cur_rid_o,
  output logic    in_region_o,
  output logic    outer_begin_o,  // a begin now would open a new region
  output logic    outer_end_o,    // an end now would close the region
  output logidx_t log_head_o,
  output logidx_t log_tail_o,
  output logic    log_full_o,
  output addr_t   lpo_addr_o,     // byte address of the next undo record
  output logic    prev_valid_o,
  output rid_t    prev_rid_o
);

  addr_t             log_addr_q;
  logidx_t           log_size_q, log_head_q, log_tail_q;
  logic [NEST_W-1:0] nest_q;
  rid_t              cur_rid_q, prev_rid_q;
  logic              prev_valid_q;

  function automatic logidx_t wrap_inc(logidx_t v, logidx_t size);
    return (v + logidx_t'(1) >= size) ? '0 : v + logidx_t'(1);
  endfunction

  assign nest_depth_o  = nest_q;
  assign cur_rid_o     = cur_rid_q;
  assign in_region_o   = (nest_q != '0);
  assign outer_begin_o = (nest_q == '0);
  assign outer_end_o   = (nest_q == NEST_W'(1));
  assign log_head_o    = log_head_q;
  assign log_tail_o    = log_tail_q;
  assign log_full_o    = (wrap_inc(log_tail_q, log_size_q) == log_head_q);
  assign lpo_addr_o    = log_addr_q + addr_t'(log_tail_q) * addr_t'(REC_BYTES);
  assign prev_valid_o  = prev_valid_q;
  assign prev_rid_o    = prev_rid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      log_addr_q   <= '0;
      log_size_q   <= logidx_t'(1);
      log_head_q   <= '0;
      log_tail_q   <= '0;
      nest_q       <= '0;
      cur_rid_q    <= '0;
      prev_rid_q   <= '0;
      prev_valid_q <= 1'b0;
    end else begin
      if (cfg_we) begin
        log_addr_q <= cfg_log_addr;
        log_size_q <= cfg_log_size;
        log_head_q <= '0;
        log_tail_q <= '0;
      end else begin
        if (lpo_i)    log_tail_q <= wrap_inc(log_tail_q, log_size_q);
        if (commit_i) log_head_q <= commit_logend_i;
      end
      // the previous region stops mattering once it commits
      if (commit_i && prev_valid_q && commit_rid_i == prev_rid_q) prev_valid_q <= 1'b0;
      if (begin_i) begin
        nest_q <= nest_q + NEST_W'(1);
        if (nest_q == '0) cur_rid_q <= alloc_rid_i;
      end else if (end_i && nest_q != '0) begin
        nest_q <= nest_q - NEST_W'(1);
        if (nest_q == NEST_W'(1)) begin
          prev_rid_q   <= cur_rid_q;
          prev_valid_q <= 1'b1;
        end
      end
    end
  end

  // NestDepth must not wrap.
  a_nest_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    begin_i |-> nest_q != '1);

endmodule
