// asap_pkg -- types and constants shared by the ASAP persistence-tracking blocks.
//
// ASAP tracks atomic regions (RIDs), the cache lines they modify and the
// dependences between them, so that undo logs can be freed (regions
// committed) asynchronously and in a safe order. This package fixes the
// widths used across the blocks. None of the widths are given by the paper;
// they are this design's choices: 48-bit physical byte addresses, 64-byte
// cache lines, up to 16 regions in flight (RID = 4 bits) and 16-bit log
// record indices.
package asap_pkg;

  parameter int unsigned ADDR_W     = 48;                 // physical byte address
  parameter int unsigned LINE_OFF_W = 6;                  // 64-byte cache lines
  parameter int unsigned LINE_W     = ADDR_W - LINE_OFF_W; // line address width
  parameter int unsigned LOG_IDX_W  = 16;                 // LogHead/LogTail/LogSize (records)
  parameter int unsigned MAX_REG    = 16;                 // upper bound on regions in flight
  parameter int unsigned RID_W      = $clog2(MAX_REG);
  parameter int unsigned TID_W      = 4;                  // up to 16 hardware threads

  typedef logic [ADDR_W-1:0]    addr_t;
  typedef logic [LINE_W-1:0]    line_t;
  typedef logic [RID_W-1:0]     rid_t;
  typedef logic [TID_W-1:0]     tid_t;
  typedef logic [LOG_IDX_W-1:0] logidx_t;

  // Operations a core hands to the ASAP hardware.
  typedef enum logic [1:0] {
    OP_BEGIN = 2'd0,   // asap_begin: open (or nest) an atomic region
    OP_END   = 2'd1,   // asap_end:   close (or un-nest) an atomic region
    OP_STORE = 2'd2    // store to a persistent-memory cache line
  } op_kind_e;

  typedef struct packed {
    op_kind_e kind;
    addr_t    addr;    // byte address, used by OP_STORE only
  } core_op_t;

  // Kinds of persistent-memory writes.
  typedef enum logic {
    PW_LOG  = 1'b0,    // log persist (LPO): an undo record
    PW_DATA = 1'b1     // data persist (DPO): write-back of a modified line
  } pw_kind_e;

  typedef struct packed {
    pw_kind_e kind;
    addr_t    addr;    // byte address of the record or of the line
  } pm_req_t;

  // One-cycle event flags reported by the top (for monitoring and tests).
  typedef struct packed {
    logic region_open;     // outermost asap_begin accepted
    logic region_end;      // outermost asap_end accepted
    logic nested;          // inner begin/end (NestDepth only)
    logic lpo;             // undo record issued
    logic coalesce;        // store to a line the region already logged
    logic data_dep;        // data dependence recorded
    logic ctrl_dep;        // control dependence recorded
    logic dpo;             // line write-back issued
    logic early_dpo;       // write-back issued for a full, still-active region
    logic commit;          // region committed, log freed
    logic stall_slot;      // begin stalled: no free region entry
    logic stall_log;       // store stalled: log full or log persist pending
    logic stall_conflict;  // store stalled: tag entry owned by another line
    logic stall_clfull;    // store stalled: CL list entry full
    logic stall_depfull;   // store stalled: dependence slots full
    logic stall_lock;      // write-back held by LockBit
  } asap_ev_t;

  // Region entry states (CL list and dependence list).
  typedef enum logic [1:0] {
    RS_FREE   = 2'd0,
    RS_ACTIVE = 2'd1,      // region open, stores still arriving
    RS_ENDED  = 2'd2       // outermost end seen, waiting for persists / deps
  } rstate_e;

endpackage
