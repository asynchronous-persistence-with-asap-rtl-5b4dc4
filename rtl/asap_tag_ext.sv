// asap_tag_ext -- the ASAP cache-line tag extensions (PBit, LockBit, OwnerRID).
//
// For each tracked cache line the extension records which atomic region last
// modified it (OwnerRID), so that a later region writing the line can record
// a data dependence on that region. LockBit marks a line whose undo record is
// not yet persistent: its write-back must wait, because an undo log has to be
// durable before the data it protects. PBit marks an entry whose OwnerRID is
// live (the line holds persistent data written by a region that has not yet
// committed). The field names are the paper's; the paper does not define
// PBit or LockBit, so the meanings above are this design's reading.
//
// The caches themselves are outside this block. The extensions are kept in a
// direct-mapped array of NLINES entries indexed by the low line-address bits,
// each with the rest of the line address as a tag. Ports:
//   lookup  (lk_*)  combinational read for the store being processed;
//   write   (wr_*)  claim a line for a region: PBit=1, LockBit=1, OwnerRID;
//   unlock  (ul_*)  clear LockBit once the undo record is in the WPQ;
//   query   (q_*)   combinational LockBit read for a candidate write-back;
//   clear   (clr_*) a region committed: every entry it owns drops PBit.
// Writes take effect at the next clock edge. When clear and write hit the
// same entry in one cycle the write wins (it belongs to a newer region).
module asap_tag_ext
  import asap_pkg::*;
#(
  parameter int unsigned NLINES = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  line_t lk_line_i,
  output logic  lk_live_o,    // entry's PBit set (a live owner)
  output logic  lk_match_o,   // entry's tag equals lk_line_i
  output rid_t  lk_owner_o,
  output logic  lk_lock_o,
  input  logic  wr_en_i,
  input  line_t wr_line_i,
  input  rid_t  wr_owner_i,
  input  logic  ul_en_i,
  input  line_t ul_line_i,
  input  line_t q_line_i,
  output logic  q_lock_o,
  input  logic  clr_en_i,
  input  rid_t  clr_rid_i
);

  localparam int unsigned IDX_W = $clog2(NLINES);
  localparam int unsigned TAG_W = LINE_W - IDX_W;

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;

  logic pbit_q  [NLINES];
  logic lock_q  [NLINES];
  rid_t owner_q [NLINES];
  tag_t tag_q   [NLINES];

  function automatic idx_t idx_of(line_t l);
    return l[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(line_t l);
    return l[LINE_W-1:IDX_W];
  endfunction

  always_comb begin
    idx_t i;
    i          = idx_of(lk_line_i);
    lk_live_o  = pbit_q[i];
    lk_match_o = (tag_q[i] == tag_of(lk_line_i));
    lk_owner_o = owner_q[i];
    lk_lock_o  = lock_q[i] && lk_match_o;
  end

  always_comb begin
    idx_t j;
    j        = idx_of(q_line_i);
    q_lock_o = lock_q[j] && (tag_q[j] == tag_of(q_line_i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NLINES; k++) begin
        pbit_q[k]  <= 1'b0;
        lock_q[k]  <= 1'b0;
        owner_q[k] <= '0;
        tag_q[k]   <= '0;
      end
    end else begin
      for (int k = 0; k < NLINES; k++) begin
        if (clr_en_i && pbit_q[k] && owner_q[k] == clr_rid_i) pbit_q[k] <= 1'b0;
      end
      if (ul_en_i && tag_q[idx_of(ul_line_i)] == tag_of(ul_line_i))
        lock_q[idx_of(ul_line_i)] <= 1'b0;
      if (wr_en_i) begin
        pbit_q[idx_of(wr_line_i)]  <= 1'b1;
        lock_q[idx_of(wr_line_i)]  <= 1'b1;
        owner_q[idx_of(wr_line_i)] <= wr_owner_i;
        tag_q[idx_of(wr_line_i)]   <= tag_of(wr_line_i);
      end
    end
  end

  // A line may only be claimed while no undo record is pending for its entry,
  // and a live entry may only be taken over by the same line.
  a_claim_unlocked: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en_i |-> !lock_q[idx_of(wr_line_i)]);
  a_claim_same_line: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en_i && pbit_q[idx_of(wr_line_i)] && !(clr_en_i && owner_q[idx_of(wr_line_i)] == clr_rid_i)
      |-> tag_q[idx_of(wr_line_i)] == tag_of(wr_line_i));

endmodule
