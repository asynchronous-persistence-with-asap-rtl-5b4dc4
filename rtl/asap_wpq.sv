// asap_wpq -- write pending queue of the memory controller.
//
// A FIFO of persistent-memory writes that sits inside the persistence
// domain: once a write has been accepted here it survives a crash, so the
// ASAP hardware treats acceptance as "persisted". Two producers enqueue --
// log persists (undo records) and data persists (line write-backs) -- and at
// most one write is accepted per cycle, log persists first so an undo record
// is never held behind the data it protects. The queue drains in order to
// persistent memory over a valid/ready port.
//
// The WPQ's place in the memory controller and in the persistence domain is
// the paper's; the two-port FIFO, its depth and the priority are this
// design's choices. Requests carry the address and kind of the write; the
// write data comes from the cache and log data path, which is not modelled.
//
// Timing: ready outputs depend only on the fill level and on lpo_valid_i;
// an accepted write is visible on pm_* from the next cycle.
module asap_wpq
  import asap_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    lpo_valid_i,
  input  pm_req_t lpo_req_i,
  output logic    lpo_ready_o,
  input  logic    dpo_valid_i,
  input  pm_req_t dpo_req_i,
  output logic    dpo_ready_o,
  output logic    pm_valid_o,
  output pm_req_t pm_req_o,
  input  logic    pm_ready_i
);

  localparam int unsigned PTR_W = $clog2(DEPTH);

  pm_req_t           mem_q [DEPTH];
  logic [PTR_W-1:0]  rd_q, wr_q;
  logic [PTR_W:0]    cnt_q;

  logic    full, push, pop;
  pm_req_t push_req;

  assign full        = (cnt_q == (PTR_W + 1)'(DEPTH));
  assign lpo_ready_o = !full;
  assign dpo_ready_o = !full && !lpo_valid_i;
  assign push        = (lpo_valid_i || dpo_valid_i) && !full;
  assign push_req    = lpo_valid_i ? lpo_req_i : dpo_req_i;
  assign pm_valid_o  = (cnt_q != '0);
  assign pm_req_o    = mem_q[rd_q];
  assign pop         = pm_valid_o && pm_ready_i;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (PTR_W + 1)'(push) - (PTR_W + 1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem_q[wr_q] <= push_req;
  end

  // valid/ready rules of the PM port: a pending request stays put
  a_pm_stable: assert property (@(posedge clk) disable iff (!rst_n)
    pm_valid_o && !pm_ready_i |=> pm_valid_o && $stable(pm_req_o));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= (PTR_W + 1)'(DEPTH));

endmodule
