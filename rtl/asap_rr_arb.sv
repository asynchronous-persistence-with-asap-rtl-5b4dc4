// asap_rr_arb -- round-robin arbiter used to pick one core operation per cycle.
//
// Grants the first requester at or after the rotating pointer; the pointer
// moves past the granted requester every cycle a grant is made, whether or
// not the granted operation could complete, so a stalled core cannot block
// the others. Purely this design's choice (the paper does not describe how
// cores reach the ASAP structures). gnt_o is combinational from req_i.
module asap_rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req_i,
  output logic                 gnt_valid_o,
  output logic [$clog2(N)-1:0] gnt_o
);
  localparam int unsigned W = $clog2(N);

  logic [W-1:0] ptr_q;

  always_comb begin
    gnt_valid_o = 1'b0;
    gnt_o       = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (req_i[i]) begin
        gnt_valid_o = 1'b1;
        gnt_o       = W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           ptr_q <= '0;
    else if (gnt_valid_o) ptr_q <= (int'(gnt_o) == N - 1) ? '0 : gnt_o + 1'b1;
  end

  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n)
    gnt_valid_o |-> req_i[gnt_o]);
endmodule
