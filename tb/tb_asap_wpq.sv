// tb_asap_wpq -- self-checking test of the write pending queue.
//
// Pushes random log and data persist requests with random back-pressure on
// the persistent-memory side and checks against a reference queue: order
// preserved, log persists win over data persists in the same cycle, ready
// low exactly when full (DEPTH=8 here), and nothing lost or duplicated.
module tb_asap_wpq;
  import asap_pkg::*;
  localparam int D = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lpo_valid, lpo_ready, dpo_valid, dpo_ready, pm_valid, pm_ready;
  pm_req_t lpo_req, dpo_req, pm_req;

  asap_wpq #(.DEPTH(D)) dut (
    .clk, .rst_n, .lpo_valid_i(lpo_valid), .lpo_req_i(lpo_req), .lpo_ready_o(lpo_ready),
    .dpo_valid_i(dpo_valid), .dpo_req_i(dpo_req), .dpo_ready_o(dpo_ready),
    .pm_valid_o(pm_valid), .pm_req_o(pm_req), .pm_ready_i(pm_ready)
  );

  pm_req_t model [$];
  int checks = 0, failures = 0, pushed = 0, popped = 0, both = 0, fulls = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lpo_valid = 0; dpo_valid = 0; pm_ready = 0; lpo_req = '0; dpo_req = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int n = 0; n < 2000; n++) begin
      int phase;
      phase = (n / 200) % 2;   // alternate fill-heavy and drain-heavy phases
      lpo_valid = ($urandom_range(0, 3) == 0);
      dpo_valid = ($urandom_range(0, 1) == 0);
      lpo_req = '{kind: PW_LOG,  addr: addr_t'($urandom)};
      dpo_req = '{kind: PW_DATA, addr: addr_t'($urandom)};
      pm_ready = (phase == 0) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      #1;
      check(lpo_ready == (model.size() < D), "lpo_ready iff not full");
      check(dpo_ready == (model.size() < D && !lpo_valid), "dpo_ready iff not full and no lpo");
      check(pm_valid == (model.size() > 0), "pm_valid iff not empty");
      if (model.size() == D) fulls++;
      if (pm_valid) check(pm_req == model[0], $sformatf("head matches n=%0d size=%0d got %h exp %h", n, model.size(), pm_req, model[0]));
      begin
        bit pop_f, lpo_f, dpo_f;
        pop_f = pm_valid && pm_ready;
        lpo_f = lpo_valid && lpo_ready;
        dpo_f = dpo_valid && dpo_ready;
        @(posedge clk);
        if (pop_f) begin void'(model.pop_front()); popped++; end
        if (lpo_f) begin model.push_back(lpo_req); pushed++; if (dpo_valid) both++; end
        else if (dpo_f) begin model.push_back(dpo_req); pushed++; end
        #1;
      end
    end
    check(pushed > 500 && popped > 500 && both > 50 && fulls > 10, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
