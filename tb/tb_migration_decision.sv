// tb_migration_decision: random utilities against random thresholds; the
// selection, queue contents and order, duplicate suppression, drops on a full
// queue and the ready/valid handshake are checked against a queue model.
module tb_migration_decision;
  import ubm_pkg::*;
  localparam int DEPTH = 4, SHIFT = 6;
  logic clk = 0, rst_n = 0;
  logic util_valid = 0, req_ready = 0, selected, dropped, req_valid;
  page_t util_page = '0, req_page;
  logic [UTIL_W-1:0] util = '0;
  logic [THR_W-1:0] threshold = '0;
  int checks = 0, failures = 0;

  migration_decision #(.UTIL_SHIFT(SHIFT), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    page_t mq [$];
    int nsel = 0, ndrop = 0, ndup = 0, npop = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      bit exp_sel, dup, pop, push; longint sc;
      util_valid = $urandom_range(1);
      util       = UTIL_W'($urandom_range(20000));
      util_page  = page_t'($urandom_range(12));
      threshold  = THR_W'($urandom_range(255));
      req_ready  = ($urandom_range(3) == 0);
      #1;
      sc = util >> SHIFT;
      exp_sel = util_valid && (sc > threshold);
      dup = 0;
      foreach (mq[j]) if (mq[j] == util_page) dup = 1;
      chk("selected", selected, exp_sel);
      chk("req_valid", req_valid, mq.size() != 0);
      if (mq.size() != 0) chk("req_page", req_page, mq[0]);
      pop  = (mq.size() != 0) && req_ready;
      push = exp_sel && !dup && (mq.size() < DEPTH || pop);
      chk("dropped", dropped, exp_sel && !dup && !push);
      if (exp_sel) nsel++;
      if (exp_sel && dup) ndup++;
      if (dropped) ndrop++;
      @(posedge clk); #1;
      if (pop) begin void'(mq.pop_front()); npop++; end
      if (push) mq.push_back(util_page);
    end
    chk("selections seen", nsel > 100, 1);
    chk("drops seen", ndrop > 10, 1);
    chk("duplicates seen", ndup > 10, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
