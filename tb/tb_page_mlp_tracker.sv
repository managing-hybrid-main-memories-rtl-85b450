// tb_page_mlp_tracker: drives request issue/completion events into the
// outstanding-page counters and checks the flushed MLP temporaries against
// sums worked out here from the number of sampling sweeps seen while each
// page's counts were constant. Events are placed between sweeps so that the
// expected value of every sweep is known. Also checks the per-application
// outstanding counts, the row-miss pass-through, the sweep length and
// table-full handling.
module tb_page_mlp_tracker;
  import ubm_pkg::*;
  localparam int ENTRIES = 6, LANES = 3, PERIOD = 10;

  logic clk = 0, rst_n = 0;
  logic issue_valid = 0, issue_is_write = 0, issue_to_nvm = 0;
  app_t issue_app = '0; page_t issue_page = '0;
  logic cmpl_valid = 0, cmpl_is_write = 0, cmpl_to_nvm = 0, cmpl_row_miss = 0;
  app_t cmpl_app = '0; page_t cmpl_page = '0;
  logic rec_valid; cmpl_rec_t rec;
  logic [OUTS_W-1:0] n_rd [NUM_APPS], n_wr [NUM_APPS];
  logic sample_tick, untracked;
  int checks = 0, failures = 0, ticks = 0, cycle = 0;

  page_mlp_tracker #(.ENTRIES(ENTRIES), .LANES(LANES), .SAMPLE_PERIOD(PERIOD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin cycle++; if (sample_tick) ticks++; end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // wait until a sweep has just finished (a tick, then the sweep's groups)
  task automatic after_sweep();
    @(posedge clk); while (!sample_tick) @(posedge clk);
    repeat ((ENTRIES + LANES - 1) / LANES) @(posedge clk);
    #1;
  endtask

  task automatic issue(int app, longint page, bit wr, bit nvm);
    issue_valid = 1; issue_app = app_t'(app); issue_page = page_t'(page);
    issue_is_write = wr; issue_to_nvm = nvm;
    @(posedge clk); #1; issue_valid = 0;
  endtask

  // complete one request and return the record seen one cycle later
  task automatic complete(int app, longint page, bit wr, bit miss, output cmpl_rec_t r, output bit v);
    cmpl_valid = 1; cmpl_app = app_t'(app); cmpl_page = page_t'(page);
    cmpl_is_write = wr; cmpl_to_nvm = 1; cmpl_row_miss = miss;
    @(posedge clk); #1; cmpl_valid = 0;
    r = rec; v = rec_valid;
  endtask

  initial begin
    cmpl_rec_t r; bit v; int t0, t1, t2, c0;
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // sweep length: ticks are PERIOD apart when the sweep is shorter
    @(posedge clk); while (!sample_tick) @(posedge clk);
    c0 = cycle;
    @(posedge clk); while (!sample_tick) @(posedge clk);
    chk("sampling period", cycle - c0, PERIOD);

    // phase 1: app 2 has reads A x3, B x1, a write to A, and a DRAM read
    after_sweep();
    issue(2, 'h1000A, 0, 1); issue(2, 'h1000A, 0, 1); issue(2, 'h1000A, 0, 1);
    issue(2, 'h2000B, 0, 1); issue(2, 'h1000A, 1, 1); issue(2, 'h30000, 0, 0);
    chk("n_rd app2", n_rd[2], 5);
    chk("n_wr app2", n_wr[2], 1);
    t0 = ticks;
    repeat (3) after_sweep();
    t1 = ticks - t0;           // sweeps with N_rd = 5, N_wr = 1
    complete(2, 'h1000A, 0, 1, r, v);
    chk("rec valid", v, 1); chk("rec no flush", r.flush, 0); chk("row miss", r.row_miss, 1);
    complete(2, 'h1000A, 0, 0, r, v);
    chk("row hit", r.row_miss, 0);
    complete(2, 'h1000A, 0, 1, r, v);
    chk("still outstanding write", r.flush, 0);
    complete(2, 'h1000A, 1, 1, r, v);
    chk("flush A", r.flush, 1);
    chk("A is_write", r.is_write, 1);
    chk("A acc_rd", r.acc_rd, t1 * ((3 * 512) / 5));
    chk("A wgt_rd", r.wgt_rd, t1 * 3);
    chk("A acc_wr", r.acc_wr, t1 * 512);
    chk("A wgt_wr", r.wgt_wr, t1 * 1);
    // DRAM request completes: no record
    cmpl_valid = 1; cmpl_app = 2; cmpl_page = 'h30000; cmpl_is_write = 0; cmpl_to_nvm = 0;
    @(posedge clk); #1 cmpl_valid = 0; #0;
    chk("no record for DRAM", rec_valid, 0);
    t0 = ticks;
    repeat (2) after_sweep();
    t2 = ticks - t0;           // sweeps with B alone: N_rd = 1
    complete(2, 'h2000B, 0, 1, r, v);
    chk("flush B", r.flush, 1);
    chk("B acc_rd", r.acc_rd, t1 * (512 / 5) + t2 * 512);
    chk("B wgt_rd", r.wgt_rd, t1 + t2);
    chk("B wgt_wr", r.wgt_wr, 0);
    chk("n_rd app2 drained", n_rd[2], 0);

    // phase 2: fill the table, the seventh page is untracked
    after_sweep();
    for (int p = 0; p < ENTRIES; p++) begin
      issue(p % NUM_APPS, 'h500 + p, 0, 1);
      chk("tracked", untracked, 0);
    end
    issue_valid = 1; issue_app = 1; issue_page = 'h900; issue_is_write = 0; issue_to_nvm = 1;
    #1 chk("untracked", untracked, 1);
    @(posedge clk); #1 issue_valid = 0;
    complete(1, 'h900, 0, 1, r, v);
    chk("untracked record", v, 1); chk("untracked no flush", r.flush, 0);
    for (int p = 0; p < ENTRIES; p++) begin
      complete(p % NUM_APPS, 'h500 + p, 0, 0, r, v);
      chk("flush filled", r.flush, 1);
      chk("filled page", r.page, 'h500 + p);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
