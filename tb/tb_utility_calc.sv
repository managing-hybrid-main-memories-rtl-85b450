// tb_utility_calc: random page statistics and speedups; the expected
// stall-time reduction and utility are computed here with integer arithmetic
// from the equations and compared after the 3-cycle pipeline latency.
module tb_utility_calc;
  import ubm_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  page_stat_t in_stat = '0;
  logic [SPD_W-1:0] speedup [NUM_APPS];
  app_t out_app; page_t out_page;
  logic [DSTALL_W-1:0] out_dstall;
  logic [UTIL_W-1:0] out_util;
  int checks = 0, failures = 0;

  utility_calc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  typedef struct { longint ds; longint u; longint page; } exp_t;
  exp_t expq [$];

  function automatic longint avg(longint acc, longint w);
    longint q;
    if (w == 0) return 0;
    q = acc / w;
    return q > 1023 ? 1023 : q;
  endfunction

  int lat_seen = -1;

  initial begin
    for (int a = 0; a < NUM_APPS; a++) speedup[a] = SPD_W'($urandom_range(255));
    speedup[0] = 255; speedup[1] = 128;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // directed: 10 read misses, no overlap (ratio 1.0), app 0: 10*140 = 1400 cycles
    // and the same page stats for app 1 (speedup 0.5): utility halves
    for (int i = 0; i < 3000; i++) begin
      page_stat_t s; exp_t e; longint ds;
      s = '0;
      if (i < 2) begin
        s.app = app_t'(i); s.miss_rd = 10; s.acc_rd = 512 * 7; s.wgt_rd = 7;
      end else begin
        s.app = app_t'($urandom_range(NUM_APPS - 1));
        s.miss_rd = MISS_W'($urandom_range(255));
        s.miss_wr = MISS_W'($urandom_range(255));
        s.wgt_rd  = WGT_W'($urandom_range(3000));
        s.wgt_wr  = WGT_W'($urandom_range(3000));
        s.acc_rd  = ACC_W'(longint'(s.wgt_rd) * $urandom_range(512));
        s.acc_wr  = ACC_W'(longint'(s.wgt_wr) * $urandom_range(512));
        if (i % 7 == 0) s.wgt_wr = 0;
      end
      s.page = page_t'(i);
      ds = (longint'(s.miss_rd) * DLAT_READ * avg(s.acc_rd, s.wgt_rd)
          + longint'(s.miss_wr) * DLAT_WRITE * avg(s.acc_wr, s.wgt_wr)) >> 9;
      if (ds > (1 << DSTALL_W) - 1) ds = (1 << DSTALL_W) - 1;
      e.ds = ds; e.u = (ds * speedup[s.app]) >> 8; e.page = i;
      expq.push_back(e);
      in_valid = 1; in_stat = s;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    chk("all results seen", expq.size(), 0);
    chk("pipeline latency", lat_seen, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_in = -1;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && first_in < 0) first_in = cyc;
    if (out_valid && rst_n) begin
      exp_t e;
      if (lat_seen < 0) lat_seen = cyc - first_in;
      e = expq.pop_front();
      if (e.page == 0) chk("directed dstall", out_dstall, 1400);
      if (e.page == 1) chk("directed util half", out_util, (1400 * 128) >> 8);
      chk("page", out_page, e.page);
      chk("dstall", out_dstall, e.ds);
      chk("util", out_util, e.u);
    end
  end
endmodule
