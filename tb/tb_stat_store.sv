// tb_stat_store: random completion records against a reference model of an
// LRU set-associative store kept here with queues (most recent first) and an
// associative array of counters. Checks every returned entry, hit/miss and
// the initialisation time. A small geometry forces many replacements.
module tb_stat_store;
  import ubm_pkg::*;
  localparam int SETS = 4, WAYS = 4;

  logic clk = 0, rst_n = 0;
  logic ready, in_valid = 0, out_valid, out_was_hit;
  cmpl_rec_t in_rec = '0;
  page_stat_t out_stat;
  int checks = 0, failures = 0;

  stat_store #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

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

  typedef longint unsigned key_t;
  key_t   lru [SETS][$];
  page_stat_t model [key_t];

  function automatic longint sat(longint v, int w);
    return (v > (64'd1 << w) - 1) ? (64'd1 << w) - 1 : v;
  endfunction

  initial begin
    int cyc, evictions = 0, hits = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1 cyc++; end
    chk("init cycles", cyc, SETS);

    for (int i = 0; i < 4000; i++) begin
      cmpl_rec_t r;
      key_t k; int s, pos; bit hit;
      page_stat_t e;
      r = '0;
      r.app      = app_t'($urandom_range(1));
      r.page     = page_t'($urandom_range(23)) | (page_t'(1) << 30);
      r.is_write = $urandom_range(1);
      r.row_miss = $urandom_range(1);
      r.flush    = ($urandom_range(3) == 0);
      r.acc_rd   = ACC_W'($urandom_range(20000));
      r.acc_wr   = ACC_W'($urandom_range(20000));
      r.wgt_rd   = WGT_W'($urandom_range(60));
      r.wgt_wr   = WGT_W'($urandom_range(60));
      if (i > 3000) begin r.acc_rd = '1 - 5; r.wgt_wr = '1; end  // saturation

      // reference model
      k = {r.app, r.page};
      s = int'(r.page) % SETS;
      pos = -1;
      foreach (lru[s][j]) if (lru[s][j] == k) pos = j;
      hit = (pos >= 0);
      if (hit) begin
        e = model[k];
        lru[s].delete(pos);
        hits++;
      end else begin
        if (lru[s].size() == WAYS) begin
          model.delete(lru[s][WAYS-1]);
          lru[s].delete(WAYS-1);
          evictions++;
        end
        e = '0; e.app = r.app; e.page = r.page;
      end
      lru[s].push_front(k);
      if (r.row_miss && !r.is_write) e.miss_rd = MISS_W'(sat(e.miss_rd + 1, MISS_W));
      if (r.row_miss &&  r.is_write) e.miss_wr = MISS_W'(sat(e.miss_wr + 1, MISS_W));
      if (r.flush) begin
        e.acc_rd = ACC_W'(sat(e.acc_rd + r.acc_rd, ACC_W));
        e.acc_wr = ACC_W'(sat(e.acc_wr + r.acc_wr, ACC_W));
        e.wgt_rd = WGT_W'(sat(e.wgt_rd + r.wgt_rd, WGT_W));
        e.wgt_wr = WGT_W'(sat(e.wgt_wr + r.wgt_wr, WGT_W));
      end
      model[k] = e;

      in_valid = 1; in_rec = r;
      @(posedge clk); #1;
      in_valid = 0;
      chk("out_valid", out_valid, 1);
      chk("hit", out_was_hit, hit);
      checks++;
      if (out_stat !== e) begin
        failures++;
        if (failures < 20) $display("FAIL entry %0d: got %h expected %h", i, out_stat, e);
      end
      if ($urandom_range(4) == 0) begin @(posedge clk); #1 chk("idle", out_valid, 0); end
    end
    chk("some hits", hits > 100, 1);
    chk("some evictions", evictions > 100, 1);
    $display("hits=%0d evictions=%0d", hits, evictions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
