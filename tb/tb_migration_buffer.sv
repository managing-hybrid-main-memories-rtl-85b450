// tb_migration_buffer: the migration engine with a small DRAM tag store and a
// memory-controller model that answers block moves after random delays.
// Checks, against a model of the DRAM page cache kept here: which pages are
// evicted and when, that all 64 blocks of the victim move to NVM before the
// page moves to DRAM, skipped requests for pages already cached, and that
// every lookup of the page in transit names the device holding the block.
module tb_migration_buffer;
  import ubm_pkg::*;
  localparam int SETS = 2, WAYS = 2, WW = $clog2(WAYS);
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  page_t req_page = '0;
  logic ts_valid, ts_ready, ts_resp_valid, ts_hit, ts_victim_valid, tready;
  logic [1:0] ts_op;
  page_t ts_page, ts_victim_page;
  logic [WW-1:0] ts_way, ts_victim_way;
  logic mv_valid, mv_ready = 0, mv_to_dram;
  page_t mv_page;
  logic [WW-1:0] mv_way;
  logic [BLK_W-1:0] mv_blk;
  logic rd_done = 0, wr_done = 0;
  logic [BLK_W-1:0] rd_done_blk = '0, wr_done_blk = '0;
  page_t q_page = '0;
  logic [BLK_W-1:0] q_blk = '0;
  logic q_hit, q_in_dram, busy, evicting, done, skipped;
  blk_loc_e q_loc;
  int checks = 0, failures = 0;

  migration_buffer #(.WAYS(WAYS)) dut (.*);

  logic [$clog2(SETS*WAYS)-1:0] a_frame_unused;
  logic a_rv_unused, a_hit_unused;
  dram_tag_store #(.SETS(SETS), .WAYS(WAYS)) u_tags (
    .clk, .rst_n, .ready(tready),
    .a_valid(1'b0), .a_page('0), .a_resp_valid(a_rv_unused), .a_hit(a_hit_unused), .a_frame(a_frame_unused),
    .b_valid(ts_valid), .b_ready(ts_ready), .b_op(ts_op), .b_page(ts_page), .b_way(ts_way),
    .b_resp_valid(ts_resp_valid), .b_hit(ts_hit), .b_victim_way(ts_victim_way),
    .b_victim_valid(ts_victim_valid), .b_victim_page(ts_victim_page));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // ---- memory-controller model: per block 0 at source, 1 buffered, 2 at destination
  int    bstate [BLOCKS_PER_PAGE];
  bit    pend [BLOCKS_PER_PAGE];   // event driven, applied at the next edge
  page_t cur_page;
  bit    cur_to_dram;
  int    cmds_evict = 0, cmds_mig = 0;
  int    blk_cmd [$];

  always @(negedge clk) if (rst_n) begin
    rd_done = 0; wr_done = 0;
    mv_ready = $urandom_range(1);
    // one read and one write completion at most per cycle, random order
    if (blk_cmd.size() != 0 && $urandom_range(2) == 0) begin
      int k, b;
      k = $urandom_range(blk_cmd.size() - 1);
      b = blk_cmd[k];
      if (pend[b]) begin
        // an event for this block is already on the wires
      end else if (bstate[b] == 0) begin
        rd_done = 1; rd_done_blk = BLK_W'(b); pend[b] = 1;
      end else if (bstate[b] == 1) begin
        wr_done = 1; wr_done_blk = BLK_W'(b); pend[b] = 1; blk_cmd.delete(k);
      end
    end
    // lookups of the page in transit
    q_page = cur_page; q_blk = BLK_W'($urandom_range(BLOCKS_PER_PAGE - 1));
  end

  always @(posedge clk) if (rst_n) begin
    // a new move starts: block 0 is offered first, all blocks at the source
    if (mv_valid && mv_blk == 0) begin
      cur_page = mv_page; cur_to_dram = mv_to_dram;
      for (int b = 0; b < BLOCKS_PER_PAGE; b++) bstate[b] = 0;
    end
    if (q_hit) begin
      int st; bit in_dram;
      st = bstate[q_blk];
      in_dram = cur_to_dram ? (st == 2) : (st == 0);
      chk("lookup device", q_in_dram, in_dram);
      chk("lookup state", q_loc, st);
    end
    // block events take effect at this edge
    if (rd_done) begin bstate[rd_done_blk] = 1; pend[rd_done_blk] = 0; end
    if (wr_done) begin bstate[wr_done_blk] = 2; pend[wr_done_blk] = 0; end
    if (mv_valid && mv_ready) begin
      chk("same page", mv_page, cur_page);
      blk_cmd.push_back(int'(mv_blk));
      if (mv_to_dram) cmds_mig++; else cmds_evict++;
    end
  end

  // ---- DRAM page-cache model (LRU by fill order)
  longint cached [SETS][$];

  initial begin
    int ndone = 0, nskip = 0, nevict_exp = 0;
    for (int b = 0; b < BLOCKS_PER_PAGE; b++) begin bstate[b] = 2; pend[b] = 0; end
    cur_page = page_t'(64'hFFFF); cur_to_dram = 1;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    while (!tready) @(posedge clk);
    #1;
    for (int i = 0; i < 60; i++) begin
      longint pg; int s, pos; bit exp_skip, exp_evict; longint exp_victim;
      int ev0, mg0;
      pg = $urandom_range(7);
      s = int'(pg % SETS);
      pos = -1;
      foreach (cached[s][j]) if (cached[s][j] == pg) pos = j;
      exp_skip = pos >= 0;
      exp_evict = !exp_skip && cached[s].size() == WAYS;
      exp_victim = exp_evict ? cached[s][WAYS-1] : 0;
      ev0 = cmds_evict; mg0 = cmds_mig;
      req_valid = 1; req_page = page_t'(pg);
      while (!req_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1 req_valid = 0;
      while (!done && !skipped) begin
        @(posedge clk); #1;
        if (evicting) chk("evicting victim", mv_page, exp_victim);
      end
      chk("skipped", skipped, exp_skip);
      if (exp_skip) nskip++;
      else begin
        ndone++;
        chk("eviction blocks", cmds_evict - ev0, exp_evict ? BLOCKS_PER_PAGE : 0);
        chk("migration blocks", cmds_mig - mg0, BLOCKS_PER_PAGE);
        chk("migrated page", cur_page, pg);
        for (int b = 0; b < BLOCKS_PER_PAGE; b++) chk("block in DRAM", bstate[b], 2);
        if (exp_evict) begin nevict_exp++; void'(cached[s].pop_back()); end
        cached[s].push_front(pg);
      end
      @(posedge clk); #1;
    end
    chk("migrations", ndone > 10, 1);
    chk("skips", nskip > 5, 1);
    chk("evictions", nevict_exp > 5, 1);
    $display("migrations=%0d skips=%0d evictions=%0d", ndone, nskip, nevict_exp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
