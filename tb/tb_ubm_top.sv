// tb_ubm_top: end-to-end run of the page-utility manager at reduced sizes.
//
// Eight applications each alternate between a "serial" phase (one read to
// one of 4 serial pages, waiting for it to finish: no overlap, MLP ratio 1)
// and a "parallel" phase (8 reads to 8 different parallel pages in flight
// together: MLP ratio about 1/8). Every NVM access is a row miss. A memory
// controller model answers DRAM requests after 20 cycles, NVM reads after 60
// and writes after 120, and performs block moves for migrations. Application
// 0 also suffers interference, so its speedup estimate drops.
//
// Checks: every location lookup agrees with a model of which pages are in
// DRAM (built from completed migrations and evictions); a lookup of the page
// in transit names the device that holds the block's valid copy, from a
// model of the block moves; serial pages earn a
// clearly higher mean utility than parallel pages and are migrated more
// often; the speedup of application 0 falls below the others; every
// mechanism (sampling sweep, counter flush, quantum end, threshold moves up
// and down, selection, full decision queue, untracked page, migration,
// eviction, skipped migration, lookup steered by the migration buffer) is
// seen at least once.
module tb_ubm_top;
  import ubm_pkg::*;
  localparam int QUANTUM = 3000, TS_SETS = 2, TS_WAYS = 2, TRACK = 12;
  localparam int RUN_CYCLES = 60000;
  localparam int THR0 = 80;   // between the serial and parallel utilities of this workload

  logic clk = 0, rst_n = 0, ready;
  logic lk_valid = 0, lk_resp_valid, lk_resp_in_dram;
  page_t lk_page = '0;
  logic [BLK_W-1:0] lk_blk = '0;
  logic [$clog2(TS_SETS*TS_WAYS)-1:0] lk_resp_frame;
  logic iss_valid = 0, iss_is_write = 0, iss_to_nvm = 0;
  app_t iss_app = '0; page_t iss_page = '0;
  logic cmp_valid = 0, cmp_is_write = 0, cmp_to_nvm = 0, cmp_row_miss = 0;
  app_t cmp_app = '0; page_t cmp_page = '0;
  logic [NUM_APPS-1:0] stall = '0;
  logic [7:0] interference [NUM_APPS];
  logic mv_valid, mv_ready = 0, mv_to_dram;
  page_t mv_page;
  logic [$clog2(TS_WAYS)-1:0] mv_way;
  logic [BLK_W-1:0] mv_blk;
  logic rd_done = 0, wr_done = 0;
  logic [BLK_W-1:0] rd_done_blk = '0, wr_done_blk = '0;
  logic [THR_W-1:0] threshold;
  logic [SPD_W-1:0] speedup [NUM_APPS];
  logic quantum_end, util_valid, selected, sel_dropped, untracked;
  logic mig_evicting, mig_done, mig_skipped;
  page_t util_page;
  logic [UTIL_W-1:0] util;

  ubm_top #(
    .TRACK_ENTRIES(TRACK), .QUANTUM(QUANTUM), .TS_SETS(TS_SETS), .TS_WAYS(TS_WAYS),
    .THR_INIT(THR0)
  ) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (RUN_CYCLES + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- workload ----------------
  function automatic longint serial_page(int a, int k);   return 64'h1000 + a * 64 + k;       endfunction
  function automatic longint par_page(int a, int k);      return 64'h1000 + a * 64 + 16 + k;  endfunction
  function automatic bit is_serial(longint p);            return ((p - 64'h1000) % 64) < 16;  endfunction

  typedef struct { int app; longint page; bit wr; } req_t;
  typedef struct { int due; int app; longint page; bit wr; bit nvm; } cmp_t;

  req_t  pend [$];                 // requests waiting for a lookup
  cmp_t  inflight [$];
  int    outs [NUM_APPS];          // outstanding requests per app
  int    outs_rd [NUM_APPS];
  int    phase [NUM_APPS];         // 0 serial, 1 parallel
  int    cyc = 0;
  bit    lk_busy = 0;
  req_t  lk_req;

  // DRAM contents model
  bit    in_dram [longint];

  // block-move model
  typedef struct { int due; int blk; } mv_t;
  mv_t   rdq [$], wrq [$];

  // statistics
  longint util_sum_s = 0, util_sum_p = 0, util_n_s = 0, util_n_p = 0;
  int mig_s = 0, mig_p = 0;
  int n_sweep = 0, n_flush = 0, n_qend = 0, n_up = 0, n_down = 0, n_sel = 0, n_drop = 0;
  int n_iss = 0, n_cmp = 0;
  int n_untracked = 0, n_mig = 0, n_evict = 0, n_skip = 0, n_steer = 0;
  int thr_prev;
  longint evict_page; bit evict_seen = 0;
  // block locations of the page in transit: 0 source, 1 buffer, 2 destination
  int bstate [BLOCKS_PER_PAGE];
  bit mv_dir_dram = 1, exp_steer_v = 0, exp_steer = 0;
  initial foreach (bstate[b]) bstate[b] = 2;

  always @(negedge clk) if (rst_n && ready) begin
    cyc++;
    // ---- application request generation
    for (int a = 0; a < NUM_APPS; a++) begin
      bit busy_a;
      busy_a = 0;
      foreach (pend[i]) if (pend[i].app == a) busy_a = 1;
      if (lk_busy && lk_req.app == a) busy_a = 1;
      if (!busy_a && outs[a] == 0 && $urandom_range(3) == 0) begin
        req_t r;
        if (phase[a] == 0) begin
          r.app = a; r.page = serial_page(a, $urandom_range(3)); r.wr = ($urandom_range(9) == 0);
          pend.push_back(r);
        end else begin
          int base;
          base = $urandom_range(7);
          for (int k = 0; k < 8; k++) begin
            r.app = a; r.page = par_page(a, (base + k) % 16); r.wr = 0;
            pend.push_back(r);
          end
        end
        phase[a] = !phase[a];
      end
    end
    // ---- issue the request whose lookup answered
    iss_valid = 0;
    if (lk_busy && lk_resp_valid) begin
      cmp_t c;
      bit transit;
      transit = dut.u_mig.busy && (dut.u_mig.page_q == page_t'(lk_req.page) ||
                                   dut.u_mig.victim_q == page_t'(lk_req.page));
      if (!transit) chk("lookup matches DRAM contents", lk_resp_in_dram, in_dram.exists(lk_req.page));
      if (exp_steer_v) chk("steered lookup names the block's device", lk_resp_in_dram, exp_steer);
      iss_valid = 1; iss_app = app_t'(lk_req.app); iss_page = page_t'(lk_req.page);
      iss_is_write = lk_req.wr; iss_to_nvm = !lk_resp_in_dram;
      c.app = lk_req.app; c.page = lk_req.page; c.wr = lk_req.wr; c.nvm = !lk_resp_in_dram;
      c.due = cyc + (c.nvm ? (c.wr ? 120 : 60) : 20);
      inflight.push_back(c);
      outs[c.app]++;
      if (!c.wr) outs_rd[c.app]++;
      lk_busy = 0;
    end
    // ---- start the next lookup
    lk_valid = 0;
    if (!lk_busy && pend.size() != 0) begin
      lk_req = pend.pop_front();
      lk_valid = 1; lk_page = page_t'(lk_req.page); lk_blk = BLK_W'($urandom_range(63));
      lk_busy = 1;
    end
    // ---- one completion per cycle
    cmp_valid = 0;
    foreach (inflight[i]) if (inflight[i].due <= cyc) begin
      cmp_valid = 1; cmp_app = app_t'(inflight[i].app); cmp_page = page_t'(inflight[i].page);
      cmp_is_write = inflight[i].wr; cmp_to_nvm = inflight[i].nvm; cmp_row_miss = 1;
      outs[inflight[i].app]--;
      if (!inflight[i].wr) outs_rd[inflight[i].app]--;
      inflight.delete(i);
      break;
    end
    // ---- core stall and interference
    for (int a = 0; a < NUM_APPS; a++) begin
      stall[a] = outs_rd[a] != 0;
      interference[a] = (a == 0 && outs[a] != 0 && cyc % 2 == 0) ? 8'd1 : 8'd0;
    end
    // ---- block moves
    mv_ready = $urandom_range(1);
    rd_done = 0; wr_done = 0;
    if (rdq.size() != 0 && rdq[0].due <= cyc) begin
      mv_t m;
      m = rdq.pop_front();
      rd_done = 1; rd_done_blk = BLK_W'(m.blk);
      m.due = cyc + 3; wrq.push_back(m);
    end
    if (wrq.size() != 0 && wrq[0].due <= cyc && !(rd_done && rd_done_blk == BLK_W'(wrq[0].blk))) begin
      mv_t m;
      m = wrq.pop_front();
      wr_done = 1; wr_done_blk = BLK_W'(m.blk);
    end
  end

  // ---------------- observation ----------------
  always @(posedge clk) if (rst_n && ready) begin
    // a new move phase starts with every block at its source
    if (mv_valid && mv_blk == 0) begin
      foreach (bstate[b]) bstate[b] = 0;
      mv_dir_dram = mv_to_dram;
    end
    if (lk_valid) begin
      exp_steer_v = dut.u_mig.q_hit;
      exp_steer   = mv_dir_dram ? (bstate[lk_blk] == 2) : (bstate[lk_blk] == 0);
    end
    if (rd_done) bstate[rd_done_blk] = 1;
    if (wr_done) bstate[wr_done_blk] = 2;
    if (mv_valid && mv_ready) begin
      mv_t m;
      m.due = cyc + 2; m.blk = int'(mv_blk);
      rdq.push_back(m);
      if (!mv_to_dram && mv_blk == 0) begin
        n_evict++; evict_page = mv_page; evict_seen = 1;
      end
    end
    if (mig_done) begin
      page_t p;
      p = dut.u_mig.page_q;
      n_mig++;
      in_dram[p] = 1;
      if (is_serial(p)) mig_s++; else mig_p++;
      if (evict_seen) begin in_dram.delete(evict_page); evict_seen = 0; end
    end
    if (mig_skipped) n_skip++;
    if (iss_valid) n_iss++;
    if (cmp_valid) n_cmp++;
    if (dut.u_tracker.sample_tick) n_sweep++;
    if (dut.rec_valid && dut.rec.flush) n_flush++;
    if (quantum_end) n_qend++;
    if (threshold > THR_W'(thr_prev)) n_up++;
    if (threshold < THR_W'(thr_prev)) n_down++;
    thr_prev = int'(threshold);
    if (selected) n_sel++;
    if (sel_dropped) n_drop++;
    if (untracked) n_untracked++;
    if (lk_valid && dut.u_mig.q_hit) n_steer++;
    if (util_valid) begin
      if (is_serial(util_page)) begin util_sum_s += util; util_n_s++; end
      else                      begin util_sum_p += util; util_n_p++; end
    end
  end

  initial begin
    for (int a = 0; a < NUM_APPS; a++) begin
      interference[a] = 0; outs[a] = 0; outs_rd[a] = 0; phase[a] = a % 2;
    end
    thr_prev = THR0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    while (!ready) @(posedge clk);
    repeat (RUN_CYCLES) @(posedge clk);
    #1;
    $display("sweeps=%0d flushes=%0d quanta=%0d thr_up=%0d thr_down=%0d selected=%0d dropped=%0d",
             n_sweep, n_flush, n_qend, n_up, n_down, n_sel, n_drop);
    $display("untracked=%0d migrations=%0d (serial %0d, parallel %0d) evictions=%0d skipped=%0d steered=%0d threshold=%0d",
             n_untracked, n_mig, mig_s, mig_p, n_evict, n_skip, n_steer, threshold);
    $display("issued=%0d completed=%0d pend=%0d inflight=%0d", n_iss, n_cmp, pend.size(), inflight.size());
    $display("mean utility serial=%0d parallel=%0d  speedups %0d %0d %0d",
             util_n_s ? util_sum_s / util_n_s : 0, util_n_p ? util_sum_p / util_n_p : 0,
             speedup[0], speedup[1], speedup[2]);
    chk("sampling sweeps", n_sweep > 0, 1);
    chk("counter flushes", n_flush > 0, 1);
    chk("quantum ends", n_qend > 0, 1);
    chk("threshold raised", n_up > 0, 1);
    chk("threshold lowered", n_down > 0, 1);
    chk("selections", n_sel > 0, 1);
    chk("full decision queue", n_drop > 0, 1);
    chk("untracked page", n_untracked > 0, 1);
    chk("migrations", n_mig > 0, 1);
    chk("evictions", n_evict > 0, 1);
    chk("skipped migrations", n_skip > 0, 1);
    chk("steered lookups", n_steer > 0, 1);
    chk("serial pages have higher utility", util_sum_s * util_n_p > 2 * util_sum_p * util_n_s, 1);
    chk("serial pages migrated more", mig_s > mig_p, 1);
    for (int a = 1; a < NUM_APPS; a++) chk("app 0 speedup lowest", speedup[0] < speedup[a], 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
