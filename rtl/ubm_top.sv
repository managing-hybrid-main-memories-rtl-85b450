// ubm_top: page-utility based hybrid DRAM/NVM memory management engine.
//
// Sits in the memory controllers of a system whose main memory is a small
// DRAM (used as a 16-way set-associative page cache) beside a large NVM.
// It watches the memory requests of every application (hardware thread) and
// moves to DRAM the NVM pages whose migration is expected to raise system
// performance the most:
//   * page_mlp_tracker    - per hot NVM page, samples the memory-level
//                           parallelism seen by its requests (MLPAcc/Weight)
//   * stat_store          - per page row-miss counts and MLP sums
//   * utility_calc        - page utility = stall-time reduction x sensitivity
//   * speedup_estimator   - per-application speedup (sensitivity) and total
//                           stall time, once per quantum
//   * migration_threshold - hill-climbing threshold (MTD)
//   * migration_decision  - utility > threshold selects a page (MD)
//   * migration_buffer    - evicts the victim, copies the page block by block
//                           and tracks where every block is
//   * dram_tag_store      - says whether a page is in DRAM and in which frame
// The cores, caches, DRAM/NVM controllers and devices and the interference
// monitor are outside: their events enter as ports.
//
// Interface and timing:
//   lk_*   : where is a page/block? Answer one cycle later on lk_resp_*;
//            a block of the page in transit is answered by the migration
//            buffer, otherwise by the tag store (a DRAM hit is made MRU).
//   iss_*  : a request left the last-level cache, with the device it goes to.
//   cmp_*  : a request completed, with its row-buffer hit/miss outcome.
//   stall, interference : per application, every cycle.
//   mv_*, rd_done, wr_done : block moves of a migration, to and from the
//            memory controllers.
// Pages become candidates for migration only through completed NVM requests;
// a decision follows 1 (tracker) + 1 (stat store) + 3 (utility) cycles after
// the completion.
module ubm_top
  import ubm_pkg::*;
#(
  parameter int unsigned TRACK_ENTRIES = 96,
  parameter int unsigned LANES         = 3,
  parameter int unsigned SAMPLE_PERIOD = 30,
  parameter int unsigned SS_SETS       = 64,
  parameter int unsigned SS_WAYS       = 32,
  parameter int unsigned QUANTUM       = 1000000,
  parameter int unsigned TS_SETS       = 8192,
  parameter int unsigned TS_WAYS       = 16,
  parameter int unsigned UTIL_SHIFT    = 6,
  parameter int unsigned THR_STEP      = 1,
  parameter int unsigned THR_INIT      = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ready,
  // location lookup
  input  logic              lk_valid,
  input  page_t             lk_page,
  input  logic [BLK_W-1:0]  lk_blk,
  output logic              lk_resp_valid,
  output logic              lk_resp_in_dram,
  output logic [$clog2(TS_SETS*TS_WAYS)-1:0] lk_resp_frame,
  // request issue and completion
  input  logic              iss_valid,
  input  app_t              iss_app,
  input  page_t             iss_page,
  input  logic              iss_is_write,
  input  logic              iss_to_nvm,
  input  logic              cmp_valid,
  input  app_t              cmp_app,
  input  page_t             cmp_page,
  input  logic              cmp_is_write,
  input  logic              cmp_to_nvm,
  input  logic              cmp_row_miss,
  // per-application core state
  input  logic [NUM_APPS-1:0] stall,
  input  logic [7:0]        interference [NUM_APPS],
  // block moves
  output logic              mv_valid,
  input  logic              mv_ready,
  output logic              mv_to_dram,
  output page_t             mv_page,
  output logic [$clog2(TS_WAYS)-1:0] mv_way,
  output logic [BLK_W-1:0]  mv_blk,
  input  logic              rd_done,
  input  logic [BLK_W-1:0]  rd_done_blk,
  input  logic              wr_done,
  input  logic [BLK_W-1:0]  wr_done_blk,
  // observation
  output logic [THR_W-1:0]  threshold,
  output logic [SPD_W-1:0]  speedup [NUM_APPS],
  output logic              quantum_end,
  output logic              util_valid,
  output page_t             util_page,
  output logic [UTIL_W-1:0] util,
  output logic              selected,
  output logic              sel_dropped,
  output logic              untracked,
  output logic              mig_evicting,
  output logic              mig_done,
  output logic              mig_skipped
);

  localparam int unsigned TS_WAY_W = $clog2(TS_WAYS);

  // ---------------- statistics path ----------------
  logic              rec_valid;
  cmpl_rec_t         rec;
  logic [OUTS_W-1:0] n_rd [NUM_APPS];
  logic [OUTS_W-1:0] n_wr [NUM_APPS];
  logic              sample_tick;

  page_mlp_tracker #(
    .ENTRIES(TRACK_ENTRIES), .LANES(LANES), .SAMPLE_PERIOD(SAMPLE_PERIOD)
  ) u_tracker (
    .clk, .rst_n,
    .issue_valid(iss_valid), .issue_app(iss_app), .issue_page(iss_page),
    .issue_is_write(iss_is_write), .issue_to_nvm(iss_to_nvm),
    .cmpl_valid(cmp_valid), .cmpl_app(cmp_app), .cmpl_page(cmp_page),
    .cmpl_is_write(cmp_is_write), .cmpl_to_nvm(cmp_to_nvm), .cmpl_row_miss(cmp_row_miss),
    .rec_valid, .rec, .n_rd, .n_wr, .sample_tick, .untracked
  );

  logic       ss_ready, ss_valid, ss_hit;
  page_stat_t ss_stat;

  stat_store #(.SETS(SS_SETS), .WAYS(SS_WAYS)) u_stat_store (
    .clk, .rst_n, .ready(ss_ready),
    .in_valid(rec_valid), .in_rec(rec),
    .out_valid(ss_valid), .out_stat(ss_stat), .out_was_hit(ss_hit)
  );

  // ---------------- sensitivity and threshold ----------------
  logic [NUM_APPS-1:0] outstanding;
  logic                total_valid, spd_done;
  logic [TOT_W-1:0]    total_stall;
  logic                dir_up;

  always_comb
    for (int a = 0; a < NUM_APPS; a++)
      outstanding[a] = (n_rd[a] != '0) || (n_wr[a] != '0);

  speedup_estimator #(.QUANTUM(QUANTUM), .INC_W(8)) u_speedup (
    .clk, .rst_n, .stall, .outstanding, .interference,
    .quantum_end, .total_valid, .total_stall, .speedup, .spd_done
  );

  migration_threshold #(.STEP(THR_STEP), .INIT(THR_INIT)) u_mtd (
    .clk, .rst_n, .update(total_valid), .total_stall, .threshold, .dir_up
  );

  // ---------------- utility and decision ----------------
  app_t                util_app;
  logic [DSTALL_W-1:0] util_dstall;

  utility_calc u_puc (
    .clk, .rst_n, .in_valid(ss_valid), .in_stat(ss_stat), .speedup,
    .out_valid(util_valid), .out_app(util_app), .out_page(util_page),
    .out_dstall(util_dstall), .out_util(util)
  );

  logic  md_req_valid, md_req_ready;
  page_t md_req_page;

  migration_decision #(.UTIL_SHIFT(UTIL_SHIFT), .DEPTH(4)) u_md (
    .clk, .rst_n, .util_valid, .util_page, .util, .threshold,
    .selected, .dropped(sel_dropped),
    .req_valid(md_req_valid), .req_page(md_req_page), .req_ready(md_req_ready)
  );

  // ---------------- migration and tag store ----------------
  logic                ts_ready, ts_valid, ts_b_ready, ts_resp_valid, ts_hit, ts_victim_valid;
  logic [1:0]          ts_op;
  page_t               ts_page, ts_victim_page;
  logic [TS_WAY_W-1:0] ts_way, ts_victim_way;
  logic                q_hit, q_in_dram, mig_busy;
  blk_loc_e            q_loc;

  migration_buffer #(.WAYS(TS_WAYS)) u_mig (
    .clk, .rst_n,
    .req_valid(md_req_valid), .req_page(md_req_page), .req_ready(md_req_ready),
    .ts_valid, .ts_ready(ts_b_ready), .ts_op, .ts_page, .ts_way,
    .ts_resp_valid, .ts_hit, .ts_victim_way, .ts_victim_valid, .ts_victim_page,
    .mv_valid, .mv_ready, .mv_to_dram, .mv_page, .mv_way, .mv_blk,
    .rd_done, .rd_done_blk, .wr_done, .wr_done_blk,
    .q_page(lk_page), .q_blk(lk_blk), .q_hit, .q_loc, .q_in_dram,
    .busy(mig_busy), .evicting(mig_evicting), .done(mig_done), .skipped(mig_skipped)
  );

  logic a_resp_valid, a_hit;
  logic [$clog2(TS_SETS*TS_WAYS)-1:0] a_frame;

  dram_tag_store #(.SETS(TS_SETS), .WAYS(TS_WAYS)) u_tags (
    .clk, .rst_n, .ready(ts_ready),
    .a_valid(lk_valid), .a_page(lk_page),
    .a_resp_valid, .a_hit, .a_frame,
    .b_valid(ts_valid), .b_ready(ts_b_ready), .b_op(ts_op), .b_page(ts_page), .b_way(ts_way),
    .b_resp_valid(ts_resp_valid), .b_hit(ts_hit), .b_victim_way(ts_victim_way),
    .b_victim_valid(ts_victim_valid), .b_victim_page(ts_victim_page)
  );

  // a block of the page in transit is steered by the migration buffer
  logic q_hit_q, q_in_dram_q;
  logic [TS_WAY_W-1:0] q_way_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_hit_q <= 1'b0; q_in_dram_q <= 1'b0; q_way_q <= '0;
    end else begin
      q_hit_q     <= lk_valid && q_hit;
      q_in_dram_q <= q_in_dram;
      q_way_q     <= mv_way;
    end
  end

  assign ready           = ts_ready && ss_ready;
  assign lk_resp_valid   = a_resp_valid;
  assign lk_resp_in_dram = q_hit_q ? q_in_dram_q : a_hit;
  assign lk_resp_frame   = q_hit_q ? {a_frame[$bits(a_frame)-1:TS_WAY_W], q_way_q} : a_frame;

endmodule
