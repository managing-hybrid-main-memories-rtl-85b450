// stat_store: set-associative store of per-page statistics.
//
// Each entry belongs to one (application, page) pair and keeps six counters:
// read and write row-buffer misses, the read and write sums of weighted MLP
// ratios (MLPAcc) and the read and write sums of weights (MLPWeight). Every
// completion record from the outstanding-page counters updates one entry:
// a row miss increments the matching miss counter, and a record that carries
// a page's flushed temporaries adds them to MLPAcc / MLPWeight. The updated
// entry is then sent on to the utility calculation. Entries are replaced
// with true LRU (a 5-bit age per way) when a record finds no entry.
//
// Follows the design: 2048 entries organised as 64 sets x 32 ways, LRU,
// 8-bit miss counts, 25-bit MLPAcc, 15-bit MLPWeight, 36-bit page number.
// Own choices: the 3-bit application id is kept beside the page number so
// that a page shared by several applications has one entry per application;
// the set index is the low page-number bits; counters saturate; entries are
// never invalidated once the page has been migrated (they age out).
//
// Timing: one record per cycle. The set is read combinationally, updated and
// written back on the same clock edge, so back-to-back records to one set
// need no forwarding; the updated statistics appear on out_* one cycle after
// the record. After reset, 'ready' stays low for SETS cycles while the sets
// are cleared; records offered before that are ignored.
module stat_store
  import ubm_pkg::*;
#(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       ready,
  input  logic       in_valid,
  input  cmpl_rec_t  in_rec,
  output logic       out_valid,
  output page_stat_t out_stat,
  output logic       out_was_hit      // record found an existing entry
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned AGE_W = $clog2(WAYS);

  typedef struct packed {
    logic              valid;
    app_t              app;
    page_t             page;
    logic [MISS_W-1:0] miss_rd;
    logic [MISS_W-1:0] miss_wr;
    logic [ACC_W-1:0]  acc_rd;
    logic [ACC_W-1:0]  acc_wr;
    logic [WGT_W-1:0]  wgt_rd;
    logic [WGT_W-1:0]  wgt_wr;
    logic [AGE_W-1:0]  age;          // 0 = most recently used
  } way_t;

  typedef way_t [WAYS-1:0] set_t;

  set_t mem [SETS];

  // ---------------- initialisation sweep ----------------
  logic             init_q;
  logic [SET_W-1:0] init_idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_idx_q <= '0;
    end else if (init_q) begin
      init_idx_q <= init_idx_q + 1'b1;
      if (init_idx_q == SET_W'(SETS - 1)) init_q <= 1'b0;
    end
  end

  assign ready = !init_q;

  // ---------------- lookup and update ----------------
  logic [SET_W-1:0] idx;
  set_t             rd_set, wr_set, init_set;
  logic [WAYS-1:0]  hit_v;
  logic             hit;
  logic [AGE_W-1:0] hit_way, vic_way, sel_way;
  way_t             upd;

  function automatic logic [MISS_W-1:0] inc_sat(logic [MISS_W-1:0] a, logic en);
    return (en && a != '1) ? a + 1'b1 : a;
  endfunction

  function automatic logic [ACC_W-1:0] add_acc(logic [ACC_W-1:0] a, logic [ACC_W-1:0] b);
    logic [ACC_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[ACC_W] ? '1 : s[ACC_W-1:0];
  endfunction

  function automatic logic [WGT_W-1:0] add_wgt(logic [WGT_W-1:0] a, logic [WGT_W-1:0] b);
    logic [WGT_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[WGT_W] ? '1 : s[WGT_W-1:0];
  endfunction

  assign idx    = in_rec.page[SET_W-1:0];
  assign rd_set = mem[idx];

  always_comb begin
    hit_way = '0;
    vic_way = '0;
    for (int w = 0; w < WAYS; w++)
      hit_v[w] = rd_set[w].valid && rd_set[w].app == in_rec.app && rd_set[w].page == in_rec.page;
    hit = |hit_v;
    for (int w = WAYS - 1; w >= 0; w--)
      if (hit_v[w]) hit_way = AGE_W'(w);
    // victim: an invalid way if any, else the oldest
    for (int w = WAYS - 1; w >= 0; w--)
      if (rd_set[w].age == AGE_W'(WAYS - 1)) vic_way = AGE_W'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!rd_set[w].valid) vic_way = AGE_W'(w);
    sel_way = hit ? hit_way : vic_way;

    // updated entry
    if (hit) upd = rd_set[sel_way];
    else begin
      upd       = '0;
      upd.valid = 1'b1;
      upd.app   = in_rec.app;
      upd.page  = in_rec.page;
    end
    upd.miss_rd = inc_sat(upd.miss_rd, in_rec.row_miss && !in_rec.is_write);
    upd.miss_wr = inc_sat(upd.miss_wr, in_rec.row_miss &&  in_rec.is_write);
    if (in_rec.flush) begin
      upd.acc_rd = add_acc(upd.acc_rd, in_rec.acc_rd);
      upd.acc_wr = add_acc(upd.acc_wr, in_rec.acc_wr);
      upd.wgt_rd = add_wgt(upd.wgt_rd, in_rec.wgt_rd);
      upd.wgt_wr = add_wgt(upd.wgt_wr, in_rec.wgt_wr);
    end
    upd.age = '0;

    // LRU ages: every way younger than the touched one grows older by one
    wr_set = rd_set;
    for (int w = 0; w < WAYS; w++)
      if (rd_set[w].age < rd_set[sel_way].age) wr_set[w].age = rd_set[w].age + 1'b1;
    wr_set[sel_way] = upd;

    for (int w = 0; w < WAYS; w++) begin
      init_set[w]     = '0;
      init_set[w].age = AGE_W'(w);
    end
  end

  always_ff @(posedge clk) begin
    if (init_q)        mem[init_idx_q] <= init_set;
    else if (in_valid) mem[idx]        <= wr_set;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_stat    <= '0;
      out_was_hit <= 1'b0;
    end else begin
      out_valid        <= in_valid && !init_q;
      out_was_hit      <= hit;
      out_stat.app     <= upd.app;
      out_stat.page    <= upd.page;
      out_stat.miss_rd <= upd.miss_rd;
      out_stat.miss_wr <= upd.miss_wr;
      out_stat.acc_rd  <= upd.acc_rd;
      out_stat.acc_wr  <= upd.acc_wr;
      out_stat.wgt_rd  <= upd.wgt_rd;
      out_stat.wgt_wr  <= upd.wgt_wr;
    end
  end

endmodule
