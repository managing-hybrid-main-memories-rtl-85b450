// page_mlp_tracker: per-page MLP temporaries for pages with outstanding NVM
// requests ("hot pages"), plus per-application outstanding-request counts.
//
// Each entry holds a page (with the application that owns it), the page's
// outstanding read and write counts m_rd / m_wr, and four temporaries that
// accumulate the weighted MLP ratio of Equation 13:
//   MLPAcc_rd += m_rd / N_rd(app)   MLPWeight_rd += m_rd
//   MLPAcc_wr += m_wr / N_wr(app)   MLPWeight_wr += m_wr
// Every SAMPLE_PERIOD cycles a sweep visits all entries, LANES entries per
// cycle, each lane reading two quotients from its own mlp_div_rom. When the
// last outstanding request of a page completes, its temporaries are handed
// to the stat store in the completion record and the entry is freed.
// Every completed NVM request yields one completion record, which also tells
// the stat store whether that request was a row-buffer miss.
//
// Follows the design: 96 entries (bounded by the 64-entry NVM read queue
// plus the 32-entry write buffer), 30-cycle sampling, 3 lanes, the widths of
// the counters. Own choices: one issue and one completion event per cycle;
// a sweep takes ceil(ENTRIES/LANES) cycles (32 at full size) and the next one
// starts at the later of the 30-cycle tick and the end of the previous sweep;
// a request that finds the table full is not tracked (counted on
// 'untracked'); accumulators saturate.
//
// Timing: events are sampled on the rising clock edge; the completion record
// appears one cycle after the completion event (rec_valid for one cycle).
module page_mlp_tracker
  import ubm_pkg::*;
#(
  parameter int unsigned ENTRIES       = 96,
  parameter int unsigned LANES         = 3,
  parameter int unsigned SAMPLE_PERIOD = 30
) (
  input  logic       clk,
  input  logic       rst_n,
  // a memory request left the LLC (DRAM or NVM)
  input  logic       issue_valid,
  input  app_t       issue_app,
  input  page_t      issue_page,
  input  logic       issue_is_write,
  input  logic       issue_to_nvm,
  // a memory request completed
  input  logic       cmpl_valid,
  input  app_t       cmpl_app,
  input  page_t      cmpl_page,
  input  logic       cmpl_is_write,
  input  logic       cmpl_to_nvm,
  input  logic       cmpl_row_miss,
  // completion record to the stat store
  output logic       rec_valid,
  output cmpl_rec_t  rec,
  // observation
  output logic [OUTS_W-1:0] n_rd [NUM_APPS],
  output logic [OUTS_W-1:0] n_wr [NUM_APPS],
  output logic       sample_tick,       // a sweep starts this cycle
  output logic       untracked          // an NVM request found no free entry
);

  localparam int unsigned GROUPS = (ENTRIES + LANES - 1) / LANES;
  localparam int unsigned IDX_W  = $clog2(ENTRIES);
  localparam int unsigned GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned TMR_W  = $clog2(SAMPLE_PERIOD);

  typedef struct packed {
    logic              valid;
    app_t              app;
    page_t             page;
    logic [OUTS_W-1:0] m_rd;
    logic [OUTS_W-1:0] m_wr;
    logic [ACC_W-1:0]  acc_rd;
    logic [ACC_W-1:0]  acc_wr;
    logic [WGT_W-1:0]  wgt_rd;
    logic [WGT_W-1:0]  wgt_wr;
  } ent_t;

  ent_t ent_q [ENTRIES];
  ent_t ent_d [ENTRIES];

  // ---------------- sampling schedule ----------------
  logic [TMR_W-1:0] tmr_q;
  logic             pending_q, sweeping_q;
  logic [GRP_W-1:0] grp_q;
  logic             tick;

  assign tick        = (tmr_q == TMR_W'(SAMPLE_PERIOD - 1));
  assign sample_tick = (pending_q || tick) && !sweeping_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tmr_q      <= '0;
      pending_q  <= 1'b0;
      sweeping_q <= 1'b0;
      grp_q      <= '0;
    end else begin
      tmr_q <= tick ? '0 : tmr_q + 1'b1;
      if (sample_tick) begin
        sweeping_q <= 1'b1;
        grp_q      <= '0;
        pending_q  <= 1'b0;
      end else begin
        if (tick) pending_q <= 1'b1;
        if (sweeping_q) begin
          if (grp_q == GRP_W'(GROUPS - 1)) sweeping_q <= 1'b0;
          else                             grp_q <= grp_q + 1'b1;
        end
      end
    end
  end

  // ---------------- per-application outstanding counts ----------------
  logic [OUTS_W-1:0] n_rd_q [NUM_APPS];
  logic [OUTS_W-1:0] n_wr_q [NUM_APPS];

  logic [NUM_APPS-1:0] inc_r, dec_r, inc_w, dec_w;

  always_comb begin
    for (int a = 0; a < NUM_APPS; a++) begin
      inc_r[a] = issue_valid && !issue_is_write && issue_app == app_t'(a);
      inc_w[a] = issue_valid &&  issue_is_write && issue_app == app_t'(a);
      dec_r[a] = cmpl_valid  && !cmpl_is_write  && cmpl_app  == app_t'(a);
      dec_w[a] = cmpl_valid  &&  cmpl_is_write  && cmpl_app  == app_t'(a);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_APPS; a++) begin
        n_rd_q[a] <= '0;
        n_wr_q[a] <= '0;
      end
    end else begin
      for (int a = 0; a < NUM_APPS; a++) begin
        n_rd_q[a] <= n_rd_q[a] + OUTS_W'(inc_r[a]) - OUTS_W'(dec_r[a]);
        n_wr_q[a] <= n_wr_q[a] + OUTS_W'(inc_w[a]) - OUTS_W'(dec_w[a]);
      end
    end
  end

  assign n_rd = n_rd_q;
  assign n_wr = n_wr_q;

  // ---------------- sampling lanes ----------------
  logic [Q_W-1:0]    q_rd [LANES];
  logic [Q_W-1:0]    q_wr [LANES];
  logic [OUTS_W-1:0] lane_m_rd [LANES], lane_m_wr [LANES];
  logic [OUTS_W-1:0] lane_n_rd [LANES], lane_n_wr [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb begin
      int unsigned idx;
      idx = int'(grp_q) * LANES + l;
      lane_m_rd[l] = '0; lane_m_wr[l] = '0;
      lane_n_rd[l] = '0; lane_n_wr[l] = '0;
      if (idx < ENTRIES) begin
        lane_m_rd[l] = ent_q[idx].m_rd;
        lane_m_wr[l] = ent_q[idx].m_wr;
        lane_n_rd[l] = n_rd_q[ent_q[idx].app];
        lane_n_wr[l] = n_wr_q[ent_q[idx].app];
      end
    end
    mlp_div_rom u_rom_rd (.m(lane_m_rd[l]), .n(lane_n_rd[l]), .q(q_rd[l]));
    mlp_div_rom u_rom_wr (.m(lane_m_wr[l]), .n(lane_n_wr[l]), .q(q_wr[l]));
  end

  function automatic logic [ACC_W-1:0] sat_acc(logic [ACC_W-1:0] a, logic [Q_W-1:0] b);
    logic [ACC_W:0] s;
    s = {1'b0, a} + (ACC_W+1)'(b);
    return s[ACC_W] ? '1 : s[ACC_W-1:0];
  endfunction

  function automatic logic [WGT_W-1:0] sat_wgt(logic [WGT_W-1:0] a, logic [OUTS_W-1:0] b);
    logic [WGT_W:0] s;
    s = {1'b0, a} + (WGT_W+1)'(b);
    return s[WGT_W] ? '1 : s[WGT_W-1:0];
  endfunction

  // ---------------- entry update ----------------
  logic [ENTRIES-1:0] hit_i, hit_c, free_v;
  logic               any_hit_i, any_free;
  logic [IDX_W-1:0]   free_idx;
  logic               rec_flush;
  ent_t               rec_ent;   // only the accumulator fields are used
  logic               rec_tracked;

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      hit_i[e]  = ent_q[e].valid && ent_q[e].app == issue_app && ent_q[e].page == issue_page;
      hit_c[e]  = ent_q[e].valid && ent_q[e].app == cmpl_app  && ent_q[e].page == cmpl_page;
      free_v[e] = !ent_q[e].valid;
    end
    any_hit_i = |hit_i;
    any_free  = |free_v;
    free_idx  = '0;
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (free_v[e]) free_idx = IDX_W'(e);
  end

  logic do_issue, do_cmpl;
  assign do_issue = issue_valid && issue_to_nvm;
  assign do_cmpl  = cmpl_valid  && cmpl_to_nvm;

  always_comb begin
    rec_flush   = 1'b0;
    rec_tracked = 1'b0;
    rec_ent     = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      ent_d[e] = ent_q[e];
      // sampling add (uses the counts before this cycle's events)
      if (sweeping_q && ent_q[e].valid && (e / LANES) == int'(grp_q)) begin
        ent_d[e].acc_rd = sat_acc(ent_q[e].acc_rd, q_rd[e % LANES]);
        ent_d[e].acc_wr = sat_acc(ent_q[e].acc_wr, q_wr[e % LANES]);
        ent_d[e].wgt_rd = sat_wgt(ent_q[e].wgt_rd, ent_q[e].m_rd);
        ent_d[e].wgt_wr = sat_wgt(ent_q[e].wgt_wr, ent_q[e].m_wr);
      end
      // issue to a page already tracked
      if (do_issue && hit_i[e]) begin
        if (issue_is_write) ent_d[e].m_wr = ent_d[e].m_wr + 1'b1;
        else                ent_d[e].m_rd = ent_d[e].m_rd + 1'b1;
      end
      // completion
      if (do_cmpl && hit_c[e]) begin
        if (cmpl_is_write) ent_d[e].m_wr = ent_d[e].m_wr - 1'b1;
        else               ent_d[e].m_rd = ent_d[e].m_rd - 1'b1;
        rec_tracked = 1'b1;
        rec_ent     = ent_d[e];
        if (ent_d[e].m_rd == '0 && ent_d[e].m_wr == '0) begin
          rec_flush      = 1'b1;
          ent_d[e].valid = 1'b0;
        end
      end
    end
    // allocation of a new entry
    if (do_issue && !any_hit_i && any_free) begin
      ent_d[free_idx]        = '0;
      ent_d[free_idx].valid  = 1'b1;
      ent_d[free_idx].app    = issue_app;
      ent_d[free_idx].page   = issue_page;
      ent_d[free_idx].m_rd   = OUTS_W'(!issue_is_write);
      ent_d[free_idx].m_wr   = OUTS_W'(issue_is_write);
    end
  end

  assign untracked = do_issue && !any_hit_i && !any_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) ent_q[e] <= '0;
      rec_valid <= 1'b0;
      rec       <= '0;
    end else begin
      for (int e = 0; e < ENTRIES; e++) ent_q[e] <= ent_d[e];
      rec_valid    <= do_cmpl;
      rec.app      <= cmpl_app;
      rec.page     <= cmpl_page;
      rec.is_write <= cmpl_is_write;
      rec.row_miss <= cmpl_row_miss;
      rec.flush    <= rec_flush;
      rec.acc_rd   <= (rec_flush && rec_tracked) ? rec_ent.acc_rd : '0;
      rec.acc_wr   <= (rec_flush && rec_tracked) ? rec_ent.acc_wr : '0;
      rec.wgt_rd   <= (rec_flush && rec_tracked) ? rec_ent.wgt_rd : '0;
      rec.wgt_wr   <= (rec_flush && rec_tracked) ? rec_ent.wgt_wr : '0;
    end
  end

`ifndef SYNTHESIS
  // a completion must match an outstanding request of its application
  a_cmpl_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
    cmpl_valid |-> ((cmpl_is_write ? n_wr_q[cmpl_app] : n_rd_q[cmpl_app]) != '0));
`endif

endmodule
