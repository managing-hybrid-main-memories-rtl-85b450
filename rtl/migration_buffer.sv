// migration_buffer: migration engine with per-block location tracking.
//
// Takes pages chosen for migration and moves them from NVM to DRAM. For each
// page it first asks the DRAM tag store whether the page is already cached
// (then nothing is done) and which frame would receive it. If that frame
// holds another page, the victim is first written back from DRAM to NVM and
// its tag cleared; then the chosen page is copied from NVM into the frame and
// its tag written. Data moves one 64 B cache block at a time: for each block
// a move command goes to the memory controllers, which report when the block
// has been read into the migration buffer (rd_done) and when it has been
// written to its destination (wr_done).
//
// During a move every block of the page in transit has two status bits saying
// where its valid copy is: still at the source, in the buffer, or at the
// destination. The lookup port (q_*) lets the controllers steer a request to
// a block of the page in transit to the right place.
//
// Follows the design: victim eviction before migration, 2 status bits per
// cache block, tag-store update after the data movement, all hardware-managed.
// Own choices: one page in transit at a time; block commands issued in block
// order, one per cycle, while more can be outstanding; the tag store is
// probed through its port B; a page already in DRAM is skipped.
//
// Timing: req_ready pulses for one cycle when a page is taken. done pulses
// when a migration (including any eviction) finishes; skipped pulses when a
// page turned out to be in DRAM already.
module migration_buffer
  import ubm_pkg::*;
#(
  parameter int unsigned WAYS = 16          // DRAM tag-store associativity
) (
  input  logic              clk,
  input  logic              rst_n,
  // pages to migrate
  input  logic              req_valid,
  input  page_t             req_page,
  output logic              req_ready,
  // DRAM tag store port B
  output logic              ts_valid,
  input  logic              ts_ready,
  output logic [1:0]        ts_op,          // 0 PROBE, 1 FILL, 2 INVAL
  output page_t             ts_page,
  output logic [$clog2(WAYS)-1:0] ts_way,
  input  logic              ts_resp_valid,
  input  logic              ts_hit,
  input  logic [$clog2(WAYS)-1:0] ts_victim_way,
  input  logic              ts_victim_valid,
  input  page_t             ts_victim_page,
  // block move commands to the memory controllers
  output logic              mv_valid,
  input  logic              mv_ready,
  output logic              mv_to_dram,     // 1: NVM -> DRAM, 0: DRAM -> NVM (eviction)
  output page_t             mv_page,        // NVM page number of the data
  output logic [$clog2(WAYS)-1:0] mv_way,   // DRAM way (frame = page's set, way)
  output logic [BLK_W-1:0]  mv_blk,
  input  logic              rd_done,        // block mv_blk... now in the buffer
  input  logic [BLK_W-1:0]  rd_done_blk,
  input  logic              wr_done,        // block now at its destination
  input  logic [BLK_W-1:0]  wr_done_blk,
  // request steering
  input  page_t             q_page,
  input  logic [BLK_W-1:0]  q_blk,
  output logic              q_hit,          // q_page is in transit
  output blk_loc_e          q_loc,
  output logic              q_in_dram,      // with q_hit: the valid copy is in DRAM
  // status
  output logic              busy,
  output logic              evicting,
  output logic              done,
  output logic              skipped
);

  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam logic [1:0] OP_PROBE = 2'd0, OP_FILL = 2'd1, OP_INVAL = 2'd2;

  typedef enum logic [2:0] {
    S_IDLE, S_PROBE, S_WAIT_PROBE, S_MOVE, S_INVAL, S_FILL
  } state_e;

  state_e           state_q;
  page_t            page_q;      // page to migrate
  page_t            victim_q;
  logic [WAY_W-1:0] way_q;
  logic             evict_q;     // current move is the victim's eviction
  logic [BLK_W:0]   next_blk_q;  // next block to command
  blk_loc_e         loc_q [BLOCKS_PER_PAGE];

  logic             all_dst;
  page_t            move_page;

  always_comb begin
    all_dst = 1'b1;
    for (int b = 0; b < BLOCKS_PER_PAGE; b++)
      if (loc_q[b] != LOC_DST) all_dst = 1'b0;
  end

  assign move_page = evict_q ? victim_q : page_q;

  assign req_ready = (state_q == S_IDLE);
  assign busy      = (state_q != S_IDLE);
  assign evicting  = (state_q == S_MOVE) && evict_q;

  assign ts_valid = (state_q == S_PROBE) || (state_q == S_INVAL) || (state_q == S_FILL);
  assign ts_op    = (state_q == S_FILL) ? OP_FILL : (state_q == S_INVAL) ? OP_INVAL : OP_PROBE;
  assign ts_page  = (state_q == S_INVAL) ? victim_q : page_q;
  assign ts_way   = way_q;

  assign mv_valid   = (state_q == S_MOVE) && !next_blk_q[BLK_W];
  assign mv_to_dram = !evict_q;
  assign mv_page    = move_page;
  assign mv_way     = way_q;
  assign mv_blk     = next_blk_q[BLK_W-1:0];

  assign q_hit     = (state_q == S_MOVE) && q_page == move_page;
  assign q_loc     = loc_q[q_blk];
  // eviction moves DRAM -> NVM, migration NVM -> DRAM
  assign q_in_dram = evict_q ? (q_loc == LOC_SRC) : (q_loc == LOC_DST);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      page_q     <= '0;
      victim_q   <= '0;
      way_q      <= '0;
      evict_q    <= 1'b0;
      next_blk_q <= '0;
      done       <= 1'b0;
      skipped    <= 1'b0;
      for (int b = 0; b < BLOCKS_PER_PAGE; b++) loc_q[b] <= LOC_SRC;
    end else begin
      done    <= 1'b0;
      skipped <= 1'b0;
      // block status updates
      if (state_q == S_MOVE) begin
        if (rd_done) loc_q[rd_done_blk] <= LOC_BUF;
        if (wr_done) loc_q[wr_done_blk] <= LOC_DST;
        if (mv_valid && mv_ready) next_blk_q <= next_blk_q + 1'b1;
      end
      unique case (state_q)
        S_IDLE:
          if (req_valid) begin
            page_q  <= req_page;
            state_q <= S_PROBE;
          end
        S_PROBE:
          if (ts_ready) state_q <= S_WAIT_PROBE;
        S_WAIT_PROBE:
          if (ts_resp_valid) begin
            way_q      <= ts_victim_way;
            victim_q   <= ts_victim_page;
            next_blk_q <= '0;
            for (int b = 0; b < BLOCKS_PER_PAGE; b++) loc_q[b] <= LOC_SRC;
            if (ts_hit) begin
              skipped <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              evict_q <= ts_victim_valid;
              state_q <= S_MOVE;
            end
          end
        S_MOVE:
          if (all_dst) state_q <= evict_q ? S_INVAL : S_FILL;
        S_INVAL:
          if (ts_ready) begin
            evict_q    <= 1'b0;
            next_blk_q <= '0;
            for (int b = 0; b < BLOCKS_PER_PAGE; b++) loc_q[b] <= LOC_SRC;
            state_q    <= S_MOVE;
          end
        S_FILL:
          if (ts_ready) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // block events must follow the status order: source -> buffer -> destination
  a_rd_order: assert property (@(posedge clk) disable iff (!rst_n)
    rd_done |-> (state_q == S_MOVE && loc_q[rd_done_blk] == LOC_SRC));
  a_wr_order: assert property (@(posedge clk) disable iff (!rst_n)
    wr_done |-> (state_q == S_MOVE && loc_q[wr_done_blk] == LOC_BUF));

endmodule
