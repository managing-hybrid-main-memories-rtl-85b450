// ubm_pkg: widths, constants and record types shared by the page-utility
// hybrid-memory manager.
//
// Field widths follow the hardware-cost budget of the design: stat-store
// row-miss counts are 8 bits, MLP accumulators 25 bits, MLP weights 15 bits,
// page numbers 36 bits, per-application speedup 8 bits, stall/delay counters
// 20 bits, the migration threshold 8 bits and total stall time 23 bits.
// The MLP-ratio quotient is 10 bits wide. Everything else here (application
// id width, fixed-point scales, latency deltas in cycles) is this design's
// own choice and is documented next to the constant.
package ubm_pkg;

  // ---- system size -------------------------------------------------------
  parameter int unsigned NUM_APPS   = 8;            // hardware thread contexts
  parameter int unsigned APP_W      = $clog2(NUM_APPS);
  parameter int unsigned PAGE_W     = 36;           // 4 KB page number
  parameter int unsigned BLOCKS_PER_PAGE = 64;      // 4 KB page / 64 B block
  parameter int unsigned BLK_W      = $clog2(BLOCKS_PER_PAGE);

  // ---- counter widths ----------------------------------------------------
  parameter int unsigned MISS_W     = 8;            // row-buffer miss count
  parameter int unsigned ACC_W      = 25;           // MLPAcc
  parameter int unsigned WGT_W      = 15;           // MLPWeight
  parameter int unsigned OUTS_W     = 7;            // outstanding requests (0..96)
  parameter int unsigned Q_W        = 10;           // MLP ratio quotient
  parameter int unsigned Q_FRAC     = 9;            // quotient = floor(m * 2^9 / N)
  parameter int unsigned MSHR       = 32;           // ROM index range 1..32
  parameter int unsigned SPD_W      = 8;            // speedup, 0.8 fixed point
  parameter int unsigned TCNT_W     = 20;           // T_stall / T_delay / T_interference
  parameter int unsigned TOT_W      = TCNT_W + APP_W; // total stall time (23)
  parameter int unsigned THR_W      = 8;            // migration threshold
  parameter int unsigned DSTALL_W   = 18;           // estimated stall-time reduction
  parameter int unsigned UTIL_W     = 18;           // utility

  // ---- timing (cycles of the controller clock, taken as the 2.67 GHz core clock)
  // NVM row miss vs DRAM row miss: read differs by tRCD (67.5-15 ns = 52.5 ns),
  // write by tRCD + tWR (52.5 + 165 ns = 217.5 ns).
  parameter int unsigned DLAT_READ  = 140;          // 52.5 ns * 2.67 GHz
  parameter int unsigned DLAT_WRITE = 581;          // 217.5 ns * 2.67 GHz

  typedef logic [APP_W-1:0]  app_t;
  typedef logic [PAGE_W-1:0] page_t;

  // One completed NVM request as reported by the outstanding-page counters to
  // the stat store. When 'flush' is set the page has no outstanding request
  // left and the temporary MLP counters ride along to be added.
  typedef struct packed {
    app_t              app;
    page_t             page;
    logic              is_write;
    logic              row_miss;
    logic              flush;
    logic [ACC_W-1:0]  acc_rd;
    logic [ACC_W-1:0]  acc_wr;
    logic [WGT_W-1:0]  wgt_rd;
    logic [WGT_W-1:0]  wgt_wr;
  } cmpl_rec_t;

  // One stat-store entry's statistics as sent to the utility calculation.
  typedef struct packed {
    app_t              app;
    page_t             page;
    logic [MISS_W-1:0] miss_rd;
    logic [MISS_W-1:0] miss_wr;
    logic [ACC_W-1:0]  acc_rd;
    logic [ACC_W-1:0]  acc_wr;
    logic [WGT_W-1:0]  wgt_rd;
    logic [WGT_W-1:0]  wgt_wr;
  } page_stat_t;

  // Location of one cache block of a migrating page.
  typedef enum logic [1:0] {
    LOC_SRC = 2'b00,   // still only at the source device
    LOC_BUF = 2'b01,   // held in the migration buffer
    LOC_DST = 2'b10    // written to the destination device
  } blk_loc_e;

endpackage
