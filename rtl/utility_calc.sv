// utility_calc: page utility calculation (stall-time reduction x sensitivity).
//
// For every updated stat-store entry this unit estimates how much the owning
// application's stall time would shrink if the page sat in DRAM, and weighs
// that by how much system performance depends on the application:
//   avgMLP_rd = MLPAcc_rd / MLPWeight_rd          (weighted mean of m/N)
//   dStall    = miss_rd * (tNVM,rd - tDRAM,rd) * avgMLP_rd
//             + p * miss_wr * (tNVM,wr - tDRAM,wr) * avgMLP_wr,   p = 1
//   U         = dStall * Sensitivity(app)
// Sensitivity is Speedup / T_shared; because every quantum has the same
// length T_shared is a constant and the application's speedup estimate is
// used directly (0.8 fixed point, 255 ~ 1.0).
//
// Follows the design: the equations, p = 1, latency deltas from the DRAM/NVM
// timing (row-miss read differs by tRCD, write by tRCD + tWR; defaults in
// ubm_pkg, in core-clock cycles). Own choices: a three-stage pipeline with a
// plain divider in the first stage; MLP ratios are 1.9 fixed point (512 = 1),
// so dStall is in cycles after dropping 9 fraction bits; dStall and U
// saturate at 18 bits. Utilities of one page's entries for different
// applications are not summed here.
//
// Timing: fully pipelined, one entry per cycle, result 3 cycles after in_valid.
module utility_calc
  import ubm_pkg::*;
#(
  parameter int unsigned DLAT_RD = DLAT_READ,   // cycles saved per read row miss
  parameter int unsigned DLAT_WR = DLAT_WRITE   // cycles saved per write row miss
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  page_stat_t        in_stat,
  input  logic [SPD_W-1:0]  speedup [NUM_APPS],
  output logic              out_valid,
  output app_t              out_app,
  output page_t             out_page,
  output logic [DSTALL_W-1:0] out_dstall,
  output logic [UTIL_W-1:0] out_util
);

  localparam int unsigned PROD_W = MISS_W + 10 + Q_W + 1;   // miss * delta * ratio
  localparam int unsigned UPROD_W = DSTALL_W + SPD_W;

  // ---- stage 1: average MLP ratios ----
  logic              v1;
  app_t              app1;
  page_t             page1;
  logic [MISS_W-1:0] mrd1, mwr1;
  logic [Q_W-1:0]    avg_rd1, avg_wr1;

  function automatic logic [Q_W-1:0] avg(logic [ACC_W-1:0] acc, logic [WGT_W-1:0] wgt);
    logic [ACC_W-1:0] q;
    if (wgt == '0) return '0;
    q = acc / ACC_W'(wgt);
    return (q > ACC_W'((1 << Q_W) - 1)) ? '1 : q[Q_W-1:0];
  endfunction

  // ---- stage 2: stall-time reduction ----
  logic                v2;
  app_t                app2;
  page_t               page2;
  logic [DSTALL_W-1:0] dst2;
  logic [PROD_W:0]     dsum;

  always_comb begin
    dsum = (PROD_W+1)'(mrd1) * (PROD_W+1)'(DLAT_RD) * (PROD_W+1)'(avg_rd1)
         + (PROD_W+1)'(mwr1) * (PROD_W+1)'(DLAT_WR) * (PROD_W+1)'(avg_wr1);
    dsum = dsum >> Q_FRAC;
  end

  // ---- stage 3: utility ----
  logic [UPROD_W-1:0] uprod;
  assign uprod = UPROD_W'(dst2) * UPROD_W'(speedup[app2]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      app1 <= '0; page1 <= '0; mrd1 <= '0; mwr1 <= '0; avg_rd1 <= '0; avg_wr1 <= '0;
      app2 <= '0; page2 <= '0; dst2 <= '0;
      out_app <= '0; out_page <= '0; out_dstall <= '0; out_util <= '0;
    end else begin
      v1      <= in_valid;
      app1    <= in_stat.app;
      page1   <= in_stat.page;
      mrd1    <= in_stat.miss_rd;
      mwr1    <= in_stat.miss_wr;
      avg_rd1 <= avg(in_stat.acc_rd, in_stat.wgt_rd);
      avg_wr1 <= avg(in_stat.acc_wr, in_stat.wgt_wr);

      v2    <= v1;
      app2  <= app1;
      page2 <= page1;
      dst2  <= (dsum > (PROD_W+1)'((1 << DSTALL_W) - 1)) ? '1 : dsum[DSTALL_W-1:0];

      out_valid  <= v2;
      out_app    <= app2;
      out_page   <= page2;
      out_dstall <= dst2;
      out_util   <= UTIL_W'(uprod >> SPD_W);
    end
  end

endmodule
