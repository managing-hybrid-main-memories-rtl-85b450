// migration_decision: compares each page utility with the migration threshold.
//
// Whenever the utility calculation produces a utility for a page that sits
// in NVM, the page is selected for migration to DRAM if the utility exceeds
// the current threshold. Selected pages wait in a small request queue for the
// migration engine. The utility is brought to the threshold's 8-bit scale by
// dropping UTIL_SHIFT low bits (one threshold step = 2^UTIL_SHIFT stall
// cycles weighted by speedup) and saturating.
//
// Follows the design: "if it exceeds the threshold, the page will be
// migrated, otherwise it remains in NVM". Own choices: the scaling shift,
// a DEPTH-entry queue with valid/ready output, a page already waiting in the
// queue is not queued twice, and a selection that finds the queue full is
// dropped and reported on 'dropped' (the page will be re-evaluated at its
// next completed request).
//
// Timing: a selected page enters the queue on the clock edge after
// util_valid; req_valid is registered (queue not empty).
module migration_decision
  import ubm_pkg::*;
#(
  parameter int unsigned UTIL_SHIFT = 6,
  parameter int unsigned DEPTH      = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              util_valid,
  input  page_t             util_page,
  input  logic [UTIL_W-1:0] util,
  input  logic [THR_W-1:0]  threshold,
  output logic              selected,     // utility exceeded the threshold
  output logic              dropped,
  output logic              req_valid,
  output page_t             req_page,
  input  logic              req_ready
);

  localparam int unsigned PTR_W = $clog2(DEPTH);

  page_t            q_page [DEPTH];
  logic [DEPTH-1:0] q_vld;
  logic [PTR_W-1:0] rd_ptr, wr_ptr;
  logic [PTR_W:0]   count;

  logic [UTIL_W-1:0] scaled;
  logic              above, dup, push, pop;

  always_comb begin
    scaled = util >> UTIL_SHIFT;
    above  = (scaled > UTIL_W'((1 << THR_W) - 1)) || (scaled[THR_W-1:0] > threshold);
    dup    = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (q_vld[i] && q_page[i] == util_page) dup = 1'b1;
  end

  assign selected  = util_valid && above;
  assign pop       = req_valid && req_ready;
  assign push      = selected && !dup && (count != (PTR_W+1)'(DEPTH) || pop);
  assign dropped   = selected && !dup && !push;
  assign req_valid = (count != '0);
  assign req_page  = q_page[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0; q_vld <= '0;
      for (int i = 0; i < DEPTH; i++) q_page[i] <= '0;
    end else begin
      if (pop) begin
        q_vld[rd_ptr] <= 1'b0;
        rd_ptr <= (rd_ptr == PTR_W'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      end
      if (push) begin
        q_page[wr_ptr] <= util_page;
        q_vld[wr_ptr]  <= 1'b1;
        wr_ptr <= (wr_ptr == PTR_W'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      end
      count <= count + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (PTR_W+1)'(DEPTH));

endmodule
