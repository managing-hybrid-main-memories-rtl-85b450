// speedup_estimator: per-application speedup and total stall time, per quantum.
//
// During a management quantum three counters run for every application:
// T_stall (cycles the core is stalled on memory), T_delay (cycles the
// application has at least one outstanding memory request) and
// T_interference (extra delay its requests suffered from other applications,
// supplied each cycle by an interference monitor). At the end of the quantum
// the extra run time and the speedup are estimated as
//   T_excess = T_stall * T_interference / T_delay
//   speedup  = 1 - T_excess / T_shared,   T_shared = quantum length
// and the counters restart. The speedups (0.8 fixed point, 255 ~ 1.0) serve as
// the performance-sensitivity weights of the next quantum. The sum of all
// T_stall is reported at the same time for the threshold hill climber.
//
// Follows the design: the T_excess formula, the quantum of 1,000,000 cycles,
// 8-bit speedup, 20-bit counters, 23-bit total. Own choices: the interference
// monitor adds an increment of up to 255 cycles per cycle; counters saturate;
// the speedups are computed one application per cycle after the quantum ends
// (NUM_APPS cycles), and start at 255 after reset.
//
// Timing: quantum_end pulses for one cycle every QUANTUM cycles, together
// with total_valid/total_stall; speedup[] is updated over the next NUM_APPS
// cycles and spd_done pulses when the last one is written.
module speedup_estimator
  import ubm_pkg::*;
#(
  parameter int unsigned QUANTUM = 1000000,
  parameter int unsigned INC_W   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_APPS-1:0] stall,          // core i stalled on memory
  input  logic [NUM_APPS-1:0] outstanding,    // app i has a memory request in flight
  input  logic [INC_W-1:0]  interference [NUM_APPS],
  output logic              quantum_end,
  output logic              total_valid,
  output logic [TOT_W-1:0]  total_stall,
  output logic [SPD_W-1:0]  speedup [NUM_APPS],
  output logic              spd_done
);

  localparam int unsigned QT_W = $clog2(QUANTUM);
  localparam int unsigned AI_W = (NUM_APPS > 1) ? $clog2(NUM_APPS) : 1;

  logic [QT_W-1:0]   qtimer_q;
  logic [TCNT_W-1:0] t_stall_q [NUM_APPS];
  logic [TCNT_W-1:0] t_delay_q [NUM_APPS];
  logic [TCNT_W-1:0] t_intf_q  [NUM_APPS];
  logic [TCNT_W-1:0] s_stall_q [NUM_APPS];   // snapshot of the ended quantum
  logic [TCNT_W-1:0] s_delay_q [NUM_APPS];
  logic [TCNT_W-1:0] s_intf_q  [NUM_APPS];
  logic              busy_q;
  logic [AI_W-1:0]   ai_q;

  assign quantum_end = (qtimer_q == QT_W'(QUANTUM - 1));

  function automatic logic [TCNT_W-1:0] sat_add(logic [TCNT_W-1:0] a, logic [INC_W-1:0] b);
    logic [TCNT_W:0] s;
    s = {1'b0, a} + (TCNT_W+1)'(b);
    return s[TCNT_W] ? '1 : s[TCNT_W-1:0];
  endfunction

  // total stall of the quantum that ends now (including this cycle)
  logic [TOT_W-1:0] tot;
  always_comb begin
    tot = '0;
    for (int a = 0; a < NUM_APPS; a++)
      tot = tot + TOT_W'(sat_add(t_stall_q[a], INC_W'(stall[a])));
  end

  // speedup of application ai_q from the snapshot
  localparam int unsigned PW = 2 * TCNT_W;
  logic [PW-1:0]    excess;
  logic [PW+SPD_W-1:0] ratio;
  logic [SPD_W-1:0] spd_new;
  always_comb begin
    if (s_delay_q[ai_q] == '0) excess = '0;
    else excess = (PW'(s_stall_q[ai_q]) * PW'(s_intf_q[ai_q])) / PW'(s_delay_q[ai_q]);
    ratio = ((PW+SPD_W)'(excess) << SPD_W) / (PW+SPD_W)'(QUANTUM);
    if (ratio >= (PW+SPD_W)'(1 << SPD_W)) spd_new = '0;
    else if (ratio == '0)                 spd_new = '1;
    else                                  spd_new = SPD_W'((1 << SPD_W) - ratio);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qtimer_q    <= '0;
      busy_q      <= 1'b0;
      ai_q        <= '0;
      total_valid <= 1'b0;
      total_stall <= '0;
      spd_done    <= 1'b0;
      for (int a = 0; a < NUM_APPS; a++) begin
        t_stall_q[a] <= '0; t_delay_q[a] <= '0; t_intf_q[a] <= '0;
        s_stall_q[a] <= '0; s_delay_q[a] <= '0; s_intf_q[a] <= '0;
        speedup[a]   <= '1;
      end
    end else begin
      total_valid <= 1'b0;
      spd_done    <= 1'b0;
      qtimer_q    <= quantum_end ? '0 : qtimer_q + 1'b1;
      for (int a = 0; a < NUM_APPS; a++) begin
        if (quantum_end) begin
          s_stall_q[a] <= sat_add(t_stall_q[a], INC_W'(stall[a]));
          s_delay_q[a] <= sat_add(t_delay_q[a], INC_W'(outstanding[a]));
          s_intf_q[a]  <= sat_add(t_intf_q[a],  interference[a]);
          t_stall_q[a] <= '0; t_delay_q[a] <= '0; t_intf_q[a] <= '0;
        end else begin
          t_stall_q[a] <= sat_add(t_stall_q[a], INC_W'(stall[a]));
          t_delay_q[a] <= sat_add(t_delay_q[a], INC_W'(outstanding[a]));
          t_intf_q[a]  <= sat_add(t_intf_q[a],  interference[a]);
        end
      end
      if (quantum_end) begin
        total_valid <= 1'b1;
        total_stall <= tot;
        busy_q      <= 1'b1;
        ai_q        <= '0;
      end else if (busy_q) begin
        speedup[ai_q] <= spd_new;
        if (ai_q == AI_W'(NUM_APPS - 1)) begin
          busy_q   <= 1'b0;
          spd_done <= 1'b1;
        end else ai_q <= ai_q + 1'b1;
      end
    end
  end

endmodule
