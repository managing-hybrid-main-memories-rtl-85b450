// tb_speedup_estimator: drives stall, outstanding and interference patterns
// with known per-quantum totals and checks the estimated speedups
// (1 - T_stall*T_int/T_delay/Q in 0.8 fixed point), the total stall time and
// the quantum length, over two quanta.
module tb_speedup_estimator;
  import ubm_pkg::*;
  localparam int Q = 1000;
  logic clk = 0, rst_n = 0;
  logic [NUM_APPS-1:0] stall = '0, outstanding = '0;
  logic [7:0] interference [NUM_APPS];
  logic quantum_end, total_valid, spd_done;
  logic [TOT_W-1:0] total_stall;
  logic [SPD_W-1:0] speedup [NUM_APPS];
  int checks = 0, failures = 0;

  speedup_estimator #(.QUANTUM(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // per-app pattern: stall for s cycles, outstanding for d cycles, interference i per cycle for k cycles
  int s_n [NUM_APPS], d_n [NUM_APPS], i_v [NUM_APPS], k_n [NUM_APPS];
  int cyc = 0, ccount = 0;
  always @(posedge clk) ccount++;

  always @(negedge clk) if (rst_n) begin
    for (int a = 0; a < NUM_APPS; a++) begin
      stall[a]        = (cyc < s_n[a]);
      outstanding[a]  = (cyc < d_n[a]);
      interference[a] = (cyc < k_n[a]) ? 8'(i_v[a]) : 8'd0;
    end
    cyc = (cyc == Q - 1) ? 0 : cyc + 1;
  end

  function automatic int exp_spd(int a);
    longint ex, r;
    ex = (d_n[a] == 0) ? 0 : (longint'(s_n[a]) * (i_v[a] * k_n[a])) / d_n[a];
    r = (ex << 8) / Q;
    if (r >= 256) return 0;
    if (r == 0) return 255;
    return 256 - r;
  endfunction

  initial begin
    int tot, c0;
    for (int a = 0; a < NUM_APPS; a++) begin
      interference[a] = 0;
      s_n[a] = 100 * a; d_n[a] = 150 * a + 50; i_v[a] = a; k_n[a] = 40 * a;
    end
    d_n[7] = 0; s_n[7] = 900; // no outstanding requests: no excess
    s_n[6] = 990; d_n[6] = 100; i_v[6] = 2; k_n[6] = 60;  // excess > Q: speedup 0
    tot = 0;
    for (int a = 0; a < NUM_APPS; a++) tot += s_n[a];
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int a = 0; a < NUM_APPS; a++) chk("reset speedup", speedup[a], 255);
    for (int qn = 0; qn < 2; qn++) begin
      while (!quantum_end) begin @(posedge clk); #1; end
      if (qn == 1) chk("quantum length", ccount - c0, Q);
      c0 = ccount;
      @(posedge clk); #1;
      chk("total valid", total_valid, 1);
      if (qn == 1) chk("total stall", total_stall, tot);
      while (!spd_done) @(posedge clk);
      #1;
      if (qn == 1)
        for (int a = 0; a < NUM_APPS; a++) chk($sformatf("speedup app %0d", a), speedup[a], exp_spd(a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
