// tb_migration_threshold: feeds a sequence of total stall times and checks
// the hill-climbing threshold against a reference computed here, including
// saturation at both ends.
module tb_migration_threshold;
  import ubm_pkg::*;
  logic clk = 0, rst_n = 0, update = 0, dir_up;
  logic [TOT_W-1:0] total_stall = '0;
  logic [THR_W-1:0] threshold;
  int checks = 0, failures = 0;

  migration_threshold #(.STEP(3), .INIT(10)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int thr = 10, dir = 1, prev = 0, havep = 0, ups = 0, downs = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    chk("init", threshold, 10);
    for (int i = 0; i < 2000; i++) begin
      int t;
      // long decreasing and increasing runs drive the threshold to both ends
      if ((i / 150) % 2 == 0) t = 5000000 - i * 7 - $urandom_range(3);
      else t = $urandom_range(8000000);
      if (havep && !(t < prev)) dir = !dir;
      havep = 1; prev = t;
      thr = dir ? thr + 3 : thr - 3;
      if (thr > 255) thr = 255;
      if (thr < 0) thr = 0;
      if (dir) ups++; else downs++;
      update = 1; total_stall = TOT_W'(t);
      @(posedge clk); #1 update = 0;
      chk("threshold", threshold, thr);
      chk("direction", dir_up, dir);
      if ($urandom_range(1)) begin @(posedge clk); #1 chk("hold", threshold, thr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
