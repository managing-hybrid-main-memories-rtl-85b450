// tb_mlp_div_rom: exhaustive check of the MLP-ratio ROM against an
// independent integer division, including the zero and clamp corners.
module tb_mlp_div_rom;
  import ubm_pkg::*;
  logic [OUTS_W-1:0] m, n;
  logic [Q_W-1:0]    q;
  int checks = 0, failures = 0;

  mlp_div_rom dut (.m(m), .n(n), .q(q));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int mm = 0; mm <= 40; mm++)
      for (int nn = 0; nn <= 40; nn++) begin
        int em, en, exp_q;
        m = OUTS_W'(mm); n = OUTS_W'(nn);
        #1;
        em = (mm > 32) ? 32 : mm;
        en = (nn > 32) ? 32 : nn;
        exp_q = (em == 0 || en == 0) ? 0 : (em * 512) / en;
        if (exp_q > 1023) exp_q = 1023;
        checks++;
        if (q !== Q_W'(exp_q)) begin
          failures++;
          if (failures < 10) $display("mismatch m=%0d n=%0d q=%0d exp=%0d", mm, nn, q, exp_q);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
