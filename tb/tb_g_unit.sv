// tb_g_unit -- random check of the G function against an integer reference:
// b + (1-2beta) a, clipped to +-31.
module tb_g_unit;
  import fssl_pkg::*;
  localparam int NV = 8;
  llr_t          a [NV];
  logic [NV/2-1:0] beta;
  llr_t          y [NV/2];
  int checks = 0, failures = 0, n_sat = 0;
  g_unit #(.NV(NV)) dut (.a(a), .beta(beta), .y(y));
  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < NV; i++) a[i] = llr_t'($urandom_range(62) - 31);
      beta = NV/2'($urandom);
      #1;
      for (int i = 0; i < NV/2; i++) begin
        int e;
        e = int'(a[i+NV/2]) + (beta[i] ? -int'(a[i]) : int'(a[i]));
        if (e > 31) begin e = 31; n_sat++; end
        if (e < -31) begin e = -31; n_sat++; end
        checks++;
        if (int'(y[i]) != e) begin
          failures++;
          if (failures < 5) $display("G(%0d,%0d,%0b) = %0d, expected %0d", a[i], a[i+NV/2], beta[i], y[i], e);
        end
      end
    end
    checks++; if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
