// tb_f_unit -- random check of the min-sum F function against an integer
// reference: sign(a)sign(b)min(|a|,|b|) on the pairs (i, i+NV/2).
module tb_f_unit;
  import fssl_pkg::*;
  localparam int NV = 8;
  llr_t a [NV];
  llr_t y [NV/2];
  int checks = 0, failures = 0;
  f_unit #(.NV(NV)) dut (.a(a), .y(y));
  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < NV; i++) a[i] = llr_t'($urandom_range(62) - 31);
      #1;
      for (int i = 0; i < NV/2; i++) begin
        int x, z, m, e;
        x = a[i]; z = a[i+NV/2];
        m = (x < 0 ? -x : x) < (z < 0 ? -z : z) ? (x < 0 ? -x : x) : (z < 0 ? -z : z);
        e = ((x < 0) ^ (z < 0)) ? -m : m;
        checks++;
        if (int'(y[i]) != e) begin
          failures++;
          if (failures < 5) $display("F(%0d,%0d) = %0d, expected %0d", x, z, y[i], e);
        end
      end
    end
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
