// tb_lbest_sort -- random check of the L-best selection of 2 out of 4
// candidates (7-bit metrics 0..63): the chosen metrics must be the two
// smallest (in order), the two selections distinct, and the outputs
// normalized to the best. Small metric ranges make ties frequent.
module tb_lbest_sort;
  import fssl_pkg::*;
  localparam int M = 4, LO = 2;
  pm_t        pm [M];
  logic [1:0] sel [LO];
  pm_t        pm_out [LO];
  int checks = 0, failures = 0, n_tie = 0, n_sat = 0;
  lbest_sort #(.M(M), .LO(LO)) dut (.*);
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int s [M];
      int range;
      range = (t % 3 == 0) ? 4 : 63;
      for (int i = 0; i < M; i++) begin s[i] = $urandom_range(range); pm[i] = pm_t'(s[i]); end
      #1;
      s.sort();
      if (s[0] == s[1]) n_tie++;
      if (s[1] - s[0] > 40) n_sat++;
      checks += 4;
      if (int'(pm[sel[0]]) != s[0]) failures++;
      if (int'(pm[sel[1]]) != s[1]) failures++;
      if (sel[0] == sel[1]) failures++;
      if (int'(pm_out[0]) != 0 || int'(pm_out[1]) != s[1] - s[0]) begin
        failures++;
        if (failures < 5) $display("pm_out %0d %0d for sorted %p", pm_out[0], pm_out[1], s);
      end
    end
    checks += 2;
    if (n_tie == 0) failures++;
    if (n_sat == 0) failures++;
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
