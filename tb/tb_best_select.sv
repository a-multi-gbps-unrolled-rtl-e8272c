// tb_best_select -- random check of the Best Candidate register: the stored
// codeword, path index and metric must be those of the path with the smaller
// metric (path 0 on a tie), loaded only when en is high.
module tb_best_select;
  import fssl_pkg::*;
  localparam int NV = 16;
  logic clk = 0, en = 0;
  logic [NV-1:0] beta [L], cw;
  pm_t pm [L], pm_best;
  src_t path;
  int checks = 0, failures = 0, n1 = 0;
  best_select #(.NV(NV)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    logic [NV-1:0] e_cw; int e_p, e_pm;
    e_cw = '0; e_p = 0; e_pm = 0;
    @(negedge clk);
    for (int t = 0; t < 1000; t++) begin
      for (int p = 0; p < L; p++) begin beta[p] = NV'($urandom); pm[p] = pm_t'($urandom_range(t % 2 ? 3 : 63)); end
      en = (t == 0) || ($urandom_range(3) != 0);
      if (en) begin
        e_p = (pm[1] < pm[0]) ? 1 : 0;
        e_cw = beta[e_p]; e_pm = pm[e_p];
        if (e_p == 1) n1++;
      end
      @(negedge clk);
      checks++;
      if (cw !== e_cw || int'(path) != e_p || int'(pm_best) != e_pm) begin
        failures++;
        if (failures < 5) $display("got %h/%0d/%0d expected %h/%0d/%0d", cw, path, pm_best, e_cw, e_p, e_pm);
      end
    end
    checks++; if (n1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
