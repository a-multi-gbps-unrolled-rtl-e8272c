// tb_combine_unit -- random check of Combine: output path p must equal the
// polar transform of the concatenated path (left estimate of the right
// survivor's source, right estimate), and the survivor index must compose.
module tb_combine_unit;
  import fssl_pkg::*;
  localparam int NV = 8, H = NV/2;
  logic [H-1:0]  beta_l [L], beta_r [L];
  src_t          src_l [L], src_r [L], src [L];
  logic [NV-1:0] beta [L];
  int checks = 0, failures = 0;
  combine_unit #(.NV(NV)) dut (.*);
  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int p = 0; p < L; p++) begin
        beta_l[p] = H'($urandom); beta_r[p] = H'($urandom);
        src_l[p] = 1'($urandom);  src_r[p] = 1'($urandom);
      end
      #1;
      for (int p = 0; p < L; p++) begin
        logic [NV-1:0] e;
        for (int i = 0; i < H; i++) begin
          e[i]     = beta_l[src_r[p]][i] ^ beta_r[p][i];
          e[i + H] = beta_r[p][i];
        end
        checks += 2;
        if (beta[p] !== e) begin failures++; if (failures < 5) $display("beta %h expected %h", beta[p], e); end
        if (src[p] !== src_l[src_r[p]]) failures++;
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
