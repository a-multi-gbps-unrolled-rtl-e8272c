// tb_frame_ctrl -- checks frame admission and stage tokens. in_valid is held
// high for long stretches and dropped at random; the testbench checks that
// acceptances are exactly II cycles apart while in_valid stays high, that a
// frame offered after a longer gap is accepted at once, that stg[k] is high
// k cycles after each acceptance and nowhere else, and that out_valid
// follows acceptance by DEPTH cycles.
module tb_frame_ctrl;
  localparam int II = 20, DEPTH = 45;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic [DEPTH:0] stg;
  int checks = 0, failures = 0, cyc = 0, n_acc = 0, n_b2b = 0, n_gap = 0, n_out = 0;
  int acc [$];
  frame_ctrl #(.II(II), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  // reference: acceptance cycles
  int last = -1000;
  always @(posedge clk) if (rst_n) begin
    logic exp_ready;
    exp_ready = (cyc - last) >= II;
    checks++;
    if (in_ready !== exp_ready) begin failures++; if (failures < 5) $display("cycle %0d ready %b expected %b", cyc, in_ready, exp_ready); end
    for (int k = 0; k <= DEPTH; k++) begin
      logic e;
      e = 1'b0;
      foreach (acc[j]) if (cyc - acc[j] == k) e = 1'b1;
      if (k == 0) e = in_valid && exp_ready;
      checks++;
      if (stg[k] !== e) begin failures++; if (failures < 5) $display("cycle %0d stg[%0d]=%b", cyc, k, stg[k]); end
    end
    if (out_valid) n_out++;
    if (in_valid && exp_ready) begin
      if (cyc - last == II) n_b2b++; else if (last >= 0) n_gap++;
      last = cyc;
      acc.push_back(cyc);
      n_acc++;
    end
    cyc <= cyc + 1;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      in_valid = ($urandom_range(3) != 0);
      repeat ($urandom_range(40, 1)) @(negedge clk);
    end
    in_valid = 0;
    repeat (DEPTH + 2) @(negedge clk);
    checks++;
    if (n_b2b == 0 || n_gap == 0 || n_out != n_acc) failures++;
    $display("accepted=%0d back_to_back=%0d after_gap=%0d out=%0d", n_acc, n_b2b, n_gap, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60 * 41 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
