// tb_delay_line -- checks the retention registers with a new frame every
// II = 20 cycles. The producer's value changes every II cycles (it is valid
// from stage S for II cycles, as a register loaded once per frame would be),
// and the consumer reads it at stage S+R. Three read distances are tested:
// R = 7 (no register needed), R = 45 (3 registers) and R = 60 (3 registers,
// last reading cycle). Every read must return the value of its own frame.
module tb_delay_line;
  localparam int W = 16, S = 3, II = 20, DEPTH = 80;
  logic           clk = 0, start = 0;
  logic [DEPTH:0] stg = '0;
  logic [W-1:0]   d = '0, q7, q45, q60;
  int checks = 0, failures = 0;
  logic [W-1:0] hist [$];   // value of each frame, in order
  int n7 = 0, n45 = 0, n60 = 0;

  delay_line #(.W(W), .R(7),  .S(S), .II(II), .DEPTH(DEPTH)) u7  (.clk, .stg, .d, .q(q7));
  delay_line #(.W(W), .R(45), .S(S), .II(II), .DEPTH(DEPTH)) u45 (.clk, .stg, .d, .q(q45));
  delay_line #(.W(W), .R(60), .S(S), .II(II), .DEPTH(DEPTH)) u60 (.clk, .stg, .d, .q(q60));

  always #5 clk = ~clk;
  always_ff @(posedge clk) stg <= {stg[DEPTH-1:0], 1'b0} | (DEPTH+1)'(start);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // producer: frame f starts at cycle 10 + 20 f; its value appears at stage S
  initial begin
    repeat (10) @(negedge clk);
    for (int f = 0; f < 12; f++) begin
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      repeat (II - 1) @(negedge clk);
    end
  end
  // value of frame f is presented from stage S on (changes exactly when a new
  // frame's token reaches stage S)
  always @(posedge clk) begin
    #1;
    if (stg[S]) begin
      d = W'($urandom);
      hist.push_back(d);
    end
  end
  // consumers: frame index = number of tokens that passed stage S before
  int f7 = 0, f45 = 0, f60 = 0;
  always @(negedge clk) begin
    if (stg[S + 7])  begin checks++; if (q7  !== hist[f7])  failures++; f7++;  n7++;  end
    if (stg[S + 45]) begin checks++; if (q45 !== hist[f45]) failures++; f45++; n45++; end
    if (stg[S + 60]) begin checks++; if (q60 !== hist[f60]) failures++; f60++; n60++; end
  end
  initial begin
    repeat (10 + 12 * II + 80) @(posedge clk);
    checks++;
    if (n7 != 12 || n45 != 12 || n60 != 12) failures++;
    $display("reads %0d %0d %0d", n7, n45, n60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
