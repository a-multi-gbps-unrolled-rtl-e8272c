// tb_fssl_decoder -- end-to-end test of the (512,427) list decoder at its
// default parameters.
//
// The testbench draws random information words, encodes them systematically
// (information placed at the non-frozen indices of v, w = v*G, frozen indices
// of w cleared, x = w*G, G the N-point polar transform), maps bits to BPSK,
// adds Gaussian noise (Box-Muller) and quantizes the LLRs 2y/sigma^2 to 5-bit
// two's complement. Frames are offered back to back with in_valid held high,
// so the initiation-interval throttle is exercised; the decoded codeword is
// compared with the transmitted one.
//   phase 1: noiseless frames and frames at 6 dB: every frame must decode.
//   phase 2: frames at 4.25 dB: the frame error rate must stay below 10 %.
// Checked as well: acceptance only every II = 20 cycles, the latency from
// acceptance to out_valid (243 cycles for the built-in frozen set, worked out
// from the tree shape independently of the RTL), and that the list mechanism
// is used: hard-decision errors corrected, and frames that a plain
// successive-cancellation (SC) decoder (min-sum, unquantized, written here
// bit by bit, independent of the RTL) gets wrong but the list decoder gets
// right. Frames whose decoded path descends from the second path at the
// root's halfway point are counted for information.
module tb_fssl_decoder;
  import fssl_pkg::*;

  localparam int EXP_LAT   = 243;
  localparam int N_CLEAN   = 4;
  localparam int N_HIGH    = 40;
  localparam int N_LOW     = 200;
  localparam int N_FRAMES  = N_CLEAN + N_HIGH + N_LOW;

  logic         clk = 0, rst_n = 0;
  logic         in_valid = 0, in_ready;
  chllr_t       in_llr [N];
  logic         out_valid;
  logic [N-1:0] out_cw;
  src_t         out_path;
  pm_t          out_pm;

  fssl_decoder dut (.*);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected results queue
  logic [N-1:0] exp_cw [$];
  int           acc_cycle [$];
  logic         exp_low [$];

  int n_out = 0, n_err_low = 0, n_corrected = 0, n_path1 = 0, n_stall = 0, n_b2b = 0, n_swap = 0;
  int last_acc = -1000;

  function automatic logic [N-1:0] polar_tf(input logic [N-1:0] u);
    logic [N-1:0] x = u;
    for (int len = 1; len < N; len *= 2)
      for (int b = 0; b < N; b += 2*len)
        for (int i = b; i < b + len; i++) x[i] = x[i] ^ x[i+len];
    return x;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1))) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  logic [N-1:0] hard_dec [$];
  logic [N-1:0] sc_dec_q [$];
  int ch_int [N];
  int n_sc_fail = 0, n_list_beats_sc = 0;

  localparam int LOGN = $clog2(N);
  int   sc_a  [LOGN+1][N];
  logic sc_bl [LOGN+1][N];

  // plain SC decoding, leaf by leaf: sc_a[d] holds the LLRs of the current
  // node at depth d, sc_bl[d] the estimate of the left child at depth d
  function automatic logic [N-1:0] sc_decode(input int ch [N]);
    logic bt [N];
    logic [N-1:0] x;
    int d, h, b;
    for (int j = 0; j < N; j++) sc_a[0][j] = ch[j];
    for (int i = 0; i < N; i++) begin
      if (i == 0) d = 0;
      else begin
        b = 0;
        while (((i >> b) & 1) == 0) b++;
        d = LOGN - b;                       // depth of the right child entered
        h = N >> d;
        for (int j = 0; j < h; j++) begin
          automatic int va = sc_a[d-1][j], vb = sc_a[d-1][j+h];
          sc_a[d][j] = sc_bl[d][j] ? vb - va : vb + va;
        end
      end
      for (int dd = d; dd < LOGN; dd++) begin
        h = N >> (dd + 1);
        for (int j = 0; j < h; j++) begin
          automatic int va = sc_a[dd][j], vb = sc_a[dd][j+h];
          automatic int ma = va < 0 ? -va : va, mb = vb < 0 ? -vb : vb;
          automatic int m = ma < mb ? ma : mb;
          sc_a[dd+1][j] = ((va < 0) != (vb < 0)) ? -m : m;
        end
      end
      bt[0] = FROZEN[i] ? 1'b0 : (sc_a[LOGN][0] < 0);
      d = LOGN;
      while (d > 0 && ((i >> (LOGN - d)) & 1) == 1) begin
        h = N >> d;
        for (int j = 0; j < h; j++) begin
          bt[j + h] = bt[j];
          bt[j]     = sc_bl[d][j] ^ bt[j];
        end
        d--;
      end
      if (d > 0) for (int j = 0; j < (N >> d); j++) sc_bl[d][j] = bt[j];
      else for (int j = 0; j < N; j++) x[j] = bt[j];
    end
    return x;
  endfunction

  task automatic make_frame(input real ebn0_db, input logic noiseless, output logic [N-1:0] x,
                            output logic [N-1:0] hd);
    logic [N-1:0] v, w;
    real sigma, y, llr;
    int q;
    for (int i = 0; i < N; i++) v[i] = FROZEN[i] ? 1'b0 : 1'($urandom);
    w = polar_tf(v);
    for (int i = 0; i < N; i++) if (FROZEN[i]) w[i] = 1'b0;
    x = polar_tf(w);
    // encoder self-check: systematic and a codeword
    checks++;
    if (((x ^ v) & ~FROZEN) != '0 || (polar_tf(x) & FROZEN) != '0) begin
      failures++; $display("encoder error");
    end
    sigma = $sqrt(1.0 / (2.0 * (real'(K) / real'(N)) * (10.0 ** (ebn0_db / 10.0))));
    for (int i = 0; i < N; i++) begin
      y = (x[i] ? -1.0 : 1.0);
      if (!noiseless) y = y + sigma * gauss();
      llr = 2.0 * y / (sigma * sigma);
      q = (llr >= 0.0) ? int'(llr + 0.5) : -int'(-llr + 0.5);
      if (q > 15) q = 15;
      if (q < -16) q = -16;
      in_llr[i] = chllr_t'(q);
      hd[i] = (q < 0);
      ch_int[i] = q;
    end
  endtask

  // ---------------- stimulus
  initial begin
    logic [N-1:0] x, hd;
    real snr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < N_FRAMES; f++) begin
      snr = (f < N_CLEAN + N_HIGH) ? 6.0 : 4.25;
      make_frame(snr, f < N_CLEAN, x, hd);
      in_valid <= 1'b1;
      @(negedge clk);
      while (!in_ready) begin
        n_stall++;
        @(negedge clk);
      end
      // accepted on the coming posedge
      @(posedge clk);
      exp_cw.push_back(x);
      hard_dec.push_back(hd);
      sc_dec_q.push_back(sc_decode(ch_int));
      if (f < N_CLEAN) begin   // the SC reference itself must decode noiseless frames
        checks++;
        if (sc_dec_q[$] != x) begin failures++; $display("SC reference failed on a noiseless frame"); end
      end
      acc_cycle.push_back(cycle);
      exp_low.push_back(f >= N_CLEAN + N_HIGH);
      checks++;
      if (last_acc >= 0 && cycle - last_acc < II) begin
        failures++; $display("frame accepted %0d cycles after the previous one", cycle - last_acc);
      end
      if (cycle - last_acc == II) n_b2b++;
      last_acc = cycle;
      #0;
    end
    in_valid <= 1'b0;
  end

  // ---------------- checker
  always @(posedge clk) if (rst_n && out_valid) begin
    logic [N-1:0] e, hd;
    int a;
    logic low;
    #0;
    e = exp_cw.pop_front(); hd = hard_dec.pop_front(); a = acc_cycle.pop_front(); low = exp_low.pop_front();
    n_out++;
    checks++;
    if (cycle - a != EXP_LAT) begin
      failures++; $display("latency %0d, expected %0d", cycle - a, EXP_LAT);
    end
    if (out_cw == e && hd != e) n_corrected++;
    begin
      logic [N-1:0] scx;
      scx = sc_dec_q.pop_front();
      if (scx != e) n_sc_fail++;
      if (scx != e && out_cw == e) n_list_beats_sc++;
    end
    if (out_path == 1'b1) n_path1++;
    if (dut.u_tree.g_split.src_r[0] == 1'b1) n_swap++;
    if (!low) begin
      checks++;
      if (out_cw !== e) begin
        failures++; $display("frame %0d decoded wrongly (%0d bit errors)", n_out, $countones(out_cw ^ e));
      end
    end else if (out_cw !== e) n_err_low++;
    if (n_out == N_FRAMES) begin
      $display("frames=%0d  FER@4.25dB=%0d/%0d  corrected=%0d  path1=%0d  swaps=%0d  stalls=%0d  back_to_back=%0d  SC_fail=%0d  list_beats_SC=%0d",
               n_out, n_err_low, N_LOW, n_corrected, n_path1, n_swap, n_stall, n_b2b, n_sc_fail, n_list_beats_sc);
      checks++; if (n_err_low * 10 > N_LOW) begin failures++; $display("FER too high"); end
      checks++; if (n_corrected == 0) begin failures++; $display("no channel error was corrected"); end
      checks++; if (n_list_beats_sc == 0) begin failures++; $display("list decoding never beat SC decoding"); end
      checks++; if (n_sc_fail == 0) begin failures++; $display("SC reference never failed: noise too low"); end
      checks++; if (n_stall == 0) begin failures++; $display("initiation-interval stall never happened"); end
      checks++; if (n_b2b == 0) begin failures++; $display("no back-to-back frames"); end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // ---------------- watchdog
  initial begin
    repeat (N_FRAMES * II + 2000) @(posedge clk);
    failures++;
    $display("watchdog: only %0d of %0d frames came out", n_out, N_FRAMES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
