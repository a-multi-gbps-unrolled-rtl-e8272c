// fssl_decoder -- fully-unrolled, partially-pipelined Fast-SSC-List decoder
// for the (512,427) systematic polar code, list size 2.
//
// A frame of N channel LLRs (5-bit two's complement, positive favours 0) is
// accepted when in_valid and in_ready are high, at most once every II = 20
// cycles. It is registered (alpha_c), widened to the 6-bit internal format and
// sent through the unrolled decoder tree (fssl_node), whose shape follows the
// frozen set in fssl_pkg. The tree ends with two candidate codewords and
// their metrics; best_select keeps the more likely one (beta_c). DEC_LAT
// cycles after acceptance out_valid is high for one cycle with out_cw, the
// estimated codeword (bit i = code bit i). As the code is systematic, the
// information bits are the codeword bits at the non-frozen indices.
// out_path and out_pm give the chosen list entry and its metric.
//
// Outputs hold until the next frame's result is loaded. Reset (asynchronous,
// active low) clears only the frame control; data registers are loaded before
// they are read.
module fssl_decoder import fssl_pkg::*; (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  chllr_t        in_llr [N],
  output logic          out_valid,
  output logic [N-1:0]  out_cw,
  output src_t          out_path,
  output pm_t           out_pm
);
  localparam int DEPTH = DEC_LAT;

  logic [DEPTH:0] stg;

  frame_ctrl #(.II(II), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .stg, .out_valid);

  // alpha_c: channel LLR register, loaded at stage 0
  llr_t alpha_c [L][N];
  pm_t  pm0     [L];
  always_ff @(posedge clk)
    if (stg[0])
      for (int i = 0; i < N; i++) begin
        alpha_c[0][i] <= llr_t'(in_llr[i]);   // sign extension to QI bits
        alpha_c[1][i] <= llr_t'(in_llr[i]);
      end
  assign pm0 = '{default: '0};

  logic [N-1:0] beta_t [L];
  pm_t          pm_t_o [L];
  src_t         src_t_o [L];

  fssl_node #(.NV(N), .FR(FROZEN), .P_IN(1), .S(1), .DEPTH(DEPTH)) u_tree (
    .clk, .stg, .alpha(alpha_c), .pm_in(pm0), .beta(beta_t), .pm_out(pm_t_o), .src(src_t_o));

  best_select #(.NV(N)) u_best (
    .clk, .en(stg[1 + TREE_LAT]), .beta(beta_t), .pm(pm_t_o),
    .cw(out_cw), .path(out_path), .pm_best(out_pm));
endmodule
