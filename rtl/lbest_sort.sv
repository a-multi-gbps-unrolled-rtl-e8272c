// lbest_sort -- "L-Best Candidates": keeps the L smallest of M path metrics
// and normalizes them.
//
// The inputs are 7-bit candidate path metrics read from registers, as in the
// published design, whose critical path runs from a path-metric register
// through 7-bit comparators into the register of a kept metric.
// Every pair of candidates is compared once (one level of comparators); the
// rank of candidate i is the number of candidates that beat it, a tie going
// to the lower index. Output slot r takes the candidate of rank r, so slot 0
// holds the best path. The kept metrics are then normalized by subtracting the
// best one (the result stays in 0..63), as the published design normalizes
// metrics after each sorting step to avoid overflow. The rank-based structure
// and the tie rule are this design's choices. Purely combinational; the calling constituent decoder registers
// the result.
module lbest_sort import fssl_pkg::*; #(
  parameter int M  = 4,
  parameter int LO = 2,
  localparam int SW = (M > 1) ? $clog2(M) : 1
) (
  input  pm_t           pm     [M],
  output logic [SW-1:0] sel    [LO],
  output pm_t           pm_out [LO]
);
  logic [SW:0] rank [M];
  pm_t         best [LO];

  always_comb begin
    for (int i = 0; i < M; i++) begin
      rank[i] = '0;
      for (int j = 0; j < M; j++)
        if (j != i && ((pm[j] < pm[i]) || (pm[j] == pm[i] && j < i)))
          rank[i] = rank[i] + 1'b1;
    end
    for (int r = 0; r < LO; r++) begin
      sel[r]  = '0;
      best[r] = '0;
      for (int i = 0; i < M; i++)
        if (rank[i] == (SW+1)'(r)) begin
          sel[r]  = SW'(i);
          best[r] = pm[i];
        end
    end
    for (int r = 0; r < LO; r++) pm_out[r] = best[r] - best[0];   // 0..63, no overflow
  end
endmodule
