// delay_line -- retention registers of the partially-pipelined decoder.
//
// A frame enters at most once every II cycles and every register of the
// decoder is loaded exactly once per frame, at a fixed stage. A value whose
// first valid cycle is stage S therefore stays valid for II cycles. When a
// consumer reads it R cycles later (stage S+R) and R <= II-1, the value is
// used directly; otherwise it is copied, in the last cycle it is still valid,
// into a chain of J = ceil((R-II+1)/II) registers, register j loading at
// stage S+(j+1)*II-1. This is how this design reads "partially pipelined with
// an initiation interval of 20": the published text gives the interval but not
// the register scheme.
//
// stg[k] is high during the k-th cycle after a frame was accepted.
module delay_line #(
  parameter int W     = 8,
  parameter int R     = 30,
  parameter int S     = 1,
  parameter int II    = 20,
  parameter int DEPTH = 64
) (
  input  logic             clk,
  input  logic [DEPTH:0]   stg,
  input  logic [W-1:0]     d,
  output logic [W-1:0]     q
);
  localparam int J = (R <= II - 1) ? 0 : (R - II + 1 + II - 1) / II;

  if (J == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [J];
    always_ff @(posedge clk) begin
      if (stg[S + II - 1]) r[0] <= d;
      for (int j = 1; j < J; j++)
        if (stg[S + (j + 1) * II - 1]) r[j] <= r[j-1];
    end
    assign q = r[J-1];
    initial assert (S + J * II - 1 <= DEPTH) else $error("delay_line: stage out of range");
  end
endmodule
