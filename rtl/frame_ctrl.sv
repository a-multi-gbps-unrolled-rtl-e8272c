// frame_ctrl -- frame admission and stage tokens.
//
// The decoder takes a new frame at most once every II cycles (the initiation
// interval, 20 in the published design). in_ready is high when at least II
// cycles have passed since the last accepted frame; a frame is accepted in a
// cycle where in_valid and in_ready are both high. Each accepted frame sends
// a token down a shift register: stg[k] is high in the k-th cycle after
// acceptance (stg[0] in the accepting cycle). Every register of the decoder
// loads only when the token of its stage is present, which is what makes the
// pipeline hold data for II cycles (and is where clock gating applies).
// out_valid = stg[DEPTH]. The ready/valid handshake is this design's choice.
module frame_ctrl #(
  parameter int II    = 20,
  parameter int DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  output logic [DEPTH:0]  stg,
  output logic            out_valid
);
  localparam int CW = $clog2(II + 1);
  logic [CW-1:0]  since;        // cycles since the last accepted frame, saturating at II-1
  logic [DEPTH:1] tok;
  logic           accept;

  assign in_ready  = (since == CW'(II - 1));
  assign accept    = in_valid && in_ready;
  assign stg       = {tok, accept};
  assign out_valid = stg[DEPTH];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      since <= CW'(II - 1);
      tok   <= '0;
    end else begin
      if (accept)                  since <= '0;
      else if (since != CW'(II-1)) since <= since + 1'b1;
      tok <= stg[DEPTH-1:0];
    end

  // two frames never share a stage: tokens are at least II stages apart
  a_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> !(|tok[(II-1 < DEPTH ? II-1 : DEPTH):1]));
endmodule
