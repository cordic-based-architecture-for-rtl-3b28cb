// fx_mult: signed fixed-point multiplier, [B FW] x [B FW] -> [B FW].
//
// Forms the full 2B-bit product and keeps bits FW .. FW+B-1, i.e. the
// product is truncated towards minus infinity and wraps when it does not fit
// in IW = B-FW integer bits. Purely combinational. In the powering unit it
// computes y * ln(x). The paper names a fixed-point multiplier and uses one
// format throughout; truncation and wrap-around are this design's choice.
// The bits of the full product outside the kept window are dropped on
// purpose (low bits: truncation, high bits: wrap-around).
module fx_mult #(
  parameter int unsigned B  = 52,
  parameter int unsigned FW = 32
) (
  input  logic [B-1:0] a,
  input  logic [B-1:0] b,
  output logic [B-1:0] p
);

  logic signed [2*B-1:0] full;

  assign full = $signed(a) * $signed(b);
  assign p    = full[FW +: B];

endmodule
