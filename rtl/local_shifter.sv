// local_shifter: per-multiplier alignment unit with the multi-cycle AND mask.
//
// The signed product is placed at the top of the IPU-precision word, i.e. followed by W-9
// zeros, so the 9 product bits of the architecture occupy bits [W-1:W-9]; one more sign bit
// is kept on top (width W+1) because the 5b x 5b product (-16)*(-16) = 256 does not fit nine
// signed bits. The word is then shifted right arithmetically by shamt and truncated to W+1
// bits; shifts of W+1 or more leave only the sign fill. When mask is 0 the output is zero
// (the bitwise AND that removes products outside the current partition). Combinational.
module local_shifter
  import mp_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  logic signed [PROD_W-1:0] prod,
  input  logic [DIFF_W-1:0]        shamt,
  input  logic                     mask,
  output logic signed [W:0]        out
);
  logic signed [W:0] placed;

  always_comb begin
    placed = (W+1)'(prod) <<< (W - 9);
    if (!mask)                   out = '0;
    else if (int'(shamt) > W)    out = {(W+1){placed[W]}};
    else                         out = placed >>> shamt;
  end

endmodule
