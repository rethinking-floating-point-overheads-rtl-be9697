// adder_tree: balanced binary tree summing N signed inputs of IW bits.
//
// The inputs are padded with zeros up to the next power of two NP = 2^T and reduced level by
// level, each level adding neighbouring pairs; the result has IW + T bits, enough for any
// input values (T = ceil(log2 N), the 't' of the architecture). Combinational, no registers.
module adder_tree #(
  parameter int unsigned N  = 16,
  parameter int unsigned IW = 17,
  localparam int unsigned T = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [IW-1:0]   in  [N],
  output logic signed [IW+T-1:0] sum
);
  localparam int unsigned NP = 1 << T;
  localparam int unsigned OW = IW + T;

  logic signed [OW-1:0] leaf [NP];

  always_comb begin
    for (int q = 0; q < NP; q++) leaf[q] = (q < N) ? OW'(in[q]) : '0;
  end

  for (genvar lv = 0; lv < T; lv++) begin : g_lv
    localparam int unsigned NN = NP >> (lv + 1);
    logic signed [OW-1:0] s [NN];
    for (genvar q = 0; q < NN; q++) begin : g_add
      if (lv == 0) begin : g_first
        assign s[q] = leaf[2*q] + leaf[2*q+1];
      end else begin : g_next
        assign s[q] = g_lv[lv-1].s[2*q] + g_lv[lv-1].s[2*q+1];
      end
    end
  end

  assign sum = g_lv[T-1].s[0];

endmodule
