// operand_decomposer: splits one 16-bit operand into 5-bit signed nibbles and an exponent.
//
// INT mode: an INTk word is cut into k/4 nibbles, least significant first. Every nibble
// except the top one is zero-extended ({0,n}); the top one is sign-extended for a signed type
// and zero-extended otherwise, so value = sum(nib[k] * 16^k) and the exponent is 0.
// FP16 mode (as the architecture prescribes): the magnitude 1.mantissa (0.mantissa for a
// subnormal) with its sign forms a 12-bit two's complement number M, split into
// N2 = M[11:7], N1 = {0,M[6:3]}, N0 = {0,M[2:0],0}. The extra zero at the bottom of N0 gives
// 2*M = sum(N_k * 16^k). The exponent is the unbiased one (exponent field - 15, or -14 for a
// subnormal). INF and NaN are not treated specially.
// Purely combinational; nibbles above the type's count are zero.
module operand_decomposer
  import mp_pkg::*;
(
  input  logic [DATA_W-1:0]        data,
  input  dtype_t                   dtype,
  input  logic                     is_signed,
  output logic signed [NIB_W-1:0]  nib [MAX_NIBS],
  output logic signed [EXP_W-1:0]  exp
);
  logic [4:0]         efield;
  logic [10:0]        mag;
  logic signed [11:0] m;
  logic [2:0]         nn;

  always_comb begin
    efield = data[14:10];
    mag    = {(efield != 5'd0), data[9:0]};
    m      = data[15] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    nn     = dtype_nibbles(dtype);
    for (int k = 0; k < MAX_NIBS; k++) nib[k] = '0;
    exp = '0;
    if (dtype == DT_FP16) begin
      nib[2] = m[11:7];
      nib[1] = {1'b0, m[6:3]};
      nib[0] = {1'b0, m[2:0], 1'b0};
      exp    = (efield == 5'd0) ? -EXP_W'(14) : EXP_W'($signed({1'b0, efield}) - 7'sd15);
    end else begin
      for (int k = 0; k < MAX_NIBS; k++) begin
        if (k < int'(nn)) begin
          nib[k] = {(is_signed && (k == int'(nn) - 1)) ? data[4*k+3] : 1'b0, data[4*k +: 4]};
        end
      end
    end
  end

endmodule
