// tb_operand_decomposer: checks nibble split and exponent of random operands of every type
// against the arithmetic split of tb_mp_ref_pkg, and that the nibbles rebuild the value
// (sum N_k 16^k = integer value, or 2*M for FP16).
module tb_operand_decomposer;
  import mp_pkg::*;
  import tb_mp_ref_pkg::*;
  logic [15:0] data;
  dtype_t dtype;
  logic is_signed;
  logic signed [4:0] nib [4];
  logic signed [7:0] ex;
  int checks = 0, failures = 0;

  operand_decomposer dut (.data(data), .dtype(dtype), .is_signed(is_signed), .nib(nib), .exp(ex));

  initial begin
    #1_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, want;
    for (int t = 0; t < 5; t++) begin
      for (int r = 0; r < 400; r++) begin
        dtype = dtype_t'(t);
        is_signed = 1'($urandom);
        data = 16'($urandom);
        if (r == 0) data = 16'h8000;
        if (r == 1) data = 16'h7fff;
        if (r == 2) data = 16'hfbff;  // FP16 -65504: N2 = -16
        #1;
        v = 0;
        for (int k = 3; k >= 0; k--) begin
          checks++;
          if (int'(nib[k]) != ref_nibble(data, dtype, is_signed, k)) begin
            failures++;
            $display("FAIL t%0d data %h nib%0d %0d want %0d", t, data, k, nib[k], ref_nibble(data, dtype, is_signed, k));
          end
          v = v * 16 + longint'(nib[k]);
        end
        if (dtype == DT_FP16) want = longint'(2.0 * fp16_value(data) * pow2(10 - ref_exp(data, DT_FP16)));
        else want = int_value(data, dtype, is_signed);
        if (dtype != DT_FP16 && is_signed == 0) want = longint'(data & ((1 << (4 * nibbles_of(dtype))) - 1));
        checks++;
        if (v != want || int'(ex) != ref_exp(data, dtype)) begin
          failures++;
          $display("FAIL t%0d data %h value %0d want %0d exp %0d", t, data, v, want, ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
