// tb_result_normalizer: random accumulators and exponents are rounded to FP32 and FP16 and
// checked to be the nearest representable value (ties may go either way only where exactly
// halfway); directed cases check overflow to infinity, subnormal results, zero and the
// INT path (exact acc >>> int_shift).
module tb_result_normalizer;
  import mp_pkg::*;
  import tb_mp_ref_pkg::*;
  localparam int ACC_W = 41;
  logic signed [ACC_W-1:0] acc;
  logic signed [EXP_W-1:0] ex;
  logic int_mode, fp32;
  logic [5:0] int_shift;
  logic [ACC_W-1:0] result;
  int checks = 0, failures = 0, n_sub = 0, n_inf = 0;

  result_normalizer #(.ACC_W(ACC_W)) dut (.acc(acc), .exp(ex), .int_mode(int_mode),
    .int_shift(int_shift), .fp32(fp32), .result(result));

  initial begin
    #1_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit nearest(logic [31:0] got, real v, bit f32);
    real g, ulp, lo;
    int e;
    g = fp_bits_value(got, f32);
    e = f32 ? int'(got[30:23]) : int'(got[14:10]);
    ulp = pow2(((e == 0) ? 1 : e) - (f32 ? 127 + 23 : 15 + 10));
    lo  = ulp;
    if ((f32 ? got[22:0] : {13'd0, got[9:0]}) == 0 && e > 1) lo = ulp / 2.0;
    if (v >= g) return (v - g) <= ulp / 2.0;
    return (g - v) <= lo / 2.0;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    real v;
    logic [31:0] r32;
    int_mode = 0;
    for (int r = 0; r < 4000; r++) begin
      fp32 = r[0];
      acc = {$urandom, $urandom} >>> $urandom_range(0, 40);
      if (r % 5 == 0) acc = -acc;
      ex = fp32 ? 8'($urandom_range(0, 80) - 40) : 8'($urandom_range(0, 40) - 30);
      #1;
      v = real'(acc) * pow2(int'(ex) - 30);
      r32 = result[31:0];
      if (fp32 ? (r32[30:23] == 8'hff) : (r32[14:10] == 5'h1f)) begin
        n_inf++;
        chk((v < 0 ? -v : v) >= (fp32 ? 3.4e38 : 65520.0) && !(fp32 ? r32[22:0] != 0 : r32[9:0] != 0),
            $sformatf("inf for %g", v));
      end else begin
        if (fp32 ? (r32[30:23] == 0 && r32[22:0] != 0) : (r32[14:10] == 0 && r32[9:0] != 0)) n_sub++;
        chk(nearest(r32, v, fp32), $sformatf("fp32=%0d acc %0d exp %0d got %h want %g", fp32, acc, ex, r32, v));
      end
    end
    // directed: +-65504 boundary, overflow, smallest FP16 subnormal, zero
    fp32 = 0;
    acc = 41'sd65504; ex = 8'sd30; #1; chk(result[15:0] == 16'h7bff, "fp16 max");
    acc = 41'sd65520; #1; chk(result[15:0] == 16'h7c00, "fp16 overflow rounds to inf");
    acc = -41'sd70000; #1; chk(result[15:0] == 16'hfc00, "fp16 -inf");
    acc = 41'sd1; ex = 8'sd6; #1; chk(result[15:0] == 16'h0001, "fp16 min subnormal");
    acc = 41'sd1; ex = 8'sd5; #1; chk(result[15:0] == 16'h0000, "fp16 half min subnormal ties to even zero");
    acc = '0; #1; chk(result[15:0] == 16'h0000, "zero");
    chk(n_sub > 0 && n_inf > 0, $sformatf("coverage sub %0d inf %0d", n_sub, n_inf));
    // INT path
    int_mode = 1;
    for (int r = 0; r < 1000; r++) begin
      longint x;
      x = longint'($signed($urandom)) >>> $urandom_range(0, 31);
      int_shift = 6'(4 * $urandom_range(0, 2));
      acc = ACC_W'(x <<< int_shift);
      #1;
      chk($signed(result) == ACC_W'(x), $sformatf("int %0d shift %0d got %0d", x, int_shift, $signed(result)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
