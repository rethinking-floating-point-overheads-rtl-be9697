// tb_accumulation_logic: random sequences of adder-tree sums, maximum exponents and shift
// amounts in FP and INT mode, with clears, against the integer accumulator model (align the
// smaller-exponent side, floor on right shifts). Counts that both the swap and the plain
// alignment case occur.
module tb_accumulation_logic;
  import tb_mp_ref_pkg::*;
  localparam int W = 16, T = 4, L = 4, ACC_W = 33 + T + L;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, clear = 0, int_mode = 0;
  logic signed [W+T:0] tree_sum;
  logic signed [7:0] max_exp;
  logic [7:0] shamt;
  logic signed [ACC_W-1:0] acc, acc_nxt;
  logic signed [7:0] ex, ex_nxt;
  int checks = 0, failures = 0, swaps = 0, aligns = 0;

  accumulation_logic #(.W(W), .T(T), .L(L)) dut (.clk(clk), .rst_n(rst_n), .en(en), .clear(clear),
    .int_mode(int_mode), .tree_sum(tree_sum), .max_exp(max_exp), .shamt(shamt), .acc(acc),
    .exp(ex), .acc_nxt(acc_nxt), .exp_nxt(ex_nxt));

  initial begin
    #5_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint macc, x;
    int mexp, et;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3000; r++) begin
      @(negedge clk);
      if (r % 500 == 0) int_mode = (r / 500) % 2;
      clear = (r % 7 == 0);
      en = 1;
      tree_sum = (W+T+1)'($signed($urandom_range(0, 1 << 19)) - (1 << 18));
      max_exp = int_mode ? 8'sd0 : 8'($urandom_range(0, 58) - 28);
      shamt = int_mode ? 8'(4 * $urandom_range(0, 6)) : 8'($urandom_range(0, 30));
      x = longint'(tree_sum) <<< (33 - W);
      if (int_mode) begin
        macc = (clear ? 0 : macc) + asr(x, int'(shamt));
        mexp = 0;
      end else begin
        et = int'(max_exp) - int'(shamt);
        if (clear) begin macc = x; mexp = et; end
        else if (et > mexp) begin macc = x + asr(macc, et - mexp); mexp = et; swaps++; end
        else begin macc = macc + asr(x, mexp - et); aligns++; end
      end
      #1;
      checks++;
      if (acc_nxt != ACC_W'(macc) || (!int_mode && int'(ex_nxt) != mexp)) begin
        failures++;
        if (failures < 10) $display("FAIL r%0d acc %h exp %0d model %h %0d", r, acc_nxt, ex_nxt, ACC_W'(macc), mexp);
      end
      // keep the model inside the register width: restart when it grows too large
      if (macc > (64'sd1 <<< (ACC_W - 3)) || macc < -(64'sd1 <<< (ACC_W - 3))) begin
        @(negedge clk); en = 1; clear = 1; int_mode = int_mode; tree_sum = '0; max_exp = '0; shamt = '0;
        macc = 0; mexp = 0;
      end
    end
    @(negedge clk); en = 0;
    @(posedge clk); #1;
    checks++;
    if (acc != ACC_W'(macc)) begin failures++; $display("FAIL final register"); end
    checks++;
    if (swaps == 0 || aligns == 0) begin failures++; $display("FAIL swap %0d align %0d", swaps, aligns); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
