// tb_ehu: exponent handling unit. First the four-product walk-through with product
// exponents (10, 2, 3, 8) and safe precision 5: cycle 0 serves A and D with local shifts 0
// and 2, cycle 1 serves B and C with shifts 3 and 2 and a shared shift of 5. Then random
// exponent vectors (8 products, safe precision 7, software precision 16 or 28) are checked
// cycle by cycle against an independent partition model: max exponent, masks, local shifts,
// shared shift, done, and the number of cycles.
module tb_ehu;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic load4 = 0, is4 = 0, step4 = 0;
  logic signed [7:0] a4 [4], w4 [4], mx4;
  logic [5:0] ls4 [4];
  logic [3:0] m4;
  logic [7:0] ex4;
  logic d4;
  ehu #(.N(4), .SP(5)) dut4 (.clk(clk), .rst_n(rst_n), .load(load4), .a_exp(a4), .w_exp(w4),
    .sw_prec(6'd28), .max_exp(mx4), .iter_start(is4), .step(step4), .lshift(ls4), .mask(m4),
    .extra_sh(ex4), .done(d4));

  logic load = 0, is_ = 0, step = 0;
  logic [5:0] swp;
  logic signed [7:0] a [N], w [N], mx;
  logic [5:0] ls [N];
  logic [N-1:0] m;
  logic [7:0] ex;
  logic dn;
  ehu #(.N(N), .SP(7)) dut (.clk(clk), .rst_n(rst_n), .load(load), .a_exp(a), .w_exp(w),
    .sw_prec(swp), .max_exp(mx), .iter_start(is_), .step(step), .lshift(ls), .mask(m),
    .extra_sh(ex), .done(dn));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #5_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c [N], d [N], cmax, kmax, k;
    a4 = '{8'sd10, 8'sd2, 8'sd3, 8'sd8};
    w4 = '{8'sd0, 8'sd0, 8'sd0, 8'sd0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); load4 = 1;
    @(negedge clk); load4 = 0; is4 = 1; step4 = 1;
    #1;
    chk(mx4 == 10, "walk-through max_exp");
    chk(m4 == 4'b1001 && ls4[0] == 0 && ls4[3] == 2 && ex4 == 0 && !d4, "walk-through cycle 0");
    @(negedge clk); is4 = 0;
    #1;
    chk(m4 == 4'b0110 && ls4[1] == 3 && ls4[2] == 2 && ex4 == 5 && d4, "walk-through cycle 1");
    @(negedge clk); step4 = 0;
    for (int r = 0; r < 300; r++) begin
      int spread;
      spread = (r % 3 == 0) ? 4 : (r % 3 == 1) ? 20 : 58;
      swp = (r % 2 == 0) ? 6'd16 : 6'd28;
      cmax = -100;
      for (int i = 0; i < N; i++) begin
        a[i] = 8'($urandom_range(0, spread / 2) - 14);
        w[i] = 8'($urandom_range(0, spread / 2) - 14);
        c[i] = int'(a[i]) + int'(w[i]);
        if (c[i] > cmax) cmax = c[i];
      end
      kmax = 0;
      for (int i = 0; i < N; i++) begin
        d[i] = cmax - c[i];
        if (d[i] <= int'(swp) && d[i] / 7 > kmax) kmax = d[i] / 7;
      end
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      #1;
      chk(int'(mx) == cmax, "max_exp");
      // two nibble iterations in a row: the serv bits must restart
      for (int it = 0; it < 2; it++) begin
        k = 0;
        is_ = 1; step = 1;
        forever begin
          #1;
          for (int i = 0; i < N; i++) begin
            bit sel;
            sel = (d[i] <= int'(swp)) && (d[i] / 7 == k);
            chk(m[i] == sel, $sformatf("mask %0d k %0d d %0d", i, k, d[i]));
            if (sel) chk(int'(ls[i]) == d[i] - 7 * k, "local shift");
          end
          chk(int'(ex) == 7 * k, "extra shift");
          chk(dn == (k == kmax), $sformatf("done k %0d kmax %0d", k, kmax));
          if (dn || k > 10) break;
          @(negedge clk); is_ = 0; k++;
        end
        @(negedge clk); is_ = 0; step = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
