// tb_adder_tree: random and extreme input vectors for a 16-input (and a 5-input) tree; the
// sum is compared with a running integer sum.
module tb_adder_tree;
  localparam int IW = 17;
  logic signed [IW-1:0] in16 [16], in5 [5];
  logic signed [IW+3:0] s16;
  logic signed [IW+2:0] s5;
  int checks = 0, failures = 0;

  adder_tree #(.N(16), .IW(IW)) dut16 (.in(in16), .sum(s16));
  adder_tree #(.N(5), .IW(IW)) dut5 (.in(in5), .sum(s5));

  initial begin
    #1_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint w16, w5;
    for (int r = 0; r < 2000; r++) begin
      w16 = 0; w5 = 0;
      for (int i = 0; i < 16; i++) begin
        in16[i] = (r == 0) ? -(1 <<< (IW - 1)) : (r == 1) ? (1 <<< (IW - 1)) - 1 : IW'($urandom);
        w16 += longint'(in16[i]);
      end
      for (int i = 0; i < 5; i++) begin
        in5[i] = IW'($urandom);
        w5 += longint'(in5[i]);
      end
      #1;
      checks += 2;
      if (longint'(s16) != w16) begin failures++; $display("FAIL s16 %0d want %0d", s16, w16); end
      if (longint'(s5) != w5) begin failures++; $display("FAIL s5 %0d want %0d", s5, w5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
