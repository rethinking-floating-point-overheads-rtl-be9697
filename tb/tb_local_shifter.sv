// tb_local_shifter: random products, shift amounts and masks against integer arithmetic:
// out = floor(prod * 2^(W-9) / 2^shamt) when mask, else 0.
module tb_local_shifter;
  localparam int W = 16;
  logic signed [9:0] prod;
  logic [5:0] shamt;
  logic mask;
  logic signed [W:0] out;
  int checks = 0, failures = 0;

  local_shifter #(.W(W)) dut (.*);

  initial begin
    #1_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint want, x;
    for (int r = 0; r < 3000; r++) begin
      prod  = 10'($signed($urandom_range(0, 512)) - 256);
      shamt = 6'($urandom_range(0, 20));
      mask  = ($urandom_range(0, 3) != 0);
      #1;
      x = longint'(prod) * (64'sd1 <<< (W - 9));
      want = 0;
      if (mask) begin
        want = x;
        for (int k = 0; k < int'(shamt); k++) want = (want - ((want % 2 + 2) % 2)) / 2;
      end
      checks++;
      if (longint'(out) != want) begin
        failures++;
        if (failures < 10) $display("FAIL prod %0d sh %0d mask %0d out %0d want %0d", prod, shamt, mask, out, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
