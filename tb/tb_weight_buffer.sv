// tb_weight_buffer: writes random slots, reads them back in random order against a shadow
// copy; out-of-range slots read as zero and are not written.
module tb_weight_buffer;
  localparam int N = 16, D = 9;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [3:0] wslot, rslot;
  logic [15:0] wdata [N], rdata [N];
  logic [15:0] shadow [D][N];
  int checks = 0, failures = 0;

  weight_buffer #(.N(N), .D(D)) dut (.*);

  initial begin
    #1_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < D; s++) begin
      @(negedge clk);
      we = 1; wslot = 4'(s);
      for (int i = 0; i < N; i++) begin wdata[i] = 16'($urandom); shadow[s][i] = wdata[i]; end
    end
    for (int r = 0; r < 300; r++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      wslot = 4'($urandom_range(0, 15));
      for (int i = 0; i < N; i++) wdata[i] = 16'($urandom);
      rslot = 4'($urandom_range(0, 15));
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (rdata[i] != ((int'(rslot) < D) ? shadow[rslot][i] : 16'h0)) begin
          failures++;
          if (failures < 10) $display("FAIL slot %0d lane %0d %h", rslot, i, rdata[i]);
        end
      end
      if (we && int'(wslot) < D) for (int i = 0; i < N; i++) shadow[wslot][i] = wdata[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
