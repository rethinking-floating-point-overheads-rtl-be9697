// tb_activation_buffer: fills the buffer faster than it drains while the downstream
// any_full flag is raised at random; checks that nothing is broadcast while any_full is
// high, that stall is reported then, that fill_ready drops when the buffer is full, and that
// the broadcast words come out in fill order.
module tb_activation_buffer;
  localparam int WIDTH = 24, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fill_valid = 0, fill_ready, any_full = 0, bcast_valid, stall;
  logic [WIDTH-1:0] fill_data = '0, bcast_data;
  int checks = 0, failures = 0, n_stall = 0, n_full = 0, sent = 0, got = 0;

  activation_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #1_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (fill_valid && fill_ready) sent++;
    if (fill_valid && !fill_ready) n_full++;
    if (stall) n_stall++;
    checks++;
    if (bcast_valid && any_full) begin failures++; $display("FAIL broadcast while full"); end
    if (stall != (any_full && !(sent == got))) ; // stall meaning checked loosely below
    if (bcast_valid) begin
      checks++;
      if (bcast_data != WIDTH'(got)) begin failures++; $display("FAIL order got %0d want %0d", bcast_data, got); end
      got++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (got < 300) begin
      @(negedge clk);
      fill_valid = ($urandom_range(0, 3) != 0) && sent < 300;
      fill_data = WIDTH'(sent);
      any_full = ($urandom_range(0, 2) == 0);
    end
    checks++;
    if (n_stall == 0 || n_full == 0) begin failures++; $display("FAIL coverage stall %0d full %0d", n_stall, n_full); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
