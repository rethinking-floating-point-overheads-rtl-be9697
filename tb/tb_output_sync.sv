// tb_output_sync: three clusters deliver results at random times; checks that nothing is
// written back and nothing popped until every cluster holds a result and the write-back
// side is ready, that all clusters are then popped together, and that the written INT and
// FP words are the normalized cluster results in cluster order.
module tb_output_sync;
  import mp_pkg::*;
  localparam int NCL = 3, G = 2, ACC_W = 41;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NCL-1:0] cl_valid = '0, cl_pop;
  logic signed [ACC_W-1:0] cl_acc [NCL][G];
  logic signed [EXP_W-1:0] cl_exp [NCL][G];
  logic int_mode = 1, fp32 = 1, wb_valid, wb_ready = 0;
  logic [5:0] int_shift = 6'd4;
  logic [ACC_W-1:0] wb_data [NCL*G];
  int checks = 0, failures = 0, n_wait = 0, n_bp = 0, n_wb = 0;

  output_sync #(.NCL(NCL), .G(G), .ACC_W(ACC_W)) dut (.*);

  initial begin
    #1_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int c = 0; c < NCL; c++) for (int g = 0; g < G; g++) begin cl_acc[c][g] = '0; cl_exp[c][g] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 400; r++) begin
      @(negedge clk);
      int_mode = (r >= 200);
      for (int c = 0; c < NCL; c++) begin
        if (!cl_valid[c] && $urandom_range(0, 2) == 0) begin
          cl_valid[c] = 1;
          for (int g = 0; g < G; g++) begin
            cl_acc[c][g] = ACC_W'(($signed($urandom_range(0, 2000)) - 1000) * 16);
            cl_exp[c][g] = 8'sd30;
          end
        end
      end
      wb_ready = ($urandom_range(0, 3) != 0);
      #1;
      chk(wb_valid == &cl_valid, "wb_valid is the AND of cluster valids");
      chk(cl_pop == ((wb_valid && wb_ready) ? {NCL{1'b1}} : '0), "pop all together on write-back");
      if (!wb_valid && |cl_valid) n_wait++;
      if (wb_valid && !wb_ready) n_bp++;
      if (wb_valid && wb_ready) begin
        n_wb++;
        for (int c = 0; c < NCL; c++) for (int g = 0; g < G; g++)
          if (int_mode)
            chk($signed(wb_data[c*G+g]) == (cl_acc[c][g] >>> 4), "int data");
          else
            chk(tb_mp_ref_pkg::fp_bits_value(wb_data[c*G+g][31:0], 1) == real'(cl_acc[c][g]), $sformatf("fp32 data %h acc %0d", wb_data[c*G+g], cl_acc[c][g]));
        cl_valid = '0;
      end
    end
    chk(n_wait > 0 && n_bp > 0 && n_wb > 20, $sformatf("coverage wait %0d bp %0d wb %0d", n_wait, n_bp, n_wb));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
