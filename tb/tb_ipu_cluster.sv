// tb_ipu_cluster: a cluster of two 4-input MC-IPUs sharing one nibble/alignment sequencer.
// Random pixels (1-3 inner-product operations each, random weight slots and activations)
// are streamed through the input FIFO with random output backpressure, in three modes:
// INT4 x INT4 signed, FP16 with a wide exponent spread (multi-cycle alignment), and INT8
// unsigned x INT4 signed (four nibble iterations). Every pixel result is compared
// bit-exactly with the accumulator model in tb_mp_ref_pkg. In a second pass without
// backpressure the busy time is checked against the cycle count the model predicts
// (Ka*Kb*(alignment cycles) per operation, the slowest IPU of the cluster setting the pace),
// which for INT4 means one operation per cycle.
module tb_ipu_cluster;
  import mp_pkg::*;
  import tb_mp_ref_pkg::*;
  localparam int N = 4, W = 16, D = 3, G = 2, ACC_W = 33 + 2 + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dtype_t a_type, w_type;
  logic a_signed, w_signed;
  logic [DIFF_W-1:0] sw_prec;
  logic [G-1:0] wbuf_we = '0;
  logic [1:0] wbuf_slot = '0, in_slot = '0;
  logic [DATA_W-1:0] wbuf_data [N];
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, busy, multi_cycle;
  logic [DATA_W-1:0] in_act [G][N];
  logic signed [ACC_W-1:0] out_acc [G];
  logic signed [EXP_W-1:0] out_exp [G];
  logic [DATA_W-1:0] wmem [G][D][N];
  int checks = 0, failures = 0, n_multi = 0, n_busy = 0, n_bp = 0;
  ref_acc_t expq [$];
  bit bp_on;

  ipu_cluster #(.N(N), .W(W), .D(D), .G(G)) dut (.*);

  initial begin
    #20_000_000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (multi_cycle) n_multi++;
    if (busy) n_busy++;
    if (out_valid && !out_ready) n_bp++;
  end

  // consumer: pops results and compares with the model queue (G results per pixel)
  initial begin
    forever begin
      @(negedge clk);
      out_ready = bp_on ? ($urandom_range(0, 2) == 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        for (int g = 0; g < G; g++) begin
          ref_acc_t e;
          e = expq.pop_front();
          chk(out_acc[g] == ACC_W'(e.acc), $sformatf("ipu %0d acc %h model %h", g, out_acc[g], ACC_W'(e.acc)));
          if (a_type == DT_FP16) chk(int'(out_exp[g]) == e.exp, $sformatf("ipu %0d exp %0d model %0d", g, out_exp[g], e.exp));
        end
      end
    end
  end

  function automatic logic [15:0] rnd(dtype_t t, int spread);
    return (t == DT_FP16) ? rand_fp16(-spread, spread / 2) : 16'($urandom);
  endfunction

  // returns the model's cycle count for the whole run
  task automatic run(int npix, int spread, output int cyc);
    cyc = 0;
    for (int g = 0; g < G; g++)
      for (int s = 0; s < D; s++) begin
        @(negedge clk);
        wbuf_we = '0; wbuf_we[g] = 1'b1; wbuf_slot = 2'(s);
        for (int i = 0; i < N; i++) begin wmem[g][s][i] = rnd(w_type, spread); wbuf_data[i] = wmem[g][s][i]; end
      end
    @(negedge clk); wbuf_we = '0;
    for (int p = 0; p < npix; p++) begin
      ref_acc_t st [G];
      int nops;
      nops = $urandom_range(1, D);
      for (int g = 0; g < G; g++) begin st[g].empty = 1; st[g].acc = 0; st[g].exp = 0; end
      for (int op = 0; op < nops; op++) begin
        logic [15:0] av [], wv [];
        int c, cm;
        av = new[N]; wv = new[N];
        in_slot = 2'($urandom_range(0, D - 1));
        cm = 0;
        for (int g = 0; g < G; g++) begin
          for (int i = 0; i < N; i++) begin in_act[g][i] = rnd(a_type, spread); av[i] = in_act[g][i]; wv[i] = wmem[g][in_slot][i]; end
          c = ref_ip_op(av, wv, a_type, a_signed, w_type, w_signed, int'(sw_prec), W, st[g]);
          if (c > cm) cm = c;
        end
        cyc += cm;
        in_last = (op == nops - 1);
        in_valid = 1;
        if (in_last) for (int g = 0; g < G; g++) expq.push_back(st[g]);
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
        in_valid = bp_on ? 1'b0 : 1'b1;
        if (bp_on) repeat ($urandom_range(0, 2)) @(negedge clk);
      end
    end
    in_valid = 0;
    while (expq.size() != 0 || busy) @(negedge clk);
  endtask

  initial begin
    int cyc, b0;
    for (int i = 0; i < N; i++) wbuf_data[i] = '0;
    for (int g = 0; g < G; g++) for (int i = 0; i < N; i++) in_act[g][i] = '0;
    a_type = DT_INT4; w_type = DT_INT4; a_signed = 1; w_signed = 1; sw_prec = 6'd28;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      case (m)
        0: begin a_type = DT_INT4; w_type = DT_INT4; a_signed = 1; w_signed = 1; end
        1: begin a_type = DT_FP16; w_type = DT_FP16; a_signed = 1; w_signed = 1; end
        2: begin a_type = DT_INT8; w_type = DT_INT4; a_signed = 0; w_signed = 1; end
      endcase
      bp_on = 1;
      run(30, 24, cyc);
      // timing pass: inputs always offered, outputs always taken
      bp_on = 0;
      b0 = n_busy;
      run(10, 24, cyc);
      chk(n_busy - b0 >= cyc && n_busy - b0 <= cyc + 2,
          $sformatf("mode %0d busy %0d cycles, model %0d", m, n_busy - b0, cyc));
    end
    chk(n_multi > 0 && n_bp > 0, $sformatf("coverage multi %0d backpressure %0d", n_multi, n_bp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
