// tb_mc_ipu: self-checking testbench of one MC-IPU(16) with 16 inputs and 9 weight slots.
//
// Fills the weight buffer, then runs pixels of 1..9 inner-product operations in INT
// (INT4 signed/unsigned, INT8 x INT4, INT12 x INT8, INT16 x INT16) and FP16 modes with several
// exponent spreads and software precisions, acting as the sequencer itself (load, nibble
// iterations most significant first, one or more cycles each until done). After every pixel
// the accumulator and exponent are compared bit-exactly with tb_mp_ref_pkg::ref_ip_op, the
// cycle count with the model's, INT results with the exact integer dot product, and FP16
// results (software precision 28) with the exact real dot product within a small tolerance.
module tb_mc_ipu;
  import mp_pkg::*;
  import tb_mp_ref_pkg::*;

  localparam int N = 16, W = 16, D = 9;
  localparam int ACC_W = 33 + 4 + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dtype_t a_type, w_type;
  logic a_signed, w_signed;
  logic [5:0] sw_prec;
  logic wbuf_we = 0;
  logic [3:0] wbuf_slot;
  logic [15:0] wbuf_data [N];
  logic load = 0;
  logic [15:0] load_act [N];
  logic [3:0] load_slot;
  logic en = 0, iter_start = 0, clear = 0;
  logic [1:0] nib_i, nib_j;
  logic done, multi;
  logic signed [ACC_W-1:0] acc, acc_nxt;
  logic signed [7:0] aexp, aexp_nxt;

  mc_ipu #(.N(N), .W(W), .D(D)) dut (.*, .exp(aexp), .exp_nxt(aexp_nxt));

  int checks = 0, failures = 0, multi_seen = 0, swaps_seen = 0;
  logic [15:0] wmem [D][N];

  initial begin
    #2_000_000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 400) $display("FAIL %s (a %s w %s sw %0d)", what, a_type.name(), w_type.name(), sw_prec);
    end
  endtask

  task automatic fill_weights(int emin, int emax);
    for (int s = 0; s < D; s++) begin
      for (int i = 0; i < N; i++)
        wmem[s][i] = (w_type == DT_FP16) ? rand_fp16(emin, emax) : 16'($urandom);
      @(negedge clk);
      wbuf_we = 1; wbuf_slot = 4'(s); wbuf_data = wmem[s];
      @(negedge clk);
      wbuf_we = 0;
    end
  endtask

  // run one pixel of nops operations; compare with the model
  task automatic run_pixel(int nops, int emin, int emax);
    ref_acc_t st;
    logic [15:0] av[], wv[];
    int exp_cycles, cycles, slot, nfirst;
    int ka, kb;
    longint iexact;
    real rexact, got;
    st.empty = 1; st.acc = 0; st.exp = 0;
    exp_cycles = 0; cycles = 0; iexact = 0; rexact = 0.0;
    ka = nibbles_of(a_type); kb = nibbles_of(w_type);
    av = new[N]; wv = new[N];
    for (int op = 0; op < nops; op++) begin
      slot = $urandom_range(0, D - 1);
      for (int i = 0; i < N; i++) begin
        av[i] = (a_type == DT_FP16) ? rand_fp16(emin, emax) : 16'($urandom);
        wv[i] = wmem[slot][i];
        if (a_type == DT_FP16) rexact += fp16_value(av[i]) * fp16_value(wv[i]);
        else iexact += int_value(av[i], a_type, a_signed) * int_value(wv[i], w_type, w_signed);
      end
      exp_cycles += ref_ip_op(av, wv, a_type, a_signed, w_type, w_signed, int'(sw_prec), W, st);
      @(negedge clk);
      load = 1; for (int i = 0; i < N; i++) load_act[i] = av[i]; load_slot = 4'(slot);
      @(negedge clk);
      load = 0;
      nfirst = 1;
      for (int i = ka - 1; i >= 0; i--) begin
        for (int j = kb - 1; j >= 0; j--) begin
          iter_start = 1;
          nib_i = 2'(i); nib_j = 2'(j);
          do begin
            en = 1;
            clear = (op == 0) && nfirst;
            #1;
            if (multi) multi_seen++;
            if (!clear && a_type == DT_FP16 && aexp_nxt > aexp) swaps_seen++;
            cycles++;
            @(negedge clk);
            iter_start = 0; nfirst = 0;
          end while (!done_q);
        end
      end
      en = 0; clear = 0;
      chk(acc == ACC_W'(st.acc), $sformatf("op %0d/%0d acc %h exp %0d model %h/%0d", op, nops, acc, aexp, ACC_W'(st.acc), st.exp));
    end
    chk(acc == ACC_W'(st.acc), $sformatf("acc %h exp %0d model %h/%0d", acc, aexp, ACC_W'(st.acc), st.exp));
    if (a_type == DT_FP16) chk(int'(aexp) == st.exp, $sformatf("exp %0d model %0d", aexp, st.exp));
    chk(cycles == exp_cycles, $sformatf("cycles %0d model %0d", cycles, exp_cycles));
    if (a_type != DT_FP16) begin
      chk((acc >>> (24 - 4 * (ka + kb - 2))) == ACC_W'(iexact),
          $sformatf("int result %0d exact %0d", acc >>> (24 - 4 * (ka + kb - 2)), iexact));
    end else if (sw_prec >= 28) begin
      got = real'(acc) * pow2((int'(aexp) - 30));
      chk((got - rexact) <= 1e-3 * pow2(emax) * pow2(emax) && (rexact - got) <= 1e-3 * pow2(emax) * pow2(emax),
          $sformatf("fp value %f exact %f", got, rexact));
    end
  endtask

  // done as seen in the cycle just executed
  logic done_q;
  always @(posedge clk) done_q <= done;

  initial begin
    sw_prec = 6'd28;
    a_type = DT_INT4; w_type = DT_INT4; a_signed = 1; w_signed = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // INT modes
    for (int m = 0; m < 5; m++) begin
      case (m)
        0: begin a_type = DT_INT4;  w_type = DT_INT4;  a_signed = 1; w_signed = 1; end
        1: begin a_type = DT_INT4;  w_type = DT_INT4;  a_signed = 0; w_signed = 0; end
        2: begin a_type = DT_INT8;  w_type = DT_INT4;  a_signed = 1; w_signed = 0; end
        3: begin a_type = DT_INT12; w_type = DT_INT8;  a_signed = 1; w_signed = 1; end
        default: begin a_type = DT_INT16; w_type = DT_INT16; a_signed = 1; w_signed = 1; end
      endcase
      fill_weights(0, 0);
      for (int p = 0; p < 6; p++) run_pixel($urandom_range(1, D), 0, 0);
    end
    // FP16 modes: narrow and wide exponent windows, software precision 16 and 28
    a_type = DT_FP16; w_type = DT_FP16;
    for (int m = 0; m < 6; m++) begin
      int emin, emax;
      case (m % 3)
        0: begin emin = -2; emax = 1; end
        1: begin emin = -8; emax = 4; end
        default: begin emin = -14; emax = 15; end
      endcase
      sw_prec = (m < 3) ? 6'd28 : 6'd16;
      fill_weights(emin, emax);
      for (int p = 0; p < 8; p++) run_pixel($urandom_range(1, D), emin, emax);
    end
    chk(multi_seen > 0, "multi-cycle alignment never happened");
    chk(swaps_seen > 0, "accumulator swap never happened");
    $display("multi-cycle cycles=%0d swaps=%0d", multi_seen, swaps_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
