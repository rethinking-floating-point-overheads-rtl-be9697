// tb_conv_tile: end-to-end testbench of the convolution tile, at reduced size (8 inputs, 2 output channels, 2 positions, clusters of 2).
//
// Loads filters into the weight bank and copies them into the weight buffers, then streams
// tile steps through the activation buffer in several modes (INT4 x INT4 signed, INT8 x INT4,
// FP16 x FP16 into FP32 and into FP16, narrow and wide exponent spreads) and checks every
// write-back word: INT results against the exact integer dot product, FP results against the
// model accumulator of tb_mp_ref_pkg rounded to the output format (the output must be the
// nearest representable value). The result port is back-pressured at random. It counts how
// often each mechanism occurs (multi-cycle alignment, activation broadcast stall, clusters
// waiting in output synchronization, write-back back-pressure, weight reload, mode switch)
// and counts a failure for any that never happened.
module tb_conv_tile;
  import mp_pkg::*;
  import tb_mp_ref_pkg::*;

  localparam int N = 8, K = 2, P = 2, W = 16, G = 2, D = 9;
  localparam int NIPU = K * P, NCL = NIPU / G;
  localparam int ACC_W = 33 + $clog2(N) + $clog2(D);
  localparam int PIXELS = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dtype_t a_type = DT_INT4, w_type = DT_INT4;
  logic a_signed = 1, w_signed = 1, out_fp32 = 1;
  logic [5:0] sw_prec = 6'd28;
  logic wb_we = 0, wload_start = 0, wload_busy;
  logic [8:0] wb_addr = '0, wload_base = '0;
  logic [15:0] wb_data [N];
  logic step_valid = 0, step_ready, step_last = 0;
  logic [15:0] step_act [P][N];
  logic [3:0] step_slot = '0;
  logic res_valid, res_ready = 0;
  logic [ACC_W-1:0] res_data [NIPU];
  logic idle, bcast_stall;
  logic [NCL-1:0] cl_multi;

  conv_tile #(.N(8), .K(2), .P(2), .W(16), .G(2), .D(9)) dut (.*);

  int checks = 0, failures = 0;
  int n_multi = 0, n_bstall = 0, n_syncwait = 0, n_backpress = 0, n_wload = 0, n_modes = 0;
  logic [15:0] wmem [K][D][N];

  initial begin
    #(50_000_000);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (|cl_multi) n_multi++;
    if (bcast_stall) n_bstall++;
    if (!res_valid && (|dut.cl_out_valid)) n_syncwait++;
    if (res_valid && !res_ready) n_backpress++;
  end

  // is got (FP word) the nearest FP16/FP32 value to v?
  function automatic bit nearest(logic [31:0] got, real v, bit fp32);
    real g, ulp, lo;
    int e;
    g = fp_bits_value(got, fp32);
    e = fp32 ? int'(got[30:23]) : int'(got[14:10]);
    ulp = pow2(((e == 0) ? 1 : e) - (fp32 ? 127 + 23 : 15 + 10));
    lo  = ulp;
    if ((fp32 ? got[22:0] : {13'd0, got[9:0]}) == 0 && e > 1) lo = ulp / 2.0;
    if (v >= g) return (v - g) <= ulp / 2.0;
    return (g - v) <= lo / 2.0;
  endfunction

  task automatic load_weights(int emin, int emax);
    for (int k = 0; k < K; k++)
      for (int s = 0; s < D; s++) begin
        for (int i = 0; i < N; i++)
          wmem[k][s][i] = (w_type == DT_FP16) ? rand_fp16(emin, emax) : 16'($urandom);
        @(negedge clk);
        wb_we = 1; wb_addr = 9'(k * D + s); wb_data = wmem[k][s];
      end
    @(negedge clk);
    wb_we = 0; wload_start = 1; wload_base = '0;
    @(negedge clk);
    wload_start = 0;
    while (wload_busy) @(negedge clk);
    n_wload++;
  endtask

  // expected results, one queue entry per pixel
  typedef logic [ACC_W-1:0] res_t [NIPU];
  res_t   exp_q [$];
  real    val_q [$][NIPU];
  int     pix_sent;

  task automatic send_pixels(int npix, int emin, int emax);
    ref_acc_t st [NIPU];
    logic [15:0] av [P][], wv[];
    longint iexact [NIPU];
    int nops, slot;
    res_t e;
    real vals [NIPU];
    bit fp;
    int ka, kb;
    fp = (a_type == DT_FP16);
    ka = nibbles_of(a_type); kb = nibbles_of(w_type);
    wv = new[N];
    for (int p = 0; p < P; p++) av[p] = new[N];
    for (int px = 0; px < npix; px++) begin
      nops = $urandom_range(1, D);
      for (int q = 0; q < NIPU; q++) begin st[q].empty = 1; st[q].acc = 0; st[q].exp = 0; iexact[q] = 0; end
      for (int op = 0; op < nops; op++) begin
        slot = $urandom_range(0, D - 1);
        for (int p = 0; p < P; p++)
          for (int i = 0; i < N; i++) av[p][i] = fp ? rand_fp16(emin, emax) : 16'($urandom);
        for (int q = 0; q < NIPU; q++) begin
          for (int i = 0; i < N; i++) begin
            wv[i] = wmem[q / P][slot][i];
            if (!fp) iexact[q] += int_value(av[q % P][i], a_type, a_signed) * int_value(wv[i], w_type, w_signed);
          end
          void'(ref_ip_op(av[q % P], wv, a_type, a_signed, w_type, w_signed, int'(sw_prec), W, st[q]));
        end
        @(negedge clk);
        step_valid = 1; step_slot = 4'(slot); step_last = (op == nops - 1);
        for (int p = 0; p < P; p++) for (int i = 0; i < N; i++) step_act[p][i] = av[p][i];
        @(posedge clk);
        while (!step_ready) @(posedge clk);
        @(negedge clk);
        step_valid = 0;
      end
      for (int q = 0; q < NIPU; q++) begin
        e[q] = fp ? '0 : ACC_W'(iexact[q]);
        vals[q] = real'(st[q].acc) * pow2(st[q].exp - 30);
      end
      exp_q.push_back(e);
      val_q.push_back(vals);
    end
  endtask

  // result checker with random back-pressure
  int pix_got = 0;
  always @(negedge clk) res_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      if (exp_q.size() == 0) begin
        chk(0, "unexpected result");
      end else begin
        for (int q = 0; q < NIPU; q++) begin
          if (a_type == DT_FP16)
            chk(nearest(32'(res_data[q]), val_q[0][q], out_fp32),
                $sformatf("pixel %0d ipu %0d fp got %h want %g", pix_got, q, res_data[q], val_q[0][q]));
          else
            chk(res_data[q] == exp_q[0][q],
                $sformatf("pixel %0d ipu %0d int got %0d want %0d", pix_got, q, $signed(res_data[q]), $signed(exp_q[0][q])));
        end
        void'(exp_q.pop_front());
        void'(val_q.pop_front());
        pix_got++;
      end
    end
  end

  task automatic drain();
    int t = 0;
    while ((exp_q.size() != 0 || !idle) && t < 200000) begin @(negedge clk); t++; end
    chk(exp_q.size() == 0, "results missing");
  endtask

  initial begin
    for (int p = 0; p < P; p++) for (int i = 0; i < N; i++) step_act[p][i] = '0;
    for (int i = 0; i < N; i++) wb_data[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < 4; m++) begin
      case (m)
        0: begin a_type = DT_INT4; w_type = DT_INT4; a_signed = 1; w_signed = 1; end
        1: begin a_type = DT_FP16; w_type = DT_FP16; out_fp32 = 1; sw_prec = 6'd28; end
        2: begin a_type = DT_INT8; w_type = DT_INT4; a_signed = 0; w_signed = 1; end
        default: begin a_type = DT_FP16; w_type = DT_FP16; out_fp32 = 0; sw_prec = 6'd16; end
      endcase
      n_modes++;
      load_weights((m == 1) ? -14 : -4, (m == 1) ? 15 : 3);
      send_pixels(PIXELS, (m == 1) ? -14 : -4, (m == 1) ? 15 : 3);
      drain();
    end
    $display("multi-cycle=%0d bcast_stall=%0d sync_wait=%0d backpressure=%0d wloads=%0d modes=%0d pixels=%0d",
             n_multi, n_bstall, n_syncwait, n_backpress, n_wload, n_modes, pix_got);
    chk(n_multi > 0, "multi-cycle alignment never happened");
    chk(n_bstall > 0, "activation broadcast stall never happened");
    chk(n_syncwait > 0, "output synchronization wait never happened");
    chk(n_backpress > 0, "write-back back-pressure never happened");
    chk(n_modes > 1 && n_wload > 1, "mode switch / weight reload never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
