// tb_weight_bank: the host writes random words, then two loads from different bases are
// started; checks that busy covers exactly K*D cycles of buf_we, one word per cycle, with
// word base+k*D+s delivered as filter k slot s, and that load starts are ignored while busy.
module tb_weight_bank;
  import mp_pkg::*;
  localparam int N = 4, K = 3, D = 5, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_we = 0, load_start = 0, busy, buf_we;
  logic [5:0] host_addr = '0, load_base = '0;
  logic [DATA_W-1:0] host_data [N], buf_data [N];
  logic [1:0] buf_k;
  logic [2:0] buf_slot;
  logic [DATA_W-1:0] mem [DEPTH][N];
  int checks = 0, failures = 0;

  weight_bank #(.N(N), .K(K), .D(D), .DEPTH(DEPTH)) dut (.*);

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
    int base, n, cyc;
    bit seen [K][D];
    for (int i = 0; i < N; i++) host_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      host_we = 1; host_addr = 6'(a);
      for (int i = 0; i < N; i++) begin host_data[i] = 16'($urandom); mem[a][i] = host_data[i]; end
    end
    @(negedge clk); host_we = 0;
    for (int t = 0; t < 2; t++) begin
      base = (t == 0) ? 0 : 17;
      @(negedge clk); load_start = 1; load_base = 6'(base);
      @(negedge clk); load_start = 1; load_base = 6'(40);  // ignored: already busy
      n = 0; cyc = 0;
      for (int k = 0; k < K; k++) for (int s = 0; s < D; s++) seen[k][s] = 0;
      while (busy || n == 0) begin
        @(posedge clk); #1;
        load_start = 0;
        cyc++;
        if (buf_we) begin
          n++;
          chk(!seen[buf_k][buf_slot], "slot written once");
          seen[buf_k][buf_slot] = 1;
          for (int i = 0; i < N; i++)
            chk(buf_data[i] == mem[base + int'(buf_k) * D + int'(buf_slot)][i],
                $sformatf("data k%0d s%0d lane %0d", buf_k, buf_slot, i));
        end
        if (cyc > 100) break;
      end
      repeat (3) begin @(posedge clk); #1; if (buf_we) n++; end
      chk(n == K * D, $sformatf("load wrote %0d words", n));
      chk(cyc <= K * D + 3, $sformatf("load took %0d cycles", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
