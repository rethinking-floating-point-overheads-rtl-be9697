// ehu: exponent handling unit of one multi-cycle IPU.
//
// Stages 1-4 work once per inner-product (IP) operation, combinationally on the exponents
// presented with `load`, and their results are registered when load is high:
//   1. product exponents c_i = a_exp_i + w_exp_i
//   2. max_exp = max(c_i)
//   3. alignment d_i = max_exp - c_i
//   4. products with d_i > sw_prec are dropped (never added).
// Stage 5 ("find cycle") runs every cycle of a nibble iteration. A nibble iteration starts
// with iter_start; in its k-th cycle (k = 0, 1, ...) every not-yet-served product with
// d_i < (k+1)*SP is selected: mask_i = 1, local shift m_i = d_i - k*SP (always < SP, the safe
// precision W-9, so the local shifter loses nothing) and it is marked served. The shared
// shift k*SP is reported on extra_sh for the accumulator. done says that after this cycle
// every product is served, so the iteration ends. `step` commits the cycle (serv bits, k).
// Partitions are visited one per cycle in order, empty ones included. In INT mode all
// exponents are zero, so every product is selected in cycle 0 with shift 0.
module ehu
  import mp_pkg::*;
#(
  parameter int unsigned N  = 16,
  parameter int unsigned SP = 7
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // stages 1-4
  input  logic                    load,
  input  logic signed [EXP_W-1:0] a_exp [N],
  input  logic signed [EXP_W-1:0] w_exp [N],
  input  logic [DIFF_W-1:0]       sw_prec,
  output logic signed [EXP_W-1:0] max_exp,
  // stage 5
  input  logic                    iter_start,
  input  logic                    step,
  output logic [DIFF_W-1:0]       lshift [N],
  output logic [N-1:0]            mask,
  output logic [EXP_W-1:0]        extra_sh,
  output logic                    done
);
  // ---- stages 1-4 (combinational on the load inputs) ----
  logic signed [EXP_W-1:0] c [N];
  logic signed [EXP_W-1:0] cmax;
  logic [DIFF_W-1:0]       d_new [N];
  logic [N-1:0]            keep_new;

  always_comb begin
    for (int i = 0; i < N; i++) c[i] = a_exp[i] + w_exp[i];
    cmax = c[0];
    for (int i = 1; i < N; i++) if (c[i] > cmax) cmax = c[i];
    for (int i = 0; i < N; i++) begin
      d_new[i]    = DIFF_W'(cmax - c[i]);
      keep_new[i] = (d_new[i] <= sw_prec);
    end
  end

  logic [DIFF_W-1:0] d [N];
  logic [N-1:0]      keep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_exp <= '0;
      keep    <= '0;
      for (int i = 0; i < N; i++) d[i] <= '0;
    end else if (load) begin
      max_exp <= cmax;
      keep    <= keep_new;
      for (int i = 0; i < N; i++) d[i] <= d_new[i];
    end
  end

  // ---- stage 5: find cycle ----
  logic [N-1:0]       serv_q;
  logic [EXP_W-1:0]   k_q;
  logic [N-1:0]       serv_cur, serv_nxt;
  logic [EXP_W-1:0]   k_cur;
  logic [EXP_W+1:0]   thr, base;

  always_comb begin
    k_cur    = iter_start ? '0 : k_q;
    serv_cur = iter_start ? ~keep : serv_q;
    base     = (EXP_W+2)'(k_cur) * (EXP_W+2)'(SP);
    thr      = base + (EXP_W+2)'(SP);
    extra_sh = EXP_W'(base);
    for (int i = 0; i < N; i++) begin
      mask[i]   = !serv_cur[i] && ((EXP_W+2)'(d[i]) < thr);
      lshift[i] = mask[i] ? DIFF_W'((EXP_W+2)'(d[i]) - base) : '0;
    end
    serv_nxt = serv_cur | mask;
    done     = &serv_nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      serv_q <= '0;
      k_q    <= '0;
    end else if (step) begin
      serv_q <= serv_nxt;
      k_q    <= k_cur + 1'b1;
    end
  end

endmodule
