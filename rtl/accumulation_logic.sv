// accumulation_logic: non-normalized floating/fixed point accumulator of one IPU.
//
// Holds a signed ACC_W = 33+T+L bit value and an 8-bit exponent; the value it stands for is
// acc * 2^(exp-30). The adder-tree sum (W+1+T bits) gets 33-W zero bits appended, which
// lines the product bits up with the 30 fraction bits, and is sign-extended to ACC_W.
// This term X belongs to exponent e_t = max_exp - shamt, where shamt is the nibble shift
// 4*((Ka-i-1)+(Kb-j-1)) plus the multi-cycle shift k*sp. In FP mode:
//   e_t <= exp : acc += X >>> (exp - e_t)                       (term aligned)
//   e_t >  exp : acc  = X + (acc >>> (e_t - exp)), exp = e_t    (swap, then one right shift)
// so one right shifter serves both cases, with the swap unit choosing what goes through it.
// In INT mode exp stays 0 and acc += X >>> shamt. `clear` marks the first term of a new
// output pixel: the old contents are discarded and the term is taken as is.
// acc_nxt/exp_nxt show the value after this cycle's update (used to hand off a finished
// pixel in the same cycle); acc/exp update on the clock when en is high.
module accumulation_logic
  import mp_pkg::*;
#(
  parameter int unsigned W = 16,
  parameter int unsigned T = 4,
  parameter int unsigned L = 4,
  localparam int unsigned ACC_W = 33 + T + L
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear,
  input  logic                    int_mode,
  input  logic signed [W+T:0]     tree_sum,
  input  logic signed [EXP_W-1:0] max_exp,
  input  logic [EXP_W-1:0]        shamt,
  output logic signed [ACC_W-1:0] acc,
  output logic signed [EXP_W-1:0] exp,
  output logic signed [ACC_W-1:0] acc_nxt,
  output logic signed [EXP_W-1:0] exp_nxt
);

  logic signed [ACC_W-1:0] x, a_base, swap_a, swap_b, shifted;
  logic signed [EXP_W+1:0] e_t, e_acc, ediff;
  logic                    swap;
  logic [EXP_W+1:0]        amt;

  always_comb begin
    x      = {{(L-1){tree_sum[W+T]}}, tree_sum, {(33-W){1'b0}}};
    a_base = clear ? '0 : acc;
    e_t    = (EXP_W+2)'(max_exp) - (EXP_W+2)'(shamt);
    e_acc  = (EXP_W+2)'(exp);
    swap   = 1'b0;
    ediff  = '0;
    if (int_mode) begin
      amt = (EXP_W+2)'(shamt);
    end else if (clear) begin
      amt = '0;
    end else begin
      swap  = (e_t > e_acc);
      ediff = swap ? (e_t - e_acc) : (e_acc - e_t);
      amt   = ediff;
    end
    // swap unit: the side with the smaller exponent goes through the right shifter
    swap_a  = swap ? x : a_base;
    swap_b  = swap ? a_base : x;
    if (amt >= (EXP_W+2)'(ACC_W)) shifted = {ACC_W{swap_b[ACC_W-1]}};
    else                          shifted = swap_b >>> amt;
    acc_nxt = swap_a + shifted;
    if (int_mode)             exp_nxt = '0;
    else if (clear || swap)   exp_nxt = EXP_W'(e_t);
    else                      exp_nxt = exp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      exp <= '0;
    end else if (en) begin
      acc <= acc_nxt;
      exp <= exp_nxt;
    end
  end

endmodule
