// mc_ipu: multi-cycle mixed-precision inner product unit, MC-IPU(W), with N inputs.
//
// Datapath per cycle: for nibble pair (i, j) every lane multiplies nibble i of its activation
// by nibble j of its weight (5b x 5b signed), the local shifter aligns the product by the
// shift the EHU gives and the AND mask drops products outside the current partition, the
// adder tree sums the N lanes, and the accumulation logic adds the sum into the accumulator
// shifted by the nibble significance plus the EHU's shared shift k*(W-9).
// An inner-product (IP) operation: `load` latches N activations and a weight-buffer slot and
// lets the EHU compute exponent differences. The caller then runs Ka*Kb nibble iterations;
// each starts with iter_start and lasts until done (one cycle in INT mode and whenever all
// alignments are below W-9). en executes a cycle; clear marks the first cycle of a new pixel.
// Interface timing: load acts on the clock edge; all other controls refer to the current
// cycle; acc_nxt is the accumulator value after the current cycle.
// Beyond the architecture description: products are kept as 10-bit signed values (one sign
// bit more than the 9 bits drawn) so that (-16)*(-16) from two FP16 nibbles is exact;
// FP mode is used when either operand type is FP16, and mixing an INT with an FP16 operand is
// not supported (the INT operand would be read as FP16).
module mc_ipu
  import mp_pkg::*;
#(
  parameter int unsigned N = 16,
  parameter int unsigned W = 16,
  parameter int unsigned D = 9,
  localparam int unsigned T  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned L  = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned SW = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned ACC_W = 33 + T + L
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration (static while operations run)
  input  dtype_t                  a_type,
  input  logic                    a_signed,
  input  dtype_t                  w_type,
  input  logic                    w_signed,
  input  logic [DIFF_W-1:0]       sw_prec,
  // weight buffer fill
  input  logic                    wbuf_we,
  input  logic [SW-1:0]           wbuf_slot,
  input  logic [DATA_W-1:0]       wbuf_data [N],
  // operation load
  input  logic                    load,
  input  logic [DATA_W-1:0]       load_act [N],
  input  logic [SW-1:0]           load_slot,
  // per-cycle control
  input  logic                    en,
  input  logic                    iter_start,
  input  logic [1:0]              nib_i,
  input  logic [1:0]              nib_j,
  input  logic                    clear,
  // results
  output logic                    done,
  output logic                    multi,
  output logic signed [ACC_W-1:0] acc,
  output logic signed [EXP_W-1:0] exp,
  output logic signed [ACC_W-1:0] acc_nxt,
  output logic signed [EXP_W-1:0] exp_nxt
);
  initial begin
    assert (W >= 10 && W <= 33) else $error("mc_ipu: W must be in 10..33");
  end
  localparam int unsigned SP = W - 9;  // safe precision

  wire fp_mode = (a_type == DT_FP16) || (w_type == DT_FP16);

  // ---- operand registers ----
  // The weight buffer is read when an operation is loaded; activations and weights are then
  // held in operand registers, so the next operation can be loaded in the last cycle of the
  // current one.
  logic [DATA_W-1:0] act_q [N], w_q [N];
  logic [DATA_W-1:0] wrd [N];

  weight_buffer #(.N(N), .D(D)) u_wbuf (
    .clk(clk), .we(wbuf_we), .wslot(wbuf_slot), .wdata(wbuf_data),
    .rslot(load_slot), .rdata(wrd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        act_q[i] <= '0;
        w_q[i]   <= '0;
      end
    end else if (load) begin
      act_q <= load_act;
      w_q   <= wrd;
    end
  end

  // ---- operand decomposition: incoming (exponents for the EHU) and held (nibbles) ----
  logic signed [NIB_W-1:0] an [N][MAX_NIBS], wn [N][MAX_NIBS];
  // Two decomposers per lane: the load-side pair (on the incoming words) only feeds the EHU
  // exponents and the operand-side pair only feeds nibbles, so an_in/wn_in and ae_q/we_q
  // are left unused and synthesis removes that logic.
  logic signed [NIB_W-1:0] an_in [N][MAX_NIBS], wn_in [N][MAX_NIBS];
  logic signed [EXP_W-1:0] ae_in [N], we_in [N], ae_q [N], we_q [N];

  for (genvar g = 0; g < N; g++) begin : g_dec
    operand_decomposer u_a_in (.data(load_act[g]), .dtype(a_type), .is_signed(a_signed),
                               .nib(an_in[g]), .exp(ae_in[g]));
    operand_decomposer u_w_in (.data(wrd[g]), .dtype(w_type), .is_signed(w_signed),
                               .nib(wn_in[g]), .exp(we_in[g]));
    operand_decomposer u_a    (.data(act_q[g]), .dtype(a_type), .is_signed(a_signed),
                               .nib(an[g]), .exp(ae_q[g]));
    operand_decomposer u_w    (.data(w_q[g]), .dtype(w_type), .is_signed(w_signed),
                               .nib(wn[g]), .exp(we_q[g]));
  end

  // ---- EHU ----
  logic signed [EXP_W-1:0] max_exp;
  logic [DIFF_W-1:0]       lsh [N];
  logic [N-1:0]            mask;
  logic [EXP_W-1:0]        extra_sh;

  ehu #(.N(N), .SP(SP)) u_ehu (
    .clk(clk), .rst_n(rst_n), .load(load), .a_exp(ae_in), .w_exp(we_in), .sw_prec(sw_prec),
    .max_exp(max_exp), .iter_start(iter_start), .step(en), .lshift(lsh), .mask(mask),
    .extra_sh(extra_sh), .done(done)
  );

  // ---- lanes: multiplier, local shifter with AND mask ----
  logic signed [PROD_W-1:0] prod [N];
  logic signed [W:0]        lane [N];

  for (genvar g = 0; g < N; g++) begin : g_lane
    assign prod[g] = PROD_W'(an[g][nib_i]) * PROD_W'(wn[g][nib_j]);
    local_shifter #(.W(W)) u_sh (.prod(prod[g]), .shamt(lsh[g]), .mask(mask[g]), .out(lane[g]));
  end

  logic signed [W+T:0] tree_sum;
  adder_tree #(.N(N), .IW(W+1)) u_tree (.in(lane), .sum(tree_sum));

  // ---- nibble significance shift ----
  logic [2:0]       ka, kb;
  logic [EXP_W-1:0] nib_sh, acc_sh;

  always_comb begin
    ka     = dtype_nibbles(a_type);
    kb     = dtype_nibbles(w_type);
    nib_sh = EXP_W'(4 * ((int'(ka) - 1 - int'(nib_i)) + (int'(kb) - 1 - int'(nib_j))));
    acc_sh = nib_sh + extra_sh;
  end

  accumulation_logic #(.W(W), .T(T), .L(L)) u_acc (
    .clk(clk), .rst_n(rst_n), .en(en), .clear(clear), .int_mode(!fp_mode),
    .tree_sum(tree_sum), .max_exp(fp_mode ? max_exp : '0), .shamt(acc_sh),
    .acc(acc), .exp(exp), .acc_nxt(acc_nxt), .exp_nxt(exp_nxt)
  );

  assign multi = en && !done;

endmodule
