// conv_tile: weight-stationary, inner-product based convolution tile with mixed precision.
//
// The tile is unrolled (C, K, Ho, Wo) = (N, K, Ho*Wo = P): NIPU = K*P MC-IPUs, IPU q = k*P + p
// computing output channel k at output position p from an N-channel slice of the input.
// Every IPU has its own weight buffer (D slots), filled from the weight bank by a load
// command. The activation buffer receives tile steps (P activation vectors, a weight slot and
// an end-of-pixel flag) and broadcasts each step to the local input buffers of the NCL = NIPU/G
// IPU clusters; it stops while any of them is full. Each cluster runs nibble iterations on
// its own, taking more cycles when an FP16 alignment exceeds the safe precision W-9. The
// output synchronizer waits until every cluster has finished the pixel, then emits one
// write-back word with all NIPU results rounded to FP16/FP32 (or the exact integer in INT
// mode) toward the activation bank.
// Interfaces: step_valid/step_ready and res_valid/res_ready are valid/ready handshakes; the
// host weight port writes the bank; wload_start copies K*D words into the weight buffers
// (only while the tile is idle). Configuration inputs are static while the tile works.
// The activation bank itself (its addressing of the convolution loops) lives outside.
module conv_tile
  import mp_pkg::*;
#(
  parameter int unsigned N = 16,
  parameter int unsigned K = 16,
  parameter int unsigned P = 4,
  parameter int unsigned W = 16,
  parameter int unsigned G = 1,
  parameter int unsigned D = 9,
  parameter int unsigned ABUF_DEPTH  = 4,
  parameter int unsigned IBUF_DEPTH  = 4,
  parameter int unsigned OBUF_DEPTH  = 4,
  parameter int unsigned WBANK_DEPTH = 512,
  localparam int unsigned NIPU  = K * P,
  localparam int unsigned NCL   = NIPU / G,
  localparam int unsigned T     = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned L     = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned SW    = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned AW    = (WBANK_DEPTH > 1) ? $clog2(WBANK_DEPTH) : 1,
  localparam int unsigned ACC_W = 33 + T + L
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  dtype_t            a_type,
  input  logic              a_signed,
  input  dtype_t            w_type,
  input  logic              w_signed,
  input  logic [DIFF_W-1:0] sw_prec,
  input  logic              out_fp32,
  // weight bank host port and load command
  input  logic              wb_we,
  input  logic [AW-1:0]     wb_addr,
  input  logic [DATA_W-1:0] wb_data [N],
  input  logic              wload_start,
  input  logic [AW-1:0]     wload_base,
  output logic              wload_busy,
  // tile steps from the activation bank side
  input  logic              step_valid,
  output logic              step_ready,
  input  logic [DATA_W-1:0] step_act [P][N],
  input  logic [SW-1:0]     step_slot,
  input  logic              step_last,
  // write-back toward the activation bank
  output logic              res_valid,
  input  logic              res_ready,
  output logic [ACC_W-1:0]  res_data [NIPU],
  // status
  output logic              idle,
  output logic              bcast_stall,
  output logic [NCL-1:0]    cl_multi
);
  initial begin
    assert (NIPU % G == 0) else $error("conv_tile: G must divide K*P");
  end

  localparam int unsigned STEP_W = P * N * DATA_W + SW + 1;

  // ---- weight bank and loader ----
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;
  logic              buf_we;
  logic [KW-1:0]     buf_k;
  logic [SW-1:0]     buf_slot;
  logic [DATA_W-1:0] buf_data [N];

  weight_bank #(.N(N), .K(K), .D(D), .DEPTH(WBANK_DEPTH)) u_wbank (
    .clk(clk), .rst_n(rst_n), .host_we(wb_we), .host_addr(wb_addr), .host_data(wb_data),
    .load_start(wload_start), .load_base(wload_base), .busy(wload_busy),
    .buf_we(buf_we), .buf_k(buf_k), .buf_slot(buf_slot), .buf_data(buf_data)
  );

  // ---- activation buffer ----
  logic [STEP_W-1:0] step_word, bc_word;
  logic              bc_valid, any_full;
  logic [NCL-1:0]    cl_in_ready;

  always_comb begin
    step_word = '0;
    for (int p = 0; p < P; p++)
      for (int i = 0; i < N; i++) step_word[(p*N+i)*DATA_W +: DATA_W] = step_act[p][i];
    step_word[P*N*DATA_W +: SW] = step_slot;
    step_word[STEP_W-1]         = step_last;
  end

  assign any_full = !(&cl_in_ready);

  activation_buffer #(.WIDTH(STEP_W), .DEPTH(ABUF_DEPTH)) u_abuf (
    .clk(clk), .rst_n(rst_n), .fill_valid(step_valid), .fill_ready(step_ready),
    .fill_data(step_word), .any_full(any_full), .bcast_valid(bc_valid), .bcast_data(bc_word),
    .stall(bcast_stall)
  );

  logic [DATA_W-1:0] bc_act [P][N];
  always_comb begin
    for (int p = 0; p < P; p++)
      for (int i = 0; i < N; i++) bc_act[p][i] = bc_word[(p*N+i)*DATA_W +: DATA_W];
  end
  wire [SW-1:0] bc_slot = bc_word[P*N*DATA_W +: SW];
  wire          bc_last = bc_word[STEP_W-1];

  // ---- clusters ----
  logic [NCL-1:0]          cl_out_valid, cl_pop, cl_busy;
  logic signed [ACC_W-1:0] cl_acc [NCL][G];
  logic signed [EXP_W-1:0] cl_exp [NCL][G];

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    logic [DATA_W-1:0] act [G][N];
    logic [G-1:0]      wbe;
    for (genvar g = 0; g < G; g++) begin : g_ipu
      localparam int unsigned Q = c * G + g;
      assign act[g] = bc_act[Q % P];
      assign wbe[g] = buf_we && (int'(buf_k) == int'(Q / P));
    end
    ipu_cluster #(.N(N), .W(W), .D(D), .G(G), .IBUF_DEPTH(IBUF_DEPTH),
                  .OBUF_DEPTH(OBUF_DEPTH)) u_cl (
      .clk(clk), .rst_n(rst_n),
      .a_type(a_type), .a_signed(a_signed), .w_type(w_type), .w_signed(w_signed),
      .sw_prec(sw_prec),
      .wbuf_we(wbe), .wbuf_slot(buf_slot), .wbuf_data(buf_data),
      .in_valid(bc_valid), .in_ready(cl_in_ready[c]), .in_act(act), .in_slot(bc_slot),
      .in_last(bc_last),
      .out_valid(cl_out_valid[c]), .out_ready(cl_pop[c]), .out_acc(cl_acc[c]),
      .out_exp(cl_exp[c]), .busy(cl_busy[c]), .multi_cycle(cl_multi[c])
    );
  end

  // ---- output synchronization and rounding ----
  logic [2:0] ka, kb;
  logic       int_mode;
  logic [5:0] int_shift;
  always_comb begin
    ka        = dtype_nibbles(a_type);
    kb        = dtype_nibbles(w_type);
    int_mode  = (a_type != DT_FP16) && (w_type != DT_FP16);
    int_shift = 6'(24 - 4 * (int'(ka) + int'(kb) - 2));
  end

  output_sync #(.NCL(NCL), .G(G), .ACC_W(ACC_W)) u_osync (
    .cl_valid(cl_out_valid), .cl_pop(cl_pop), .cl_acc(cl_acc), .cl_exp(cl_exp),
    .int_mode(int_mode), .int_shift(int_shift), .fp32(out_fp32),
    .wb_valid(res_valid), .wb_ready(res_ready), .wb_data(res_data)
  );

  assign idle = !wload_busy && (step_ready && !bc_valid && !bcast_stall) && !(|cl_busy);

endmodule
