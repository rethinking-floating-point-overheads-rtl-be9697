// ipu_cluster: G MC-IPUs that step through nibble iterations in lock step.
//
// Each cluster has a local input buffer (FIFO of operations: the G activation vectors of its
// IPUs, a weight slot and an end-of-pixel flag), a sequencer, and a local output buffer
// (FIFO of finished pixels: accumulator and exponent of each IPU). Because clusters have
// their own buffers they run independently: an IPU that needs several cycles to align a
// nibble iteration stalls only the IPUs of its own cluster.
// Sequencer: an operation is Ka*Kb nibble iterations, run from the most significant pair
// (i = Ka-1, j = Kb-1) down to (0, 0). An iteration ends in the cycle in which every EHU of
// the cluster reports done. In the last cycle of an operation the next one is taken from the
// input buffer, so INT4 x INT4 runs one operation per cycle. When the finished operation
// carries the end-of-pixel flag, the accumulators' values after that cycle are pushed into
// the output buffer and the next operation starts a fresh pixel; that last cycle waits while
// the output buffer is full.
// Handshakes: in_valid/in_ready push the input buffer; out_valid/out_ready pop the output
// buffer (first-word fall-through). Buffer depths, entry formats and the iteration order are
// this design's choices.
module ipu_cluster
  import mp_pkg::*;
#(
  parameter int unsigned N = 16,
  parameter int unsigned W = 16,
  parameter int unsigned D = 9,
  parameter int unsigned G = 1,
  parameter int unsigned IBUF_DEPTH = 4,
  parameter int unsigned OBUF_DEPTH = 4,
  localparam int unsigned T  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned L  = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned SW = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned ACC_W = 33 + T + L
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  dtype_t                  a_type,
  input  logic                    a_signed,
  input  dtype_t                  w_type,
  input  logic                    w_signed,
  input  logic [DIFF_W-1:0]       sw_prec,
  // weight buffer fill, one IPU at a time
  input  logic [G-1:0]            wbuf_we,
  input  logic [SW-1:0]           wbuf_slot,
  input  logic [DATA_W-1:0]       wbuf_data [N],
  // local input buffer
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [DATA_W-1:0]       in_act [G][N],
  input  logic [SW-1:0]           in_slot,
  input  logic                    in_last,
  // local output buffer
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [ACC_W-1:0] out_acc [G],
  output logic signed [EXP_W-1:0] out_exp [G],
  // status
  output logic                    busy,
  output logic                    multi_cycle
);
  localparam int unsigned IN_W  = G * N * DATA_W + SW + 1;
  localparam int unsigned OUT_W = G * (ACC_W + EXP_W);

  // ---- local input buffer ----
  logic [IN_W-1:0] in_word, ib_word;
  logic            ib_full, ib_empty, ib_pop;

  always_comb begin
    in_word = '0;
    for (int g = 0; g < G; g++)
      for (int i = 0; i < N; i++) in_word[(g*N+i)*DATA_W +: DATA_W] = in_act[g][i];
    in_word[G*N*DATA_W +: SW] = in_slot;
    in_word[IN_W-1]           = in_last;
  end

  sync_fifo #(.WIDTH(IN_W), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk(clk), .rst_n(rst_n), .push(in_valid), .wdata(in_word), .pop(ib_pop),
    .rdata(ib_word), .full(ib_full), .empty(ib_empty)
  );
  assign in_ready = !ib_full;

  logic [DATA_W-1:0] ld_act [G][N];
  always_comb begin
    for (int g = 0; g < G; g++)
      for (int i = 0; i < N; i++) ld_act[g][i] = ib_word[(g*N+i)*DATA_W +: DATA_W];
  end
  wire [SW-1:0] ld_slot = ib_word[G*N*DATA_W +: SW];
  wire          ld_last = ib_word[IN_W-1];

  // ---- sequencer ----
  logic       busy_q, last_q, fresh_q, iter_start_q;
  logic [1:0] i_q, j_q;
  logic [2:0] ka, kb;
  logic       ob_full;
  logic [G-1:0] done_v, multi_v;
  logic       all_done, final_iter, en, op_end, load;

  always_comb begin
    ka         = dtype_nibbles(a_type);
    kb         = dtype_nibbles(w_type);
    all_done   = &done_v;
    final_iter = (i_q == 2'd0) && (j_q == 2'd0);
    en         = busy_q && !(last_q && final_iter && ob_full);
    op_end     = en && all_done && final_iter;
    ib_pop     = !ib_empty && (!busy_q || op_end);
    load       = ib_pop;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q       <= 1'b0;
      last_q       <= 1'b0;
      fresh_q      <= 1'b1;
      iter_start_q <= 1'b1;
      i_q          <= '0;
      j_q          <= '0;
    end else begin
      if (en) begin
        iter_start_q <= all_done;
        if (all_done && !final_iter) begin
          if (j_q == 2'd0) begin
            j_q <= 2'(kb - 1);
            i_q <= i_q - 1'b1;
          end else begin
            j_q <= j_q - 1'b1;
          end
        end
      end
      if (op_end) begin
        busy_q  <= 1'b0;
        fresh_q <= last_q;
      end
      if (load) begin
        busy_q       <= 1'b1;
        last_q       <= ld_last;
        i_q          <= 2'(ka - 1);
        j_q          <= 2'(kb - 1);
        iter_start_q <= 1'b1;
      end
    end
  end

  // clear is asserted on the first cycle of the first operation of a pixel
  logic first_cycle_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    first_cycle_q <= 1'b0;
    else if (load) first_cycle_q <= 1'b1;
    else if (en)   first_cycle_q <= 1'b0;
  end
  wire clear = first_cycle_q && fresh_q;

  // ---- the MC-IPUs ----
  logic signed [ACC_W-1:0] acc_nxt [G];
  logic signed [EXP_W-1:0] ex_nxt [G];

  for (genvar g = 0; g < G; g++) begin : g_ipu
    mc_ipu #(.N(N), .W(W), .D(D)) u_ipu (
      .clk(clk), .rst_n(rst_n),
      .a_type(a_type), .a_signed(a_signed), .w_type(w_type), .w_signed(w_signed),
      .sw_prec(sw_prec),
      .wbuf_we(wbuf_we[g]), .wbuf_slot(wbuf_slot), .wbuf_data(wbuf_data),
      .load(load), .load_act(ld_act[g]), .load_slot(ld_slot),
      .en(en), .iter_start(iter_start_q), .nib_i(i_q), .nib_j(j_q), .clear(clear),
      .done(done_v[g]), .multi(multi_v[g]),
      .acc(), .exp(), .acc_nxt(acc_nxt[g]), .exp_nxt(ex_nxt[g])
    );
  end

  // ---- local output buffer ----
  logic [OUT_W-1:0] ob_in, ob_out;
  logic             ob_empty;

  always_comb begin
    for (int g = 0; g < G; g++) begin
      ob_in[g*(ACC_W+EXP_W) +: ACC_W]         = acc_nxt[g];
      ob_in[g*(ACC_W+EXP_W) + ACC_W +: EXP_W] = ex_nxt[g];
      out_acc[g] = ob_out[g*(ACC_W+EXP_W) +: ACC_W];
      out_exp[g] = ob_out[g*(ACC_W+EXP_W) + ACC_W +: EXP_W];
    end
  end

  sync_fifo #(.WIDTH(OUT_W), .DEPTH(OBUF_DEPTH)) u_obuf (
    .clk(clk), .rst_n(rst_n), .push(op_end && last_q), .wdata(ob_in), .pop(out_ready),
    .rdata(ob_out), .full(ob_full), .empty(ob_empty)
  );
  assign out_valid = !ob_empty;

  assign busy        = busy_q || !ib_empty;
  assign multi_cycle = |multi_v;

  // a finished pixel is never pushed into a full output buffer
  assert property (@(posedge clk) disable iff (!rst_n) (op_end && last_q) |-> !ob_full);

endmodule
