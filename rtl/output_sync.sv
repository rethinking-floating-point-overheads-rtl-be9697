// output_sync: joins the output buffers of all clusters before write-back.
//
// Clusters finish pixels at different times. This unit waits until every cluster's output
// buffer holds a finished pixel, then pops all of them in the same cycle and presents one
// write-back word with the results of all NIPU = NCL*G IPUs, each rounded by a
// result_normalizer (FP16/FP32 or exact integer). wb_valid/wb_ready is a valid/ready
// handshake toward the activation bank; the buffers are popped when wb_ready is high.
// Combinational apart from the buffers it controls.
module output_sync
  import mp_pkg::*;
#(
  parameter int unsigned NCL   = 64,
  parameter int unsigned G     = 1,
  parameter int unsigned ACC_W = 41
) (
  input  logic [NCL-1:0]          cl_valid,
  output logic [NCL-1:0]          cl_pop,
  input  logic signed [ACC_W-1:0] cl_acc [NCL][G],
  input  logic signed [EXP_W-1:0] cl_exp [NCL][G],
  input  logic                    int_mode,
  input  logic [5:0]              int_shift,
  input  logic                    fp32,
  output logic                    wb_valid,
  input  logic                    wb_ready,
  output logic [ACC_W-1:0]        wb_data [NCL*G]
);
  assign wb_valid = &cl_valid;
  assign cl_pop   = {NCL{wb_valid && wb_ready}};

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    for (genvar g = 0; g < G; g++) begin : g_ipu
      result_normalizer #(.ACC_W(ACC_W)) u_norm (
        .acc(cl_acc[c][g]), .exp(cl_exp[c][g]), .int_mode(int_mode), .int_shift(int_shift),
        .fp32(fp32), .result(wb_data[c*G+g])
      );
    end
  end

endmodule
