// activation_buffer: staging buffer between the activation bank and the IPU clusters.
//
// Holds DEPTH tile steps (for every output position the activation vector, plus the weight
// slot and the end-of-pixel flag) and broadcasts the oldest one to the local input buffers
// of all clusters at once. Broadcasting stops while any cluster buffer is full, which stalls
// the whole tile; `stall` reports such cycles. fill_valid/fill_ready is a valid/ready push
// from the bank side. The FIFO organisation and depth are this design's choices.
module activation_buffer #(
  parameter int unsigned WIDTH = 1029,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             fill_valid,
  output logic             fill_ready,
  input  logic [WIDTH-1:0] fill_data,
  input  logic             any_full,
  output logic             bcast_valid,
  output logic [WIDTH-1:0] bcast_data,
  output logic             stall
);
  logic full, empty;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(fill_valid), .wdata(fill_data), .pop(bcast_valid),
    .rdata(bcast_data), .full(full), .empty(empty)
  );

  assign fill_ready  = !full;
  assign bcast_valid = !empty && !any_full;
  assign stall       = !empty && any_full;

endmodule
