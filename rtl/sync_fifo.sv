// sync_fifo: single-clock first-in first-out buffer used for the activation buffer and for
// the local input and output buffers of each IPU cluster.
//
// A circular array of DEPTH words of WIDTH bits with read and write pointers and an
// occupancy counter. push is ignored when full, pop when empty. The head word is visible
// combinationally on rdata while !empty (first-word fall-through), so a consumer can pop in
// the same cycle it looks at the data. Reset empties the buffer; the storage is not reset.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;
  logic [PW:0]      count;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full  = (count == (PW+1)'(DEPTH));
  assign empty = (count == '0);
  assign rdata = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == PW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == PW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

endmodule
