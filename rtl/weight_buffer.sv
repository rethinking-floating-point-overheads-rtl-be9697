// weight_buffer: weight-stationary operand store of one IPU.
//
// D slots, each holding one 16-bit weight for each of the N multipliers (the "depth" of the
// weight buffer is the number of weights kept per multiplier). Built from flip-flops. A whole
// slot is written in one cycle from the weight bank (we, wslot, wdata); the slot named by
// rslot is read combinationally. Slot indices >= D are ignored on write and read as zero.
module weight_buffer
  import mp_pkg::*;
#(
  parameter int unsigned N = 16,
  parameter int unsigned D = 9,
  localparam int unsigned SW = (D > 1) ? $clog2(D) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [SW-1:0]     wslot,
  input  logic [DATA_W-1:0] wdata [N],
  input  logic [SW-1:0]     rslot,
  output logic [DATA_W-1:0] rdata [N]
);
  logic [DATA_W-1:0] mem [D][N];

  always_ff @(posedge clk) begin
    if (we && (int'(wslot) < D)) mem[wslot] <= wdata;
  end

  always_comb begin
    for (int i = 0; i < N; i++) rdata[i] = (int'(rslot) < D) ? mem[rslot][i] : '0;
  end

endmodule
