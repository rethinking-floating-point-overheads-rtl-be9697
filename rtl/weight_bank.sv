// weight_bank: filter memory of the tile and the loader that fills the weight buffers.
//
// DEPTH words, each one weight slot of one filter (N weights of 16 bits). The host writes
// words through a simple write port. A load command copies K*D consecutive words starting at
// base into the weight buffers: word base + k*D + s goes to slot s of every IPU that computes
// output channel k. The memory has one synchronous read port; the loader issues one read per
// cycle and the data reaches the buffers one cycle later (buf_we/buf_k/buf_slot/buf_data).
// busy is high from the load command until the last word is delivered. The word layout and
// the copy order are this design's choices.
module weight_bank
  import mp_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned K     = 16,
  parameter int unsigned D     = 9,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned SW = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host write port
  input  logic              host_we,
  input  logic [AW-1:0]     host_addr,
  input  logic [DATA_W-1:0] host_data [N],
  // load command
  input  logic              load_start,
  input  logic [AW-1:0]     load_base,
  output logic              busy,
  // to the weight buffers
  output logic              buf_we,
  output logic [KW-1:0]     buf_k,
  output logic [SW-1:0]     buf_slot,
  output logic [DATA_W-1:0] buf_data [N]
);
  logic [DATA_W-1:0] mem [DEPTH][N];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_addr] <= host_data;
  end

  // loader: read address generation
  logic          run_q;
  logic [AW-1:0] addr_q;
  logic [KW-1:0] k_q;
  logic [SW-1:0] s_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      addr_q <= '0;
      k_q    <= '0;
      s_q    <= '0;
    end else if (load_start && !busy) begin
      run_q  <= 1'b1;
      addr_q <= load_base;
      k_q    <= '0;
      s_q    <= '0;
    end else if (run_q) begin
      addr_q <= addr_q + 1'b1;
      if (int'(s_q) == D - 1) begin
        s_q <= '0;
        k_q <= k_q + 1'b1;
        if (int'(k_q) == K - 1) run_q <= 1'b0;
      end else begin
        s_q <= s_q + 1'b1;
      end
    end
  end

  // synchronous read, delivered one cycle later
  always_ff @(posedge clk) begin
    if (run_q) buf_data <= mem[addr_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_we   <= 1'b0;
      buf_k    <= '0;
      buf_slot <= '0;
    end else begin
      buf_we   <= run_q;
      buf_k    <= k_q;
      buf_slot <= s_q;
    end
  end

  assign busy = run_q || buf_we;

endmodule
