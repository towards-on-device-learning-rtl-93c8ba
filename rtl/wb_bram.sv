// wb_bram: on-chip memory for the fixed input-layer parameters, the weight
// matrix W (MAX_L x MAX_IN doubles, word address j*MAX_IN + k) and the bias
// vector b (MAX_L doubles). The data loading module writes it through one
// write port; the training and the inference module each read it through a
// port of their own, so both can run at once. Reads are registered: data
// appears one clock after the address, as from a block RAM. The source
// places W and b in BRAM; the two-read-port organisation is this design's.
module wb_bram
  import oselm_pkg::*;
#(
  parameter int unsigned MAX_IN = 256,
  parameter int unsigned MAX_L  = 150,
  localparam int unsigned WAW = $clog2(MAX_IN * MAX_L),
  localparam int unsigned LAW = $clog2(MAX_L)
) (
  input  logic           clk,
  // write port (data loading module)
  input  logic           w_we,
  input  logic [WAW-1:0] w_waddr,
  input  logic           b_we,
  input  logic [LAW-1:0] b_waddr,
  input  fp64_t          wdata,
  // read port 0 (training module)
  input  logic [WAW-1:0] w_raddr0,
  input  logic [LAW-1:0] b_raddr0,
  output fp64_t          w_rdata0,
  output fp64_t          b_rdata0,
  // read port 1 (inference module)
  input  logic [WAW-1:0] w_raddr1,
  input  logic [LAW-1:0] b_raddr1,
  output fp64_t          w_rdata1,
  output fp64_t          b_rdata1
);
  fp64_t w_mem [MAX_IN*MAX_L];
  fp64_t b_mem [MAX_L];

  always_ff @(posedge clk) begin
    if (w_we) w_mem[w_waddr] <= wdata;
    if (b_we) b_mem[b_waddr] <= wdata;
    w_rdata0 <= w_mem[w_raddr0];
    b_rdata0 <= b_mem[b_raddr0];
    w_rdata1 <= w_mem[w_raddr1];
    b_rdata1 <= b_mem[b_raddr1];
  end
endmodule
