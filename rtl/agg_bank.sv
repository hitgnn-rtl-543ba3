// agg_bank: one bank of a gather PE's on-chip result buffer.
//
// DEPTH words of one 512-bit feature slice each, held in an array (URAM or
// LUTRAM on an FPGA). The read port is asynchronous: rdata shows mem[raddr] in
// the same cycle. This lets the gather PE read, add and write back a word
// within one clock. The write port stores wdata at waddr on the clock edge
// when we is high. Contents are not reset; the controller clears the words a
// layer uses before the layer's first pass.
module agg_bank
  import hitgnn_pkg::*;
#(
  parameter int DEPTH = 2048
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output fvec_t                    rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  fvec_t                    wdata
);
  fvec_t mem [DEPTH];

  assign rdata = mem[raddr];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end
endmodule
