// weight_buffer: on-chip store of the weight matrices W^l of all layers.
//
// ROWS words, each one row of W (COLS weights of 32 bits). Layer l's matrix
// starts at a row chosen by the host (layer_cfg_t.w_base). The row-per-word
// layout lets the controller load one systolic PE row per cycle; the layout is
// this design's choice. One asynchronous read port and one write port; a write
// lands on the clock edge. Contents are not reset: the host loads the weights
// before training.
module weight_buffer
  import hitgnn_pkg::*;
#(
  parameter int ROWS = 1024,
  parameter int COLS = 128
) (
  input  logic                    clk,
  input  logic [$clog2(ROWS)-1:0] raddr,
  output data_t [COLS-1:0]        rdata,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  data_t [COLS-1:0]        wdata
);
  data_t [COLS-1:0] mem [ROWS];

  assign rdata = mem[raddr];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end
endmodule
