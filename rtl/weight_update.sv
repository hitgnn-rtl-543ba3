// weight_update: applies the averaged gradient broadcast by the host to the
// local copy of the weights, W[row] <- W[row] - lr * G[row], lane by lane.
//
// After back-propagation every FPGA sends its gradients to the host. The host
// averages them and broadcasts the average back. Each FPGA then updates its
// weights, which keeps all copies identical (synchronous SGD). The learning
// rate is 2^-lr_shift, applied as an arithmetic right shift of the gradient;
// a power-of-two rate is this design's choice.
//
// Timing: one gradient row per cycle while enable is high. The row is read
// from the weight buffer through the asynchronous read port, and the new value
// is written on the same clock edge. grad_ready equals enable. updated pulses
// for each row written.
module weight_update
  import hitgnn_pkg::*;
#(
  parameter int ROWS = 1024,
  parameter int COLS = 128
) (
  input  logic                    enable,
  input  logic                    grad_valid,
  input  logic [$clog2(ROWS)-1:0] grad_row,
  input  data_t [COLS-1:0]        grad_vec,
  output logic                    grad_ready,
  input  logic [4:0]              lr_shift,
  output logic [$clog2(ROWS)-1:0] wb_raddr,
  input  data_t [COLS-1:0]        wb_rdata,
  output logic                    wb_we,
  output logic [$clog2(ROWS)-1:0] wb_waddr,
  output data_t [COLS-1:0]        wb_wdata,
  output logic                    updated
);
  assign grad_ready = enable;
  assign wb_raddr   = grad_row;
  assign wb_waddr   = grad_row;
  assign wb_we      = enable && grad_valid;
  assign updated    = wb_we;

  always_comb begin
    for (int c = 0; c < COLS; c++) wb_wdata[c] = wb_rdata[c] - (grad_vec[c] >>> lr_shift);
  end
endmodule
