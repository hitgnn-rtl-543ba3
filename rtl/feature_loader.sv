// feature_loader: fetches the feature slice of every source vertex of the
// mini-batch, from the FPGA's local DDR when the feature is stored there and
// from the host CPU (over PCIe) when it is not.
//
// Sending a miss straight to the host, not to the FPGA that owns the vertex,
// is the data-communication scheme of the design: the host memory holds the
// whole feature matrix, so no FPGA-to-FPGA copy through shared host memory is
// needed. How a miss is detected is this design's choice. The host runtime
// writes, with each mini-batch vertex, a local flag and the DDR row of the
// feature (vtx_entry_t).
//
// Operation: each accepted vertex entry becomes one request on the DDR port
// (address row + slice) or on the host port ({vid, slice}). A one-bit order
// FIFO remembers which path each request took. Both paths must answer their own
// requests in order, one response per request, with no backpressure; the
// responses are parked in one FIFO per path. Per-path credits limit the
// requests in flight plus the parked responses to FIFO_DEPTH, so no response is
// ever lost. The output pops the path named at the head of the order FIFO, so
// slices leave in the order the vertices arrived.
//
// Timing: a vertex entry is accepted in the cycle its request is issued
// (vtx_ready follows the chosen port's ready). Output is combinational from the
// FIFO heads. local_fetch / remote_fetch pulse once per issued request.
module feature_loader
  import hitgnn_pkg::*;
#(
  parameter int FIFO_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SLICE_W-1:0] slice,
  // mini-batch source vertices
  input  logic               vtx_valid,
  input  vtx_entry_t         vtx,
  output logic               vtx_ready,
  // local DDR read port
  output logic               ddr_req_valid,
  output logic [DDR_AW-1:0]  ddr_req_addr,
  input  logic               ddr_req_ready,
  input  logic               ddr_resp_valid,
  input  fvec_t              ddr_resp_data,
  // host (PCIe) fetch port
  output logic               host_req_valid,
  output host_req_t          host_req,
  input  logic               host_req_ready,
  input  logic               host_resp_valid,
  input  fvec_t              host_resp_data,
  // feature slices, in vertex order
  output logic               feat_valid,
  output fvec_t              feat,
  input  logic               feat_ready,
  // events and status
  output logic               local_fetch,
  output logic               remote_fetch,
  output logic               busy
);
  localparam int CW = $clog2(FIFO_DEPTH) + 1;

  logic [CW-1:0] cred_ddr, cred_host;     // requests issued and not yet popped
  logic ord_in_ready, ord_valid, ord_head;
  logic dq_valid, hq_valid;
  fvec_t dq_data, hq_data;

  wire ddr_room  = cred_ddr  != CW'(FIFO_DEPTH);
  wire host_room = cred_host != CW'(FIFO_DEPTH);

  assign ddr_req_valid  = vtx_valid &&  vtx.local_hit && ddr_room  && ord_in_ready;
  assign host_req_valid = vtx_valid && !vtx.local_hit && host_room && ord_in_ready;
  assign ddr_req_addr   = vtx.row + DDR_AW'(slice);
  assign host_req.vid   = vtx.vid;
  assign host_req.slice = slice;

  wire ddr_issue  = ddr_req_valid  && ddr_req_ready;
  wire host_issue = host_req_valid && host_req_ready;
  assign vtx_ready    = ddr_issue || host_issue;
  assign local_fetch  = ddr_issue;
  assign remote_fetch = host_issue;

  // order FIFO: 0 = DDR, 1 = host
  sync_fifo #(.T(logic), .DEPTH(2*FIFO_DEPTH)) u_order (
    .clk, .rst_n,
    .in_valid(vtx_ready), .in_data(host_issue), .in_ready(ord_in_ready),
    .out_valid(ord_valid), .out_data(ord_head), .out_ready(feat_valid && feat_ready),
    .count()
  );

  wire pop_ddr  = feat_valid && feat_ready && !ord_head;
  wire pop_host = feat_valid && feat_ready &&  ord_head;

  logic dq_in_ready, hq_in_ready;
  sync_fifo #(.T(fvec_t), .DEPTH(FIFO_DEPTH)) u_ddr_q (
    .clk, .rst_n,
    .in_valid(ddr_resp_valid), .in_data(ddr_resp_data), .in_ready(dq_in_ready),
    .out_valid(dq_valid), .out_data(dq_data), .out_ready(pop_ddr), .count()
  );
  sync_fifo #(.T(fvec_t), .DEPTH(FIFO_DEPTH)) u_host_q (
    .clk, .rst_n,
    .in_valid(host_resp_valid), .in_data(host_resp_data), .in_ready(hq_in_ready),
    .out_valid(hq_valid), .out_data(hq_data), .out_ready(pop_host), .count()
  );

  assign feat_valid = ord_valid && (ord_head ? hq_valid : dq_valid);
  assign feat       = ord_head ? hq_data : dq_data;
  assign busy       = ord_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cred_ddr <= '0; cred_host <= '0;
    end else begin
      cred_ddr  <= cred_ddr  + CW'(ddr_issue)  - CW'(pop_ddr);
      cred_host <= cred_host + CW'(host_issue) - CW'(pop_host);
    end
  end

  // the credit scheme guarantees room for every response
  a_ddr_room:  assert property (@(posedge clk) disable iff (!rst_n) ddr_resp_valid  |-> dq_in_ready);
  a_host_room: assert property (@(posedge clk) disable iff (!rst_n) host_resp_valid |-> hq_in_ready);
endmodule
