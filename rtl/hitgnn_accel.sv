// hitgnn_accel: the GNN training accelerator of one FPGA (one die with its own
// DDR channel) in a CPU + multi-FPGA system. It computes GNN layers over
// sampled mini-batches.
//
// Every FPGA trains on its own mini-batch; the host samples the mini-batches
// and assigns them to FPGAs. For each layer the accelerator computes
// h_v = sigma( (sum over sampled edges (u,v) of coef * h_u) * W^l ) for every
// destination vertex v of the layer.
//   * feature_loader fetches each source vertex's feature slice from the local
//     DDR when the host stored it there, and otherwise asks the host directly.
//     No feature is read from another FPGA.
//   * aggregate_kernel (feature duplicator, N scatter PEs, butterfly routing
//     network, N gather PEs with two-bank on-chip memory) sums the neighbour
//     features, 16 features per pass.
//   * update_kernel, a 16 x COLS systolic array, multiplies each aggregated
//     slice by its 16 rows of W^l and accumulates across slices. It then
//     applies ReLU.
//   * weight_buffer holds W^l of every layer; weight_update applies the host's
//     averaged gradient after each synchronous-SGD iteration.
//   * layer_controller overlaps the aggregation of slice k+1 with the update
//     of slice k.
// The defaults N = 8 and SIMD x COLS = 2048 are the (n, m) = (8, 2048)
// configuration chosen by the design-space exploration.
//
// External parts appear as ports: the local DDR read port, the host fetch
// port over PCIe, and the mini-batch reader that streams the source vertex
// list and the edge groups once per pass (on pass_start). The layer output
// stream goes to DDR or the host. Weight rows are written from the host, and
// the averaged gradient rows arrive from it. Weight writes and gradient rows
// are taken only while no layer is running (busy low). The event outputs
// pulse for local and remote feature fetches, routing conflicts,
// aggregation/update overlap and weight-row updates.
module hitgnn_accel
  import hitgnn_pkg::*;
#(
  parameter int N          = 8,
  parameter int COLS       = 128,
  parameter int MAX_DST    = 16384,
  parameter int W_ROWS     = 1024,
  parameter int FIFO_DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // layer control
  input  layer_cfg_t                 cfg,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // mini-batch reader
  output logic                       pass_start,
  output logic [SLICE_W-1:0]         pass_slice,
  input  logic                       vtx_valid,
  input  vtx_entry_t                 vtx,
  output logic                       vtx_ready,
  input  logic                       grp_valid,
  input  edge_t [N-1:0]              grp_edge,
  input  logic  [N-1:0]              grp_mask,
  input  logic                       grp_last,
  output logic                       grp_ready,
  // local DDR read port
  output logic                       ddr_req_valid,
  output logic [DDR_AW-1:0]          ddr_req_addr,
  input  logic                       ddr_req_ready,
  input  logic                       ddr_resp_valid,
  input  fvec_t                      ddr_resp_data,
  // host fetch port (PCIe)
  output logic                       host_req_valid,
  output host_req_t                  host_req,
  input  logic                       host_req_ready,
  input  logic                       host_resp_valid,
  input  fvec_t                      host_resp_data,
  // layer output
  output logic                       out_valid,
  output logic [DST_W-1:0]           out_vidx,
  output data_t [COLS-1:0]           out_vec,
  input  logic                       out_ready,
  // weights from host and gradient-based update
  input  logic                       w_wr_en,
  input  logic [$clog2(W_ROWS)-1:0]  w_wr_row,
  input  data_t [COLS-1:0]           w_wr_data,
  input  logic                       grad_valid,
  input  logic [$clog2(W_ROWS)-1:0]  grad_row,
  input  data_t [COLS-1:0]           grad_vec,
  output logic                       grad_ready,
  input  logic [4:0]                 lr_shift,
  // events
  output logic                       ev_local_fetch,
  output logic                       ev_remote_fetch,
  output logic                       ev_conflict,
  output logic                       ev_overlap,
  output logic                       ev_weight_update
);
  localparam int RAW = $clog2(W_ROWS);

  // feature loader <-> aggregate kernel
  logic  feat_valid, feat_ready, ld_busy;
  fvec_t feat;

  feature_loader #(.FIFO_DEPTH(FIFO_DEPTH)) u_loader (
    .clk, .rst_n, .slice(pass_slice),
    .vtx_valid, .vtx, .vtx_ready,
    .ddr_req_valid, .ddr_req_addr, .ddr_req_ready, .ddr_resp_valid, .ddr_resp_data,
    .host_req_valid, .host_req, .host_req_ready, .host_resp_valid, .host_resp_data,
    .feat_valid, .feat, .feat_ready,
    .local_fetch(ev_local_fetch), .remote_fetch(ev_remote_fetch), .busy(ld_busy)
  );

  logic acc_bank, src_done, agg_busy, clr_en;
  logic [$clog2(MAX_DST/N)-1:0] clr_addr;
  logic drain_en, drain_bank;
  logic [DST_W-1:0] drain_vidx;
  fvec_t drain_data;

  aggregate_kernel #(.N(N), .MAX_DST(MAX_DST)) u_agg (
    .clk, .rst_n,
    .feat_valid, .feat, .feat_ready,
    .grp_valid, .grp_edge, .grp_mask, .grp_last, .grp_ready,
    .acc_bank, .drain_en, .drain_bank, .drain_vidx, .drain_data,
    .clr_en, .clr_addr,
    .busy(agg_busy), .src_done, .conflict(ev_conflict)
  );

  // update kernel and weights
  logic uk_in_valid, uk_in_first, uk_busy;
  logic w_load_en, w_load_zero;
  logic [$clog2(SIMD)-1:0] w_load_row;
  logic [RAW-1:0] ctl_raddr, wu_raddr, wb_raddr, wu_waddr, wb_waddr;
  data_t [COLS-1:0] wb_rdata, wu_wdata, wb_wdata, w_load_data;
  logic wu_we, wb_we;

  assign w_load_data = w_load_zero ? '0 : wb_rdata;

  update_kernel #(.COLS(COLS), .MAX_DST(MAX_DST)) u_upd (
    .clk, .rst_n,
    .w_load_en, .w_load_row, .w_load_data,
    .in_valid(uk_in_valid), .in_vec(drain_data), .in_vidx(drain_vidx), .in_first(uk_in_first),
    .rd_vidx(out_vidx), .relu(cfg.relu), .f_out(cfg.f_out), .rd_vec(out_vec),
    .busy(uk_busy)
  );

  layer_controller #(.N(N), .MAX_DST(MAX_DST), .ROWS(W_ROWS)) u_ctl (
    .clk, .rst_n, .cfg, .start, .busy, .done,
    .pass_start, .pass_slice, .acc_bank, .src_done, .agg_busy(agg_busy || ld_busy),
    .clr_en, .clr_addr,
    .drain_en, .drain_bank, .drain_vidx, .uk_in_valid, .uk_in_first, .uk_busy,
    .wb_raddr(ctl_raddr), .w_load_en, .w_load_row, .w_load_zero,
    .out_valid, .out_vidx, .out_ready, .overlap(ev_overlap)
  );

  // weight update runs only between layers, and yields to host weight writes
  weight_update #(.ROWS(W_ROWS), .COLS(COLS)) u_wu (
    .enable(!busy && !w_wr_en),
    .grad_valid, .grad_row, .grad_vec, .grad_ready, .lr_shift,
    .wb_raddr(wu_raddr), .wb_rdata, .wb_we(wu_we), .wb_waddr(wu_waddr), .wb_wdata(wu_wdata),
    .updated(ev_weight_update)
  );

  assign wb_raddr = busy ? ctl_raddr : wu_raddr;
  assign wb_we    = (w_wr_en && !busy) || wu_we;
  assign wb_waddr = w_wr_en ? w_wr_row  : wu_waddr;
  assign wb_wdata = w_wr_en ? w_wr_data : wu_wdata;

  weight_buffer #(.ROWS(W_ROWS), .COLS(COLS)) u_wb (
    .clk, .raddr(wb_raddr), .rdata(wb_rdata), .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata)
  );
endmodule
