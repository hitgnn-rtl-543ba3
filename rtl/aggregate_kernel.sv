// aggregate_kernel: scatter-gather aggregation of one 16-feature slice of a GNN
// layer, a_v = sum over edges (u,v) of coef(u,v) * h_u.
//
// Structure, following the kernel's block diagram: the feature duplicator
// gives the current source feature slice to N scatter PEs, each with one edge
// of that source. The scatter PEs weight the slice by their edge's coefficient.
// A butterfly routing network delivers each update to gather PE dst mod N.
// Each gather PE adds the update into its two-bank on-chip memory at word
// dst / N.
//
// Throughput: up to N edges per cycle, each 16 lanes wide. The aggregation
// compute time of a slice pass is therefore |A| / N cycles when nothing
// stalls. It grows when several edges of one group are steered to the same
// network output (conflict) or when the feature fetch lags.
//
// Control: acc_bank selects the bank being summed into. The drain port
// (drain_en, drain_bank, drain_vidx) reads and clears vertex drain_vidx in the
// other bank for the update kernel, combinationally. clr_en / clr_addr zero one
// word of both banks in every gather PE. busy is high while any update is
// inside the scatter PEs or the network. src_done pulses when a source vertex's
// last edge group is dispatched.
module aggregate_kernel
  import hitgnn_pkg::*;
#(
  parameter int N       = 8,
  parameter int MAX_DST = 16384
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                feat_valid,
  input  fvec_t               feat,
  output logic                feat_ready,
  input  logic                grp_valid,
  input  edge_t [N-1:0]       grp_edge,
  input  logic  [N-1:0]       grp_mask,
  input  logic                grp_last,
  output logic                grp_ready,
  input  logic                acc_bank,
  input  logic                drain_en,
  input  logic                drain_bank,
  input  logic [DST_W-1:0]    drain_vidx,
  output fvec_t               drain_data,
  input  logic                clr_en,
  input  logic [$clog2(MAX_DST/N)-1:0] clr_addr,
  output logic                busy,
  output logic                src_done,
  output logic                conflict
);
  localparam int DEPTH = MAX_DST / N;
  localparam int AW    = $clog2(DEPTH);
  localparam int LOGN  = (N > 1) ? $clog2(N) : 0;
  localparam int NSW   = (N/2 > 0 ? N/2 : 1) * (N > 1 ? $clog2(N) : 1);

  logic  [N-1:0] sp_in_valid, sp_in_ready;
  edge_t [N-1:0] sp_edge;
  fvec_t         sp_feat;
  logic  [N-1:0] sp_out_valid, sp_out_ready;
  upd_t  [N-1:0] sp_out;
  logic  [N-1:0] gp_valid, gp_ready;
  upd_t  [N-1:0] gp_upd;
  logic  [NSW-1:0] sw_conflict;
  fvec_t         gp_drain [N];
  logic          net_busy;

  feature_duplicator #(.N(N)) u_dup (
    .feat_valid, .feat, .feat_ready,
    .grp_valid, .grp_edge, .grp_mask, .grp_last, .grp_ready,
    .pe_valid(sp_in_valid), .pe_edge(sp_edge), .pe_feat(sp_feat), .pe_ready(sp_in_ready),
    .src_done
  );

  for (genvar i = 0; i < N; i++) begin : g_scatter
    scatter_pe u_sp (
      .clk, .rst_n,
      .in_valid(sp_in_valid[i]), .in_edge(sp_edge[i]), .in_feat(sp_feat), .in_ready(sp_in_ready[i]),
      .out_valid(sp_out_valid[i]), .out_upd(sp_out[i]), .out_ready(sp_out_ready[i])
    );
  end

  routing_network #(.N(N)) u_net (
    .clk, .rst_n,
    .in_valid(sp_out_valid), .in_upd(sp_out), .in_ready(sp_out_ready),
    .out_valid(gp_valid), .out_upd(gp_upd), .out_ready(gp_ready),
    .conflict(sw_conflict), .busy(net_busy)
  );

  wire [31:0] drain_pe = 32'(drain_vidx) % 32'(N);
  wire [AW-1:0] drain_addr = AW'(drain_vidx >> LOGN);

  for (genvar j = 0; j < N; j++) begin : g_gather
    gather_pe #(.N(N), .DEPTH(DEPTH)) u_gp (
      .clk, .rst_n,
      .in_valid(gp_valid[j]), .in_upd(gp_upd[j]), .in_ready(gp_ready[j]),
      .acc_bank,
      .drain_en(drain_en && drain_pe == j), .drain_bank, .drain_addr,
      .drain_data(gp_drain[j]),
      .clr_en, .clr_addr
    );
  end

  assign drain_data = gp_drain[drain_pe];
  assign busy       = |sp_out_valid || net_busy;
  assign conflict   = |sw_conflict;
endmodule
