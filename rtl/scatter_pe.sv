// scatter_pe: applies the scatter function to one edge and produces an update
// for the edge's destination vertex.
//
// Scatter function: every one of the 16 lanes of the source feature slice is
// multiplied by the edge coefficient (Q16.16). The coefficient is the host's
// normalisation factor of the model (GCN's degree normalisation, or 1/degree
// for a GraphSAGE mean). A multiply by a per-edge coefficient is this design's
// choice; the 16-lane SIMD width is the original one. The result {dst, value}
// goes to the routing network.
//
// Timing: one register stage. An edge is accepted whenever the output register
// is empty or being emptied (in_ready = !out_valid || out_ready), so one edge per
// cycle is processed at full rate.
module scatter_pe
  import hitgnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  edge_t in_edge,
  input  fvec_t in_feat,
  output logic  in_ready,
  output logic  out_valid,
  output upd_t  out_upd,
  input  logic  out_ready
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      out_upd.dst <= in_edge.dst;
      for (int j = 0; j < SIMD; j++) out_upd.val[j] <= fx_mul(in_feat[j], in_edge.w);
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_upd));
endmodule
