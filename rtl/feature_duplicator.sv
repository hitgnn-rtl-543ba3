// feature_duplicator: hands the current source feature slice to all N scatter
// PEs together with one group of up to N edges of that source.
//
// The edges of a source vertex come as groups of up to N edges. Edge i of a
// group goes to scatter PE i, grp_mask marks the edges that are present, and
// grp_last marks the source's last group. A group fires when a feature and a
// group are both present and every scatter PE that gets an edge is ready. The
// feature slice is then copied to all PEs. The feature is consumed when the
// last group of its source fires, so one DDR or host fetch serves every edge
// of the vertex. A source with no edges is sent as one empty group with
// grp_last set.
//
// The broadcast of one feature bus to all scatter PEs follows the aggregate
// kernel's block diagram. The group format and the all-ready firing rule are
// this design's choices. The block is combinational: pe_valid is high in the
// cycle the group fires, and src_done pulses when a source is finished.
module feature_duplicator
  import hitgnn_pkg::*;
#(
  parameter int N = 8
) (
  input  logic            feat_valid,
  input  fvec_t           feat,
  output logic            feat_ready,
  input  logic            grp_valid,
  input  edge_t [N-1:0]   grp_edge,
  input  logic  [N-1:0]   grp_mask,
  input  logic            grp_last,
  output logic            grp_ready,
  output logic  [N-1:0]   pe_valid,
  output edge_t [N-1:0]   pe_edge,
  output fvec_t           pe_feat,
  input  logic  [N-1:0]   pe_ready,
  output logic            src_done
);
  wire fire = feat_valid && grp_valid && (&(pe_ready | ~grp_mask));

  assign pe_valid   = fire ? grp_mask : '0;
  assign pe_edge    = grp_edge;
  assign pe_feat    = feat;
  assign grp_ready  = fire;
  assign feat_ready = fire && grp_last;
  assign src_done   = fire && grp_last;
endmodule
