// hitgnn_pkg: constants, record types and arithmetic helpers shared by the
// accelerator.
//
// The datapath moves 512-bit words, the width each aggregate PE handles per
// cycle, cut into SIMD = 16 lanes of 32 bits. The lanes hold Q16.16 two's
// complement fixed point (16 fraction bits). Fixed point replaces the single
// precision floating point the kernels were originally built for, so that sums
// are exact and do not depend on the order of accumulation.
// A product is truncated by an arithmetic right shift of FRAC_W bits. Sums wrap.
package hitgnn_pkg;

  localparam int BUS_W   = 512;            // feature word width
  localparam int DATA_W  = 32;             // one lane
  localparam int SIMD    = BUS_W / DATA_W; // lanes per word (16)
  localparam int FRAC_W  = 16;             // fraction bits of a lane
  localparam int VID_W   = 22;             // global vertex id (2.45 M vertices fit)
  localparam int DST_W   = 14;             // index within a layer's destination set
  localparam int DDR_AW  = 28;             // 64-byte word address in one DDR channel
  localparam int SLICE_W = 6;              // up to 64 slices of 16 features (1024 features)
  localparam int WROW_W  = 10;             // weight buffer row address
  localparam int FOUT_W  = 8;              // output feature count, up to 128

  typedef logic signed [DATA_W-1:0] data_t;
  typedef data_t [SIMD-1:0]          fvec_t;   // one 512-bit feature slice

  // One source vertex of the mini-batch, as written by the host runtime.
  typedef struct packed {
    logic [VID_W-1:0]  vid;        // global vertex id
    logic              local_hit;  // feature is held in this FPGA's DDR
    logic [DDR_AW-1:0] row;        // DDR word address of slice 0 of its feature
  } vtx_entry_t;

  // Request sent to the host for a feature that is not held locally.
  typedef struct packed {
    logic [VID_W-1:0]   vid;
    logic [SLICE_W-1:0] slice;
  } host_req_t;

  // One edge of the sampled adjacency, already grouped by source.
  typedef struct packed {
    logic [DST_W-1:0] dst;  // destination index within the layer
    data_t            w;    // edge coefficient used by the scatter function
  } edge_t;

  // Scatter result travelling through the routing network.
  typedef struct packed {
    logic [DST_W-1:0] dst;
    fvec_t            val;
  } upd_t;

  // Layer configuration written by the host before start.
  typedef struct packed {
    logic [19:0]        num_src;    // |V^{l-1}| entries streamed per pass
    logic [DST_W:0]     num_dst;    // |V^l|
    logic [SLICE_W:0]   num_slices; // ceil(f^{l-1} / 16)
    logic [10:0]        f_in;       // f^{l-1}
    logic [FOUT_W:0]    f_out;      // f^l
    logic [WROW_W-1:0]  w_base;     // first weight buffer row of W^l
    logic               relu;       // apply sigma() = ReLU on the output
  } layer_cfg_t;

  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = 64'(a) * 64'(b);
    return data_t'(p >>> FRAC_W);
  endfunction

  function automatic fvec_t fvec_add(fvec_t a, fvec_t b);
    fvec_t r;
    for (int i = 0; i < SIMD; i++) r[i] = a[i] + b[i];
    return r;
  endfunction

endpackage
