// update_kernel: feature update h_v = sigma(a_v * W^l) on a weight-stationary
// systolic array of SIMD x COLS = 16 x 128 = 2048 multiply-accumulate PEs.
//
// The aggregated feature a_v of a vertex arrives one 16-lane slice at a time,
// because the aggregate kernel works slice by slice. For slice k the 16 rows of
// the array hold rows 16k..16k+15 of W^l, PE (r,c) holding W[16k+r][c]. The
// slice enters row r after a skew of r cycles. Activations move one column
// right per cycle and partial sums move one row down per cycle. The bottom of
// column c therefore gives sum_r a_v[16k+r] * W[16k+r][c], SIMD + c cycles after
// the slice entered. Each column owns one accumulator bank of MAX_DST words. A
// tag pipeline (valid, vertex index, first-slice flag) travels with the data.
// When vertex v's partial sum reaches the bottom of column c, the bank adds it
// to word v, or overwrites word v on the first slice. After the last slice the
// banks hold a_v * W^l. rd_vec reads vertex rd_vidx combinationally, applies
// ReLU when relu is set, and forces columns >= f_out to zero.
//
// The PE count m = 2048 is the configuration the design-space exploration
// picked. The systolic-array form is the original design's. The 16 x 128
// shape, the weight-stationary dataflow, the per-column accumulator banks and
// ReLU as sigma() are this design's choices. 128 columns cover every output
// width of the target models.
//
// Timing: one vertex slice per cycle. Weights may be reloaded only while busy
// is low (array empty). w_load_en writes one PE row of weights per cycle.
module update_kernel
  import hitgnn_pkg::*;
#(
  parameter int COLS    = 128,
  parameter int MAX_DST = 16384
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      w_load_en,
  input  logic [$clog2(SIMD)-1:0]   w_load_row,
  input  data_t [COLS-1:0]          w_load_data,
  input  logic                      in_valid,
  input  fvec_t                     in_vec,
  input  logic [DST_W-1:0]          in_vidx,
  input  logic                      in_first,
  input  logic [DST_W-1:0]          rd_vidx,
  input  logic                      relu,
  input  logic [FOUT_W:0]           f_out,
  output data_t [COLS-1:0]          rd_vec,
  output logic                      busy
);
  localparam int TAGS = SIMD + COLS - 1;
  localparam int AW   = $clog2(MAX_DST);

  typedef struct packed {
    logic             valid;
    logic             first;
    logic [DST_W-1:0] vidx;
  } tag_t;

  data_t w    [SIMD][COLS];   // stationary weights
  data_t a    [SIMD][COLS];   // activation register of PE (r,c)
  data_t ps   [SIMD][COLS];   // partial-sum register of PE (r,c)
  data_t skew [SIMD][SIMD];   // input skew, row r uses entries 0..r-1
  tag_t  tag  [TAGS];

  always_ff @(posedge clk) begin
    for (int r = 1; r < SIMD; r++) begin
      skew[r][0] <= in_valid ? in_vec[r] : '0;
      for (int k = 1; k < r; k++) skew[r][k] <= skew[r][k-1];
    end
  end

  for (genvar r = 0; r < SIMD; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      data_t a_in, ps_in;
      if (c == 0) begin : g_left
        if (r == 0) begin : g_r0
          assign a_in = in_valid ? in_vec[0] : data_t'(0);
        end else begin : g_rn
          assign a_in = skew[r][r-1];
        end
      end else begin : g_mid
        assign a_in = a[r][c-1];
      end
      if (r == 0) begin : g_top
        assign ps_in = '0;
      end else begin : g_below
        assign ps_in = ps[r-1][c];
      end
      always_ff @(posedge clk) begin
        a[r][c]  <= a_in;
        ps[r][c] <= ps_in + fx_mul(a_in, w[r][c]);
        if (w_load_en && w_load_row == r[$clog2(SIMD)-1:0]) w[r][c] <= w_load_data[c];
      end
    end
  end

  // tag pipeline
  always_ff @(posedge clk) begin
    tag[0] <= '{valid: in_valid, first: in_first, vidx: in_vidx};
    for (int k = 1; k < TAGS; k++) tag[k] <= tag[k-1];
    if (!rst_n)
      for (int k = 0; k < TAGS; k++) tag[k].valid <= 1'b0;
  end

  // per-column accumulator banks ("intermediate results")
  for (genvar c = 0; c < COLS; c++) begin : g_acc
    data_t mem [MAX_DST];
    tag_t  t;
    assign t = tag[SIMD + c - 1];
    wire [AW-1:0] wa = AW'(t.vidx);
    always_ff @(posedge clk) begin
      if (t.valid) mem[wa] <= (t.first ? data_t'(0) : mem[wa]) + ps[SIMD-1][c];
    end
    data_t rv;
    assign rv = mem[AW'(rd_vidx)];
    assign rd_vec[c] = (c >= int'(f_out)) ? data_t'(0) :
                       (relu && rv < 0)   ? data_t'(0) : rv;
  end

  always_comb begin
    busy = 1'b0;
    for (int k = 0; k < TAGS; k++) busy |= tag[k].valid;
  end

  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                w_load_en |-> !busy && !in_valid);
endmodule
