// tb_hitgnn_accel_full: end-to-end test of hitgnn_accel at its default size,
// with no parameter overrides: N = 8 scatter/gather PEs, a 16 x 128 systolic
// array (2048 multiply-accumulate units), 16384 destination vertices of
// on-chip result memory and 1024 weight rows.
//
// Part 1 is the small two-layer test of tb_hitgnn_accel: 24 sources, 12
// destinations, 40 input features (three slices, the last one padded),
// ReLU, a gradient step, then a second layer with the updated weights.
//
// Part 2 runs the output layer of the evaluated 2-layer models at their
// real sizes, once per graph:
//   1024 target vertices, 10 sampled neighbours each plus a self edge,
//   128 hidden input features (8 slices), and output widths of 41 (Reddit),
//   100 (Yelp), 107 (Amazon) and 47 (ogbn-products).
// The 10 neighbours are drawn from a pool of 3072 further sources, so some
// sources feed several targets, as they do in a sampled mini-batch. That
// gives 4096 sources and 11264 edges per layer. Sources 0..1023 are the
// targets themselves. Half of all sources are local to the DDR.
//
// The testbench models the local DDR and the host link (in order, random
// latency and backpressure), the mini-batch reader (which streams the
// vertex list and edge groups on each pass_start), and the output sink with
// backpressure. Every output word is compared bit-exactly with a reference
// computed here in Q16.16 (each product truncated, sums wrapping). Each
// counted mechanism must occur: local and host fetch, routing conflict,
// aggregation/update overlap, weight-row update, ReLU clipping, column
// masking, zero-padded weight rows and output backpressure. The cycle count
// of each output layer is printed next to the compute-bound estimate
// slices * max(sources, edges / N).
module tb_hitgnn_accel_full;
  import hitgnn_pkg::*;
  localparam int N = 8, COLS = 128, W_ROWS = 1024;
  localparam int NS_MAX = 4096, ND_MAX = 1024, F_MAX = 128, W_BASE = 8;
  localparam int RAW = $clog2(W_ROWS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, busy, done, pass_start;
  logic [SLICE_W-1:0] pass_slice;
  logic vtx_valid, vtx_ready;
  vtx_entry_t vtx;
  logic grp_valid, grp_last, grp_ready;
  edge_t [N-1:0] grp_edge;
  logic [N-1:0] grp_mask;
  logic ddr_req_valid, ddr_req_ready, ddr_resp_valid;
  logic [DDR_AW-1:0] ddr_req_addr;
  fvec_t ddr_resp_data;
  logic host_req_valid, host_req_ready, host_resp_valid;
  host_req_t host_req;
  fvec_t host_resp_data;
  logic out_valid, out_ready;
  logic [DST_W-1:0] out_vidx;
  data_t [COLS-1:0] out_vec;
  logic w_wr_en, grad_valid, grad_ready;
  logic [RAW-1:0] w_wr_row, grad_row;
  data_t [COLS-1:0] w_wr_data, grad_vec;
  logic [4:0] lr_shift;
  logic ev_local_fetch, ev_remote_fetch, ev_conflict, ev_overlap, ev_weight_update;

  hitgnn_accel dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- workload ----------------
  int ns, nd, f_in, f_out, nsl;
  data_t F [NS_MAX][F_MAX];
  data_t W [W_ROWS][COLS];
  vtx_entry_t vlist [NS_MAX];
  typedef struct { edge_t [N-1:0] e; logic [N-1:0] m; logic last; } grp_t;
  grp_t glist [$];
  int e_src [$], e_dst [$];
  data_t e_w [$];
  data_t ref_o [ND_MAX][COLS];

  function automatic data_t rnd_fx(int unsigned range);
    return data_t'($urandom_range(2 * range)) - data_t'(range);
  endfunction

  task automatic set_sources();
    for (int u = 0; u < ns; u++) begin
      vlist[u].vid = VID_W'(1000 + u);
      vlist[u].local_hit = $urandom_range(1);
      vlist[u].row = DDR_AW'(u * 8);
      for (int i = 0; i < F_MAX; i++) F[u][i] = rnd_fx(32'h20000);
    end
  endtask

  // groups of up to N edges per source, in source order
  task automatic group_edges(int out_edges [NS_MAX][$]);
    glist.delete();
    for (int u = 0; u < ns; u++) begin
      automatic int k = 0;
      automatic int deg = out_edges[u].size();
      do begin
        automatic grp_t g;
        g.e = '0; g.m = '0;
        for (int j = 0; j < N && k < deg; j++, k++) begin
          g.e[j].dst = DST_W'(out_edges[u][k]);
          g.e[j].w = rnd_fx(32'h10000);
          g.m[j] = 1'b1;
          e_src.push_back(u); e_dst.push_back(out_edges[u][k]); e_w.push_back(g.e[j].w);
        end
        g.last = (k >= deg);
        glist.push_back(g);
      end while (k < deg);
    end
  endtask

  task automatic build_small();
    automatic int oe [NS_MAX][$];
    ns = 24; nd = 12; f_in = 40; f_out = COLS - 2;
    e_src.delete(); e_dst.delete(); e_w.delete();
    set_sources();
    for (int u = 0; u < ns; u++) begin
      automatic int deg = $urandom_range(6);
      for (int k = 0; k < deg; k++) oe[u].push_back($urandom_range(nd - 1));
    end
    group_edges(oe);
  endtask

  // output layer of a 2-layer model: 1024 targets, 10 neighbours + self
  task automatic build_output_layer(int fo);
    automatic int oe [NS_MAX][$];
    ns = NS_MAX; nd = ND_MAX; f_in = 128; f_out = fo;
    e_src.delete(); e_dst.delete(); e_w.delete();
    set_sources();
    for (int v = 0; v < nd; v++) begin
      oe[v].push_back(v);
      for (int k = 0; k < 10; k++) oe[$urandom_range(ns - 1, nd)].push_back(v);
    end
    group_edges(oe);
  endtask

  task automatic compute_ref(int w_base, bit relu);
    static data_t agg [ND_MAX][F_MAX];
    for (int v = 0; v < nd; v++) for (int i = 0; i < F_MAX; i++) agg[v][i] = '0;
    foreach (e_src[k]) for (int i = 0; i < f_in; i++) agg[e_dst[k]][i] += fx_mul(F[e_src[k]][i], e_w[k]);
    for (int v = 0; v < nd; v++) for (int c = 0; c < COLS; c++) begin
      automatic data_t s = '0;
      if (c < f_out) for (int i = 0; i < f_in; i++) s += fx_mul(agg[v][i], W[w_base + i][c]);
      ref_o[v][c] = (c >= f_out) ? '0 : (relu && s < 0) ? '0 : s;
    end
  endtask

  function automatic fvec_t feat_word(int u, int sl);
    fvec_t f;
    for (int j = 0; j < SIMD; j++) f[j] = (sl * SIMD + j < F_MAX) ? F[u][sl*SIMD + j] : '0;
    return f;
  endfunction

  // ---------------- DDR and host models ----------------
  int unsigned dq_t[$], hq_t[$];
  fvec_t dq_d[$], hq_d[$];
  int last_d = 0, last_h = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ddr_req_valid && ddr_req_ready) begin
        automatic int t = cycle + 2 + int'($urandom_range(8)); if (t <= last_d) t = last_d + 1; last_d = t;
        dq_t.push_back(t); dq_d.push_back(feat_word(int'(ddr_req_addr >> 3), int'(ddr_req_addr & 7)));
      end
      if (host_req_valid && host_req_ready) begin
        automatic int t = cycle + 4 + int'($urandom_range(12)); if (t <= last_h) t = last_h + 1; last_h = t;
        hq_t.push_back(t); hq_d.push_back(feat_word(int'(host_req.vid) - 1000, int'(host_req.slice)));
      end
    end
  end
  always @(negedge clk) begin
    ddr_req_ready  <= ($urandom_range(7) != 0);
    host_req_ready <= ($urandom_range(7) != 0);
    out_ready      <= ($urandom_range(3) != 0);
    ddr_resp_valid <= 0; host_resp_valid <= 0;
    if (dq_t.size() > 0 && dq_t[0] <= cycle) begin
      ddr_resp_valid <= 1; ddr_resp_data <= dq_d[0]; void'(dq_t.pop_front()); void'(dq_d.pop_front());
    end
    if (hq_t.size() > 0 && hq_t[0] <= cycle) begin
      host_resp_valid <= 1; host_resp_data <= hq_d[0]; void'(hq_t.pop_front()); void'(hq_d.pop_front());
    end
  end

  // ---------------- mini-batch reader ----------------
  int n_pass = 0;
  initial begin
    vtx_valid = 0; vtx = '0;
    forever begin
      @(posedge clk);
      if (pass_start) begin
        automatic int i = 0;
        checks++;
        if (int'(pass_slice) != n_pass) begin failures++; $display("FAIL: pass_slice %0d", pass_slice); end
        n_pass++;
        while (i < ns) begin
          @(negedge clk);
          vtx_valid = ($urandom_range(15) != 0); vtx = vlist[i];
          @(posedge clk);
          if (vtx_valid && vtx_ready) i++;
        end
        @(negedge clk); vtx_valid = 0;
      end
    end
  end
  initial begin
    grp_valid = 0; grp_edge = '0; grp_mask = '0; grp_last = 0;
    forever begin
      @(posedge clk);
      if (pass_start) begin
        automatic int i = 0;
        while (i < glist.size()) begin
          @(negedge clk);
          grp_valid = ($urandom_range(15) != 0);
          grp_edge = glist[i].e; grp_mask = glist[i].m; grp_last = glist[i].last;
          @(posedge clk);
          if (grp_valid && grp_ready) i++;
        end
        @(negedge clk); grp_valid = 0;
      end
    end
  end

  // ---------------- event counters and output checks ----------------
  int n_local = 0, n_remote = 0, n_conflict = 0, n_overlap = 0, n_wupd = 0;
  int n_relu = 0, n_mask = 0, n_stall = 0, n_done = 0, n_out = 0, n_fetch_exp = 0;
  bit relu_on = 1;
  always @(posedge clk) if (rst_n) begin
    if (ev_local_fetch)   n_local++;
    if (ev_remote_fetch)  n_remote++;
    if (ev_conflict)      n_conflict++;
    if (ev_overlap)       n_overlap++;
    if (ev_weight_update) n_wupd++;
    if (done)             n_done++;
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      checks++;
      if (int'(out_vidx) != n_out) begin failures++; $display("FAIL: out_vidx %0d, expected %0d", out_vidx, n_out); end
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (out_vec[c] !== ref_o[n_out][c]) begin
          failures++;
          if (failures < 20) $display("FAIL: v%0d c%0d got %0d expected %0d", n_out, c, out_vec[c], ref_o[n_out][c]);
        end
        if (c >= f_out) n_mask++;
        else if (relu_on && ref_o[n_out][c] == 0) n_relu++;
      end
      n_out++;
    end
  end

  task automatic run_layer(bit relu);
    relu_on = relu;
    n_out = 0; n_pass = 0;
    nsl = (f_in + SIMD - 1) / SIMD;
    n_fetch_exp += nsl * ns;
    cfg = '0;
    cfg.num_src = 20'(ns); cfg.num_dst = (DST_W+1)'(nd); cfg.num_slices = (SLICE_W+1)'(nsl);
    cfg.f_in = 11'(f_in); cfg.f_out = (FOUT_W+1)'(f_out); cfg.w_base = WROW_W'(W_BASE); cfg.relu = relu;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks += 2;
    if (n_out != nd)   begin failures++; $display("FAIL: %0d outputs, expected %0d", n_out, nd); end
    if (n_pass != nsl) begin failures++; $display("FAIL: %0d passes, expected %0d", n_pass, nsl); end
  endtask

  initial begin
    automatic int graph_fout [4] = '{41, 100, 107, 47};
    automatic string graph_name [4] = '{"Reddit", "Yelp", "Amazon", "ogbn-products"};
    cfg = '0; start = 0; w_wr_en = 0; w_wr_row = '0; w_wr_data = '0;
    grad_valid = 0; grad_row = '0; grad_vec = '0; lr_shift = '0;
    for (int r = 0; r < W_ROWS; r++) for (int c = 0; c < COLS; c++) W[r][c] = rnd_fx(32'h10000);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // host loads W
    for (int r = 0; r < W_ROWS; r++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_row = RAW'(r);
      for (int c = 0; c < COLS; c++) w_wr_data[c] = W[r][c];
    end
    @(negedge clk); w_wr_en = 0;
    // part 1: small layer, gradient step, small layer
    build_small();
    compute_ref(W_BASE, 1);
    run_layer(1);
    for (int r = W_BASE; r < W_BASE + f_in; r++) begin
      @(negedge clk);
      grad_valid = 1; grad_row = RAW'(r); lr_shift = 5'($urandom_range(4));
      for (int c = 0; c < COLS; c++) grad_vec[c] = rnd_fx(32'h10000);
      for (int c = 0; c < COLS; c++) W[r][c] = W[r][c] - (grad_vec[c] >>> lr_shift);
      @(posedge clk);
      checks++;
      if (!grad_ready) begin failures++; $display("FAIL: gradient row refused while idle"); end
    end
    @(negedge clk); grad_valid = 0;
    compute_ref(W_BASE, 0);
    run_layer(0);
    $display("small layers done at cycle %0d", cycle);
    // part 2: output layer of each evaluated graph at full size
    for (int g = 0; g < 4; g++) begin
      automatic int t0;
      build_output_layer(graph_fout[g]);
      compute_ref(W_BASE, 0);
      t0 = cycle;
      run_layer(0);
      $display("%s output layer: %0d sources, %0d edges, %0d -> %0d features: %0d cycles (compute bound %0d)",
               graph_name[g], ns, e_src.size(), f_in, f_out, cycle - t0,
               nsl * ((ns > e_src.size() / N) ? ns : e_src.size() / N));
    end
    checks += 12;
    if (n_done != 6)         begin failures++; $display("FAIL: %0d done pulses", n_done); end
    if (n_local == 0)        begin failures++; $display("FAIL: no local DDR fetch"); end
    if (n_remote == 0)       begin failures++; $display("FAIL: no host fetch"); end
    if (n_local + n_remote != n_fetch_exp) begin failures++; $display("FAIL: %0d fetches", n_local + n_remote); end
    if (n_conflict == 0)     begin failures++; $display("FAIL: no routing conflict"); end
    if (n_overlap == 0)      begin failures++; $display("FAIL: aggregation never overlapped update"); end
    if (n_wupd != 40)        begin failures++; $display("FAIL: %0d weight-row updates", n_wupd); end
    if (n_relu == 0)         begin failures++; $display("FAIL: ReLU never clipped"); end
    if (n_mask == 0)         begin failures++; $display("FAIL: no masked column"); end
    if (40 % SIMD == 0)      begin failures++; $display("FAIL: no zero-padded weight rows"); end
    if (n_stall == 0)        begin failures++; $display("FAIL: no output backpressure"); end
    $display("events: local=%0d remote=%0d conflict=%0d overlap=%0d wupd=%0d relu=%0d mask=%0d stall=%0d",
             n_local, n_remote, n_conflict, n_overlap, n_wupd, n_relu, n_mask, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
