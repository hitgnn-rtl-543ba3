// tb_hitgnn_accel: end-to-end test of the accelerator top, hitgnn_accel, at
// reduced size (N = 4 PEs, 8 array columns, 64 destinations, 64 weight rows).
//
// Workload: a random sampled layer with NS source vertices and ND
// destination vertices. Each source has 0..6 out-edges with random
// coefficients. Input features have F_IN = 40 values (three 16-wide slices,
// the last one padded). About half the sources are marked as held in the
// local DDR; the rest must be fetched from the host. The testbench models:
//   * the local DDR and the host link, both answering in order with random
//     latency and random request backpressure;
//   * the mini-batch reader, which on every pass_start streams the source
//     list and the edge groups (at most N edges each) with random gaps;
//   * the output sink, with random backpressure.
// Sequence: load all weight rows from the host port; run layer A (ReLU on,
// w_base = 8, f_out = COLS-2); send one gradient row for each used weight
// row; run layer B on the same graph with the updated weights and ReLU off.
// Every output word is compared with a reference computed here from the
// same features, edges and weights. It uses the same Q16.16 arithmetic:
// each product truncated, sums wrapping at 32 bits.
// Mechanisms counted (each must occur at least once): local DDR fetch,
// host fetch, routing conflict, aggregation/update overlap, weight-row
// update, ReLU clipping, f_out column masking, zero-padded weight rows,
// output backpressure. The pass count (slices x layers) and the done pulses
// are checked as well.
module tb_hitgnn_accel;
  import hitgnn_pkg::*;
  localparam int N = 4, COLS = 8, MAX_DST = 64, W_ROWS = 64, FD = 4;
  localparam int NS = 24, ND = 12, F_IN = 40, F_OUT = COLS - 2, W_BASE = 8;
  localparam int NSL = (F_IN + SIMD - 1) / SIMD;
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

  hitgnn_accel #(.N(N), .COLS(COLS), .MAX_DST(MAX_DST), .W_ROWS(W_ROWS), .FIFO_DEPTH(FD)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- workload ----------------
  data_t F [NS][NSL*SIMD];
  data_t W [W_ROWS][COLS];
  vtx_entry_t vlist [NS];
  typedef struct { edge_t [N-1:0] e; logic [N-1:0] m; logic last; } grp_t;
  grp_t glist [$];
  int e_src [$], e_dst [$];
  data_t e_w [$];
  data_t ref_o [ND][COLS];

  function automatic data_t rnd_fx(int unsigned range);
    return data_t'($urandom_range(2 * range)) - data_t'(range);
  endfunction

  task automatic build_workload();
    for (int u = 0; u < NS; u++) begin
      automatic int deg = $urandom_range(6);
      automatic int k = 0;
      vlist[u].vid = VID_W'(1000 + u);
      vlist[u].local_hit = $urandom_range(1);
      vlist[u].row = DDR_AW'(u * 8);
      for (int i = 0; i < NSL*SIMD; i++) F[u][i] = rnd_fx(32'h20000);
      do begin
        automatic grp_t g;
        g.e = '0; g.m = '0;
        for (int j = 0; j < N && k < deg; j++, k++) begin
          g.e[j].dst = DST_W'($urandom_range(ND-1));
          g.e[j].w = rnd_fx(32'h10000);
          g.m[j] = 1'b1;
          e_src.push_back(u); e_dst.push_back(int'(g.e[j].dst)); e_w.push_back(g.e[j].w);
        end
        g.last = (k >= deg);
        glist.push_back(g);
      end while (k < deg);
    end
  endtask

  task automatic compute_ref(int w_base, bit relu);
    data_t agg [ND][NSL*SIMD];
    for (int v = 0; v < ND; v++) for (int i = 0; i < NSL*SIMD; i++) agg[v][i] = '0;
    foreach (e_src[k]) for (int i = 0; i < NSL*SIMD; i++) agg[e_dst[k]][i] += fx_mul(F[e_src[k]][i], e_w[k]);
    for (int v = 0; v < ND; v++) for (int c = 0; c < COLS; c++) begin
      automatic data_t s = '0;
      for (int i = 0; i < F_IN; i++) s += fx_mul(agg[v][i], W[w_base + i][c]);
      ref_o[v][c] = (c >= F_OUT) ? '0 : (relu && s < 0) ? '0 : s;
    end
  endtask

  function automatic fvec_t feat_word(int u, int sl);
    fvec_t f;
    for (int j = 0; j < SIMD; j++) f[j] = F[u][sl*SIMD + j];
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
    ddr_req_ready  <= ($urandom_range(3) != 0);
    host_req_ready <= ($urandom_range(3) != 0);
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
        if (int'(pass_slice) != n_pass % NSL) begin failures++; $display("FAIL: pass_slice %0d", pass_slice); end
        n_pass++;
        while (i < NS) begin
          @(negedge clk);
          vtx_valid = ($urandom_range(4) != 0); vtx = vlist[i];
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
          grp_valid = ($urandom_range(5) != 0);
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
  int n_relu = 0, n_mask = 0, n_stall = 0, n_done = 0, n_out = 0;
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
          failures++; $display("FAIL: v%0d c%0d got %0d expected %0d", n_out, c, out_vec[c], ref_o[n_out][c]);
        end
        if (c >= F_OUT) n_mask++;
        else if (relu_on && ref_o[n_out][c] == 0) n_relu++;
      end
      n_out++;
    end
  end

  task automatic run_layer(bit relu);
    relu_on = relu;
    n_out = 0;
    cfg = '0;
    cfg.num_src = 20'(NS); cfg.num_dst = (DST_W+1)'(ND); cfg.num_slices = (SLICE_W+1)'(NSL);
    cfg.f_in = 11'(F_IN); cfg.f_out = (FOUT_W+1)'(F_OUT); cfg.w_base = WROW_W'(W_BASE); cfg.relu = relu;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks++;
    if (n_out != ND) begin failures++; $display("FAIL: %0d outputs, expected %0d", n_out, ND); end
  endtask

  initial begin
    cfg = '0; start = 0; w_wr_en = 0; w_wr_row = '0; w_wr_data = '0;
    grad_valid = 0; grad_row = '0; grad_vec = '0; lr_shift = '0;
    build_workload();
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
    // layer A
    compute_ref(W_BASE, 1);
    run_layer(1);
    $display("layer A done at cycle %0d", cycle);
    // averaged gradients from the host, one row per used weight row
    for (int r = W_BASE; r < W_BASE + F_IN; r++) begin
      @(negedge clk);
      grad_valid = 1; grad_row = RAW'(r); lr_shift = 5'($urandom_range(4));
      for (int c = 0; c < COLS; c++) grad_vec[c] = rnd_fx(32'h10000);
      for (int c = 0; c < COLS; c++) W[r][c] = W[r][c] - (grad_vec[c] >>> lr_shift);
      @(posedge clk);
      checks++;
      if (!grad_ready) begin failures++; $display("FAIL: gradient row refused while idle"); end
    end
    @(negedge clk); grad_valid = 0;
    // layer B with the updated weights
    compute_ref(W_BASE, 0);
    run_layer(0);
    $display("layer B done at cycle %0d", cycle);
    checks += 12;
    if (n_done != 2)         begin failures++; $display("FAIL: %0d done pulses", n_done); end
    if (n_pass != 2 * NSL)   begin failures++; $display("FAIL: %0d passes", n_pass); end
    if (n_local == 0)        begin failures++; $display("FAIL: no local DDR fetch"); end
    if (n_remote == 0)       begin failures++; $display("FAIL: no host fetch"); end
    if (n_local + n_remote != 2 * NSL * NS) begin failures++; $display("FAIL: %0d fetches", n_local + n_remote); end
    if (n_conflict == 0)     begin failures++; $display("FAIL: no routing conflict"); end
    if (n_overlap == 0)      begin failures++; $display("FAIL: aggregation never overlapped update"); end
    if (n_wupd != F_IN)      begin failures++; $display("FAIL: %0d weight-row updates", n_wupd); end
    if (n_relu == 0)         begin failures++; $display("FAIL: ReLU never clipped"); end
    if (n_mask == 0)         begin failures++; $display("FAIL: no masked column"); end
    if (F_IN % SIMD == 0)    begin failures++; $display("FAIL: no zero-padded weight rows"); end
    if (n_stall == 0)        begin failures++; $display("FAIL: no output backpressure"); end
    $display("events: local=%0d remote=%0d conflict=%0d overlap=%0d wupd=%0d relu=%0d mask=%0d stall=%0d passes=%0d",
             n_local, n_remote, n_conflict, n_overlap, n_wupd, n_relu, n_mask, n_stall, n_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
