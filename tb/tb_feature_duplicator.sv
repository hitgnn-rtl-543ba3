// tb_feature_duplicator: self-checking test of feature_duplicator (N = 4).
//
// 40 source vertices each have 0..10 edges, sent as groups of up to 4 with
// the last group flagged (an edgeless source sends one empty group). The
// scatter-PE ready lines are random. Each edge must reach the PE of its slot
// exactly once, together with its own source's feature. A feature is consumed
// only with its source's last group, and src_done must pulse once per source.
module tb_feature_duplicator;
  import hitgnn_pkg::*;
  localparam int N = 4, NS = 40;
  logic clk = 0;
  always #5 clk = ~clk;

  logic feat_valid, feat_ready, grp_valid, grp_last, grp_ready, src_done;
  fvec_t feat, pe_feat;
  edge_t [N-1:0] grp_edge, pe_edge;
  logic [N-1:0] grp_mask, pe_valid, pe_ready;

  feature_duplicator #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int deg [NS];
  int edges_seen = 0, edges_total = 0, srcs_done = 0;

  function automatic fvec_t fv(int s);
    fvec_t f; for (int j = 0; j < SIMD; j++) f[j] = data_t'(s * 100 + j); return f;
  endfunction

  // feature source: sequential features 0..NS-1
  int fi = 0;
  always @(posedge clk) if (feat_valid && feat_ready) fi <= fi + 1;
  always_comb begin feat_valid = (fi < NS); feat = fv(fi); end

  initial begin
    for (int s = 0; s < NS; s++) begin deg[s] = $urandom_range(10); edges_total += deg[s]; end
    grp_valid = 0; grp_edge = '0; grp_mask = '0; grp_last = 0;
    @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      automatic int e = 0;
      do begin
        @(negedge clk);
        grp_valid = 1;
        grp_mask = '0;
        for (int i = 0; i < N; i++) begin
          // edge encodes source and edge number: dst = s*16 + edge index
          grp_edge[i].dst = DST_W'(s * 16 + e + i);
          grp_edge[i].w   = data_t'(s);
          grp_mask[i] = (e + i < deg[s]);
        end
        grp_last = (e + N >= deg[s]);
        @(posedge clk);
        while (!grp_ready) @(posedge clk);
        e += N;
      end while (e < deg[s]);
    end
    @(negedge clk); grp_valid = 0;
  end

  always @(negedge clk) pe_ready <= N'($urandom);

  always @(posedge clk) begin
    if (src_done) srcs_done++;
    for (int i = 0; i < N; i++) if (pe_valid[i]) begin
      automatic int s = int'(pe_edge[i].w);
      checks++;
      if (!pe_ready[i]) begin failures++; $display("FAIL: valid to a PE that is not ready"); end
      if (pe_feat !== fv(s)) begin failures++; $display("FAIL: edge of source %0d got wrong feature", s); end
      if (int'(pe_edge[i].dst) % N != i % N) begin failures++; $display("FAIL: edge in wrong slot"); end
      edges_seen++;
    end
    if (srcs_done == NS && fi == NS) begin
      checks += 2;
      if (edges_seen != edges_total) begin failures++; $display("FAIL: %0d of %0d edges", edges_seen, edges_total); end
      if (grp_valid && !grp_ready) begin end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog srcs=%0d fi=%0d", srcs_done, fi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
