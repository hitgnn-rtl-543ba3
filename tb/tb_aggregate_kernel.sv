// tb_aggregate_kernel: self-checking test of aggregate_kernel (N = 4,
// MAX_DST = 64).
//
// Builds a random bipartite mini-batch layer: 30 source vertices, each with
// 0..12 edges to 50 destinations and random Q16.16 coefficients. The
// feature slices and the edge groups are streamed in without stalls. After
// the last source has been dispatched and the kernel is empty, every
// destination is drained from the bank and compared with
// sum over edges of (feature * coef) >>> 16, computed by the testbench.
// A second pass with the banks swapped checks that the drained bank was
// cleared and that acc_bank is honoured. The kernel must move N edges per
// cycle when nothing conflicts. The test checks that a pass takes at most
// groups + 4 * conflicts + 20 cycles, and that conflicts occurred.
module tb_aggregate_kernel;
  import hitgnn_pkg::*;
  localparam int N = 4, MAX_DST = 64, NS = 30, ND = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic feat_valid, feat_ready, grp_valid, grp_last, grp_ready;
  fvec_t feat, drain_data;
  edge_t [N-1:0] grp_edge;
  logic [N-1:0] grp_mask;
  logic acc_bank, drain_en, drain_bank, clr_en, busy, src_done, conflict;
  logic [DST_W-1:0] drain_vidx;
  logic [3:0] clr_addr;

  aggregate_kernel #(.N(N), .MAX_DST(MAX_DST)) dut (.*);

  int checks = 0, failures = 0, conflicts = 0, srcs = 0;
  fvec_t feats [NS];
  int deg [NS];
  edge_t edges [NS][12];
  fvec_t expect_v [ND];

  int fi;
  assign feat_valid = rst_n && fi < NS;
  assign feat = feats[fi < NS ? fi : 0];
  always @(posedge clk) begin
    if (feat_valid && feat_ready) fi <= fi + 1;
    if (src_done) srcs++;
    if (conflict) conflicts++;
  end

  task automatic run_pass(input logic bank, output int cycles);
    int groups = 0, t0;
    fi = 0; srcs = 0; conflicts = 0;
    acc_bank = bank;
    t0 = $time;
    for (int s = 0; s < NS; s++) begin
      int e = 0;
      do begin
        @(negedge clk);
        grp_valid = 1; grp_mask = '0;
        for (int i = 0; i < N; i++) begin
          grp_edge[i] = (e + i < deg[s]) ? edges[s][e+i] : '0;
          grp_mask[i] = (e + i < deg[s]);
        end
        grp_last = (e + N >= deg[s]);
        @(posedge clk);
        while (!grp_ready) @(posedge clk);
        groups++;
        e += N;
      end while (e < deg[s]);
    end
    @(negedge clk); grp_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (cycles > groups + 4 * conflicts + 20) begin
      failures++; $display("FAIL: pass took %0d cycles for %0d groups", cycles, groups);
    end
    $display("pass: %0d groups, %0d conflict cycles, %0d cycles", groups, conflicts, cycles);
  endtask

  task automatic check_bank(input logic bank);
    acc_bank = !bank;
    for (int v = 0; v < ND; v++) begin
      @(negedge clk);
      drain_en = 1; drain_bank = bank; drain_vidx = DST_W'(v);
      #1;
      checks++;
      if (drain_data !== expect_v[v]) begin failures++; $display("FAIL: dst %0d lane0 %0d != %0d", v, drain_data[0], expect_v[v][0]); end
    end
    @(negedge clk); drain_en = 0;
  endtask

  initial begin
    int cyc;
    grp_valid = 0; grp_edge = '0; grp_mask = '0; grp_last = 0; acc_bank = 0;
    drain_en = 0; drain_bank = 1; drain_vidx = '0; clr_en = 0; clr_addr = '0; fi = NS;
    for (int v = 0; v < ND; v++) expect_v[v] = '0;
    for (int s = 0; s < NS; s++) begin
      for (int j = 0; j < SIMD; j++) feats[s][j] = data_t'($urandom_range(32'h3FFFF)) - 32'sh1FFFF;
      deg[s] = $urandom_range(12);
      for (int e = 0; e < deg[s]; e++) begin
        edges[s][e].dst = DST_W'($urandom_range(ND-1));
        edges[s][e].w   = data_t'($urandom_range(32'h1FFFF)) - 32'shFFFF;
        for (int j = 0; j < SIMD; j++)
          expect_v[edges[s][e].dst][j] += data_t'((longint'(feats[s][j]) * longint'(edges[s][e].w)) >>> 16);
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < MAX_DST / N; a++) begin @(negedge clk); clr_en = 1; clr_addr = 4'(a); end
    @(negedge clk); clr_en = 0;
    run_pass(0, cyc);
    checks++; if (srcs != NS) begin failures++; $display("FAIL: src_done %0d", srcs); end
    checks++; if (conflicts == 0) begin failures++; $display("FAIL: no conflict"); end
    check_bank(0);
    run_pass(1, cyc);
    check_bank(1);
    // bank 0 was read-and-cleared: it must now read zero
    for (int v = 0; v < ND; v++) expect_v[v] = '0;
    check_bank(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
