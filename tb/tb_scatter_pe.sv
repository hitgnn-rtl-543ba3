// tb_scatter_pe: self-checking test of scatter_pe.
//
// Sends 300 random edges with random 16-lane features. Both sides apply
// random valid/ready stalls. Every update that comes out must carry the
// edge's destination, and each lane must equal the Q16.16 product
// (feature * coefficient) >>> 16, computed here in 64-bit arithmetic. The
// order must match, and a stalled output must hold its value.
module tb_scatter_pe;
  import hitgnn_pkg::*;
  localparam int NE = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  edge_t in_edge;
  fvec_t in_feat;
  upd_t out_upd;
  scatter_pe dut (.*);

  int checks = 0, failures = 0;
  edge_t es [NE];
  fvec_t fs [NE];

  initial begin
    for (int i = 0; i < NE; i++) begin
      es[i].dst = DST_W'($urandom);
      es[i].w   = data_t'($signed($urandom_range(32'h3FFFF)) - 32'sh1FFFF);
      for (int j = 0; j < SIMD; j++) fs[i][j] = data_t'($signed($urandom_range(32'hFFFFF)) - 32'sh7FFFF);
    end
    in_valid = 0; in_edge = '0; in_feat = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NE; ) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0); in_edge = es[i]; in_feat = fs[i];
      @(posedge clk);
      if (in_valid && in_ready) i++;
    end
    @(negedge clk); in_valid = 0;
  end

  always @(negedge clk) out_ready <= ($urandom_range(2) != 0);

  int oi = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_upd.dst != es[oi].dst) begin failures++; $display("FAIL: dst %0d", oi); end
    for (int j = 0; j < SIMD; j++) begin
      automatic longint p = longint'(fs[oi][j]) * longint'(es[oi].w);
      automatic data_t e = data_t'(p >>> 16);
      checks++;
      if (out_upd.val[j] !== e) begin failures++; $display("FAIL: edge %0d lane %0d %0d != %0d", oi, j, out_upd.val[j], e); end
    end
    oi++;
    if (oi == NE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
