// tb_routing_network: self-checking test of routing_network (N = 8).
//
// Each of the 8 inputs sends 150 updates with random destinations. Each value
// lane encodes (input, sequence number) so every update can be identified.
// Inputs and outputs stall at random. Every update must come out exactly once,
// at output dst mod 8, with its payload unchanged. Updates from one input to
// one output must keep their order, since the network is a butterfly with a
// single path between any pair. With random traffic the conflict outputs must
// fire at least once.
module tb_routing_network;
  import hitgnn_pkg::*;
  localparam int N = 8, PER = 150;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  upd_t [N-1:0] in_upd, out_upd;
  logic [N/2*3-1:0] conflict;
  logic busy;
  routing_network #(.N(N)) dut (.*);

  int checks = 0, failures = 0, received = 0, conflicts = 0;
  int sent [N];
  int last_seq [N][N];   // [input][output]
  logic [DST_W-1:0] dsts [N][PER];

  function automatic upd_t mk(int i, int k, logic [DST_W-1:0] d);
    upd_t u; u.dst = d;
    for (int j = 0; j < SIMD; j++) u.val[j] = data_t'(i * 100000 + k * 10 + j);
    return u;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      sent[i] = 0;
      for (int o = 0; o < N; o++) last_seq[i][o] = -1;
      for (int k = 0; k < PER; k++) dsts[i][k] = DST_W'($urandom);
    end
    in_valid = '0; in_upd = '0;
    repeat (3) @(posedge clk); rst_n = 1;
  end

  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      in_valid[i] <= (sent[i] < PER) && ($urandom_range(4) != 0);
      if (sent[i] < PER) in_upd[i] <= mk(i, sent[i], dsts[i][sent[i]]);
    end
    out_ready <= N'($urandom) | N'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    if (|conflict) conflicts++;
    for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) sent[i]++;
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      automatic int src = int'(out_upd[o].val[0]) / 100000;
      automatic int k   = (int'(out_upd[o].val[0]) % 100000) / 10;
      checks++;
      if (int'(out_upd[o].dst) % N != o) begin failures++; $display("FAIL: update at wrong output %0d", o); end
      if (src < 0 || src >= N || k >= PER || out_upd[o] !== mk(src, k, dsts[src][k])) begin
        failures++; $display("FAIL: corrupted update at output %0d", o);
      end else if (k <= last_seq[src][o]) begin
        failures++; $display("FAIL: reordered update %0d->%0d", src, o);
      end else last_seq[src][o] = k;
      received++;
    end
    if (received == N * PER) begin
      checks++;
      if (conflicts == 0) begin failures++; $display("FAIL: no conflict seen"); end
      $display("conflict cycles=%0d", conflicts);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog, received %0d", received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
