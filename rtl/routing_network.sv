// routing_network: carries the updates of the N scatter PEs to the N gather
// PEs. Gather PE j owns the destination vertices with dst mod N == j.
//
// Structure: a butterfly of log2(N) stages, each of N/2 2x2 switches
// (route_switch). Stage s pairs positions p and p + 2^s (bit s of p clear) and
// steers each update to the position whose bit s equals bit s of its
// destination. After the last stage an update sits at position dst mod N. The
// network has N/2 * log2(N) switches. That fits the n*log(n) routing cost in
// the accelerator's resource model, which gives only the cost, not the
// topology. The butterfly is this design's choice.
//
// Timing: one register per stage, so latency is log2(N) cycles when there is
// no contention. Two updates that need the same switch output in the same
// cycle are serialised: one waits a cycle, and that switch's conflict bit
// pulses. Backpressure passes stage by stage through valid/ready. N must be a
// power of two. With N = 1 the network is a wire. busy is high while any
// switch register holds an update.
module routing_network
  import hitgnn_pkg::*;
#(
  parameter int N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  input  upd_t [N-1:0] in_upd,
  output logic [N-1:0] in_ready,
  output logic [N-1:0] out_valid,
  output upd_t [N-1:0] out_upd,
  input  logic [N-1:0] out_ready,
  output logic [(N/2 > 0 ? N/2 : 1)*(N > 1 ? $clog2(N) : 1)-1:0] conflict,
  output logic         busy
);
  localparam int LOGN = (N > 1) ? $clog2(N) : 0;

  // one set of stream signals per level; level 0 is the input, level LOGN the output
  for (genvar s = 0; s <= LOGN; s++) begin : g_lvl
    logic [N-1:0] v, r;
    upd_t [N-1:0] d;
  end

  assign g_lvl[0].v    = in_valid;
  assign g_lvl[0].d    = in_upd;
  assign in_ready      = g_lvl[0].r;
  assign out_valid     = g_lvl[LOGN].v;
  assign out_upd       = g_lvl[LOGN].d;
  assign g_lvl[LOGN].r = out_ready;

  if (N == 1) begin : g_wire
    assign conflict = '0;
    assign busy     = 1'b0;
  end else begin : g_bfly
    logic [LOGN-1:0] stage_busy;
    for (genvar s = 0; s < LOGN; s++) begin : g_busy
      assign stage_busy[s] = |g_lvl[s+1].v;
    end
    assign busy = |stage_busy;
    for (genvar s = 0; s < LOGN; s++) begin : g_stage
      for (genvar k = 0; k < N/2; k++) begin : g_sw
        // k-th position with bit s clear, and its partner
        localparam int P = ((k >> s) << (s+1)) | (k & ((1 << s) - 1));
        localparam int Q = P | (1 << s);
        route_switch #(.BIT(s)) u_sw (
          .clk, .rst_n,
          .in_valid ({g_lvl[s].v[Q],   g_lvl[s].v[P]}),
          .in_upd   ({g_lvl[s].d[Q],   g_lvl[s].d[P]}),
          .in_ready ({g_lvl[s].r[Q],   g_lvl[s].r[P]}),
          .out_valid({g_lvl[s+1].v[Q], g_lvl[s+1].v[P]}),
          .out_upd  ({g_lvl[s+1].d[Q], g_lvl[s+1].d[P]}),
          .out_ready({g_lvl[s+1].r[Q], g_lvl[s+1].r[P]}),
          .conflict (conflict[s*(N/2) + k])
        );
      end
    end
  end

  initial assert (N >= 1 && (N & (N-1)) == 0) else $error("N must be a power of two");
endmodule
