// gather_pe: accumulates the updates routed to it into its on-chip result
// buffer. This is the gather half of the scatter-gather aggregate kernel.
//
// Gather PE j of N owns the destination vertices with dst mod N == j. It keeps
// vertex dst at word dst / N. For each update it does
// result_buffer[dst] += value, lane by lane, as one read-modify-write in a
// single cycle. So it takes one update per cycle and never stalls
// (in_ready is always high).
//
// The buffer has two banks (agg_bank). While the aggregate kernel sums slice k
// into bank acc_bank, the update kernel drains slice k-1 from the other bank.
// That is how aggregation and update overlap. The drain port reads one word
// combinationally (drain_data) and clears it in the same cycle, so a drained
// bank is ready for reuse. clr_en zeroes one word in both banks; it is used
// before the first pass of a layer. Two-bank ping-pong and read-and-clear are
// this design's choices.
module gather_pe
  import hitgnn_pkg::*;
#(
  parameter int N     = 8,
  parameter int DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  upd_t                     in_upd,
  output logic                     in_ready,
  input  logic                     acc_bank,
  input  logic                     drain_en,
  input  logic                     drain_bank,
  input  logic [$clog2(DEPTH)-1:0] drain_addr,
  output fvec_t                    drain_data,
  input  logic                     clr_en,
  input  logic [$clog2(DEPTH)-1:0] clr_addr
);
  localparam int AW   = $clog2(DEPTH);
  localparam int LOGN = (N > 1) ? $clog2(N) : 0;

  wire [AW-1:0] acc_addr = AW'(in_upd.dst >> LOGN);

  logic [AW-1:0] raddr [2];
  fvec_t         rdata [2];
  logic          we    [2];
  logic [AW-1:0] waddr [2];
  fvec_t         wdata [2];

  assign in_ready = 1'b1;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    always_comb begin
      raddr[b] = (acc_bank == b[0]) ? acc_addr : drain_addr;
      we[b]    = 1'b0;
      waddr[b] = raddr[b];
      wdata[b] = '0;
      if (clr_en) begin
        we[b] = 1'b1; waddr[b] = clr_addr;
      end else if (acc_bank == b[0] && in_valid) begin
        we[b] = 1'b1; wdata[b] = fvec_add(rdata[b], in_upd.val);
      end else if (acc_bank != b[0] && drain_en && drain_bank == b[0]) begin
        we[b] = 1'b1;                      // read-and-clear
      end
    end
    agg_bank #(.DEPTH(DEPTH)) u_bank (
      .clk, .raddr(raddr[b]), .rdata(rdata[b]),
      .we(we[b]), .waddr(waddr[b]), .wdata(wdata[b])
    );
  end

  assign drain_data = rdata[drain_bank];

  a_no_clash: assert property (@(posedge clk) disable iff (!rst_n)
                               drain_en |-> drain_bank != acc_bank);
  a_no_clr_acc: assert property (@(posedge clk) disable iff (!rst_n)
                                 clr_en |-> !in_valid);
endmodule
