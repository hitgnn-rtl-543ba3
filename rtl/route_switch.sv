// route_switch: 2x2 switch of the butterfly routing network.
//
// Each input carries an update. It leaves on output 0 or 1 by bit BIT of its
// destination index. Each output is a one-entry register with valid/ready, and
// a register that is being emptied can take a new entry in the same cycle.
// When both inputs want the same free output, the switch grants one and
// conflict pulses. The other input waits. Grants alternate between the two
// inputs so neither starves. The stalled input keeps its data (valid/ready
// rule), so nothing is lost.
module route_switch
  import hitgnn_pkg::*;
#(
  parameter int BIT = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] in_valid,
  input  upd_t [1:0] in_upd,
  output logic [1:0] in_ready,
  output logic [1:0] out_valid,
  output upd_t [1:0] out_upd,
  input  logic [1:0] out_ready,
  output logic       conflict
);
  logic [1:0] prio;          // per output: input favoured on a conflict
  logic [1:0] want [2];      // want[o][i]: input i wants output o
  logic [1:0] grant [2];     // grant[o][i]
  logic [1:0] free;

  always_comb begin
    conflict = 1'b0;
    in_ready = '0;
    for (int o = 0; o < 2; o++) begin
      free[o] = !out_valid[o] || out_ready[o];
      for (int i = 0; i < 2; i++)
        want[o][i] = in_valid[i] && (in_upd[i].dst[BIT] == o[0]);
      grant[o] = '0;
      if (free[o]) begin
        if (want[o] == 2'b11) begin
          grant[o][prio[o]] = 1'b1;
          conflict = 1'b1;
        end else begin
          grant[o] = want[o];
        end
      end
      in_ready |= grant[o];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= '0;
      prio      <= '0;
    end else begin
      for (int o = 0; o < 2; o++) begin
        if (free[o]) out_valid[o] <= |grant[o];
        if (want[o] == 2'b11 && free[o]) prio[o] <= ~prio[o];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < 2; o++)
      if (free[o] && |grant[o]) out_upd[o] <= grant[o][1] ? in_upd[1] : in_upd[0];
  end
endmodule
