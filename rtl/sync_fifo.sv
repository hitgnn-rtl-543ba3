// sync_fifo: single-clock first-in first-out buffer of DEPTH entries of type T.
//
// Write when in_valid && in_ready; read when out_valid && out_ready. The head
// entry is presented combinationally on out_data. DEPTH must be a power of two.
// count gives the number of stored entries. Storage is a plain array; a
// simultaneous push and pop on a full FIFO is refused (in_ready is low when
// full), which keeps in_ready independent of out_ready.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  T     in_data,
  output logic in_ready,
  output logic out_valid,
  output T     out_data,
  input  logic out_ready,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH-1)) == 0) else $error("DEPTH must be a power of two");
endmodule
