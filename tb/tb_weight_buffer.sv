// tb_weight_buffer: self-checking test of weight_buffer (ROWS = 64,
// COLS = 8).
//
// Random writes go to the buffer and to a shadow array held by the
// testbench. Random reads are compared with the shadow: a row must be
// visible in the cycle after its write (the read port is combinational),
// and a written row must not disturb any other row. Every row is written
// first, so no uninitialised row is ever compared.
module tb_weight_buffer;
  import hitgnn_pkg::*;
  localparam int ROWS = 64, COLS = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [$clog2(ROWS)-1:0] raddr, waddr;
  data_t [COLS-1:0] rdata, wdata;
  logic we;
  weight_buffer #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  data_t [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  initial begin
    raddr = '0; waddr = '0; wdata = '0; we = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1; waddr = 6'(r);
      for (int c = 0; c < COLS; c++) wdata[c] = data_t'($urandom);
      shadow[r] = wdata;
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      raddr = 6'($urandom_range(ROWS-1)); #1;
      checks++;
      if (rdata !== shadow[raddr]) begin failures++; $display("FAIL: row %0d", raddr); end
      we = ($urandom_range(1) == 1); waddr = 6'($urandom_range(ROWS-1));
      for (int c = 0; c < COLS; c++) wdata[c] = data_t'($urandom);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
