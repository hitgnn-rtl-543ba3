// tb_agg_bank: self-checking test of agg_bank (DEPTH = 64).
//
// Writes random words to random addresses for 2000 cycles and compares every
// combinational read against a reference array kept by the testbench. The
// reference starts from a full write pass, so no unwritten word is ever read.
module tb_agg_bank;
  import hitgnn_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [5:0] raddr, waddr;
  fvec_t rdata, wdata;
  logic we;
  agg_bank #(.DEPTH(DEPTH)) dut (.*);

  fvec_t ref_mem [DEPTH];
  int checks = 0, failures = 0;

  function automatic fvec_t rnd();
    fvec_t f; for (int j = 0; j < SIMD; j++) f[j] = data_t'($urandom); return f;
  endfunction

  initial begin
    we = 0; raddr = '0; waddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = rnd(); ref_mem[a] = wdata;
    end
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      we = $urandom_range(1); waddr = 6'($urandom); wdata = rnd(); raddr = 6'($urandom);
      #1;
      checks++;
      if (rdata !== ref_mem[raddr]) begin failures++; $display("FAIL: addr %0d", raddr); end
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
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
