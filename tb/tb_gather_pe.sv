// tb_gather_pe: self-checking test of gather_pe (N = 4, DEPTH = 32).
//
// Clears both banks, then runs three rounds. In each round random updates,
// about 200, accumulate into bank acc_bank. At the same time the previous
// round's bank is drained, read and cleared, word by word. Each drained word
// must equal the sum of the updates of that round, computed by the
// testbench, and the word must be zero afterwards (checked in the next round
// of that bank).
module tb_gather_pe;
  import hitgnn_pkg::*;
  localparam int N = 4, DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, acc_bank, drain_en, drain_bank, clr_en;
  upd_t in_upd;
  logic [4:0] drain_addr, clr_addr;
  fvec_t drain_data;
  gather_pe #(.N(N), .DEPTH(DEPTH)) dut (.*);

  fvec_t expect_b [2][DEPTH];
  int checks = 0, failures = 0;

  task automatic drain_word(input logic b, input int a);
    drain_en = 1; drain_bank = b; drain_addr = 5'(a);
    #1;
    checks++;
    if (drain_data !== expect_b[b][a]) begin failures++; $display("FAIL: bank %0d word %0d", b, a); end
    expect_b[b][a] = '0;
  endtask

  initial begin
    in_valid = 0; in_upd = '0; acc_bank = 0; drain_en = 0; drain_bank = 1; drain_addr = '0; clr_en = 0; clr_addr = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); clr_en = 1; clr_addr = 5'(a);
      expect_b[0][a] = '0; expect_b[1][a] = '0;
    end
    @(negedge clk); clr_en = 0;
    for (int round = 0; round < 4; round++) begin
      acc_bank = round[0];
      for (int c = 0; c < 200; c++) begin
        @(negedge clk);
        in_valid = $urandom_range(1);
        // destinations owned by this PE: dst mod N == 1
        in_upd.dst = DST_W'($urandom_range(DEPTH-1) * N + 1);
        for (int j = 0; j < SIMD; j++) in_upd.val[j] = data_t'($urandom_range(2000)) - 1000;
        drain_en = 0;
        if (round > 0 && c < DEPTH) drain_word(!acc_bank, c);
        @(posedge clk);
        if (in_valid)
          expect_b[acc_bank][in_upd.dst / N] = fvec_add(expect_b[acc_bank][in_upd.dst / N], in_upd.val);
      end
      @(negedge clk); in_valid = 0; drain_en = 0;
    end
    // drain the last round
    acc_bank = 0;
    for (int a = 0; a < DEPTH; a++) begin @(negedge clk); drain_word(1, a); end
    @(negedge clk); drain_en = 0;
    checks++;
    if (!in_ready) failures++;
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
