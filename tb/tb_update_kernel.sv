// tb_update_kernel: self-checking test of update_kernel (COLS = 8,
// MAX_DST = 32).
//
// A random 48 x 8 weight matrix (three slices of 16 rows) and random
// aggregated features for 20 vertices. For each slice the test waits until
// the array is empty and loads the slice's 16 weight rows. It then streams
// the 20 vertex slices, one per cycle, with in_first set on slice 0. The
// result is read with f_out = 6 and ReLU on, then with ReLU off. Each value
// must equal sum over slices and rows of (a * w) >>> 16 (truncated per
// product, wrapping sums), computed by the testbench. The ReLU and f_out
// masking are checked as well. Latency check: busy must fall
// SIMD + COLS cycles after the last vertex entered.
module tb_update_kernel;
  import hitgnn_pkg::*;
  localparam int COLS = 8, MAX_DST = 32, NV = 20, NSL = 3, FOUT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_load_en, in_valid, in_first, relu, busy;
  logic [3:0] w_load_row;
  data_t [COLS-1:0] w_load_data, rd_vec;
  fvec_t in_vec;
  logic [DST_W-1:0] in_vidx, rd_vidx;
  logic [FOUT_W:0] f_out;
  update_kernel #(.COLS(COLS), .MAX_DST(MAX_DST)) dut (.*);

  data_t W [NSL*SIMD][COLS];
  data_t A [NV][NSL*SIMD];
  data_t ref_o [NV][COLS];
  int checks = 0, failures = 0;

  initial begin
    int lat;
    w_load_en = 0; w_load_row = '0; w_load_data = '0; in_valid = 0; in_first = 0; in_vec = '0; in_vidx = '0;
    rd_vidx = '0; relu = 0; f_out = FOUT_W'(FOUT);
    for (int r = 0; r < NSL*SIMD; r++) for (int c = 0; c < COLS; c++) W[r][c] = data_t'($urandom_range(32'h3FFFF)) - 32'sh1FFFF;
    for (int v = 0; v < NV; v++) for (int r = 0; r < NSL*SIMD; r++) A[v][r] = data_t'($urandom_range(32'h3FFFF)) - 32'sh1FFFF;
    for (int v = 0; v < NV; v++) for (int c = 0; c < COLS; c++) begin
      ref_o[v][c] = '0;
      for (int r = 0; r < NSL*SIMD; r++) ref_o[v][c] += data_t'((longint'(A[v][r]) * longint'(W[r][c])) >>> 16);
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NSL; k++) begin
      @(negedge clk);
      while (busy) @(negedge clk);
      for (int r = 0; r < SIMD; r++) begin
        w_load_en = 1; w_load_row = 4'(r);
        for (int c = 0; c < COLS; c++) w_load_data[c] = W[k*SIMD + r][c];
        @(negedge clk);
      end
      w_load_en = 0;
      for (int v = 0; v < NV; v++) begin
        in_valid = 1; in_first = (k == 0); in_vidx = DST_W'(v);
        for (int j = 0; j < SIMD; j++) in_vec[j] = A[v][k*SIMD + j];
        @(negedge clk);
      end
      in_valid = 0;
      lat = 0;
      while (busy) begin @(negedge clk); lat++; end
      checks++;
      if (lat != SIMD + COLS - 1) begin failures++; $display("FAIL: drain latency %0d", lat); end
    end
    for (int pass = 0; pass < 2; pass++) begin
      relu = (pass == 0);
      for (int v = 0; v < NV; v++) begin
        rd_vidx = DST_W'(v); #1;
        for (int c = 0; c < COLS; c++) begin
          automatic data_t e = (c >= FOUT) ? '0 : (relu && ref_o[v][c] < 0) ? '0 : ref_o[v][c];
          checks++;
          if (rd_vec[c] !== e) begin failures++; $display("FAIL: v%0d c%0d %0d != %0d", v, c, rd_vec[c], e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
