// tb_layer_controller: self-checking test of layer_controller with
// behavioural stand-ins for the two kernels (N = 4, MAX_DST = 64,
// ROWS = 128).
//
// The aggregate-kernel model answers each pass_start by pulsing src_done
// num_src times with random gaps, then holds agg_busy high for a random
// tail. The update-kernel model holds uk_busy high for SIMD + 8 cycles
// after the last streamed vertex. Three layers are run with different
// sizes, including a last slice that is only partly filled (f_in not a
// multiple of 16). Checked in every cycle or at the end of each layer:
//   * clear: clr_en covers addresses 0 .. ceil(num_dst/N)-1 once, before
//     the first pass;
//   * passes: num_slices pass_start pulses with pass_slice 0, 1, ...;
//   * weight load: 16 rows per slice, at w_base + 16k + r, with w_load_zero
//     exactly for rows >= f_in, and only while the array model is idle;
//   * streaming: slice k is streamed only after its aggregation finished,
//     from bank k mod 2, vertices 0 .. num_dst-1 in order, in_first only on
//     slice 0, and never from the bank being accumulated;
//   * output: num_dst outputs in order, only after the array drained, with
//     backpressure; one done pulse;
//   * overlap: aggregation of one slice must run during the update of the
//     previous one at least once.
module tb_layer_controller;
  import hitgnn_pkg::*;
  localparam int N = 4, MAX_DST = 64, ROWS = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, busy, done, pass_start, acc_bank, src_done, agg_busy, clr_en;
  logic [SLICE_W-1:0] pass_slice;
  logic [$clog2(MAX_DST/N)-1:0] clr_addr;
  logic drain_en, drain_bank, uk_in_valid, uk_in_first, uk_busy;
  logic [DST_W-1:0] drain_vidx, out_vidx;
  logic [$clog2(ROWS)-1:0] wb_raddr;
  logic w_load_en, w_load_zero, out_valid, out_ready, overlap;
  logic [$clog2(SIMD)-1:0] w_load_row;

  layer_controller #(.N(N), .MAX_DST(MAX_DST), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // aggregate kernel model
  int agg_done_slices = 0, n_pass = 0;
  initial begin
    src_done = 0; agg_busy = 0;
    forever begin
      @(posedge clk);
      if (pass_start) begin
        automatic int k = 0;
        chk(int'(pass_slice) == n_pass, "pass_slice order");
        n_pass++;
        while (k < int'(cfg.num_src)) begin
          @(negedge clk);
          src_done = ($urandom_range(2) == 0); agg_busy = 1;
          @(posedge clk);
          if (src_done) k++;
        end
        @(negedge clk); src_done = 0;
        repeat ($urandom_range(6)) @(negedge clk);
        agg_busy = 0;
        @(posedge clk);
        agg_done_slices++;
      end
    end
  end

  // update kernel model
  int uk_tail = 0;
  always @(posedge clk) begin
    if (uk_in_valid) uk_tail <= SIMD + 8;
    else if (uk_tail > 0) uk_tail <= uk_tail - 1;
  end
  assign uk_busy = (uk_tail > 0);

  // cycle checks
  int clr_seen = 0, wl_row = 0, wl_slice = 0, st_vidx = 0, st_slice = 0, out_i = 0, n_done = 0, n_overlap = 0;
  bit [63:0] clr_mask;
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(3) != 0);
    if (overlap) n_overlap++;
    if (done) n_done++;
    if (clr_en) begin
      chk(n_pass == 0, "clear after a pass started");
      chk(!clr_mask[clr_addr], "address cleared twice");
      clr_mask[clr_addr] = 1'b1; clr_seen++;
    end
    if (w_load_en) begin
      chk(!uk_busy, "weight load while the array is busy");
      chk(int'(w_load_row) == wl_row, "weight row order");
      chk(int'(wb_raddr) == int'(cfg.w_base) + 16 * wl_slice + wl_row, "weight row address");
      chk(w_load_zero == (16 * wl_slice + wl_row >= int'(cfg.f_in)), "zero padding");
      wl_row++;
      if (wl_row == SIMD) begin wl_row = 0; wl_slice++; end
    end
    if (drain_en) begin
      chk(uk_in_valid, "drain without array input");
      chk(st_slice < agg_done_slices, "slice streamed before its aggregation finished");
      chk(drain_bank == 1'(st_slice), "drain bank");
      chk(int'(drain_vidx) == st_vidx, "drain order");
      chk(uk_in_first == (st_slice == 0), "in_first");
      chk(!(agg_busy && acc_bank == drain_bank), "drain from the bank being accumulated");
      chk(wl_slice == st_slice + 1, "streamed before the slice's weights were loaded");
      st_vidx++;
      if (st_vidx == int'(cfg.num_dst)) begin st_vidx = 0; st_slice++; end
    end
    if (agg_busy) chk(acc_bank == 1'(n_pass - 1), "accumulation bank");
    if (out_valid && out_ready) begin
      chk(!uk_busy, "output before the array drained");
      chk(st_slice == int'(cfg.num_slices), "output before the last slice");
      chk(int'(out_vidx) == out_i, "output order");
      out_i++;
    end
  end

  task automatic run_layer(int ns, int nd, int fin, int wb);
    cfg = '0;
    cfg.num_src = 20'(ns); cfg.num_dst = (DST_W+1)'(nd); cfg.num_slices = (SLICE_W+1)'((fin + 15) / 16);
    cfg.f_in = 11'(fin); cfg.f_out = 9'd8; cfg.w_base = WROW_W'(wb); cfg.relu = 1'b1;
    clr_seen = 0; clr_mask = '0; wl_row = 0; wl_slice = 0; st_vidx = 0; st_slice = 0; out_i = 0;
    n_pass = 0; agg_done_slices = 0; n_done = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    chk(clr_seen == (nd + N - 1) / N, "clear count");
    chk(n_pass == int'(cfg.num_slices), "pass count");
    chk(wl_slice == int'(cfg.num_slices), "weight-load count");
    chk(st_slice == int'(cfg.num_slices), "streamed slices");
    chk(out_i == nd, "output count");
    chk(n_done == 1, "done pulses");
  endtask

  initial begin
    cfg = '0; start = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(20, 10, 40, 0);
    run_layer(5, 30, 64, 17);
    run_layer(12, 64, 9, 100);
    chk(n_overlap > 0, "aggregation never overlapped update");
    $display("overlap cycles=%0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
