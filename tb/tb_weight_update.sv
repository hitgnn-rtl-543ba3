// tb_weight_update: self-checking test of weight_update wired to a
// weight_buffer (ROWS = 32, COLS = 8).
//
// The buffer is loaded with random weights through the update unit's
// write port disabled, then random gradient rows arrive with random
// learning-rate shifts, sometimes while the unit is disabled. An enabled
// gradient must change the row to w - (g >>> shift) in the next cycle; a
// disabled one must be refused (grad_ready low) and leave the buffer
// untouched. The updated pulse is counted against the accepted gradients.
module tb_weight_update;
  import hitgnn_pkg::*;
  localparam int ROWS = 32, COLS = 8;
  logic clk = 0;
  always #5 clk = ~clk;

  logic enable, grad_valid, grad_ready, wb_we, updated, we;
  logic [4:0] lr_shift;
  logic [$clog2(ROWS)-1:0] grad_row, wb_raddr, wb_waddr, init_addr, waddr;
  data_t [COLS-1:0] grad_vec, wb_rdata, wb_wdata, init_data, wdata;
  weight_update #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  logic init_we;
  assign we    = init_we | wb_we;
  assign waddr = init_we ? init_addr : wb_waddr;
  assign wdata = init_we ? init_data : wb_wdata;
  weight_buffer #(.ROWS(ROWS), .COLS(COLS)) u_wb (
    .clk, .raddr(wb_raddr), .rdata(wb_rdata), .we, .waddr, .wdata);

  data_t [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0, n_upd = 0, n_pulse = 0;

  always @(posedge clk) if (updated) n_pulse++;

  initial begin
    enable = 0; grad_valid = 0; grad_row = '0; grad_vec = '0; lr_shift = '0;
    init_we = 0; init_addr = '0; init_data = '0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      init_we = 1; init_addr = 5'(r);
      for (int c = 0; c < COLS; c++) init_data[c] = data_t'($urandom);
      shadow[r] = init_data;
    end
    @(negedge clk); init_we = 0;
    for (int i = 0; i < 1000; i++) begin
      enable = ($urandom_range(3) != 0);
      grad_valid = ($urandom_range(3) != 0);
      grad_row = 5'($urandom_range(ROWS-1));
      lr_shift = 5'($urandom_range(31));
      for (int c = 0; c < COLS; c++) grad_vec[c] = data_t'($urandom);
      #1;
      checks++;
      if (grad_ready !== enable) begin failures++; $display("FAIL: grad_ready"); end
      if (enable && grad_valid) begin
        for (int c = 0; c < COLS; c++) shadow[grad_row][c] = shadow[grad_row][c] - (grad_vec[c] >>> lr_shift);
        n_upd++;
      end
      @(negedge clk);
      grad_valid = 0;
      for (int r = 0; r < ROWS; r++) begin
        grad_row = 5'(r); #1;
        checks++;
        if (wb_rdata !== shadow[r]) begin failures++; $display("FAIL: row %0d after step %0d", r, i); end
      end
    end
    checks++;
    if (n_pulse != n_upd) begin failures++; $display("FAIL: %0d pulses, %0d updates", n_pulse, n_upd); end
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
