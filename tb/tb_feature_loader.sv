// tb_feature_loader: self-checking test of feature_loader.
//
// Streams 200 random source vertices, about half marked local, into the
// loader. A DDR model and a host model answer in order with random latency
// (2..12 cycles) and random request backpressure. Each response word is a
// known function of its request: DDR lane j = addr*16 + j, host lane j =
// vid*64 + slice + j*7. The checks: every slice leaves in vertex order with
// the right contents, each request went to the correct port with the correct
// address, the event pulses count local and remote fetches correctly, and
// output backpressure loses nothing.
module tb_feature_loader;
  import hitgnn_pkg::*;
  localparam int NV = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [SLICE_W-1:0] slice = 6'd3;
  logic vtx_valid, vtx_ready;
  vtx_entry_t vtx;
  logic ddr_req_valid, ddr_req_ready, ddr_resp_valid;
  logic [DDR_AW-1:0] ddr_req_addr;
  fvec_t ddr_resp_data;
  logic host_req_valid, host_req_ready, host_resp_valid;
  host_req_t host_req;
  fvec_t host_resp_data;
  logic feat_valid, feat_ready;
  fvec_t feat;
  logic local_fetch, remote_fetch, busy;

  feature_loader #(.FIFO_DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  vtx_entry_t vlist [NV];
  int n_local = 0, n_remote = 0, ev_local = 0, ev_remote = 0;

  function automatic fvec_t ddr_word(logic [DDR_AW-1:0] a);
    fvec_t f;
    for (int j = 0; j < SIMD; j++) f[j] = data_t'(a * 16 + j);
    return f;
  endfunction
  function automatic fvec_t host_word(host_req_t r);
    fvec_t f;
    for (int j = 0; j < SIMD; j++) f[j] = data_t'(r.vid * 64 + r.slice + j * 7);
    return f;
  endfunction

  // in-order memory models with random latency
  int unsigned dq_t[$], hq_t[$];
  fvec_t dq_d[$], hq_d[$];
  int last_d = 0, last_h = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ddr_req_valid && ddr_req_ready) begin
        automatic int t = cycle + 2 + int'($urandom_range(10)); if (t <= last_d) t = last_d + 1; last_d = t;
        dq_t.push_back(t); dq_d.push_back(ddr_word(ddr_req_addr));
      end
      if (host_req_valid && host_req_ready) begin
        automatic int t = cycle + 2 + int'($urandom_range(10)); if (t <= last_h) t = last_h + 1; last_h = t;
        hq_t.push_back(t); hq_d.push_back(host_word(host_req));
      end
      if (local_fetch)  ev_local++;
      if (remote_fetch) ev_remote++;
    end
  end
  always @(negedge clk) begin
    ddr_req_ready  <= ($urandom_range(3) != 0);
    host_req_ready <= ($urandom_range(3) != 0);
    feat_ready     <= ($urandom_range(4) != 0);
    ddr_resp_valid <= 0; host_resp_valid <= 0;
    if (dq_t.size() > 0 && dq_t[0] <= cycle) begin
      ddr_resp_valid <= 1; ddr_resp_data <= dq_d[0]; void'(dq_t.pop_front()); void'(dq_d.pop_front());
    end
    if (hq_t.size() > 0 && hq_t[0] <= cycle) begin
      host_resp_valid <= 1; host_resp_data <= hq_d[0]; void'(hq_t.pop_front()); void'(hq_d.pop_front());
    end
  end

  // request-side checks
  int vi = 0;
  always @(posedge clk) if (rst_n && vtx_valid && vtx_ready) begin
    checks++;
    if (vtx.local_hit) begin
      if (!(ddr_req_valid && ddr_req_addr == vtx.row + DDR_AW'(slice) && !host_req_valid)) begin
        failures++; $display("FAIL: local vertex %0d not sent to DDR correctly", vi);
      end
    end else begin
      if (!(host_req_valid && host_req.vid == vtx.vid && host_req.slice == slice && !ddr_req_valid)) begin
        failures++; $display("FAIL: remote vertex %0d not sent to host correctly", vi);
      end
    end
  end

  // source
  initial begin
    for (int i = 0; i < NV; i++) begin
      vlist[i].vid = VID_W'($urandom_range(2000000));
      vlist[i].local_hit = $urandom_range(1);
      vlist[i].row = DDR_AW'($urandom_range(100000) * 8);
      if (vlist[i].local_hit) n_local++; else n_remote++;
    end
    vtx_valid = 0; vtx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (vi < NV) begin
      @(negedge clk);
      vtx_valid = ($urandom_range(4) != 0);
      vtx = vlist[vi];
      @(posedge clk);
      if (vtx_valid && vtx_ready) vi++;
    end
    @(negedge clk); vtx_valid = 0;
  end

  // sink
  int oi = 0;
  always @(posedge clk) if (rst_n && feat_valid && feat_ready) begin
    fvec_t exp_f;
    host_req_t hr;
    if (vlist[oi].local_hit) exp_f = ddr_word(vlist[oi].row + DDR_AW'(slice));
    else begin hr.vid = vlist[oi].vid; hr.slice = slice; exp_f = host_word(hr); end
    checks++;
    if (feat !== exp_f) begin failures++; $display("FAIL: slice %0d wrong data", oi); end
    oi++;
    if (oi == NV) begin
      checks += 2;
      if (ev_local != n_local)   begin failures++; $display("FAIL: local events %0d != %0d", ev_local, n_local); end
      if (ev_remote != n_remote) begin failures++; $display("FAIL: remote events %0d != %0d", ev_remote, n_remote); end
      $display("local=%0d remote=%0d cycles=%0d", ev_local, ev_remote, cycle);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, %0d of %0d slices", oi, NV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
