// layer_controller: sequences one GNN layer on the accelerator. It overlaps
// the aggregation of each 16-feature slice with the feature update of the
// slice before it.
//
// The layer's input features (f_in of them) are handled as num_slices passes
// of 16 features. Pass k streams every source vertex (fetching slice k of its
// feature) and every edge group once. The aggregate kernel sums the pass into
// result bank k mod 2. Then the update kernel drains that bank vertex by
// vertex into the systolic array, which holds rows 16k..16k+15 of W^l.
// Two processes run side by side and share two "bank full" flags:
//   aggregation: clear -> for each slice: wait for its bank to be free,
//                pulse pass_start, count src_done up to num_src, wait until
//                the kernel is empty, mark the bank full;
//   update:      for each slice: wait for its bank to be full and the array
//                to be empty, load 16 weight rows (16 cycles; rows >= f_in are
//                loaded as zero), stream num_dst vertices (one per cycle),
//                mark the bank free; after the last slice wait for the array
//                to drain and stream the num_dst outputs.
// So the aggregation of slice k+1 runs while slice k is updated, and a layer
// takes about max(aggregation, update) per slice. The two-bank token scheme
// is this design's choice. overlap is high in cycles where both processes are
// active.
//
// Interface: start (one cycle, with cfg stable until done) begins the layer;
// done pulses with the last output. pass_start / pass_slice tell the
// mini-batch reader outside to stream pass pass_slice; the feature loader uses
// pass_slice as its slice index.
module layer_controller
  import hitgnn_pkg::*;
#(
  parameter int N       = 8,
  parameter int MAX_DST = 16384,
  parameter int ROWS    = 1024
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  layer_cfg_t                   cfg,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // aggregation side
  output logic                         pass_start,
  output logic [SLICE_W-1:0]           pass_slice,
  output logic                         acc_bank,
  input  logic                         src_done,
  input  logic                         agg_busy,
  output logic                         clr_en,
  output logic [$clog2(MAX_DST/N)-1:0] clr_addr,
  // update side
  output logic                         drain_en,
  output logic                         drain_bank,
  output logic [DST_W-1:0]             drain_vidx,
  output logic                         uk_in_valid,
  output logic                         uk_in_first,
  input  logic                         uk_busy,
  output logic [$clog2(ROWS)-1:0]      wb_raddr,
  output logic                         w_load_en,
  output logic [$clog2(SIMD)-1:0]      w_load_row,
  output logic                         w_load_zero,
  // output stream
  output logic                         out_valid,
  output logic [DST_W-1:0]             out_vidx,
  input  logic                         out_ready,
  output logic                         overlap
);
  localparam int LOGN = (N > 1) ? $clog2(N) : 0;
  localparam int CAW  = $clog2(MAX_DST/N);

  typedef enum logic [2:0] {A_IDLE, A_CLEAR, A_WAIT, A_RUN, A_DRAIN} agg_state_e;
  typedef enum logic [2:0] {U_IDLE, U_WAIT, U_WLOAD, U_STREAM, U_OUT_WAIT, U_OUT} upd_state_e;

  agg_state_e as;
  upd_state_e us;
  logic [1:0]          full;
  logic [SLICE_W:0]    a_slice, u_slice;
  logic [19:0]         src_cnt;
  logic [DST_W:0]      clr_cnt, vcnt;
  logic [$clog2(SIMD)-1:0] wrow;

  wire [DST_W:0] clr_words = (cfg.num_dst + (DST_W+1)'(N-1)) >> LOGN;

  // aggregation process
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      as <= A_IDLE; a_slice <= '0; src_cnt <= '0; clr_cnt <= '0;
    end else begin
      case (as)
        A_IDLE:  if (start) begin as <= A_CLEAR; clr_cnt <= '0; a_slice <= '0; end
        A_CLEAR: begin
          clr_cnt <= clr_cnt + 1'b1;
          if (clr_cnt + 1'b1 >= clr_words) as <= A_WAIT;
        end
        A_WAIT: begin
          if (a_slice == cfg.num_slices) as <= A_IDLE;
          else if (!full[a_slice[0]]) begin as <= A_RUN; src_cnt <= '0; end
        end
        A_RUN: begin
          if (src_cnt + 20'(src_done) >= cfg.num_src) as <= A_DRAIN;
          src_cnt <= src_cnt + 20'(src_done);
        end
        A_DRAIN: if (!agg_busy) begin as <= A_WAIT; a_slice <= a_slice + 1'b1; end
        default: as <= A_IDLE;
      endcase
    end
  end

  assign clr_en     = (as == A_CLEAR);
  assign clr_addr   = CAW'(clr_cnt);
  assign pass_start = (as == A_WAIT) && (a_slice != cfg.num_slices) && !full[a_slice[0]];
  assign pass_slice = a_slice[SLICE_W-1:0];
  wire   agg_active = (as == A_RUN) || (as == A_DRAIN);
  assign acc_bank   = agg_active ? a_slice[0] : ~u_slice[0];

  // update process
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      us <= U_IDLE; u_slice <= '0; vcnt <= '0; wrow <= '0; full <= '0;
    end else begin
      if (as == A_DRAIN && !agg_busy) full[a_slice[0]] <= 1'b1;
      case (us)
        U_IDLE: if (start) begin us <= U_WAIT; u_slice <= '0; full <= '0; end
        U_WAIT: begin
          if (u_slice == cfg.num_slices) us <= U_OUT_WAIT;
          else if (full[u_slice[0]] && !uk_busy) begin us <= U_WLOAD; wrow <= '0; end
        end
        U_WLOAD: begin
          wrow <= wrow + 1'b1;
          if (wrow == $clog2(SIMD)'(SIMD-1)) begin
            vcnt <= '0;
            if (cfg.num_dst == 0) begin
              full[u_slice[0]] <= 1'b0; u_slice <= u_slice + 1'b1; us <= U_WAIT;
            end else us <= U_STREAM;
          end
        end
        U_STREAM: begin
          vcnt <= vcnt + 1'b1;
          if (vcnt + 1'b1 == cfg.num_dst) begin
            full[u_slice[0]] <= 1'b0; u_slice <= u_slice + 1'b1; us <= U_WAIT;
          end
        end
        U_OUT_WAIT: if (!uk_busy) begin
          vcnt <= '0;
          us <= (cfg.num_dst == 0) ? U_IDLE : U_OUT;
        end
        U_OUT: if (out_ready) begin
          vcnt <= vcnt + 1'b1;
          if (vcnt + 1'b1 == cfg.num_dst) us <= U_IDLE;
        end
        default: us <= U_IDLE;
      endcase
    end
  end

  wire [15:0] w_idx = 16'(u_slice) * 16'(SIMD) + 16'(wrow);
  assign wb_raddr    = $clog2(ROWS)'(cfg.w_base) + $clog2(ROWS)'(w_idx);
  assign w_load_en   = (us == U_WLOAD);
  assign w_load_row  = wrow;
  assign w_load_zero = (w_idx >= 16'(cfg.f_in));

  assign drain_en    = (us == U_STREAM);
  assign drain_bank  = u_slice[0];
  assign drain_vidx  = DST_W'(vcnt);
  assign uk_in_valid = (us == U_STREAM);
  assign uk_in_first = (u_slice == '0);

  assign out_valid   = (us == U_OUT);
  assign out_vidx    = DST_W'(vcnt);
  assign done        = (us == U_OUT && out_ready && vcnt + 1'b1 == cfg.num_dst) ||
                       (us == U_OUT_WAIT && !uk_busy && cfg.num_dst == 0);
  assign busy        = (as != A_IDLE) || (us != U_IDLE);
  assign overlap     = agg_active && (us == U_WLOAD || us == U_STREAM);

  a_bank_excl: assert property (@(posedge clk) disable iff (!rst_n)
                                drain_en |-> !(agg_active && a_slice[0] == u_slice[0]));
endmodule
