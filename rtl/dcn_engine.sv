// dcn_engine: depthwise deformable 3x3 convolution engine (top level).
//
// Computes, for every channel c < cfg_c and output pixel (y, x) of an
// cfg_h x cfg_w feature map,
//     res[c][y][x] = sum_{i,j in 0..2} wt[c][3i+j] * act[c][y+(i-1)d][x+(j-1)d]
// where d = clamp(round(offset[y][x]), 0, N_BOUND) is the learned half-side
// of a square sampling window (zero outside the image).  Restricting the
// deformable offsets to rounded, bounded, square windows is what lets a
// 2N+1 line buffer hold every input that can be sampled and lets three
// buffer ports deliver a window column per cycle.
//
// Blocks, as in the source design's engine diagram: an offset buffer and a
// weight buffer loaded from the high-performance memory port, a 15-line line
// buffer fed from the cache-coherent port, three parallel read ports
// (multiport_sel), the sample packer (deform_m2s) and the 16 x 9 MAC
// depthwise array (dw_conv3x3), whose results go back to memory.  The memory
// ports themselves (AXI masters, the processor's cache and DDR controller)
// are outside; here they are four valid/ready streams:
//   off_*  cfg_h*cfg_w offsets, row-major, signed Q(OFF_IN_W-OFF_FRAC).OFF_FRAC
//   wt_*   cfg_c beats, one channel each, nine taps (tap 3i+j at bits 8(3i+j))
//   act_*  input pixels of 16 channels, order: group, row, column
//   res_*  results of 16 channels (20 bits each), same order; res_last on
//          the final beat of the layer
// Operation: pulse `start` with cfg_* valid while idle; the engine clears its
// buffers, accepts offsets and weights, starts sampling once both are
// complete and pulses `done` when the last result is accepted.  cfg_c must
// be a multiple of 16.  One result beat per three cycles in steady state plus
// one cycle per output row and the wait for the first N+1 rows of each group.
module dcn_engine #(
  parameter int unsigned N_BOUND = dcn_pkg::N_BOUND,
  parameter int unsigned H_MAX   = dcn_pkg::H_MAX,
  parameter int unsigned W_MAX   = dcn_pkg::W_MAX,
  parameter int unsigned C_MAX   = dcn_pkg::C_MAX,
  localparam int unsigned LINES  = 2 * N_BOUND + 1,
  localparam int unsigned NGRP   = C_MAX / dcn_pkg::PC,
  localparam int unsigned GW     = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned HW     = $clog2(H_MAX),
  localparam int unsigned CW     = $clog2(W_MAX),
  localparam int unsigned AW     = $clog2(H_MAX * W_MAX),
  localparam int unsigned BW     = $clog2(LINES),
  localparam int unsigned OFF_W  = $clog2(N_BOUND + 1),
  localparam int unsigned CCW    = $clog2(C_MAX + 1),
  localparam int unsigned RW     = dcn_pkg::ROWCNT_W,
  localparam int unsigned NP     = dcn_pkg::NPORTS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // control
  input  logic                              start,
  input  logic [HW:0]                       cfg_h,
  input  logic [CW:0]                       cfg_w,
  input  logic [CCW-1:0]                    cfg_c,
  output logic                              busy,
  output logic                              done,
  // offsets (HP port)
  input  logic                              off_valid,
  output logic                              off_ready,
  input  logic signed [dcn_pkg::OFF_IN_W-1:0] off_data,
  // weights (HP port)
  input  logic                              wt_valid,
  output logic                              wt_ready,
  input  dcn_pkg::wchan_t                   wt_data,
  // input activations (ACP port)
  input  logic                              act_valid,
  output logic                              act_ready,
  input  dcn_pkg::pixel_t                   act_data,
  // results (HP port)
  output logic                              res_valid,
  input  logic                              res_ready,
  output dcn_pkg::result_t                  res_data,
  output logic                              res_last
);
  import dcn_pkg::*;

  logic [HW:0]    h_q;
  logic [CW:0]    w_q;
  logic [CCW-1:0] c_q;
  logic [GW:0]    ngrp;
  logic [AW:0]    npix;
  logic           clear;

  assign clear = start && !busy;
  assign ngrp  = (GW+1)'(c_q / PC);
  assign npix  = (AW+1)'(h_q * w_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      h_q  <= '0;
      w_q  <= '0;
      c_q  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        h_q  <= cfg_h;
        w_q  <= cfg_w;
        c_q  <= cfg_c;
        busy <= 1'b1;
      end else if (res_valid && res_ready && res_last) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // Offset buffer
  logic [AW-1:0]    off_addr;
  logic [OFF_W-1:0] off_d;
  logic             off_loaded;

  offset_buffer #(.N_BOUND(N_BOUND), .H_MAX(H_MAX), .W_MAX(W_MAX)) u_off (
    .clk, .rst_n, .clear, .npix,
    .in_valid(off_valid), .in_ready(off_ready), .in_data(off_data),
    .loaded(off_loaded), .rd_addr(off_addr), .rd_data(off_d)
  );

  // Weight buffer
  logic          wt_loaded;
  logic [GW-1:0] s_grp;
  wgroup_t       grp_w;

  weight_buffer #(.C_MAX(C_MAX)) u_wt (
    .clk, .rst_n, .clear, .nch(c_q),
    .in_valid(wt_valid), .in_ready(wt_ready), .in_data(wt_data),
    .loaded(wt_loaded), .rd_grp(s_grp), .rd_w(grp_w)
  );

  // Line buffer and its three read ports
  logic [RW-1:0]    rows_written, cur_row;
  logic [CW-1:0]    rd_col;
  logic [LINES-1:0] rd_en;
  pixel_t           bank_q [LINES];
  logic [BW-1:0]    sel    [NP];
  pixel_t           port_q [NP];

  line_buffer #(.N_BOUND(N_BOUND), .LINES(LINES), .W_MAX(W_MAX)) u_lb (
    .clk, .rst_n, .clear, .w(w_q),
    .in_valid(act_valid), .in_ready(act_ready), .in_data(act_data),
    .rows_written, .cur_row, .rd_col, .rd_en, .bank_q
  );

  multiport_sel #(.LINES(LINES), .NPORTS(NP)) u_ports (
    .bank_q, .sel, .port_q
  );

  // Sample packer
  logic    s_valid, s_ready, s_last, m2s_busy;
  window_t s_samp;

  deform_m2s #(.N_BOUND(N_BOUND), .LINES(LINES), .H_MAX(H_MAX), .W_MAX(W_MAX),
               .C_MAX(C_MAX)) u_m2s (
    .clk, .rst_n, .start(clear), .h(h_q), .w(w_q), .ngrp,
    .go(busy && off_loaded && wt_loaded),
    .off_addr, .off_d, .rows_written, .cur_row, .rd_col, .rd_en, .sel, .port_q,
    .out_valid(s_valid), .out_ready(s_ready), .out_samp(s_samp),
    .out_grp(s_grp), .out_last(s_last), .busy(m2s_busy)
  );

  // Depthwise MAC array
  dw_conv3x3 u_conv (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_samp(s_samp), .in_w(grp_w),
    .in_last(s_last),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data),
    .out_last(res_last)
  );

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    clear |-> !m2s_busy)
    else $error("dcn_engine: start while the sampler is still running");

endmodule
