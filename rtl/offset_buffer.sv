// offset_buffer: receives the per-pixel square offsets of a layer, turns each
// into a small integer and keeps the whole offset map on chip.
//
// Each incoming offset is a signed fixed-point number (OFF_IN_W bits, OFF_FRAC
// of them fractional).  It is rounded to the nearest integer (halves round
// up), then clamped to [0, N_BOUND].  Rounding and the [0, N] range are the
// source design's algorithm changes ("Round" and "Bound"); there they are
// enforced during training and inference, here the clamp is also applied in
// hardware so that an out-of-range value can never address outside the line
// buffer.  The number format and the rounding rule are this design's choice.
//
// The map (h*w entries, row-major) is stored once per layer and read again
// for every channel group, so offsets cross the memory port only once.
//
// Interface: valid/ready input stream; `clear` restarts loading at address 0;
// `loaded` rises once `npix` offsets are stored.  Read port: rd_data holds
// the entry at rd_addr one clock after rd_addr is presented.
module offset_buffer #(
  parameter int unsigned N_BOUND  = dcn_pkg::N_BOUND,
  parameter int unsigned H_MAX    = dcn_pkg::H_MAX,
  parameter int unsigned W_MAX    = dcn_pkg::W_MAX,
  parameter int unsigned OFF_IN_W = dcn_pkg::OFF_IN_W,
  parameter int unsigned OFF_FRAC = dcn_pkg::OFF_FRAC,
  localparam int unsigned DEPTH   = H_MAX * W_MAX,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned OFF_W   = $clog2(N_BOUND + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic [AW:0]                npix,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic signed [OFF_IN_W-1:0] in_data,
  output logic                       loaded,
  input  logic [AW-1:0]              rd_addr,
  output logic [OFF_W-1:0]           rd_data
);

  logic [OFF_W-1:0] mem [DEPTH];
  logic [AW:0]      wr_cnt;

  // Round half up: add one half, drop the fraction (arithmetic shift).
  logic signed [OFF_IN_W:0] rounded;
  logic [OFF_W-1:0]         clamped;

  always_comb begin
    rounded = ($signed({in_data[OFF_IN_W-1], in_data}) +
               $signed((OFF_IN_W+1)'(1) <<< (OFF_FRAC - 1))) >>> OFF_FRAC;
    if (rounded < 0)
      clamped = '0;
    else if (rounded > $signed((OFF_IN_W+1)'(N_BOUND)))
      clamped = OFF_W'(N_BOUND);
    else
      clamped = OFF_W'(rounded);
  end

  assign in_ready = (wr_cnt < npix) && !clear;
  assign loaded   = (wr_cnt >= npix);

  always_ff @(posedge clk) begin
    if (!rst_n || clear)
      wr_cnt <= '0;
    else if (in_valid && in_ready)
      wr_cnt <= wr_cnt + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      mem[wr_cnt[AW-1:0]] <= clamped;
    rd_data <= mem[rd_addr];
  end

endmodule
