// weight_buffer: holds the 3x3 depthwise weights of every channel of a layer.
//
// Weights arrive one channel per beat (nine DATA_W-bit taps, tap 3*i+j at
// bits DATA_W*(3*i+j)) in channel order.  Channel c is stored in lane c % PC
// of group word c / PC, so one read returns the 16 x 9 weights that the
// multiplier array needs for a channel group.  The read is combinational
// (a small distributed memory): the group number travels with the sample
// stream and selects the word in the same cycle.  The source design only
// names this buffer; its organisation is this design's choice.
//
// Interface: valid/ready input stream; `clear` restarts loading; `loaded`
// rises once `nch` channels are stored.
module weight_buffer #(
  parameter int unsigned C_MAX = dcn_pkg::C_MAX,
  localparam int unsigned NGRP = C_MAX / dcn_pkg::PC,
  localparam int unsigned GW   = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned CW   = $clog2(C_MAX + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic [CW-1:0]          nch,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  dcn_pkg::wchan_t        in_data,
  output logic                   loaded,
  input  logic [GW-1:0]          rd_grp,
  output dcn_pkg::wgroup_t       rd_w
);
  import dcn_pkg::*;

  wgroup_t      mem [NGRP];
  logic [CW-1:0] wr_cnt;
  logic [$clog2(PC)-1:0] lane;
  logic [GW-1:0]         grp;

  assign lane     = wr_cnt[$clog2(PC)-1:0];
  assign grp      = GW'(wr_cnt >> $clog2(PC));
  assign in_ready = (wr_cnt < nch) && !clear;
  assign loaded   = (wr_cnt >= nch);
  assign rd_w     = mem[rd_grp];

  always_ff @(posedge clk) begin
    if (!rst_n || clear)
      wr_cnt <= '0;
    else if (in_valid && in_ready)
      wr_cnt <= wr_cnt + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      mem[grp][lane] <= in_data;
  end

endmodule
