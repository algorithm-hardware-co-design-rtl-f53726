// dw_conv3x3: the depthwise 3x3 multiply-accumulate array (PC x 9 MACs).
//
// Each input beat carries the nine taps of PC channel lanes (from the sample
// packer) and the nine weights of those lanes (from the weight buffer).  Lane
// c computes  out[c] = sum_{t=0..8} samp[t][c] * w[c][t]  exactly: signed
// DATA_W x DATA_W products, summed into ACC_W bits, with no rounding, bias or
// activation.  One beat per cycle, latency two cycles: stage 1 registers the
// 144 products, stage 2 registers the nine-input sums.  The whole pipe stalls
// while the output is valid and not accepted (valid/ready on both sides).
//
// The 16 x 9 multiplier array for depthwise layers follows the source design;
// precision, pipelining and handshake are this design's choices.
module dw_conv3x3 (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  dcn_pkg::window_t  in_samp,
  input  dcn_pkg::wgroup_t  in_w,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output dcn_pkg::result_t  out_data,
  output logic              out_last
);
  import dcn_pkg::*;

  typedef logic signed [2*DATA_W-1:0] prod_t;

  prod_t   prod [PC][TAPS];
  logic    p_valid, p_last;
  logic    adv;
  result_t sum;

  assign adv      = !out_valid || out_ready;
  assign in_ready = adv;

  always_comb begin
    for (int c = 0; c < PC; c++) begin
      sum[c] = '0;
      for (int t = 0; t < TAPS; t++)
        sum[c] = sum[c] + ACC_W'(prod[c][t]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_valid   <= 1'b0;
      out_valid <= 1'b0;
    end else if (adv) begin
      p_valid   <= in_valid;
      out_valid <= p_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      for (int c = 0; c < PC; c++)
        for (int t = 0; t < TAPS; t++)
          prod[c][t] <= in_samp[t][c] * in_w[c][t];
      p_last   <= in_last;
      out_data <= sum;
      out_last <= p_last;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("dw_conv3x3: output changed while stalled");

endmodule
