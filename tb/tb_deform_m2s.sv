// tb_deform_m2s: tests the sample packer against simple models of its
// neighbours: an offset memory with one-cycle read, a 15-bank line buffer
// model that writes whole rows as soon as the flow-control rule allows (after
// random delays) and reads enabled banks with one cycle latency, and the
// three-port bank multiplexer.  Every emitted window (9 taps x 16 lanes) is
// compared with the square window of its pixel computed here (zero outside
// the image), together with the group number and last flag.  A second layer
// runs with rows always available and the output always ready and checks
// one window every three cycles inside a row.
module tb_deform_m2s;
  import dcn_pkg::*;
  localparam int HM = 16, WM = 16, CM = 32;
  localparam int HW = 4, CW = 4, AW = 8, GW = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0, go = 1'b0;
  logic [HW:0]   h = '0;
  logic [CW:0]   w = '0;
  logic [GW:0]   ngrp = '0;
  logic [AW-1:0] off_addr;
  logic [2:0]    off_d;
  logic [15:0]   rows_written, cur_row;
  logic [CW-1:0] rd_col;
  logic [LINES-1:0] rd_en;
  logic [3:0]    sel    [NPORTS];
  pixel_t        port_q [NPORTS];
  logic          out_valid, out_ready = 1'b0, out_last, busy;
  window_t       out_samp;
  logic [GW-1:0] out_grp;

  deform_m2s #(.H_MAX(HM), .W_MAX(WM), .C_MAX(CM)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- models --------------------------------------------------------
  int offm [HM*WM];
  int seed = 0;
  bit slow_rows = 1'b1;
  int total_rows = 0;
  pixel_t lb [LINES][WM];
  pixel_t bank_q [LINES];
  logic [15:0] rw = '0;
  assign rows_written = rw;

  function automatic data_t pv(int g, int r, int c, int l);
    return data_t'((g * 7919 + r * 131 + c * 17 + l * 3 + seed) ^ (r * c));
  endfunction

  always @(posedge clk) begin
    off_d <= 3'(offm[off_addr]);
    for (int b = 0; b < LINES; b++)
      if (rd_en[b]) bank_q[b] <= lb[b][rd_col];
  end

  always @(posedge clk) begin
    if (start) rw <= '0;
    else if (int'(rw) < total_rows && rw <= cur_row + 16'(N_BOUND) &&
             (!slow_rows || $urandom_range(0, 7) == 0)) begin
      for (int c = 0; c < WM; c++)
        for (int l = 0; l < PC; l++)
          lb[int'(rw) % LINES][c][l] <= pv(int'(rw) / int'(h), int'(rw) % int'(h), c, l);
      rw <= rw + 1'b1;
    end
  end

  always_comb
    for (int p = 0; p < NPORTS; p++) port_q[p] = bank_q[sel[p]];

  // ---- checking ------------------------------------------------------
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  task automatic run(int hh, int ww, int ng, bit slow, bit rate);
    int total = hh * ww * ng;
    int k = 0;
    int n_wait = 0;
    longint last = 0;
    slow_rows = slow;
    seed = $urandom_range(0, 255);
    for (int i = 0; i < hh * ww; i++) offm[i] = $urandom_range(0, 7);
    @(negedge clk);
    h = (HW+1)'(hh); w = (CW+1)'(ww); ngrp = (GW+1)'(ng);
    total_rows = hh * ng;
    start = 1'b1; go = 1'b0;
    @(negedge clk);
    start = 1'b0;
    repeat (3) @(negedge clk);
    go = 1'b1;
    while (k < total) begin
      @(negedge clk);
      out_ready = rate ? 1'b1 : ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        int g = k / (hh * ww), y = (k / ww) % hh, x = k % ww;
        int d = offm[y * ww + x];
        bit ok = 1'b1;
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++)
            for (int l = 0; l < PC; l++) begin
              int yy = y + (i - 1) * d, xx = x + (j - 1) * d;
              data_t e = (yy >= 0 && yy < hh && xx >= 0 && xx < ww) ? pv(g, yy, xx, l) : '0;
              if (out_samp[3*i+j][l] != e) ok = 1'b0;
            end
        check(ok, $sformatf("window g%0d y%0d x%0d d%0d wrong", g, y, x, d));
        check(int'(out_grp) == g, "group tag");
        check(out_last == (k == total - 1), "last flag");
        if (rate && x > 0)
          check(cyc - last == 3, $sformatf("interval %0d, want 3", cyc - last));
        last = cyc;
        k++;
      end
      if (dut.state == 3'd1 && go) n_wait++;
    end
    repeat (4) @(negedge clk);
    check(!busy, "busy after the last window");
    if (slow) check(n_wait > 0, "never waited for rows");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(10, 9, 2, 1'b1, 1'b0);
    run(16, 16, 2, 1'b1, 1'b0);
    run(12, 11, 1, 1'b0, 1'b1);
    run(2, 3, 2, 1'b1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
