// tb_dw_conv3x3: streams 300 random windows and weight sets (including the
// extreme value -128) with random input gaps and random output backpressure,
// and compares each lane's result with a sum of nine products computed
// here.  Checks the last flag, the one-beat-per-cycle rate and the two-cycle
// latency while the output is always ready.
module tb_dw_conv3x3;
  import dcn_pkg::*;
  localparam int NB = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    in_valid = 1'b0, in_ready, in_last = 1'b0;
  window_t in_samp = '0;
  wgroup_t in_w = '0;
  logic    out_valid, out_ready = 1'b0, out_last;
  result_t out_data;

  dw_conv3x3 dut (.*);

  int checks = 0, failures = 0;
  window_t s_q [NB];
  wgroup_t w_q [NB];
  longint  t_in [NB];
  longint  cyc = 0;
  bit      gaps;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic drive(int lo, int hi);
    for (int b = lo; b < hi; b++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1'b1; in_samp = s_q[b]; in_w = w_q[b]; in_last = (b == hi - 1);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      t_in[b] = cyc;
      @(negedge clk);
      in_valid = 1'b0;
    end
  endtask

  task automatic collect(int lo, int hi);
    int b = lo;
    while (b < hi) begin
      @(negedge clk);
      out_ready = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        for (int c = 0; c < PC; c++) begin
          longint e = 0;
          for (int t = 0; t < TAPS; t++)
            e += longint'(s_q[b][t][c]) * longint'(w_q[b][c][t]);
          check(longint'(out_data[c]) == e,
                $sformatf("beat %0d lane %0d: got %0d exp %0d", b, c, out_data[c], e));
        end
        check(out_last == (b == hi - 1), $sformatf("last flag at beat %0d", b));
        if (!gaps) check(cyc - t_in[b] == 2, $sformatf("latency %0d, want 2", cyc - t_in[b]));
        b++;
      end
    end
  endtask

  initial begin
    for (int b = 0; b < NB; b++) begin
      for (int t = 0; t < TAPS; t++)
        for (int c = 0; c < PC; c++) begin
          s_q[b][t][c] = (b % 7 == 0) ? -8'sd128 : data_t'($urandom);
          w_q[b][c][t] = (b % 5 == 0) ? -8'sd128 : data_t'($urandom);
        end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    gaps = 1'b1;
    fork drive(0, 200); collect(0, 200); join
    gaps = 1'b0;
    fork drive(200, NB); collect(200, NB); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
