// tb_weight_buffer: loads 48 channels (three 16-lane groups) of random 3x3
// weights with random gaps, then reads each group and compares every lane
// and tap with what was sent (channel c -> group c/16, lane c%16).  Checks
// the load count, `loaded`, and a second, shorter load after `clear`.
module tb_weight_buffer;
  import dcn_pkg::*;
  localparam int CM = 48, GW = 2, CW = $clog2(CM + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          clear = 1'b0;
  logic [CW-1:0] nch = '0;
  logic          in_valid = 1'b0, in_ready, loaded;
  wchan_t        in_data = '0;
  logic [GW-1:0] rd_grp = '0;
  wgroup_t       rd_w;

  weight_buffer #(.C_MAX(CM)) dut (.*);

  int checks = 0, failures = 0;
  byte wv [CM][TAPS];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic load(int n);
    @(negedge clk); clear = 1'b1; nch = CW'(n);
    @(negedge clk); clear = 1'b0;
    for (int c = 0; c < n; c++) begin
      for (int t = 0; t < TAPS; t++) wv[c][t] = byte'($urandom);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1'b1;
      for (int t = 0; t < TAPS; t++) in_data[t] = wv[c][t];
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 1'b0;
    end
    #1;
    check(loaded && !in_ready, "loaded/ready wrong after load");
  endtask

  task automatic readback(int n);
    for (int g = 0; g < n / PC; g++) begin
      rd_grp = GW'(g);
      #1;
      for (int l = 0; l < PC; l++)
        for (int t = 0; t < TAPS; t++)
          check(rd_w[l][t] == wv[g*PC+l][t],
                $sformatf("group %0d lane %0d tap %0d: got %0d exp %0d", g, l, t,
                          rd_w[l][t], wv[g*PC+l][t]));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(CM);
    readback(CM);
    load(PC);
    readback(PC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
