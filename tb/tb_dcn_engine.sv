// tb_dcn_engine: end-to-end test of the depthwise deformable convolution engine.
//
// Reduced build: layers up to 16 x 16 x 32; N = 7 and 15 lines as in the full design.
// The testbench generates random activations, weights and offsets (offsets
// include negative values, exact halves and values beyond the bound), feeds
// the four streams with random gaps, applies random backpressure on the
// result stream and compares every result beat with a reference computed
// here from the definition:
//   d   = clamp(floor(offset/16 + 0.5), 0, 7)
//   res = sum_{i,j} wt[c][3i+j] * act[c][y+(i-1)d][x+(j-1)d]  (0 outside)
// One layer uses offset 1.0 everywhere, i.e. an ordinary depthwise 3x3
// convolution.  One layer runs with no gaps and no backpressure to check the rate of one
// result every three cycles within a row.  It counts how often each
// mechanism occurred (result backpressure, line buffer full, sampler waiting
// for rows, offset rounding and clamping, d = 0 broadcast, zero padding,
// channel-group change) and fails if one never did.
module tb_dcn_engine;
  import dcn_pkg::*;

  localparam int HM = 16, WM = 16, CM = 32;
  localparam int HW = $clog2(HM), CW = $clog2(WM), CCW = $clog2(CM + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           start = 1'b0, busy, done;
  logic [HW:0]    cfg_h = '0;
  logic [CW:0]    cfg_w = '0;
  logic [CCW-1:0] cfg_c = '0;
  logic           off_valid = 1'b0, off_ready;
  logic signed [OFF_IN_W-1:0] off_data = '0;
  logic           wt_valid = 1'b0, wt_ready;
  wchan_t         wt_data = '0;
  logic           act_valid = 1'b0, act_ready;
  pixel_t         act_data = '0;
  logic           res_valid, res_ready = 1'b0, res_last;
  result_t        res_data;

  dcn_engine #(.H_MAX(HM), .W_MAX(WM), .C_MAX(CM)) dut (.*);

  // Stimulus storage
  byte act_m [CM][HM][WM];
  byte off_m [HM][WM];
  byte wt_m  [CM][TAPS];

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Mechanism counters
  int n_backpressure = 0, n_lb_full = 0, n_row_wait = 0, n_round_half = 0;
  int n_clamp_lo = 0, n_clamp_hi = 0, n_d0 = 0, n_pad = 0, n_grp_change = 0;
  int n_done = 0;
  int prev_grp = 0;

  bit gaps = 1'b1;      // random valid gaps and ready drops

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  function automatic int dval(byte o);
    real r;
    int  d;
    r = $floor(real'(o) / 16.0 + 0.5);
    d = int'(r);
    if (d < 0) d = 0;
    if (d > 7) d = 7;
    return d;
  endfunction

  function automatic longint expect_val(int c, int y, int x, int h, int w);
    int d;
    longint s = 0;
    d = dval(off_m[y][x]);
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        int yy = y + (i - 1) * d;
        int xx = x + (j - 1) * d;
        if (yy >= 0 && yy < h && xx >= 0 && xx < w)
          s += longint'(wt_m[c][3*i+j]) * longint'(act_m[c][yy][xx]);
      end
    return s;
  endfunction

  task automatic gen(int h, int w, int c, bit regular);
    for (int ch = 0; ch < c; ch++) begin
      for (int t = 0; t < TAPS; t++) wt_m[ch][t] = byte'($urandom);
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) act_m[ch][y][x] = byte'($urandom);
    end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int k = $urandom_range(0, 9);
        int d;
        if (k < 2)      off_m[y][x] = byte'(-$urandom_range(1, 128));
        else if (k < 4) off_m[y][x] = byte'($urandom_range(0, 7) * 16 + 8);
        else if (k < 5) off_m[y][x] = byte'($urandom_range(116, 127));
        else            off_m[y][x] = byte'($urandom_range(0, 127));
        if (regular) off_m[y][x] = 8'sd16;   // offset 1.0: ordinary 3x3 window
        if (off_m[y][x][3:0] == 4'd8) n_round_half++;
        if (real'(off_m[y][x]) / 16.0 + 0.5 < 0.0) n_clamp_lo++;
        if ($floor(real'(off_m[y][x]) / 16.0 + 0.5) > 7.0) n_clamp_hi++;
        d = dval(off_m[y][x]);
        if (y - d < 0 || y + d >= h || x - d < 0 || x + d >= w) n_pad++;
      end
  endtask

  task automatic gap();
    if (gaps) while ($urandom_range(0, 3) == 0) @(negedge clk);
  endtask

  task automatic send_off(int h, int w);
    for (int i = 0; i < h * w; i++) begin
      gap();
      off_valid = 1'b1;
      off_data  = off_m[i / w][i % w];
      #1;
      while (!off_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      off_valid = 1'b0;
    end
  endtask

  task automatic send_wt(int c);
    for (int ch = 0; ch < c; ch++) begin
      gap();
      wt_valid = 1'b1;
      for (int t = 0; t < TAPS; t++) wt_data[t] = wt_m[ch][t];
      #1;
      while (!wt_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      wt_valid = 1'b0;
    end
  endtask

  task automatic send_act(int h, int w, int c);
    for (int g = 0; g < c / PC; g++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          gap();
          act_valid = 1'b1;
          for (int l = 0; l < PC; l++) act_data[l] = act_m[g*PC+l][y][x];
          #1;
          while (!act_ready) begin
            if (busy) n_lb_full++;
            @(negedge clk); #1;
          end
          @(negedge clk);
          act_valid = 1'b0;
        end
  endtask

  task automatic sink(int h, int w, int c, bit check_rate);
    int total = (c / PC) * h * w;
    longint last_cyc = 0;
    int k = 0;
    int rate_ok = 0;
    while (k < total) begin
      @(negedge clk);
      res_ready = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
      #1;
      if (res_valid && !res_ready) n_backpressure++;
      if (res_valid && res_ready) begin
        int g = k / (h * w);
        int y = (k % (h * w)) / w;
        int x = k % w;
        for (int l = 0; l < PC; l++) begin
          longint e = expect_val(g * PC + l, y, x, h, w);
          checks++;
          if (longint'(res_data[l]) != e)
            fail($sformatf("g%0d y%0d x%0d lane%0d got %0d exp %0d", g, y, x, l,
                           res_data[l], e));
        end
        checks++;
        if (res_last != (k == total - 1)) fail($sformatf("res_last wrong at beat %0d", k));
        if (check_rate && x > 0) begin
          checks++;
          if (cyc - last_cyc != 3)
            fail($sformatf("interval %0d cycles inside a row (want 3)", cyc - last_cyc));
          else rate_ok++;
        end
        last_cyc = cyc;
        k++;
      end
    end
    @(negedge clk);
    res_ready = 1'b0;
  endtask

  task automatic run_layer(int h, int w, int c, bit g, bit rate, bit regular = 1'b0);
    longint t0;
    gaps = g;
    gen(h, w, c, regular);
    @(negedge clk);
    cfg_h = (HW+1)'(h); cfg_w = (CW+1)'(w); cfg_c = CCW'(c);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc;
    fork
      send_off(h, w);
      send_wt(c);
      send_act(h, w, c);
      sink(h, w, c, rate);
    join
    repeat (3) @(negedge clk);
    checks++;
    if (busy) fail("busy still high after the last result");
    if (regular) $display("layer %0dx%0dx%0d, offsets 1.0: %0d cycles", h, w, c, cyc - t0);
    else         $display("layer %0dx%0dx%0d: %0d cycles", h, w, c, cyc - t0);
  endtask

  // Mechanism monitors
  always @(posedge clk) if (rst_n) begin
    // sampler states: 1 = waiting for rows, 2 = first column read (R0)
    if (done) n_done++;
    if (dut.u_m2s.state == 3'd1 && !dut.u_m2s.rows_ok) n_row_wait++;
    if (dut.u_m2s.state == 3'd2 && dut.u_m2s.credit_ok && dut.u_m2s.off_d == '0)
      n_d0++;
    if (dut.s_valid && dut.s_ready) begin
      if (int'(dut.s_grp) != prev_grp) n_grp_change++;
      prev_grp = int'(dut.s_grp);
    end
  end

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) fail({"mechanism never happened: ", what});
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_layer(12, 10, 32, 1'b1, 1'b0);
    run_layer(5, 7, 16, 1'b0, 1'b1);
    run_layer(16, 16, 32, 1'b1, 1'b0);
    run_layer(1, 3, 16, 1'b1, 1'b0);
    run_layer(9, 11, 16, 1'b1, 1'b0, 1'b1);
    $display("mechanisms:");
    need("result backpressure", n_backpressure);
    need("line buffer full", n_lb_full);
    need("sampler waiting for rows", n_row_wait);
    need("offset exact half rounded", n_round_half);
    need("offset clamped to 0", n_clamp_lo);
    need("offset clamped to N", n_clamp_hi);
    need("d = 0 (one bank, 3 ports)", n_d0);
    need("zero-padded window", n_pad);
    need("channel group change", n_grp_change);
    need("done pulse", n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
