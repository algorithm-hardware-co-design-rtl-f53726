// tb_offset_buffer: loads a 4 x 4 offset map (12 entries used) with random
// gaps, including negative values, exact halves and values above the bound,
// and reads every entry back.  Expected values are computed with real
// arithmetic: d = clamp(floor(v/16 + 0.5), 0, 7).  Also checks that the
// buffer accepts exactly npix offsets, raises `loaded`, that reads take one
// cycle, and that `clear` restarts loading.
module tb_offset_buffer;
  localparam int HM = 4, WM = 4, AW = $clog2(HM * WM);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              clear = 1'b0;
  logic [AW:0]       npix = '0;
  logic              in_valid = 1'b0, in_ready, loaded;
  logic signed [7:0] in_data = '0;
  logic [AW-1:0]     rd_addr = '0;
  logic [2:0]        rd_data;

  offset_buffer #(.H_MAX(HM), .W_MAX(WM)) dut (.*);

  int checks = 0, failures = 0;
  byte vals [HM*WM];

  function automatic int dref(byte o);
    int d = int'($floor(real'(o) / 16.0 + 0.5));
    return d < 0 ? 0 : (d > 7 ? 7 : d);
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic load(int n);
    @(negedge clk); clear = 1'b1; npix = (AW+1)'(n);
    @(negedge clk); clear = 1'b0;
    for (int i = 0; i < n; i++) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1'b1; in_data = vals[i];
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 1'b0;
    end
    #1;
    check(loaded, "loaded not set after npix offsets");
    check(!in_ready, "still ready after npix offsets");
  endtask

  task automatic readback(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); rd_addr = AW'(i);
      @(negedge clk); rd_addr = AW'(HM * WM - 1 - i);   // data must be the one of address i
      check(int'(rd_data) == dref(vals[i]),
            $sformatf("entry %0d (raw %0d): got %0d exp %0d", i, vals[i], rd_data, dref(vals[i])));
    end
  endtask

  initial begin
    static byte fixed [12] = '{-128, -9, -8, -1, 0, 7, 8, 24, 40, 119, 120, 127};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    #1 check(loaded == 1'b1 && npix == 0, "empty map must read as loaded");
    foreach (fixed[i]) vals[i] = fixed[i];
    load(12);
    readback(12);
    for (int i = 0; i < HM * WM; i++) vals[i] = byte'($urandom);
    load(HM * WM);
    check(!in_ready, "ready after clear with full map");
    readback(HM * WM);
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
