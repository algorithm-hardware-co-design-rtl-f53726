// tb_line_buffer: a reduced buffer (N = 2, so 5 lines, rows of 6 pixels)
// fed with a continuous row stream.  Checks the flow-control rule (row r is
// accepted only while r <= cur_row + N), the row counter, that global row r
// lands in bank r mod 5, parallel one-cycle reads of all banks, and that a
// bank whose read enable is low keeps its output.
module tb_line_buffer;
  import dcn_pkg::*;
  localparam int NB = 2, LN = 2 * NB + 1, WM = 8, W = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          clear = 1'b0;
  logic [3:0]    w = 4'(W);
  logic          in_valid = 1'b0, in_ready;
  pixel_t        in_data = '0;
  logic [15:0]   rows_written, cur_row = '0;
  logic [2:0]    rd_col = '0;
  logic [LN-1:0] rd_en = '0;
  pixel_t        bank_q [LN];

  line_buffer #(.N_BOUND(NB), .W_MAX(WM)) dut (.*);

  int checks = 0, failures = 0;
  int sent = 0;          // pixels accepted so far
  int n_blocked = 0;

  function automatic pixel_t pix(int r, int c);
    pixel_t p;
    for (int l = 0; l < PC; l++) p[l] = data_t'(r * 37 + c * 11 + l * 5 + 3);
    return p;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // Continuous writer: offers the next pixel every cycle; ready seen before
  // the rising edge means the pixel is taken at that edge.
  always @(negedge clk) begin
    #1;
    in_valid = rst_n;
    in_data  = pix(sent / W, sent % W);
    #1;
    if (in_valid && in_ready) sent++;
  end
  always @(posedge clk) if (in_valid && !in_ready) n_blocked++;

  // Check that rows lo..hi are present (row r in bank r mod LN).
  task automatic check_rows(int lo, int hi);
    for (int c = 0; c < W; c++) begin
      @(negedge clk);
      rd_col = 3'(c); rd_en = '1;
      @(negedge clk);
      rd_en = '0;
      for (int r = lo; r <= hi; r++)
        check(bank_q[r % LN] == pix(r, c), $sformatf("row %0d col %0d wrong", r, c));
    end
  endtask

  task automatic wait_cycles(int n); repeat (n) @(negedge clk); endtask

  initial begin
    pixel_t hold;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait_cycles(40);
    // cur_row = 0: rows 0..2 may be written, nothing more.
    check(rows_written == 3, $sformatf("rows_written %0d, want 3", rows_written));
    check(!in_ready, "accepting beyond cur_row + N");
    check_rows(0, 2);
    // Move on: rows 3..9 admitted (cur_row 7), rows 5..9 held.
    cur_row = 7;
    wait_cycles(60);
    check(rows_written == 10, $sformatf("rows_written %0d, want 10", rows_written));
    check_rows(5, 9);
    // Read enable low keeps the bank output.
    @(negedge clk); rd_col = 3'd1; rd_en = '1;
    @(negedge clk); hold = bank_q[2]; rd_col = 3'd4; rd_en = 5'b11011;
    @(negedge clk); rd_en = '0;
    check(bank_q[2] == hold, "bank without read enable changed its output");
    check(bank_q[3] == pix(8, 4), "enabled bank not read");
    check(n_blocked > 0, "writer never blocked");
    // clear restarts at row 0 / bank 0
    @(negedge clk); clear = 1'b1; cur_row = 0;
    @(negedge clk); clear = 1'b0;
    sent = 0;
    wait_cycles(40);
    check(rows_written == 3, "rows_written after clear");
    check_rows(0, 2);
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
