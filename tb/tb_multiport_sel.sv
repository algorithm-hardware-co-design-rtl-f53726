// tb_multiport_sel: drives 15 random bank words and random bank selections
// on the three ports (including all three on one bank) and checks that each
// port returns the word of the bank it selected.
module tb_multiport_sel;
  import dcn_pkg::*;

  pixel_t     bank_q [LINES];
  logic [3:0] sel    [NPORTS];
  pixel_t     port_q [NPORTS];

  multiport_sel dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int b = 0; b < LINES; b++)
        for (int l = 0; l < PC; l++) bank_q[b][l] = data_t'($urandom);
      for (int p = 0; p < NPORTS; p++) sel[p] = 4'($urandom_range(0, LINES - 1));
      if (it % 10 == 0) begin sel[1] = sel[0]; sel[2] = sel[0]; end
      #1;
      for (int p = 0; p < NPORTS; p++) begin
        checks++;
        if (port_q[p] != bank_q[sel[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL: port %0d sel %0d", p, sel[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
