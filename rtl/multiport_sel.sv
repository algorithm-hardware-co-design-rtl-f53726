// multiport_sel: the three parallel read ports of the line buffer.
//
// Because the nine taps of the square window lie on three distinct rows
// (y-d, y, y+d), they live in three different line-buffer banks.  Each port p
// selects the output of bank sel[p], so three samples leave the buffer in the
// same cycle instead of one.  When d = 0 all ports name the same bank and
// receive the same word.  Purely combinational: the one-cycle read latency is
// in the banks.  The three-port arrangement follows the source design; the
// port being a plain bank multiplexer is this design's choice.
module multiport_sel #(
  parameter int unsigned LINES  = dcn_pkg::LINES,
  parameter int unsigned NPORTS = dcn_pkg::NPORTS,
  localparam int unsigned BW    = $clog2(LINES)
) (
  input  dcn_pkg::pixel_t bank_q [LINES],
  input  logic [BW-1:0]   sel    [NPORTS],
  output dcn_pkg::pixel_t port_q [NPORTS]
);

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      port_q[p] = '0;
      for (int b = 0; b < LINES; b++)
        if (sel[p] == BW'(b))
          port_q[p] = bank_q[b];
    end
  end

endmodule
