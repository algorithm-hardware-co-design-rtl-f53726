// line_buffer: circular buffer of LINES image lines, one bank per line.
//
// Input pixels (PC channels each) arrive row by row, columns 0..w-1, over
// all rows of channel group 0, then of group 1, and so on; rows are counted
// globally across groups.  Global row r goes to bank r mod LINES.  With
// LINES = 2*N_BOUND+1 the buffer holds exactly the rows an output row can
// sample (output row y reads rows y-d .. y+d, d <= N_BOUND).  A row may only
// be written when r <= cur_row + N_BOUND, where cur_row is the global output
// row the consumer is working on: row r then replaces row r-LINES, which no
// output row from cur_row on still needs.
//
// Each bank has one write port and one read port, so the banks can be read in
// parallel: every bank reads column rd_col when its rd_en bit is set, and
// bank_q[b] holds that word one clock later.  Picking the three wanted banks
// is done by multiport_sel.
//
// Follows the source design: a line buffer of 15 lines (N_BOUND = 7) fed from
// the cache-coherent port, read by three parallel ports.  The fill rule, the
// global row numbering and the channel-group order are this design's choice.
module line_buffer #(
  parameter int unsigned N_BOUND = dcn_pkg::N_BOUND,
  parameter int unsigned LINES   = 2 * N_BOUND + 1,
  parameter int unsigned W_MAX   = dcn_pkg::W_MAX,
  localparam int unsigned CW     = $clog2(W_MAX),
  localparam int unsigned BW     = $clog2(LINES),
  localparam int unsigned RW     = dcn_pkg::ROWCNT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [CW:0]          w,
  // pixel input stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  dcn_pkg::pixel_t      in_data,
  // flow control
  output logic [RW-1:0]        rows_written,
  input  logic [RW-1:0]        cur_row,
  // parallel read
  input  logic [CW-1:0]        rd_col,
  input  logic [LINES-1:0]     rd_en,
  output dcn_pkg::pixel_t      bank_q [LINES]
);
  import dcn_pkg::*;

  pixel_t          mem [LINES][W_MAX];
  logic [CW-1:0]   wr_col;
  logic [BW-1:0]   wr_bank;

  assign in_ready = !clear && (RW'(rows_written) <= RW'(cur_row + RW'(N_BOUND)));

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wr_col       <= '0;
      wr_bank      <= '0;
      rows_written <= '0;
    end else if (in_valid && in_ready) begin
      if ({1'b0, wr_col} == w - 1'b1) begin
        wr_col       <= '0;
        rows_written <= rows_written + 1'b1;
        wr_bank      <= (wr_bank == BW'(LINES - 1)) ? '0 : wr_bank + 1'b1;
      end else begin
        wr_col <= wr_col + 1'b1;
      end
    end
  end

  for (genvar b = 0; b < LINES; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (in_valid && in_ready && wr_bank == BW'(b))
        mem[b][wr_col] <= in_data;
      if (rd_en[b])
        bank_q[b] <= mem[b][rd_col];
    end
  end

endmodule
