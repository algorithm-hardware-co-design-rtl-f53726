// dcn_fifo: small synchronous FIFO used as the output queue of the sample
// packer.  DEPTH entries of WIDTH bits, push/pop in the same cycle allowed,
// first-word-fall-through output (out_valid means out_data is the head).
// Pushing into a full FIFO is a protocol error and is caught by an assertion;
// producers use credit counting so that it cannot happen.
module dcn_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             pop;

  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push)
        wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)
        rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push)
      mem[wr_ptr] <= in_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n || clear)
    push |-> (count < (AW+1)'(DEPTH) || pop))
    else $error("dcn_fifo: push into full FIFO");

endmodule
