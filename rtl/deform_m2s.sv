// deform_m2s: the "memory-to-stream" sample packer of the deformable engine.
//
// For each output pixel (y, x) of each 16-channel group it reads the pixel's
// rounded, bounded offset d and gathers the nine taps of the square window
//     tap 3*i+j = input[y + (i-1)*d][x + (j-1)*d],   i, j in {0,1,2}
// from the line buffer.  The three rows y-d, y, y+d are in three different
// banks, so with the three parallel ports one column of the window is read per
// cycle: a pixel takes three cycles (phases R0, R1, R2 read columns x-d, x,
// x+d).  Taps outside the image are forced to zero.  The nine taps of all
// PC lanes leave as one beat of a valid/ready stream (with the channel group,
// for the weight lookup, and a last flag on the final pixel of the layer).
//
// Timing: before the first pixel of an output row it waits until the line
// buffer holds every row that row can touch (rows up to min(y+N, h-1)); this
// costs one cycle per row.  The offset of the next pixel is fetched during
// R2, so pixels follow each other every three cycles.  Bank reads have one
// cycle latency; samples are captured the cycle after each read and the beat
// is queued in a 2-entry FIFO.  A pixel is issued only when it has a FIFO
// slot reserved, so backpressure never loses data.  cur_row (global row
// number over all groups) tells the line buffer which rows are still needed.
//
// The square sampling pattern, the bound N and the three ports follow the
// source design; the phase schedule, zero padding, FIFO and handshake are
// this design's choices.
module deform_m2s #(
  parameter int unsigned N_BOUND = dcn_pkg::N_BOUND,
  parameter int unsigned LINES   = 2 * N_BOUND + 1,
  parameter int unsigned H_MAX   = dcn_pkg::H_MAX,
  parameter int unsigned W_MAX   = dcn_pkg::W_MAX,
  parameter int unsigned C_MAX   = dcn_pkg::C_MAX,
  localparam int unsigned NGRP   = C_MAX / dcn_pkg::PC,
  localparam int unsigned GW     = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned HW     = $clog2(H_MAX),
  localparam int unsigned CW     = $clog2(W_MAX),
  localparam int unsigned AW     = $clog2(H_MAX * W_MAX),
  localparam int unsigned BW     = $clog2(LINES),
  localparam int unsigned OFF_W  = $clog2(N_BOUND + 1),
  localparam int unsigned RW     = dcn_pkg::ROWCNT_W,
  localparam int unsigned NP     = dcn_pkg::NPORTS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [HW:0]          h,
  input  logic [CW:0]          w,
  input  logic [GW:0]          ngrp,
  input  logic                 go,
  // offset buffer
  output logic [AW-1:0]        off_addr,
  input  logic [OFF_W-1:0]     off_d,
  // line buffer
  input  logic [RW-1:0]        rows_written,
  output logic [RW-1:0]        cur_row,
  output logic [CW-1:0]        rd_col,
  output logic [LINES-1:0]     rd_en,
  output logic [BW-1:0]        sel    [NP],
  input  dcn_pkg::pixel_t      port_q [NP],
  // sample stream
  output logic                 out_valid,
  input  logic                 out_ready,
  output dcn_pkg::window_t     out_samp,
  output logic [GW-1:0]        out_grp,
  output logic                 out_last,
  output logic                 busy
);
  import dcn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_R0, S_R1, S_R2} state_t;
  state_t state;

  // Layer and loop state
  logic [HW:0]      y;
  logic [CW:0]      x;
  logic [GW:0]      grp;
  logic [AW-1:0]    paddr;
  logic [BW-1:0]    bank_y;
  logic [OFF_W-1:0] d_reg, d;
  logic [1:0]       alloc;       // FIFO slots reserved (in flight + queued)

  // Issue-side signals
  logic             issuing, credit_ok, rows_ok, row_end, layer_end, is_last;
  logic [1:0]       j;
  logic signed [CW+2:0] col_s;
  logic             col_ok;
  logic [NP-1:0]    row_ok;
  logic [BW-1:0]    bank [NP];
  logic [HW+1:0]    need_hi;

  // Capture pipeline
  logic             cap_v, cap_last;
  logic [1:0]       cap_j;
  logic [NP-1:0]    cap_ok;
  logic [GW-1:0]    cap_grp;
  window_t          win;
  window_t          win_full;

  // FIFO
  localparam int unsigned FW = $bits(window_t) + GW + 1;
  logic             push, pop;
  logic [1:0]       fcount;
  logic [FW-1:0]    fifo_q;

  assign d         = (state == S_R0) ? off_d : d_reg;
  assign pop       = out_valid && out_ready;
  assign credit_ok = (alloc - 2'(pop)) < 2'd2;
  assign issuing   = (state == S_R0 && credit_ok) || state == S_R1 || state == S_R2;
  assign j         = (state == S_R0) ? 2'd0 : (state == S_R1) ? 2'd1 : 2'd2;
  assign row_end   = (x == w - 1'b1);
  assign layer_end = row_end && (y == h - 1'b1) && (grp == ngrp - 1'b1);
  assign is_last   = layer_end;
  assign busy      = (state != S_IDLE);

  // Rows the current output row can touch must be in the line buffer.
  always_comb begin
    if (int'(y) + int'(N_BOUND) >= int'(h) - 1)
      need_hi = (HW+2)'(int'(h) - 1 - int'(y));
    else
      need_hi = (HW+2)'(N_BOUND);
    rows_ok = (RW'(cur_row) + RW'(need_hi) < RW'(rows_written)) && go;
  end

  // Window geometry for the column read in this phase
  always_comb begin
    col_s = (CW+3)'(int'(x) + (int'(j) - 1) * int'(d));
    col_ok = (col_s >= 0) && (int'(col_s) < int'(w));
    row_ok[0] = (int'(y) >= int'(d));
    row_ok[1] = 1'b1;
    row_ok[2] = (int'(y) + int'(d) < int'(h));
    bank[0] = BW'((int'(bank_y) >= int'(d)) ? int'(bank_y) - int'(d)
                                           : int'(bank_y) + int'(LINES) - int'(d));
    bank[1] = bank_y;
    bank[2] = BW'((int'(bank_y) + int'(d) >= int'(LINES)) ? int'(bank_y) + int'(d) - int'(LINES)
                                                         : int'(bank_y) + int'(d));
    rd_col = col_ok ? CW'(col_s) : '0;
    rd_en  = '0;
    for (int i = 0; i < NP; i++)
      if (issuing && col_ok && row_ok[i])
        rd_en[bank[i]] = 1'b1;
    off_addr = (state == S_R2) ? paddr + 1'b1 : paddr;
  end

  // Loop control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      y       <= '0;
      x       <= '0;
      grp     <= '0;
      paddr   <= '0;
      bank_y  <= '0;
      cur_row <= '0;
      d_reg   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          y       <= '0;
          x       <= '0;
          grp     <= '0;
          paddr   <= '0;
          bank_y  <= '0;
          cur_row <= '0;
          state   <= S_WAIT;
        end
        S_WAIT: if (rows_ok) state <= S_R0;
        S_R0: if (credit_ok) begin
          d_reg <= off_d;
          state <= S_R1;
        end
        S_R1: state <= S_R2;
        S_R2: begin
          if (row_end) begin
            x       <= '0;
            cur_row <= cur_row + 1'b1;
            bank_y  <= (bank_y == BW'(LINES - 1)) ? '0 : bank_y + 1'b1;
            if (y == h - 1'b1) begin
              y     <= '0;
              paddr <= '0;
              grp   <= grp + 1'b1;
            end else begin
              y     <= y + 1'b1;
              paddr <= paddr + 1'b1;
            end
            state <= layer_end ? S_IDLE : S_WAIT;
          end else begin
            x     <= x + 1'b1;
            paddr <= paddr + 1'b1;
            state <= S_R0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // FIFO slot reservation: one per issued pixel, freed when it leaves.
  always_ff @(posedge clk) begin
    if (!rst_n || (state == S_IDLE && start))
      alloc <= '0;
    else
      alloc <= alloc + 2'(state == S_R0 && credit_ok) - 2'(pop);
  end

  // Capture: bank data arrives one cycle after the read.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cap_v <= 1'b0;
    end else begin
      cap_v <= issuing;
    end
    cap_j    <= j;
    cap_last <= is_last;
    cap_grp  <= GW'(grp);
    for (int i = 0; i < NP; i++) begin
      cap_ok[i] <= col_ok && row_ok[i];
      sel[i]    <= bank[i];
    end
  end

  always_comb begin
    win_full = win;
    for (int i = 0; i < NP; i++)
      win_full[3*i + int'(cap_j)] = cap_ok[i] ? port_q[i] : '0;
  end

  always_ff @(posedge clk)
    if (cap_v)
      win <= win_full;

  assign push = cap_v && (cap_j == 2'd2);

  dcn_fifo #(.WIDTH(FW), .DEPTH(2)) u_fifo (
    .clk, .rst_n, .clear(1'b0),
    .push, .in_data({cap_last, cap_grp, win_full}),
    .out_valid, .out_ready, .out_data(fifo_q), .count(fcount)
  );

  assign {out_last, out_grp, out_samp} = fifo_q;

  a_credit: assert property (@(posedge clk) disable iff (!rst_n)
    {1'b0, fcount} <= {1'b0, alloc})
    else $error("deform_m2s: FIFO holds more beats than were reserved");

  a_three_banks: assert property (@(posedge clk) disable iff (!rst_n)
    $countones(rd_en) <= NP)
    else $error("deform_m2s: more banks read than ports");

endmodule
