// column_sum_kernel: one of the four column-sum kernels of the engine.
//
// The kernel owns COLS adjacent columns of the input matrix and keeps, for
// each of the NSTREAM = 4 delta streams and each of its columns, the column
// sum  cs[s][j] = sum_i delta_i a(i,j).  The four streams differ only in the
// deltas of rows 1 and 2 (0-based), which are fixed per stream to the bit
// pairs (0,0), (0,1), (1,0), (1,1) for s = 0..3 (bit 1 = delta -1); row 0
// always has delta +1.
//
// Load phase (row_we): row row_idx arrives. It is added to every stream's
// column sums with that stream's sign, and rows 3.. are stored in an on-chip
// row memory for the Gray phase. row_first clears the sums first, so a new
// matrix needs no separate reset. After the last row the sums hold the
// all-plus Gray code g = 0.
// Gray phase (upd_en): row upd_row flipped its delta; every sum of every
// stream is updated by -2 a(row,j) (upd_sub = 1, delta became -1) or
// +2 a(row,j). The changed row is the same for all four streams.
//
// Timing: one row or one update per clock; cs is registered, so it holds the
// sums of a tick from the following cycle on. The row memory is read
// asynchronously (a register file, as LUT RAM would be on an FPGA).
// The split into column quarters, the initialisation in the first n ticks and
// the +/- 2a update follow the paper; the register-file memory and the
// control interface are this design's choices.
module column_sum_kernel
  import perm_pkg::*;
#(
  parameter int unsigned COLS = NMAX / NKERN,
  parameter int unsigned MAXN = NMAX,
  localparam int unsigned RW = $clog2(MAXN + 1)
) (
  input  logic          clk,
  // load phase
  input  logic          row_we,
  input  logic [RW-1:0] row_idx,
  input  logic          row_first,
  input  logic          neg_row3,
  input  cplx_t         row_data [COLS],
  // Gray phase
  input  logic          upd_en,
  input  logic [RW-1:0] upd_row,
  input  logic          upd_sub,
  // column sums of each delta stream
  output cplx_t         cs [NSTREAM][COLS]
);

  localparam int unsigned MROWS = MAXN - NFIXED;
  localparam int unsigned MW    = $clog2(MROWS);

  cplx_t mem [MROWS][COLS];
  cplx_t upd_val [COLS];

  // Row memory: rows NFIXED..MAXN-1.
  always_ff @(posedge clk) begin
    if (row_we && row_idx >= RW'(NFIXED)) begin
      for (int j = 0; j < int'(COLS); j++) mem[MW'(row_idx - RW'(NFIXED))][j] <= row_data[j];
    end
  end

  always_comb begin
    for (int j = 0; j < int'(COLS); j++) begin
      upd_val[j] = mem[MW'(upd_row - RW'(NFIXED))][j];
    end
  end

  // Whether stream s has delta -1 on load row r.
  function automatic logic neg_on_load(logic [1:0] s, logic [RW-1:0] r, logic n3);
    if (r == RW'(1)) return s[1];
    if (r == RW'(2)) return s[0];
    if (r == RW'(3)) return n3;
    return 1'b0;
  endfunction

  always_ff @(posedge clk) begin
    for (int unsigned s = 0; s < NSTREAM; s++) begin
      for (int j = 0; j < int'(COLS); j++) begin
        if (row_we) begin
          automatic cplx_t base = row_first ? '0 : cs[s][j];
          if (neg_on_load(2'(s), row_idx, neg_row3)) begin
            cs[s][j].re <= base.re - row_data[j].re;
            cs[s][j].im <= base.im - row_data[j].im;
          end else begin
            cs[s][j].re <= base.re + row_data[j].re;
            cs[s][j].im <= base.im + row_data[j].im;
          end
        end else if (upd_en) begin
          if (upd_sub) begin
            cs[s][j].re <= cs[s][j].re - (upd_val[j].re <<< 1);
            cs[s][j].im <= cs[s][j].im - (upd_val[j].im <<< 1);
          end else begin
            cs[s][j].re <= cs[s][j].re + (upd_val[j].re <<< 1);
            cs[s][j].im <= cs[s][j].im + (upd_val[j].im <<< 1);
          end
        end
      end
    end
  end

endmodule
