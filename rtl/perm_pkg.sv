// perm_pkg: constants and types shared by the permanent-calculator engine.
//
// The engine evaluates the Balasubramanian-Bax-Franklin-Glynn (BB/FG) sum
//   S = sum_delta (prod_k delta_k) prod_j sum_i delta_i a(i,j),  delta_1 = +1,
// over all 2^(n-1) sign vectors delta, in fixed point. The host divides S by
// 2^(n-1) to obtain perm(A).
//
// Number formats (two's complement, "Qi.f" = i integer bits incl. sign):
//   matrix elements and column sums  64 bit, Q2.62
//   product-tree levels 1..6         79, 79, 93, 110, 158, 189 bit, all Q2.x
//   accumulator                      192 bit, Q6.186
//   result sent to the host          128 bit per component, Q6.122
// The 64/79/93/110/158/189/192/128 widths and the 2 and 6 integer bits follow
// the paper; the Q6.122 placement of the 128-bit result is this design's
// choice (the top 128 bits of the accumulator).
package perm_pkg;

  // Largest matrix the engine accepts (n x n, n <= NMAX).
  localparam int unsigned NMAX = 40;
  // Number of concurrent delta streams (rows 2 and 3 fixed to 00,01,10,11).
  localparam int unsigned NSTREAM = 4;
  // Rows whose delta is not driven by the Gray-code counter (row 1 plus the
  // two rows fixed per stream).
  localparam int unsigned NFIXED = 3;
  // Number of column-sum kernels; each owns NMAX/NKERN columns.
  localparam int unsigned NKERN = 4;

  // Matrix element / column sum format.
  localparam int unsigned A_W    = 64;
  localparam int unsigned A_FRAC = A_W - 2;

  // Product tree: six levels, output width of each level (index 0 = input).
  localparam int unsigned NLEV = 6;
  localparam int unsigned LVL_W[0:NLEV] = '{64, 79, 79, 93, 110, 158, 189};
  localparam int unsigned PROD_W = LVL_W[NLEV];

  // Accumulator and result.
  localparam int unsigned ACC_W   = 192;
  localparam int unsigned ACC_INT = 6;
  localparam int unsigned OUT_W   = 128;

  // Width of the Gray-code decimal index: n-3 bits plus one to detect the end.
  localparam int unsigned GRAY_W = NMAX - NFIXED + 1;
  // Width of a row index and of the matrix-size / batch-count registers.
  localparam int unsigned ROW_W   = $clog2(NMAX + 1);
  localparam int unsigned BATCH_W = 16;

  typedef struct packed {
    logic signed [A_W-1:0] re;
    logic signed [A_W-1:0] im;
  } cplx_t;

  // Side-band information that travels with every tick of column sums.
  typedef struct packed {
    logic valid;   // an addend (one delta vector per stream) is present
    logic parity;  // parity of the Gray-code part of delta (1 = odd)
    logic last;    // last addend of the current matrix
  } tag_t;

endpackage
