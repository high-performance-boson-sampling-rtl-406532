// perm_dfe_top: fixed-point BB/FG permanent engine (one data-flow engine).
//
// The engine computes, for each n x n complex matrix A (3 <= n <= NMAX) of a
// batch, the raw BB/FG sum
//   S = sum over delta in {+-1}^n, delta_0 = +1, of
//       (prod_i delta_i) * prod_{j<NMAX} ( sum_{i<n} delta_i a(i,j) ),
// from which the host obtains perm(A) = S / 2^(n-1). The matrix is sent as an
// n x NMAX matrix: the host pads row 0 with ones and the other rows with zeros
// beyond column n, which makes every padding column sum equal to 1, so one
// circuit serves every n without reconfiguration.
//
// Structure (data flows left to right):
//   dfe_controller     row-load phase of n ticks, then a Gray-code phase of
//                      2^(n-3)-1 ticks; batches of equal-size matrices
//   column_sum_kernel  x4, each owns NMAX/4 columns and keeps the column sums
//                      of all four delta streams (rows 1 and 2 fixed to the
//                      sign pairs ++, +-, -+, --)
//   product_kernel     x4, one per delta stream, gathers that stream's NMAX
//                      column sums from all four column-sum kernels and
//                      multiplies them over a 6-level tree
//   sum_up_kernel      signs and adds the four products into the permanent
//
// Dual-engine mode: with cfg_dual set, two engines share one permanent; the
// engine with cfg_dfe_id = d evaluates the delta vectors whose row 3 has the
// bit d, and the host adds the two results. Each engine then takes
// n - 1 + 2^(n-4) ticks.
//
// Interface: start/cfg_n/cfg_batch/cfg_dual/cfg_dfe_id begin a batch; rows come in on row_data
// (Q2.62 real and imaginary parts, one full padded row per accepted tick,
// valid/ready); each matrix yields one res_valid pulse with res_re/res_im in
// Q6.122. Throughput: 4 addends per clock during the Gray phase; a matrix
// takes n - 1 + 2^(n-3) ticks from its first row to its last addend, plus a
// fixed pipeline latency of 1 + 6 + 2 = 9 cycles to its result.
// The block structure, the streams and the widths follow the paper; the
// handshakes, the result format and the padding done by the host are this
// design's choices.
module perm_dfe_top
  import perm_pkg::*;
#(
  parameter int unsigned MAXN = NMAX,
  localparam int unsigned RW   = $clog2(MAXN + 1),
  localparam int unsigned COLS = MAXN / NKERN
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [RW-1:0]      cfg_n,
  input  logic [BATCH_W-1:0] cfg_batch,
  input  logic               cfg_dual,
  input  logic               cfg_dfe_id,
  output logic               busy,
  input  logic               row_valid,
  output logic               row_ready,
  input  cplx_t              row_data [MAXN],
  output logic               res_valid,
  output logic signed [OUT_W-1:0] res_re,
  output logic signed [OUT_W-1:0] res_im
);

  logic               row_we, row_first, upd_en, upd_sub, neg_row3;
  logic [RW-1:0]      row_idx, upd_row;
  tag_t               tick_tag, cs_tag;
  logic [BATCH_W-1:0] mat_idx;

  dfe_controller #(.MAXN(MAXN)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .cfg_n     (cfg_n),
    .cfg_batch (cfg_batch),
    .cfg_dual  (cfg_dual),
    .cfg_dfe_id(cfg_dfe_id),
    .busy      (busy),
    .row_valid (row_valid),
    .row_ready (row_ready),
    .row_we    (row_we),
    .row_idx   (row_idx),
    .row_first (row_first),
    .upd_en    (upd_en),
    .upd_row   (upd_row),
    .upd_sub   (upd_sub),
    .neg_row3  (neg_row3),
    .tick_tag  (tick_tag),
    .mat_idx   (mat_idx)
  );

  // The tag of a tick describes the column sums registered at its end.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cs_tag <= '0;
    else        cs_tag <= tick_tag;
  end

  // Column-sum kernels.
  cplx_t cs [NKERN][NSTREAM][COLS];

  for (genvar k = 0; k < int'(NKERN); k++) begin : g_cs
    cplx_t slice [COLS];
    for (genvar j = 0; j < int'(COLS); j++) begin : g_j
      assign slice[j] = row_data[k*COLS + j];
    end
    column_sum_kernel #(.COLS(COLS), .MAXN(MAXN)) u_cs (
      .clk       (clk),
      .row_we    (row_we),
      .row_idx   (row_idx),
      .row_first (row_first),
      .neg_row3  (neg_row3),
      .row_data  (slice),
      .upd_en    (upd_en),
      .upd_row   (upd_row),
      .upd_sub   (upd_sub),
      .cs        (cs[k])
    );
  end

  // Product kernels: stream s gathers its column sums from every kernel.
  logic signed [PROD_W-1:0] prod_re [NSTREAM];
  logic signed [PROD_W-1:0] prod_im [NSTREAM];
  tag_t                     prod_tag [NSTREAM];

  for (genvar s = 0; s < int'(NSTREAM); s++) begin : g_prod
    logic signed [A_W-1:0] col_re [MAXN];
    logic signed [A_W-1:0] col_im [MAXN];
    for (genvar k = 0; k < int'(NKERN); k++) begin : g_k
      for (genvar j = 0; j < int'(COLS); j++) begin : g_j
        assign col_re[k*COLS + j] = cs[k][s][j].re;
        assign col_im[k*COLS + j] = cs[k][s][j].im;
      end
    end
    product_kernel #(.NCOL(MAXN)) u_prod (
      .clk     (clk),
      .rst_n   (rst_n),
      .col_re  (col_re),
      .col_im  (col_im),
      .tag_in  (cs_tag),
      .prod_re (prod_re[s]),
      .prod_im (prod_im[s]),
      .tag_out (prod_tag[s])
    );
  end

  sum_up_kernel u_sum (
    .clk       (clk),
    .rst_n     (rst_n),
    .prod_re   (prod_re),
    .prod_im   (prod_im),
    .tag_in    (prod_tag[0]),
    .res_valid (res_valid),
    .res_re    (res_re),
    .res_im    (res_im)
  );

  // All product kernels carry the same tag.
  a_tags_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    prod_tag[0] == prod_tag[1] && prod_tag[0] == prod_tag[2] && prod_tag[0] == prod_tag[3]);

endmodule
