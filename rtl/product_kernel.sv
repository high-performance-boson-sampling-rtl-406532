// product_kernel: one of the four column-product kernels of the engine.
//
// It receives, every tick, the NCOL column sums of one delta stream and forms
// their complex product over a pipelined binary tree of NLEV = 6 levels. Level
// l pairs neighbouring values of level l-1 in a complex_mult; an odd value out
// is carried to the next level unchanged (its fraction is extended with zero
// bits). With NCOL = 40 the levels hold 20, 10, 5, 3, 2 and 1 values at widths
// of 79, 79, 93, 110, 158 and 189 bits (all Q2.x), as in the paper. A smaller
// NCOL simply leaves one value passing through the upper levels, so the output
// format and the latency do not depend on NCOL.
//
// Interface: col_re/col_im (Q2.62) plus a tag that rides along with the data;
// prod_re/prod_im are Q2.187. rst_n clears only the tag pipeline (the data
// registers need no reset). Timing: fully pipelined, one product per clock,
// latency NLEV = 6 cycles for data and tag.
// The tree shape, the level count and the level widths follow the paper; the
// pairing order (neighbours) and the zero-extension of carried values are
// this design's choices.
module product_kernel
  import perm_pkg::*;
#(
  parameter int unsigned NCOL = NMAX,
  parameter int unsigned TAG_W = $bits(tag_t)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [A_W-1:0]    col_re [NCOL],
  input  logic signed [A_W-1:0]    col_im [NCOL],
  input  logic [TAG_W-1:0]         tag_in,
  output logic signed [PROD_W-1:0] prod_re,
  output logic signed [PROD_W-1:0] prod_im,
  output logic [TAG_W-1:0]         tag_out
);

  // Number of values held at level l: ceil(NCOL / 2^l).
  function automatic int unsigned cnt(int unsigned l);
    return (NCOL + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= NLEV; l++) begin : lv
    localparam int unsigned W = LVL_W[l];
    localparam int unsigned C = cnt(l);
    logic signed [W-1:0] re [C];
    logic signed [W-1:0] im [C];
    logic [TAG_W-1:0]    tag;

    if (l == 0) begin : g_in
      for (genvar k = 0; k < int'(C); k++) begin : g_k
        assign re[k] = col_re[k];
        assign im[k] = col_im[k];
      end
      assign tag = tag_in;
    end else begin : g_lvl
      localparam int unsigned PWID = LVL_W[l-1];
      localparam int unsigned PC   = cnt(l - 1);
      for (genvar k = 0; k < int'(C); k++) begin : g_k
        if (2 * k + 1 < PC) begin : g_mul
          complex_mult #(.AW(PWID), .BW(PWID), .OW(W)) u_mul (
            .clk  (clk),
            .a_re (lv[l-1].re[2*k]),
            .a_im (lv[l-1].im[2*k]),
            .b_re (lv[l-1].re[2*k+1]),
            .b_im (lv[l-1].im[2*k+1]),
            .p_re (re[k]),
            .p_im (im[k])
          );
        end else begin : g_pass
          always_ff @(posedge clk) begin
            re[k] <= W'(lv[l-1].re[2*k]) <<< (W - PWID);
            im[k] <= W'(lv[l-1].im[2*k]) <<< (W - PWID);
          end
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) tag <= '0;
        else        tag <= lv[l-1].tag;
      end
    end
  end

  assign prod_re = lv[NLEV].re[0];
  assign prod_im = lv[NLEV].im[0];
  assign tag_out = lv[NLEV].tag;

endmodule
