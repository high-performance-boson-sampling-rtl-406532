// complex_mult: pipelined fixed-point complex multiplier of the product tree.
//
// Operands and result are two's complement fixed point with 2 integer bits
// (sign included): a is Q2.(AW-2), b is Q2.(BW-2), p is Q2.(OW-2). The product
// is formed with three real multiplications (Knuth's formula)
//   k1 = c (a + b),  k2 = a (d - c),  k3 = b (c + d)
//   re = k1 - k3 = ac - bd,   im = k1 + k2 = ad + bc
// for (a + ib)(c + id), at full precision, and the low-order bits beyond the
// output width are then discarded (truncation toward minus infinity).
// Because nothing is rounded before that step, the result equals the exact
// product truncated to OW bits.
// The caller keeps |p| <= 1 (the paper's input normalisation bounds every
// column sum by 1), so the 2 integer bits of the result never overflow.
//
// Timing: one product per clock, registered output, latency 1.
// The paper discusses the 4-multiplication, Knuth and Ungar formulas without
// stating which one its engine uses; Knuth's is chosen here because its real
// and imaginary paths are balanced. The splitting of wide multiplications into
// DSP-sized tiles is left to synthesis.
module complex_mult #(
  parameter int unsigned AW = 64,
  parameter int unsigned BW = 64,
  parameter int unsigned OW = 79
) (
  input  logic                 clk,
  input  logic signed [AW-1:0] a_re,
  input  logic signed [AW-1:0] a_im,
  input  logic signed [BW-1:0] b_re,
  input  logic signed [BW-1:0] b_im,
  output logic signed [OW-1:0] p_re,
  output logic signed [OW-1:0] p_im
);

  localparam int unsigned FW = AW + BW + 2;
  localparam int unsigned SH = AW + BW - OW - 2;

  logic signed [AW:0]   sum_ab;
  logic signed [BW:0]   dif_dc, sum_cd;
  logic signed [FW-1:0] k1, k2, k3, re_full, im_full;

  always_comb begin
    sum_ab  = (AW+1)'(a_re) + (AW+1)'(a_im);
    dif_dc  = (BW+1)'(b_im) - (BW+1)'(b_re);
    sum_cd  = (BW+1)'(b_re) + (BW+1)'(b_im);
    k1      = FW'(sum_ab) * FW'(b_re);
    k2      = FW'(a_re) * FW'(dif_dc);
    k3      = FW'(a_im) * FW'(sum_cd);
    re_full = k1 - k3;
    im_full = k1 + k2;
  end

  always_ff @(posedge clk) begin
    p_re <= re_full[SH +: OW];
    p_im <= im_full[SH +: OW];
  end

endmodule
