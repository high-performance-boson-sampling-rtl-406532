// sum_up_kernel: final summation kernel of the permanent engine.
//
// Every tick it receives the column products P_s of the NSTREAM = 4 delta
// streams together with one tag (valid, Gray parity, last). The BB/FG sign of
// stream s is prod_k delta_k = (-1)^(Gray parity + ones among stream s's fixed
// bits of rows 1 and 2), so streams 0 and 3 take the sign given by the parity
// and streams 1 and 2 the opposite one.
//
// Stage 1 aligns the four Q2.187 products to the Q6.186 accumulator format
// (sign extension, one fraction bit dropped) and adds them with their signs.
// Stage 2 is the accumulation loop Perm = Perm + (stage-1 sum): one adder and
// the accumulator register, so the loop closes in a single tick. When the
// tagged addend is the last of a matrix, the total is emitted and the
// accumulator is cleared for the next matrix of the batch.
//
// Result: res_re/res_im are the top OUT_W = 128 bits of the 192-bit
// accumulator (Q6.122), valid for one cycle with res_valid. The value is the
// raw BB/FG sum; the host divides it by 2^(n-1) and undoes its column scaling.
// Latency from the tag to res_valid: 2 cycles.
// The 192-bit, 6-integer-bit accumulator, the single-tick loop and the 128-bit
// result follow the paper; the two-stage split, the choice of the top 128 bits
// and the sign bookkeeping by stream index are this design's choices.
module sum_up_kernel
  import perm_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [PROD_W-1:0] prod_re [NSTREAM],
  input  logic signed [PROD_W-1:0] prod_im [NSTREAM],
  input  tag_t                     tag_in,
  output logic                     res_valid,
  output logic signed [OUT_W-1:0]  res_re,
  output logic signed [OUT_W-1:0]  res_im
);

  localparam int unsigned PROD_FRAC = PROD_W - 2;
  localparam int unsigned ACC_FRAC  = ACC_W - ACC_INT;
  localparam int unsigned ALIGN     = PROD_FRAC - ACC_FRAC;

  logic signed [ACC_W-1:0] sum_re, sum_im;     // stage-1 result (combinational)
  logic signed [ACC_W-1:0] s1_re, s1_im;       // stage-1 register
  tag_t                    s1_tag;
  logic signed [ACC_W-1:0] acc_re, acc_im;
  logic signed [ACC_W-1:0] nxt_re, nxt_im;

  always_comb begin
    sum_re = '0;
    sum_im = '0;
    for (int unsigned s = 0; s < NSTREAM; s++) begin
      automatic logic neg = tag_in.parity ^ s[1] ^ s[0];
      automatic logic signed [ACC_W-1:0] e_re = ACC_W'(prod_re[s]) >>> ALIGN;
      automatic logic signed [ACC_W-1:0] e_im = ACC_W'(prod_im[s]) >>> ALIGN;
      if (neg) begin
        sum_re = sum_re - e_re;
        sum_im = sum_im - e_im;
      end else begin
        sum_re = sum_re + e_re;
        sum_im = sum_im + e_im;
      end
    end
  end

  assign nxt_re = acc_re + s1_re;
  assign nxt_im = acc_im + s1_im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_tag    <= '0;
      s1_re     <= '0;
      s1_im     <= '0;
      acc_re    <= '0;
      acc_im    <= '0;
      res_valid <= 1'b0;
      res_re    <= '0;
      res_im    <= '0;
    end else begin
      s1_tag    <= tag_in;
      s1_re     <= sum_re;
      s1_im     <= sum_im;
      res_valid <= 1'b0;
      if (s1_tag.valid) begin
        if (s1_tag.last) begin
          acc_re    <= '0;
          acc_im    <= '0;
          res_valid <= 1'b1;
          res_re    <= nxt_re[ACC_W-1 -: OUT_W];
          res_im    <= nxt_im[ACC_W-1 -: OUT_W];
        end else begin
          acc_re <= nxt_re;
          acc_im <= nxt_im;
        end
      end
    end
  end

endmodule
