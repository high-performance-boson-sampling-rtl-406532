// tb_product_kernel: self-checking test of the column-product tree.
//
// Two kernels are driven every clock with random column sums (real and
// imaginary parts below 1/2 in Q2.62): one with the full 40 columns and one
// with 7 columns (odd counts at several levels). Each output is checked
// twice: bit-exactly against a reference tree computed here (neighbour
// pairing, four-multiplication complex products, truncation to the paper's
// level widths 79/79/93/110/158/189), and numerically against the product
// of the same inputs in double precision (relative error below 1e-9). The tag
// must come out with its data 6 cycles after it went in.
module tb_product_kernel;
  import perm_pkg::*;
  localparam int unsigned XW = 400;
  localparam int unsigned LAT = NLEV;
  localparam int unsigned NT = 60;
  typedef logic signed [XW-1:0] wide_t;

  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic signed [A_W-1:0] c40_re [40], c40_im [40], c7_re [7], c7_im [7];
  logic signed [PROD_W-1:0] p40_re, p40_im, p7_re, p7_im;
  logic [2:0] t40_in, t40_out, t7_in, t7_out;

  product_kernel #(.NCOL(40)) u40 (.clk, .rst_n, .col_re(c40_re), .col_im(c40_im), .tag_in(t40_in),
                                   .prod_re(p40_re), .prod_im(p40_im), .tag_out(t40_out));
  product_kernel #(.NCOL(7))  u7  (.clk, .rst_n, .col_re(c7_re), .col_im(c7_im), .tag_in(t7_in),
                                   .prod_re(p7_re), .prod_im(p7_im), .tag_out(t7_out));

  function automatic wide_t trunc(input wide_t full, input int unsigned fin, input int unsigned w);
    wide_t t = full >>> (fin - (w - 2));
    return (t <<< (XW - w)) >>> (XW - w);
  endfunction

  // Reference tree over the first cnt values; returns re/im of the Q2.187 product.
  task automatic ref_tree(input wide_t vr [40], input wide_t vi [40], input int cnt,
                          output wide_t rr, output wide_t ri);
    wide_t cr [40], ci [40], xr, xi;
    int unsigned w;
    int c = cnt;
    cr = vr; ci = vi;
    for (int l = 1; l <= int'(NLEV); l++) begin
      w = LVL_W[l];
      for (int k = 0; k < c; k += 2) begin
        if (k + 1 < c) begin
          xr = cr[k] * cr[k+1] - ci[k] * ci[k+1];
          xi = cr[k] * ci[k+1] + ci[k] * cr[k+1];
          cr[k/2] = trunc(xr, 2 * (LVL_W[l-1] - 2), w);
          ci[k/2] = trunc(xi, 2 * (LVL_W[l-1] - 2), w);
        end else begin
          cr[k/2] = cr[k] <<< (w - LVL_W[l-1]);
          ci[k/2] = ci[k] <<< (w - LVL_W[l-1]);
        end
      end
      c = (c + 1) / 2;
    end
    rr = cr[0]; ri = ci[0];
  endtask

  function automatic real q2_to_real(input wide_t v, input int unsigned frac);
    wide_t sh = v >>> (frac - 62);
    longint x = sh[63:0];
    return real'(x) / (2.0 ** 62);
  endfunction

  wide_t exp_r [NT], exp_i [NT];
  real   dbl_r [NT], dbl_i [NT];
  wide_t e7_r [NT], e7_i [NT];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wide_t vr [40], vi [40];
    real pr, pi, xr, xi, tr, hr, hi, err, mag;
    for (int t = 0; t < int'(NT + LAT); t++) begin
      @(negedge clk);
      // check the output of the inputs applied LAT cycles ago
      if (t >= int'(LAT)) begin
        automatic int s = t - int'(LAT);
        check(wide_t'(p40_re) == exp_r[s] && wide_t'(p40_im) == exp_i[s], $sformatf("NCOL=40 sample %0d bit-exact", s));
        hr = q2_to_real(wide_t'(p40_re), PROD_W - 2);
        hi = q2_to_real(wide_t'(p40_im), PROD_W - 2);
        mag = $sqrt(dbl_r[s] * dbl_r[s] + dbl_i[s] * dbl_i[s]);
        err = $sqrt((hr - dbl_r[s]) ** 2 + (hi - dbl_i[s]) ** 2);
        check(err <= 1e-9 * mag + 1e-17, $sformatf("NCOL=40 sample %0d: %g,%g vs %g,%g", s, hr, hi, dbl_r[s], dbl_i[s]));
        check(t40_out == 3'(s), $sformatf("NCOL=40 tag latency at sample %0d", s));
        check(wide_t'(p7_re) == e7_r[s] && wide_t'(p7_im) == e7_i[s], $sformatf("NCOL=7 sample %0d bit-exact", s));
        check(t7_out == 3'(s + 3), $sformatf("NCOL=7 tag latency at sample %0d", s));
      end
      if (t < int'(NT)) begin
        pr = 1.0; pi = 0.0;
        for (int k = 0; k < 40; k++) begin
          c40_re[k] = signed'({$urandom, $urandom}) >>> 2;
          c40_im[k] = signed'({$urandom, $urandom}) >>> 2;
          if (t == 1) begin c40_re[k] = 64'sh4000_0000_0000_0000; c40_im[k] = 0; end  // all ones
          vr[k] = wide_t'(c40_re[k]); vi[k] = wide_t'(c40_im[k]);
          xr = real'(c40_re[k]) / (2.0 ** 62);
          xi = real'(c40_im[k]) / (2.0 ** 62);
          tr = pr * xr - pi * xi;
          pi = pr * xi + pi * xr;
          pr = tr;
        end
        ref_tree(vr, vi, 40, exp_r[t], exp_i[t]);
        dbl_r[t] = pr; dbl_i[t] = pi;
        t40_in = 3'(t);
        for (int k = 0; k < 7; k++) begin
          c7_re[k] = signed'({$urandom, $urandom}) >>> 1;
          c7_im[k] = signed'({$urandom, $urandom}) >>> 2;
          vr[k] = wide_t'(c7_re[k]); vi[k] = wide_t'(c7_im[k]);
        end
        ref_tree(vr, vi, 7, e7_r[t], e7_i[t]);
        t7_in = 3'(t + 3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
