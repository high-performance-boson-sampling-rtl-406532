// tb_complex_mult: self-checking test of the fixed-point complex multiplier.
//
// Two multipliers are tested, with the widths of the first and of the last
// product-tree level (64x64 -> 79 and 158x158 -> 189 bits). Random operands
// of magnitude below 1/2 (Q2.x) are applied every clock. The expected result
// is computed here with the plain four-multiplication formula
// (ac - bd) + i(ad + bc) in 400-bit arithmetic and truncated to the output
// width; it must match the multiplier's output exactly, one cycle later.
module tb_complex_mult;
  localparam int unsigned XW = 400;
  typedef logic signed [XW-1:0] wide_t;

  logic clk = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  function automatic wide_t rnd(input int unsigned w);
    wide_t v;
    for (int k = 0; k < int'(XW / 32) + 1; k++) v = (v << 32) | wide_t'($urandom);
    return v >>> (XW - w + 2);
  endfunction

  // Exact product truncated to an OW-bit Q2 result.
  function automatic wide_t ref_part(input wide_t full, input int unsigned aw, input int unsigned bw,
                                     input int unsigned ow);
    wide_t t = full >>> (aw + bw - 4 - (ow - 2));
    // wrap to OW bits, sign-extended
    return (t <<< (XW - ow)) >>> (XW - ow);
  endfunction

  // Instance 1: 64 x 64 -> 79
  logic signed [63:0] a1r, a1i, b1r, b1i;
  logic signed [78:0] p1r, p1i;
  complex_mult #(.AW(64), .BW(64), .OW(79)) u1 (.clk, .a_re(a1r), .a_im(a1i), .b_re(b1r), .b_im(b1i),
                                                .p_re(p1r), .p_im(p1i));
  // Instance 2: 158 x 158 -> 189
  logic signed [157:0] a2r, a2i, b2r, b2i;
  logic signed [188:0] p2r, p2i;
  complex_mult #(.AW(158), .BW(158), .OW(189)) u2 (.clk, .a_re(a2r), .a_im(a2i), .b_re(b2r), .b_im(b2i),
                                                  .p_re(p2r), .p_im(p2i));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wide_t ar, ai, br, bi, er1, ei1, er2, ei2;
    @(negedge clk);
    for (int t = 0; t < 500; t++) begin
      ar = rnd(64); ai = rnd(64); br = rnd(64); bi = rnd(64);
      a1r = 64'(ar); a1i = 64'(ai); b1r = 64'(br); b1i = 64'(bi);
      er1 = ref_part(ar * br - ai * bi, 64, 64, 79);
      ei1 = ref_part(ar * bi + ai * br, 64, 64, 79);
      // corner cases: +-1/2 operands and zero
      if (t == 0) begin a1r = 64'sh2000_0000_0000_0000; a1i = 0; b1r = -64'sh2000_0000_0000_0000; b1i = 0;
        er1 = ref_part(wide_t'(a1r) * wide_t'(b1r), 64, 64, 79); ei1 = 0; end
      ar = rnd(158); ai = rnd(158); br = rnd(158); bi = rnd(158);
      a2r = 158'(ar); a2i = 158'(ai); b2r = 158'(br); b2i = 158'(bi);
      er2 = ref_part(ar * br - ai * bi, 158, 158, 189);
      ei2 = ref_part(ar * bi + ai * br, 158, 158, 189);
      @(negedge clk);
      check(wide_t'(p1r) == er1 && wide_t'(p1i) == ei1, $sformatf("64x64 t=%0d: %h %h / %h %h", t, p1r, p1i, 79'(er1), 79'(ei1)));
      check(wide_t'(p2r) == er2 && wide_t'(p2i) == ei2, $sformatf("158x158 t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
