// tb_sum_up_kernel: self-checking test of the final summation kernel.
//
// Feeds several "matrices" of random addends (four Q2.187 column products per
// tick, random Gray parity, idle ticks in between) and keeps its own
// 192-bit sum of sign-corrected addends: stream s counts with sign
// (-1)^(parity + s[1] + s[0]). At the last addend of every matrix the kernel
// must output the top 128 bits of that sum exactly 2 cycles after the tag,
// and start the next matrix from zero. Lengths 1, 2, 5 and 40 addends are used.
module tb_sum_up_kernel;
  import perm_pkg::*;
  typedef logic signed [ACC_W-1:0] acc_t;

  logic clk = 0, rst_n = 0;
  logic signed [PROD_W-1:0] prod_re [NSTREAM], prod_im [NSTREAM];
  tag_t tag_in = '0;
  logic res_valid;
  logic signed [OUT_W-1:0] res_re, res_im;
  int checks = 0, failures = 0;

  sum_up_kernel dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic signed [PROD_W-1:0] rnd_prod();
    logic [223:0] r;
    for (int k = 0; k < 7; k++) r = {r[191:0], $urandom};
    return signed'(r[PROD_W-1:0]) >>> 2;
  endfunction

  // Expected results, queued in order.
  logic signed [OUT_W-1:0] q_re [$], q_im [$];
  int unsigned q_cyc [$];
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Output monitor.
  always @(negedge clk) if (rst_n && res_valid) begin
    if (q_re.size() == 0) check(0, "unexpected result");
    else begin
      check(res_re == q_re[0] && res_im == q_im[0], $sformatf("result %h,%h expected %h,%h", res_re, res_im, q_re[0], q_im[0]));
      check(cyc == q_cyc[0] + 2, $sformatf("result latency %0d", cyc - q_cyc[0]));
      void'(q_re.pop_front()); void'(q_im.pop_front()); void'(q_cyc.pop_front());
    end
  end

  task automatic matrix(input int unsigned len);
    acc_t ar = 0, ai = 0, er, ei;
    for (int unsigned t = 0; t < len; t++) begin
      @(negedge clk);
      tag_in.valid = 1;
      tag_in.parity = 1'($urandom);
      tag_in.last = (t == len - 1);
      for (int s = 0; s < int'(NSTREAM); s++) begin
        prod_re[s] = rnd_prod();
        prod_im[s] = rnd_prod();
        er = acc_t'(prod_re[s]) >>> 1;
        ei = acc_t'(prod_im[s]) >>> 1;
        if (tag_in.parity ^ s[1] ^ s[0]) begin ar -= er; ai -= ei; end
        else begin ar += er; ai += ei; end
      end
      if (tag_in.last) begin
        q_re.push_back(ar[ACC_W-1 -: OUT_W]);
        q_im.push_back(ai[ACC_W-1 -: OUT_W]);
        q_cyc.push_back(cyc);
      end
      // idle ticks with garbage data must be ignored
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk);
        tag_in = '0;
        for (int s = 0; s < int'(NSTREAM); s++) prod_re[s] = rnd_prod();
      end
    end
    @(negedge clk);
    tag_in = '0;
  endtask

  initial begin
    int unsigned expected;
    repeat (2) @(negedge clk);
    rst_n = 1;
    matrix(1);
    matrix(5);
    matrix(2);
    matrix(40);
    matrix(5);
    expected = 5;
    repeat (5) @(negedge clk);
    check(q_re.size() == 0, $sformatf("%0d results missing", q_re.size()));
    check(checks >= 2 * expected + 1, "all results seen");
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
