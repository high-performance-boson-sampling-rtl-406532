// tb_gray_code_counter: self-checking test of the reflected Gray code counter.
//
// For several code lengths the test starts the counter and, for every valid
// tick, recomputes the Gray code of the running decimal index on its own
// (i ^ (i >> 1)), then checks: the reported code, that exactly the reported
// bit changed against the previous code, the new value of that bit, the code
// parity, the 'last' flag and the number of steps (2^nbits - 1, one per clock
// with no gaps, the first one the cycle after start). The counter runs at its
// full default width (37-bit codes for 40 x 40 matrices).
module tb_gray_code_counter;
  localparam int unsigned MAXBITS = 37;
  localparam int unsigned IW = MAXBITS + 1;
  localparam int unsigned PW = $clog2(MAXBITS + 1);

  logic          clk = 0, rst_n = 0, start = 0;
  logic [PW-1:0] nbits = '0;
  logic          valid, newbit, parity, last;
  logic [IW-1:0] code;
  logic [PW-1:0] pos;
  int checks = 0, failures = 0;

  gray_code_counter dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input int unsigned nb);
    longint unsigned i, expect_steps, steps;
    logic [IW-1:0] prev, g;
    @(negedge clk);
    nbits = PW'(nb);
    start = 1;
    @(negedge clk);
    start = 0;
    expect_steps = (64'd1 << nb) - 1;
    steps = 0;
    prev = '0;
    i = 1;
    // The first step must be visible right after the start edge.
    check(valid == (nb != 0), $sformatf("nbits=%0d: valid right after start", nb));
    while (valid) begin
      g = IW'(i ^ (i >> 1));
      check(code == g, $sformatf("nbits=%0d i=%0d code %h != %h", nb, i, code, g));
      check((prev ^ g) == (IW'(1) << pos), $sformatf("nbits=%0d i=%0d changed bit %0d", nb, i, pos));
      check(newbit == g[pos], $sformatf("nbits=%0d i=%0d newbit", nb, i));
      check(parity == ^g, $sformatf("nbits=%0d i=%0d parity", nb, i));
      check(last == (i == expect_steps), $sformatf("nbits=%0d i=%0d last", nb, i));
      prev = g;
      i++;
      steps++;
      @(negedge clk);
    end
    check(steps == expect_steps, $sformatf("nbits=%0d: %0d steps, expected %0d", nb, steps, expect_steps));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    run(2);
    run(3);
    run(6);
    run(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
