// tb_column_sum_kernel: self-checking test of a column-sum kernel.
//
// A kernel with 3 columns and room for 8 rows is loaded with random 6-row and
// 8-row matrices (Q2.62 elements of magnitude below 1/16), then driven through
// random row flips of rows 3.. with either direction, as the Gray phase would.
// The test keeps its own delta vector per stream (rows 1 and 2 fixed per
// stream, rows 3.. as flipped) and after every tick recomputes each column sum
// directly as sum_i delta_i a(i,j), comparing it with the kernel's register
// one cycle after the tick. A second matrix checks that row_first restarts the
// sums, and a run with neg_row3 set (row 3 fixed to -1, dual-engine mode).
module tb_column_sum_kernel;
  import perm_pkg::*;
  localparam int unsigned COLS = 3;
  localparam int unsigned MAXN = 8;
  localparam int unsigned RW = $clog2(MAXN + 1);

  logic          clk = 0;
  logic          row_we = 0, row_first = 0, upd_en = 0, upd_sub = 0, neg_row3 = 0;
  logic [RW-1:0] row_idx = '0, upd_row = '0;
  cplx_t         row_data [COLS];
  cplx_t         cs [NSTREAM][COLS];
  int checks = 0, failures = 0;

  column_sum_kernel #(.COLS(COLS), .MAXN(MAXN)) dut (.*);

  always #5 clk = ~clk;

  cplx_t a [MAXN][COLS];
  int    dsign [NSTREAM][MAXN];   // +1 / -1

  function automatic logic signed [63:0] rnd_elem();
    // uniform in about (-1/8, 1/8) in Q2.62
    return signed'({$urandom, $urandom}) >>> 5;
  endfunction

  task automatic check_all(input int unsigned n, input string when);
    logic signed [63:0] er, ei;
    for (int s = 0; s < int'(NSTREAM); s++)
      for (int j = 0; j < int'(COLS); j++) begin
        er = 0; ei = 0;
        for (int i = 0; i < int'(n); i++) begin
          if (dsign[s][i] > 0) begin er += a[i][j].re; ei += a[i][j].im; end
          else begin er -= a[i][j].re; ei -= a[i][j].im; end
        end
        checks++;
        if (cs[s][j].re != er || cs[s][j].im != ei) begin
          failures++;
          $display("FAIL: %s stream %0d col %0d: %h/%h expected %h/%h", when, s, j,
                   cs[s][j].re, cs[s][j].im, er, ei);
        end
      end
  endtask

  task automatic run(input int unsigned n, input int unsigned nflips, input bit n3 = 0);
    int unsigned r;
    for (int i = 0; i < int'(n); i++)
      for (int j = 0; j < int'(COLS); j++) begin
        a[i][j].re = rnd_elem();
        a[i][j].im = rnd_elem();
      end
    for (int s = 0; s < int'(NSTREAM); s++)
      for (int i = 0; i < int'(n); i++)
        dsign[s][i] = (i == 1 && s[1]) || (i == 2 && s[0]) || (i == 3 && n3) ? -1 : 1;
    neg_row3 = n3;
    // load phase
    for (int i = 0; i < int'(n); i++) begin
      @(negedge clk);
      row_we = 1; row_idx = RW'(i); row_first = (i == 0);
      for (int j = 0; j < int'(COLS); j++) row_data[j] = a[i][j];
    end
    @(negedge clk);
    row_we = 0; row_first = 0;
    check_all(n, "after load");
    // Gray-phase style flips
    for (int f = 0; f < int'(nflips); f++) begin
      r = $urandom_range(3, n - 1);
      upd_en = 1; upd_row = RW'(r);
      upd_sub = (dsign[0][r] > 0);          // flip: +1 -> -1 subtracts
      for (int s = 0; s < int'(NSTREAM); s++) dsign[s][r] = -dsign[s][r];
      // scramble the row inputs; they must be ignored now
      for (int j = 0; j < int'(COLS); j++) row_data[j] = '{rnd_elem(), rnd_elem()};
      @(negedge clk);
      upd_en = 0;
      check_all(n, $sformatf("flip %0d (row %0d)", f, r));
    end
  endtask

  initial begin
    for (int j = 0; j < int'(COLS); j++) row_data[j] = '0;
    repeat (2) @(negedge clk);
    run(6, 40);
    run(8, 60);
    run(4, 10);
    run(8, 30, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
