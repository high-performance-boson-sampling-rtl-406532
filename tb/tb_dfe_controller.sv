// tb_dfe_controller: self-checking test of the engine sequencer.
//
// Runs batches with several matrix sizes (n = 3, 4, 7 and the largest size
// whose Gray phase is still short) and with gaps in the row stream. For every
// matrix it checks: rows are written in order 0..n-1 and row_first marks row
// 0; the Gray phase issues 2^(n-3)-1 updates whose row index (3 + lowest set
// bit of the step number) and direction (the new Gray bit) are recomputed
// here; exactly one 'last' tag per matrix; 2^(n-3) valid tags per matrix;
// and, for a stream without gaps, n - 1 + 2^(n-3) ticks from the first row to
// the last tag, the run time the paper gives for one engine. Dual-engine runs
// (row 3 fixed, Gray rows from 4, n - 1 + 2^(n-4) ticks, parity including
// row 3 on engine 1) and the refusal of too small sizes are checked too.
module tb_dfe_controller;
  import perm_pkg::*;
  localparam int unsigned MAXN = NMAX;
  localparam int unsigned RW = $clog2(MAXN + 1);

  logic               clk = 0, rst_n = 0, start = 0;
  logic [RW-1:0]      cfg_n = '0;
  logic [BATCH_W-1:0] cfg_batch = '0;
  logic               cfg_dual = 0, cfg_dfe_id = 0;
  logic               busy, row_valid = 0, row_ready;
  logic               row_we, row_first, upd_en, upd_sub, neg_row3;
  logic [RW-1:0]      row_idx, upd_row;
  tag_t               tick_tag;
  logic [BATCH_W-1:0] mat_idx;
  int checks = 0, failures = 0;

  dfe_controller dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Random gaps in the row stream when 'gaps' is set.
  bit gaps;
  always @(negedge clk) row_valid <= gaps ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic run(input int unsigned n, input int unsigned batch, input bit with_gaps,
                     input bit dual = 0, input bit id = 0);
    int unsigned rows, step, tags, lasts, mats, first_cyc, cyc;
    int unsigned exp_row, nfix, gb;
    logic [63:0] g;
    nfix = 3 + dual;
    gb = n - nfix;
    gaps = with_gaps;
    @(negedge clk);
    cfg_n = RW'(n);
    cfg_batch = BATCH_W'(batch);
    cfg_dual = dual; cfg_dfe_id = id;
    start = 1;
    @(negedge clk);
    start = 0;
    mats = 0;
    while (mats < batch) begin
      rows = 0; step = 0; tags = 0; lasts = 0; cyc = 0; first_cyc = 0;
      forever begin
        @(posedge clk);
        #1;
        cyc++;
        // sample what was presented before this edge: use the values latched
        // in the previous half cycle (see below)
        if (s_we) begin
          check(s_idx == RW'(rows), $sformatf("n=%0d row index %0d != %0d", n, s_idx, rows));
          check(s_first == (rows == 0), $sformatf("n=%0d row_first at row %0d", n, rows));
          if (rows == 0) first_cyc = cyc;
          rows++;
        end
        if (s_upd) begin
          step++;
          g = 64'(step) ^ (64'(step) >> 1);
          exp_row = nfix;
          while (((step >> (exp_row - nfix)) & 1) == 0) exp_row++;
          check(s_row == RW'(exp_row), $sformatf("n=%0d step %0d row %0d != %0d", n, step, s_row, exp_row));
          check(s_sub == g[exp_row - nfix], $sformatf("n=%0d step %0d direction", n, step));
          check(s_tag.parity == (^g ^ (dual & id)), $sformatf("n=%0d step %0d parity", n, step));
          check(neg_row3 == (dual & id), $sformatf("n=%0d neg_row3", n));
        end
        if (s_tag.valid) tags++;
        if (s_tag.valid && s_tag.last) begin
          lasts++;
          break;
        end
      end
      check(rows == n, $sformatf("n=%0d: %0d rows loaded", n, rows));
      check(step == (1 << gb) - 1, $sformatf("n=%0d: %0d Gray steps", n, step));
      check(tags == (1 << gb), $sformatf("n=%0d: %0d addend tags", n, tags));
      if (!with_gaps)
        check(cyc - first_cyc + 1 == n - 1 + (1 << gb),
              $sformatf("n=%0d: %0d ticks, expected %0d", n, cyc - first_cyc + 1, n - 1 + (1 << gb)));
      mats++;
    end
    @(posedge clk);
    #1;
    check(!busy, $sformatf("n=%0d: idle after the batch", n));
  endtask

  // Sample the controller outputs just before each rising edge.
  logic s_we, s_first, s_upd, s_sub;
  logic [RW-1:0] s_idx, s_row;
  tag_t s_tag;
  always @(posedge clk) begin
    s_we    <= row_we;
    s_first <= row_first;
    s_idx   <= row_idx;
    s_upd   <= upd_en;
    s_row   <= upd_row;
    s_sub   <= upd_sub;
    s_tag   <= tick_tag;
  end

  initial begin
    gaps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 2, 0);
    run(4, 1, 0);
    run(7, 3, 0);
    run(5, 2, 1);
    run(12, 1, 0);
    run(4, 2, 0, 1, 0);
    run(9, 1, 0, 1, 1);
    run(7, 2, 1, 1, 1);
    // A size below 3 is refused.
    @(negedge clk);
    cfg_n = RW'(2); cfg_batch = 1; cfg_dual = 0; start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    check(!busy, "n=2 refused");
    cfg_n = RW'(3); cfg_dual = 1; start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    check(!busy, "n=3 refused in dual mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
