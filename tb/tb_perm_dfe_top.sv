// tb_perm_dfe_top: end-to-end test of the permanent engine at NMAX = 8.
//
// The engine is built for 8 x 8 matrices so that every matrix size 3..8 and
// several batches run in little time. The host side of the engine is
// modelled here: random complex matrices whose column sums stay below 1 in
// magnitude are converted to Q2.62, padded to n x NMAX (ones in row 0, zeros
// elsewhere) and streamed row by row, sometimes with gaps; each result is
// divided by 2^(n-1) and compared with the permanent computed in double
// precision by Ryser's formula, a different method from the engine's.
// The test counts the mechanisms of the engine and fails if one never
// occurred: a stalled row stream, batches of more than one matrix, n = 3 (no
// Gray phase), padded columns (n < NMAX), n = NMAX, and Gray updates in both
// directions, and the dual-engine mode (one matrix run as engine 0 and as
// engine 1, the two results added as the host would). For batches without stalls it checks the cycle count from the
// first row to the result: n - 1 + 2^(n-3) ticks plus 9 cycles of pipeline.
module tb_perm_dfe_top;
  import perm_pkg::*;
  localparam int unsigned MAXN = 8;
  localparam int unsigned RW = $clog2(MAXN + 1);
  localparam int unsigned PIPE = 9;

  logic               clk = 0, rst_n = 0, start = 0;
  logic [RW-1:0]      cfg_n = '0;
  logic [BATCH_W-1:0] cfg_batch = '0;
  logic               cfg_dual = 0, cfg_dfe_id = 0;
  logic               busy, row_valid = 0, row_ready, res_valid;
  cplx_t              row_data [MAXN];
  logic signed [OUT_W-1:0] res_re, res_im;
  int checks = 0, failures = 0;

  perm_dfe_top #(.MAXN(MAXN)) dut (.*);

  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_stall = 0, n_batch = 0, n_nogray = 0, n_pad = 0, n_full = 0, n_add = 0, n_sub = 0, n_dual = 0;
  always @(posedge clk) if (rst_n) begin
    if (row_ready && !row_valid && busy) n_stall++;
    if (dut.upd_en && dut.upd_sub) n_sub++;
    if (dut.upd_en && !dut.upd_sub) n_add++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real ar [MAXN][MAXN], ai [MAXN][MAXN];

  // Permanent by Ryser's formula (double precision).
  task automatic ryser(input int n, output real pr, output real pi);
    real sr, si, rs, is_, tr, ti, t2;
    int bits;
    pr = 0; pi = 0;
    for (int s = 1; s < (1 << n); s++) begin
      tr = 1; ti = 0;
      bits = 0;
      for (int i = 0; i < n; i++) begin
        rs = 0; is_ = 0;
        for (int j = 0; j < n; j++) if (((s >> j) & 1) != 0) begin rs += ar[i][j]; is_ += ai[i][j]; end
        t2 = tr * rs - ti * is_;
        ti = tr * is_ + ti * rs;
        tr = t2;
      end
      for (int j = 0; j < n; j++) bits += (s >> j) & 1;
      if (((n - bits) % 2) == 1) begin pr -= tr; pi -= ti; end
      else begin pr += tr; pi += ti; end
    end
  endtask

  function automatic logic signed [63:0] to_q62(input real x);
    return longint'(x * (2.0 ** 62));
  endfunction

  function automatic real res_to_real(input logic signed [OUT_W-1:0] v);
    logic signed [OUT_W-1:0] sh = v >>> 64;
    longint x = sh[63:0];
    return real'(x) / (2.0 ** 58);
  endfunction

  // Results as they leave the engine.
  logic signed [OUT_W-1:0] got_r [$], got_i [$];
  int unsigned got_cyc [$];
  always @(posedge clk) if (rst_n && res_valid) begin
    got_r.push_back(res_re); got_i.push_back(res_im); got_cyc.push_back(cyc);
  end

  real mr [16][MAXN][MAXN], mi [16][MAXN][MAXN];   // matrices of the current batch
  int unsigned t_first [16];

  task automatic new_matrix(input int b, input int n);
    real amp = 0.7 / n;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        mr[b][i][j] = amp * (2.0 * $urandom_range(0, 1000000) / 1000000.0 - 1.0);
        mi[b][i][j] = amp * (2.0 * $urandom_range(0, 1000000) / 1000000.0 - 1.0);
      end
  endtask

  // Streams matrices 0..batch-1 of the store as one batch and waits for all results.
  task automatic stream_batch(input int n, input int batch, input bit gaps, input bit dual, input bit id);
    @(negedge clk);
    cfg_n = RW'(n); cfg_batch = BATCH_W'(batch); cfg_dual = dual; cfg_dfe_id = id; start = 1;
    @(negedge clk);
    start = 0;
    for (int b = 0; b < batch; b++)
      for (int i = 0; i < n; i++) begin
        if (gaps && $urandom_range(0, 1) != 0) begin
          row_valid = 0;
          repeat ($urandom_range(1, 3)) @(negedge clk);
        end
        for (int j = 0; j < int'(MAXN); j++) begin
          if (j < n) row_data[j] = '{to_q62(mr[b][i][j]), to_q62(mi[b][i][j])};
          else       row_data[j] = '{(i == 0) ? 64'sh4000_0000_0000_0000 : 64'sh0, 64'sh0};
        end
        row_valid = 1;
        @(posedge clk);
        while (!row_ready) @(posedge clk);
        if (i == 0) t_first[b] = cyc;
        @(negedge clk);
        row_valid = 0;
      end
    while (busy) @(negedge clk);
    repeat (PIPE + 2) @(negedge clk);
    check(got_r.size() == batch, $sformatf("n=%0d: %0d results for %0d matrices", n, got_r.size(), batch));
  endtask

  task automatic compare(input int n, input real hr, input real hi, input int b);
    real pr, pi, er, mag;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin ar[i][j] = mr[b][i][j]; ai[i][j] = mi[b][i][j]; end
    ryser(n, pr, pi);
    mag = $sqrt(pr ** 2 + pi ** 2);
    er = $sqrt((hr - pr) ** 2 + (hi - pi) ** 2);
    check(er <= 1e-7 * mag + 1e-15, $sformatf("n=%0d perm %g,%g expected %g,%g", n, hr, hi, pr, pi));
  endtask

  task automatic check_time(input int n, input int b, input int gray_bits);
    int unsigned expect_c = n - 2 + (1 << gray_bits) + PIPE;
    check(got_cyc[0] - t_first[b] == expect_c,
          $sformatf("n=%0d: result after %0d cycles, expected %0d", n, got_cyc[0] - t_first[b], expect_c));
  endtask

  task automatic pop();
    void'(got_r.pop_front()); void'(got_i.pop_front()); void'(got_cyc.pop_front());
  endtask

  // One batch on a single engine.
  task automatic run_batch(input int n, input int batch, input bit gaps);
    n_batch += (batch > 1);
    n_nogray += (n == 3) * batch;
    n_pad += (n < int'(MAXN)) * batch;
    n_full += (n == int'(MAXN)) * batch;
    for (int b = 0; b < batch; b++) new_matrix(b, n);
    stream_batch(n, batch, gaps, 0, 0);
    for (int b = 0; b < batch && got_r.size() > 0; b++) begin
      compare(n, res_to_real(got_r[0]) / (2.0 ** (n - 1)), res_to_real(got_i[0]) / (2.0 ** (n - 1)), b);
      if (!gaps && b == batch - 1) check_time(n, b, n - 3);
      pop();
    end
  endtask

  // One matrix split over two engines (modelled by running this engine twice,
  // once as engine 0 and once as engine 1); the host adds the two halves.
  task automatic run_dual(input int n);
    real hr = 0, hi = 0;
    n_dual++;
    new_matrix(0, n);
    for (int id = 0; id < 2; id++) begin
      stream_batch(n, 1, 0, 1, id[0]);
      if (got_r.size() > 0) begin
        hr += res_to_real(got_r[0]) / (2.0 ** (n - 1));
        hi += res_to_real(got_i[0]) / (2.0 ** (n - 1));
        check_time(n, 0, n - 4);
        pop();
      end
    end
    compare(n, hr, hi, 0);
  endtask

  initial begin
    for (int j = 0; j < int'(MAXN); j++) row_data[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_batch(3, 2, 0);
    run_batch(4, 1, 0);
    run_batch(5, 3, 0);
    run_batch(6, 2, 1);
    run_batch(7, 1, 0);
    run_batch(8, 2, 0);
    run_batch(8, 1, 1);
    run_dual(4);
    run_dual(7);
    $display("mechanisms: stall=%0d batch=%0d no_gray=%0d padded=%0d full_size=%0d add=%0d sub=%0d dual=%0d",
             n_stall, n_batch, n_nogray, n_pad, n_full, n_add, n_sub, n_dual);
    check(n_dual > 0, "dual-engine mode never ran");
    check(n_stall > 0, "row-stream stall never happened");
    check(n_batch > 0, "no batch of several matrices");
    check(n_nogray > 0, "n = 3 never ran");
    check(n_pad > 0, "no padded matrix");
    check(n_full > 0, "n = NMAX never ran");
    check(n_add > 0 && n_sub > 0, "Gray updates not seen in both directions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
