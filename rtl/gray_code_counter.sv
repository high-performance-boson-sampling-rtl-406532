// gray_code_counter: binary reflected Gray code counter that drives the
// column-sum updates of the BB/FG permanent evaluation.
//
// The counter walks the decimal index i = 1 .. 2^nbits - 1 (index 0, the
// all-plus delta vector, is produced by the row-load phase of the engine and
// is not stepped here). For every index it reports, in the same tick:
//   - code:   the Gray code g_i = i ^ (i >> 1)
//   - pos:    the bit of g that changed against g_(i-1); this is the lowest set
//             bit of i, so no comparison of successive codes is needed
//   - newbit: the new value of that bit, g_i[pos] = i[pos] ^ i[pos+1] = ~i[pos+1]
//             (1 means delta turns to -1, so the column sums subtract)
//   - parity: parity of g_i, which flips on every step and therefore equals i[0]
//   - last:   i == 2^nbits - 1
// The Gray code formula, the lowest-set-bit rule and the step-to-step parity
// tracking follow the paper; the start/valid interface is this design's own.
//
// Timing: 'start' (with nbits) is sampled on a clock edge; index 1 is valid
// from the next cycle on, one index per cycle, with no gaps. With nbits = 0
// nothing is stepped and valid stays low. A new start aborts a running count.
module gray_code_counter #(
  parameter int unsigned MAXBITS = perm_pkg::NMAX - perm_pkg::NFIXED,
  localparam int unsigned IW = MAXBITS + 1,
  localparam int unsigned PW = $clog2(MAXBITS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [PW-1:0] nbits,
  output logic          valid,
  output logic [IW-1:0] code,
  output logic [PW-1:0] pos,
  output logic          newbit,
  output logic          parity,
  output logic          last
);

  logic [IW-1:0] idx;
  logic [IW-1:0] last_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= 1'b0;
      idx      <= '0;
      last_idx <= '0;
    end else if (start) begin
      valid    <= (nbits != '0);
      idx      <= IW'(1);
      last_idx <= (IW'(1) << nbits) - IW'(1);
    end else if (valid) begin
      idx <= idx + IW'(1);
      if (last) valid <= 1'b0;
    end
  end

  // Lowest set bit of the decimal index.
  always_comb begin
    pos = '0;
    for (int b = MAXBITS - 1; b >= 0; b--) begin
      if (idx[b]) pos = PW'(b);
    end
  end

  assign code   = idx ^ (idx >> 1);
  assign newbit = ~idx[pos + PW'(1)];
  assign parity = idx[0];
  assign last   = valid && (idx == last_idx);

endmodule
