// dfe_controller: sequences the permanent engine through a batch of matrices.
//
// For each matrix of size n (3 <= n <= NMAX) the engine spends
//   n ticks        loading rows 0..n-1 (the column sums are initialised while
//                  the rows arrive; the last load tick already yields the
//                  column sums of the all-plus Gray code g = 0), then
//   2^(n-3) - 1    Gray-code ticks, one column-sum update per tick.
// So one matrix issues 2^(n-3) addends per stream in n - 1 + 2^(n-3) ticks
// after its first row, which is the run time t = t0 + (n-1+2^(n-3))/f given
// in the paper for a single engine. The next matrix of the batch follows
// immediately; all counters are reset between matrices, as the paper describes
// for batched execution (all matrices of a batch have the same n).
//
// Dual-engine mode (cfg_dual): the delta vectors are split between two
// engines by also fixing row 3, to +1 on the engine with cfg_dfe_id = 0 and to
// -1 on the one with cfg_dfe_id = 1; the Gray code then spans rows 4..n-1,
// so each engine needs n - 1 + 2^(n-4) ticks and the host adds both results.
// neg_row3 tells the column-sum kernels the sign of row 3, and the tag parity
// includes it. Dual mode needs n >= 4.
//
// Interface: 'start' with cfg_n and cfg_batch (number of matrices, >= 1)
// begins a batch when idle. Rows are accepted with a valid/ready handshake
// (row_ready is high only in the load phase); a missing row stalls the load
// phase, the Gray phase never stalls. For every tick the controller drives
// the column-sum kernels (row_we/row_idx/row_first for loads, upd_en/upd_row/
// upd_sub for Gray steps) and a tag describing the addend those column sums
// will hold after the clock edge. 'busy' is high from start to the last tick.
// The phase split and the tick counts follow the paper; the handshake, the
// stall rule and the n < 3 behaviour (rejected: such matrices stay on the
// host, as in the paper) are this design's choices.
module dfe_controller
  import perm_pkg::*;
#(
  parameter int unsigned MAXN = NMAX,
  localparam int unsigned RW = $clog2(MAXN + 1),
  localparam int unsigned PW = $clog2(MAXN - NFIXED + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               start,
  input  logic [RW-1:0]      cfg_n,
  input  logic [BATCH_W-1:0] cfg_batch,
  input  logic               cfg_dual,
  input  logic               cfg_dfe_id,
  output logic               busy,
  // row stream handshake
  input  logic               row_valid,
  output logic               row_ready,
  // column-sum kernel control
  output logic               row_we,
  output logic [RW-1:0]      row_idx,
  output logic               row_first,
  output logic               upd_en,
  output logic [RW-1:0]      upd_row,
  output logic               upd_sub,
  output logic               neg_row3,
  // addend tag of this tick (valid, Gray parity, last of matrix)
  output tag_t               tick_tag,
  output logic [BATCH_W-1:0] mat_idx
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_GRAY} state_e;

  state_e             state;
  logic [RW-1:0]      n_q;
  logic [BATCH_W-1:0] batch_q;
  logic [RW-1:0]      ridx;
  logic               dual_q, id_q;
  logic [RW-1:0]      nfix;        // rows whose delta is fixed: 3, or 4 in dual mode
  logic               fix_par;     // parity contributed by the fixed row 3

  logic          g_start;
  logic          g_valid, g_newbit, g_parity, g_last;
  logic [PW-1:0] g_pos;
  logic [MAXN-NFIXED:0] g_code;

  logic load_fire, load_last, mat_done;

  assign nfix      = dual_q ? RW'(NFIXED + 1) : RW'(NFIXED);
  assign fix_par   = dual_q & id_q;
  assign load_fire = (state == S_LOAD) && row_valid;
  assign load_last = load_fire && (ridx == n_q - RW'(1));
  // A matrix ends on its last load tick when no Gray bit is left (n = 3, or
  // n = 4 in dual mode), else on the last Gray step.
  assign mat_done  = (load_last && n_q == nfix) || ((state == S_GRAY) && g_last);
  assign g_start   = load_last;

  gray_code_counter #(.MAXBITS(MAXN - NFIXED)) u_gray (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (g_start),
    .nbits  (PW'(n_q - nfix)),
    .valid  (g_valid),
    .code   (g_code),
    .pos    (g_pos),
    .newbit (g_newbit),
    .parity (g_parity),
    .last   (g_last)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      n_q     <= '0;
      batch_q <= '0;
      dual_q  <= 1'b0;
      id_q    <= 1'b0;
      ridx    <= '0;
      mat_idx <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start && cfg_n >= RW'(NFIXED) + RW'(cfg_dual) && cfg_n <= RW'(MAXN) && cfg_batch != '0) begin
            state   <= S_LOAD;
            dual_q  <= cfg_dual;
            id_q    <= cfg_dfe_id;
            n_q     <= cfg_n;
            batch_q <= cfg_batch;
            ridx    <= '0;
            mat_idx <= '0;
          end
        end
        S_LOAD: begin
          if (load_fire) begin
            ridx <= ridx + RW'(1);
            if (load_last) state <= S_GRAY;
          end
        end
        S_GRAY: ;
        default: state <= S_IDLE;
      endcase
      if (mat_done) begin
        ridx <= '0;
        if (mat_idx == batch_q - BATCH_W'(1)) begin
          state <= S_IDLE;
        end else begin
          state   <= S_LOAD;
          mat_idx <= mat_idx + BATCH_W'(1);
        end
      end
    end
  end

  assign busy      = (state != S_IDLE);
  assign row_ready = (state == S_LOAD);
  assign row_we    = load_fire;
  assign row_idx   = ridx;
  assign row_first = load_fire && (ridx == '0);

  assign upd_en   = (state == S_GRAY) && g_valid;
  assign upd_row  = RW'(g_pos) + nfix;
  assign upd_sub  = g_newbit;
  assign neg_row3 = fix_par;

  always_comb begin
    tick_tag = '0;
    if (load_last) begin
      tick_tag.valid  = 1'b1;
      tick_tag.parity = fix_par;
      tick_tag.last   = (n_q == nfix);
    end else if (upd_en) begin
      tick_tag.valid  = 1'b1;
      tick_tag.parity = g_parity ^ fix_par;
      tick_tag.last   = g_last;
    end
  end

  // The Gray counter only runs inside the Gray phase.
  a_gray_in_phase: assert property (@(posedge clk) disable iff (!rst_n)
    g_valid |-> state == S_GRAY);
  // Rows are only written while the engine asks for them.
  a_load_only_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    row_we |-> row_ready);

endmodule
