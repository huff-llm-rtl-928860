// array_controller: sequences one output-stationary tile of the systolic
// array: out[ROWS x COLS] = A[ROWS x T] * W[T x COLS].
//
//   IDLE    -> on `op_start`: start all Huffman decompressors on the tile's
//              compressed streams, rewind the activation buffer, clear the
//              PE accumulators.
//   FILL    -> wait until every decompressor has primed its codeword
//              registers (`hd_ready`).
//   COMPUTE -> a T-cycle enable pulse train enters a 1-bit delay line;
//              tap k drives `col_adv[k]` (decompressor of column k) and
//              `row_rd[k]` (activation row k), so column j and row i start
//              j and i cycles late. That is the skew of the paper's Fig. 1,
//              made by delaying the enables instead of the data. COMPUTE
//              lasts until the last PE has taken its last operands:
//              T+ROWS+COLS-1 cycles.
//   DRAIN   -> ROWS shifts of the accumulators down into the accumulator
//              buffer, one row per cycle; a full buffer holds the drain
//              (`hold`), which is counted in `stall_cycles`.
//   DONE    -> `done` pulses, back to IDLE.
//
// COMPUTE plus DRAIN take 2*ROWS+COLS+T-1 cycles when nothing stalls: the
// paper's per-fold count 2R+C+T-2, plus one for the decompressor's output
// register. `op_cycles` reports the cycles from op_start to done. The
// states, the delay-line skew and the stall counter are this design's own;
// the paper asks only for stall-free, synchronised streaming.
module array_controller #(
  parameter int unsigned ROWS    = 128,
  parameter int unsigned COLS    = 128,
  parameter int unsigned T_BITS  = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               op_start,
  input  logic [T_BITS-1:0]  op_len,      // T, at least 1
  input  logic               hd_ready,
  input  logic               out_full,
  output logic               busy,
  output logic               done,
  output logic               hd_start,
  output logic               act_rewind,
  output logic               pe_clear,
  output logic [COLS-1:0]    col_adv,
  output logic [ROWS-1:0]    row_rd,
  output logic               drain,
  output logic               hold,
  output logic               out_push,
  output logic [31:0]        op_cycles,
  output logic [31:0]        stall_cycles
);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_COMPUTE, S_DRAIN, S_DONE} state_e;

  localparam int unsigned NTAP = (ROWS > COLS) ? ROWS : COLS;
  localparam int unsigned CW   = 32;

  state_e            state;
  logic [CW-1:0]     cnt;
  logic [T_BITS-1:0] t_len;
  logic [NTAP-1:0]   taps;     // taps[k] = enable pulse delayed by k cycles
  logic              en_src;
  logic [NTAP-1:1]   dly;

  assign en_src = (state == S_COMPUTE) && (cnt < CW'(t_len));
  assign taps   = {dly, en_src};
  assign col_adv = taps[COLS-1:0];
  assign row_rd  = taps[ROWS-1:0];

  assign busy       = (state != S_IDLE);
  assign hd_start   = (state == S_IDLE) && op_start;
  assign act_rewind = hd_start;
  assign pe_clear   = hd_start;
  assign drain      = (state == S_DRAIN);
  assign hold       = drain && out_full;
  assign out_push   = drain && !out_full;
  assign done       = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cnt          <= '0;
      t_len        <= '0;
      dly          <= '0;
      op_cycles    <= '0;
      stall_cycles <= '0;
    end else begin
      dly <= taps[NTAP-2:0];
      if (state != S_IDLE) op_cycles <= op_cycles + 1'b1;
      unique case (state)
        S_IDLE: if (op_start) begin
          state        <= S_FILL;
          t_len        <= op_len;
          op_cycles    <= 32'd1;
          stall_cycles <= '0;
        end
        S_FILL: if (hd_ready) begin
          state <= S_COMPUTE;
          cnt   <= '0;
        end
        S_COMPUTE: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(t_len) + CW'(ROWS) + CW'(COLS) - 2) begin
            state <= S_DRAIN;
            cnt   <= '0;
          end
        end
        S_DRAIN: begin
          if (out_full) stall_cycles <= stall_cycles + 1'b1;
          else begin
            cnt <= cnt + 1'b1;
            if (cnt == CW'(ROWS) - 1) state <= S_DONE;
          end
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && op_start) |-> (op_len != '0));

endmodule
