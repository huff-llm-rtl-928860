// huffllm_top: an output-stationary systolic-array accelerator that keeps
// its FP16 weights Huffman-compressed in the on-chip weight buffer and
// decompresses them only on their way into the PEs.
//
// Datapath (paper, Fig. 5): weight buffer (compressed, three coded banks
// and a sign bank per column) -> one HD per column (three single-cycle 5-bit
// Huffman decoders + raw sign, concatenated to FP16) -> top row of the
// ROWS x COLS PE array. The activation buffer feeds the left edge; results
// are drained from the bottom into the accumulator buffer. Because every HD
// delivers one weight per cycle, the array runs exactly as it would on
// uncompressed weights.
//
// External interface (main memory side, this design's choice):
//   cam_*   write one codebook entry of one split into the HDs of all
//           columns (one codebook per split, shared by the columns);
//   wb_*    write one 32-bit word of compressed weights into a bank;
//   ab_*    write one FP16 activation;
//   op_*    run one tile: op_len = T (1..ACT_DEPTH), op_base = start word of
//           the streams in every bank; `op_done` pulses at the end and
//           op_cycles / stall_cycles report its length and drain stalls;
//   res_*   read drained result rows (row ROWS-1 first, row 0 last).
// `hd_miss` flags a compressed stream that matches no codeword.
module huffllm_top
  import hd_pkg::*;
#(
  parameter int unsigned ROWS       = 128,  // Table 1: 128 x 128 PEs
  parameter int unsigned COLS       = 128,
  parameter int unsigned LMAX       = 12,   // longest code, Sec. 5.2
  parameter int unsigned BANK_WORDS = 10,   // 3*10+2 words x 32 bit x 128 columns = 16 KB
  parameter int unsigned SIGN_WORDS = 2,
  parameter int unsigned ACT_DEPTH  = 32,   // 128 rows x 32 x 2 B = 8 KB
  parameter int unsigned ACC_ROWS   = 8,    // 8 rows x 128 x 4 B = 4 KB
  parameter int unsigned ADDR_BITS  = 4,
  parameter int unsigned T_BITS     = 6
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // codebook programming
  input  logic                         cam_we,
  input  split_e                       cam_split,
  input  logic [SYM_BITS-1:0]          cam_idx,
  input  cam_entry_t                   cam_wdata,
  // weight buffer fill
  input  logic                         wb_we,
  input  logic [$clog2(COLS)-1:0]      wb_col,
  input  split_e                       wb_bank,
  input  logic [ADDR_BITS-1:0]         wb_addr,
  input  logic [WORD_BITS-1:0]         wb_wdata,
  // activation buffer fill
  input  logic                         ab_we,
  input  logic [$clog2(ROWS)-1:0]      ab_row,
  input  logic [$clog2(ACT_DEPTH)-1:0] ab_addr,
  input  fp16_t                        ab_wdata,
  // operation
  input  logic                         op_start,
  input  logic [T_BITS-1:0]            op_len,
  input  logic [ADDR_BITS-1:0]         op_base,
  output logic                         op_busy,
  output logic                         op_done,
  output logic [31:0]                  op_cycles,
  output logic [31:0]                  stall_cycles,
  output logic                         hd_miss,
  // results
  input  logic                         res_pop,
  output logic                         res_valid,
  output fp32_t [COLS-1:0]             res_row
);

  logic                                 hd_start, act_rewind, pe_clear;
  logic                                 drain, hold, out_push, out_full;
  logic [COLS-1:0]                      col_adv, col_ready, col_miss;
  logic [ROWS-1:0]                      row_rd;
  fp16_t [COLS-1:0]                     w_top;
  logic  [COLS-1:0]                     w_top_vld;
  fp16_t [ROWS-1:0]                     a_left;
  logic  [ROWS-1:0]                     a_left_vld;
  fp32_t [COLS-1:0]                     out_row;
  logic [COLS-1:0][3:0]                 wb_rd_en;
  logic [COLS-1:0][3:0][ADDR_BITS-1:0]  wb_rd_addr;
  logic [COLS-1:0][3:0][WORD_BITS-1:0]  wb_rd_data;

  array_controller #(.ROWS(ROWS), .COLS(COLS), .T_BITS(T_BITS)) u_ctrl (
    .clk, .rst_n, .op_start, .op_len,
    .hd_ready   (&col_ready),
    .out_full,
    .busy       (op_busy),
    .done       (op_done),
    .hd_start, .act_rewind, .pe_clear, .col_adv, .row_rd,
    .drain, .hold, .out_push, .op_cycles, .stall_cycles
  );

  weight_buffer #(.COLS(COLS), .BANK_WORDS(BANK_WORDS), .SIGN_WORDS(SIGN_WORDS),
                  .ADDR_BITS(ADDR_BITS)) u_wbuf (
    .clk,
    .wr_en (wb_we), .wr_col (wb_col), .wr_bank (wb_bank), .wr_addr (wb_addr),
    .wr_data (wb_wdata),
    .rd_en (wb_rd_en), .rd_addr (wb_rd_addr), .rd_data (wb_rd_data)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_hd
    hd_unit #(.LMAX(LMAX), .ADDR_BITS(ADDR_BITS)) u_hd (
      .clk, .rst_n,
      .cam_we, .cam_split, .cam_idx, .cam_wdata,
      .start     (hd_start),
      .base_addr (op_base),
      .advance   (col_adv[c]),
      .ready     (col_ready[c]),
      .w_q       (w_top[c]),
      .w_vld_q   (w_top_vld[c]),
      .miss      (col_miss[c]),
      .rd_en     (wb_rd_en[c]),
      .rd_addr   (wb_rd_addr[c]),
      .rd_data   (wb_rd_data[c])
    );
  end

  assign hd_miss = |(col_miss & col_adv);

  activation_buffer #(.ROWS(ROWS), .DEPTH(ACT_DEPTH)) u_abuf (
    .clk, .rst_n,
    .wr_en (ab_we), .wr_row (ab_row), .wr_addr (ab_addr), .wr_data (ab_wdata),
    .rewind (act_rewind),
    .rd_en  (row_rd),
    .a_q    (a_left),
    .a_vld_q(a_left_vld)
  );

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .clear (pe_clear), .drain, .hold,
    .w_top, .w_top_vld, .a_left, .a_left_vld,
    .out_row
  );

  accumulator_buffer #(.COLS(COLS), .DEPTH(ACC_ROWS)) u_obuf (
    .clk, .rst_n,
    .push (out_push), .push_row (out_row),
    .pop  (res_pop),  .head_row (res_row),
    .not_empty (res_valid),
    .full (out_full)
  );

  // A tile needs every column's decompressor to keep up with the skewed enables.
  a_hd_keeps_up: assert property (@(posedge clk) disable iff (!rst_n)
    |col_adv |-> ((col_adv & ~col_ready) == '0));

endmodule
