// systolic_array: ROWS x COLS grid of output-stationary PEs. Weights enter
// the top row, one FP16 value per column per cycle, and move down one row
// per cycle; inputs enter the left column, one per row per cycle, and move
// right. With column j's weights and row i's inputs both skewed by j and i
// cycles, PE(i,j) sees input a[i][t] together with weight w[t][j] and ends
// holding out[i][j] = sum_t a[i][t]*w[t][j] (FP32). The paper's array is
// 128 x 128 and is fed by a row of Huffman decompressors at the top.
//
// Results leave through the bottom: while `drain` is high (and `hold` low)
// every column shifts its accumulators down one row, so the bottom row
// presents, on `out_row`, the results of row ROWS-1 in the first drain
// cycle, then ROWS-2, down to row 0 after ROWS shifts. `clear` zeroes all
// accumulators. The drain-by-shifting is this design's choice; the paper
// shows only an Output block below the array.
module systolic_array
  import hd_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  drain,
  input  logic                  hold,
  input  fp16_t [COLS-1:0]      w_top,
  input  logic  [COLS-1:0]      w_top_vld,
  input  fp16_t [ROWS-1:0]      a_left,
  input  logic  [ROWS-1:0]      a_left_vld,
  output fp32_t [COLS-1:0]      out_row
);

  fp16_t w_bus   [ROWS+1][COLS];
  logic  w_vbus  [ROWS+1][COLS];
  fp16_t a_bus   [ROWS][COLS+1];
  logic  a_vbus  [ROWS][COLS+1];
  fp32_t acc_bus [ROWS+1][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign w_bus[0][c]   = w_top[c];
    assign w_vbus[0][c]  = w_top_vld[c];
    assign acc_bus[0][c] = '0;
    assign out_row[c]    = acc_bus[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_bus[r][0]  = a_left[r];
    assign a_vbus[r][0] = a_left_vld[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe u_pe (
        .clk, .rst_n, .clear, .drain, .hold,
        .w_in      (w_bus[r][c]),
        .w_vld_in  (w_vbus[r][c]),
        .a_in      (a_bus[r][c]),
        .a_vld_in  (a_vbus[r][c]),
        .acc_in    (acc_bus[r][c]),
        .w_out     (w_bus[r+1][c]),
        .w_vld_out (w_vbus[r+1][c]),
        .a_out     (a_bus[r][c+1]),
        .a_vld_out (a_vbus[r][c+1]),
        .acc_out   (acc_bus[r+1][c])
      );
    end
  end

endmodule
