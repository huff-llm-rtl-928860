// activation_buffer: on-chip buffer of FP16 inputs (activations) for the
// rows of the systolic array. Row r holds DEPTH values a[r][0..DEPTH-1],
// streamed into the left edge of array row r one per cycle. Each row has its
// own read pointer so that rows can be read with the skew the array needs:
// `rd_en[r]` returns the next value of row r on `a_q[r]` with `a_vld_q[r]`
// the following cycle; `rewind` returns all pointers to 0. Values are written
// one per cycle through the fill port. With the defaults, 128 rows x 32
// values x 2 bytes are the paper's 8 KB; the per-row organisation and the
// pointers are this design's choice.
module activation_buffer
  import hd_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned DEPTH = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           wr_en,
  input  logic [$clog2(ROWS)-1:0]        wr_row,
  input  logic [$clog2(DEPTH)-1:0]       wr_addr,
  input  fp16_t                          wr_data,
  input  logic                           rewind,
  input  logic [ROWS-1:0]                rd_en,
  output fp16_t [ROWS-1:0]               a_q,
  output logic  [ROWS-1:0]               a_vld_q
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    fp16_t                    mem [DEPTH];
    logic [$clog2(DEPTH)-1:0] ptr;

    always_ff @(posedge clk) begin
      if (wr_en && wr_row == ($clog2(ROWS))'(r)) mem[wr_addr] <= wr_data;
      if (rd_en[r]) a_q[r] <= mem[ptr];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ptr        <= '0;
        a_vld_q[r] <= 1'b0;
      end else begin
        a_vld_q[r] <= rd_en[r] && !rewind;
        if (rewind)         ptr <= '0;
        else if (rd_en[r])  ptr <= ptr + 1'b1;
      end
    end
  end

endmodule
