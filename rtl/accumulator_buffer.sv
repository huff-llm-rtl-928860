// accumulator_buffer: buffer that receives the results drained out of the
// bottom of the systolic array, one row of COLS FP32 values per cycle, and
// hands them to main memory. It is a first-in first-out queue of DEPTH rows:
// `push` stores `push_row`; the oldest row is on `head_row` while `not_empty`,
// and `pop` removes it. `full` tells the array to hold its drain. With the
// defaults, 8 rows x 128 x 4 bytes are the paper's 4 KB; the FIFO
// organisation, the FP32 width and the back-pressure are this design's choice.
module accumulator_buffer
  import hd_pkg::*;
#(
  parameter int unsigned COLS  = 128,
  parameter int unsigned DEPTH = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  push,
  input  fp32_t [COLS-1:0]      push_row,
  input  logic                  pop,
  output fp32_t [COLS-1:0]      head_row,
  output logic                  not_empty,
  output logic                  full
);

  localparam int unsigned PW = $clog2(DEPTH);

  fp32_t [COLS-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [PW:0]      count;
  logic             do_push, do_pop;

  assign full      = (count == (PW+1)'(DEPTH));
  assign not_empty = (count != '0);
  assign do_push   = push && !full;
  assign do_pop    = pop && not_empty;
  assign head_row  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= push_row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full));

endmodule
