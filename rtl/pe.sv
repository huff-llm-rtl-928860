// pe: output-stationary processing element of the systolic array. Each
// cycle in which a weight (from above) and an input (from the left) arrive
// together, it multiplies them (X) and adds the product (+) into its
// accumulator register (ACC), as in the paper's PE. The weight is passed on
// to the PE below and the input to the PE on the right one cycle later, with
// their valid bits; a cycle without valid operands is a bubble and leaves
// ACC unchanged.
//
// Control (this design's choice): `clear` zeroes ACC at the start of a tile;
// while `drain` is high ACC loads `acc_in`, the ACC of the PE above, so a
// column of results shifts down one row per cycle and leaves at the bottom.
// `hold` freezes ACC during a drain when the output buffer cannot accept a
// row. FP16 operands, an exact FP32 product and an FP32 accumulator with
// round-to-nearest-even are this design's choice; the paper gives FP16
// weights and inputs only.
module pe
  import hd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  drain,
  input  logic  hold,
  input  fp16_t w_in,
  input  logic  w_vld_in,
  input  fp16_t a_in,
  input  logic  a_vld_in,
  input  fp32_t acc_in,
  output fp16_t w_out,
  output logic  w_vld_out,
  output fp16_t a_out,
  output logic  a_vld_out,
  output fp32_t acc_out
);

  fp32_t prod, sum, acc;

  fp16_mul u_mul (.a(w_in), .b(a_in), .p(prod));
  fp32_add u_add (.a(acc),  .b(prod), .s(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      w_out     <= '0;
      a_out     <= '0;
      w_vld_out <= 1'b0;
      a_vld_out <= 1'b0;
    end else begin
      w_out     <= w_in;
      a_out     <= a_in;
      w_vld_out <= w_vld_in;
      a_vld_out <= a_vld_in;
      if (clear)                    acc <= '0;
      else if (drain) begin
        if (!hold)                  acc <= acc_in;
      end
      else if (w_vld_in && a_vld_in) acc <= sum;
    end
  end

  assign acc_out = acc;

  // Skewed streaming must deliver a weight and its input in the same cycle.
  a_operands_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    !drain |-> (w_vld_in == a_vld_in));

endmodule
