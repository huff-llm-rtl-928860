// tb_systolic_array: a 4 x 3 array computes random FP16 tiles
// out = A (4 x T) * W (T x 3) for several T. The testbench feeds the skewed
// streams itself (column j and row i delayed by j and i cycles), then drains
// with random holds and compares each drained row, bottom row first, with
// an FP32 reference accumulated in the same order (t = 0..T-1).
module tb_systolic_array;
  import hd_pkg::*;
  import tb_pkg::*;

  localparam int R = 4, C = 3;

  logic clk = 0, rst_n = 0;
  logic clear, drain, hold;
  fp16_t [C-1:0] w_top;  logic [C-1:0] w_top_vld;
  fp16_t [R-1:0] a_left; logic [R-1:0] a_left_vld;
  fp32_t [C-1:0] out_row;
  int checks = 0, failures = 0;

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] rnd_fp16();
    logic [15:0] h = 16'($urandom);
    h[14:10] = 5'($urandom_range(20, 10));
    return h;
  endfunction

  task automatic run(input int T);
    logic [15:0] A [R][64];
    logic [15:0] W [64][C];
    logic [31:0] ref_out [R][C];
    int drained;
    for (int i = 0; i < R; i++) for (int t = 0; t < T; t++) A[i][t] = rnd_fp16();
    for (int t = 0; t < T; t++) for (int j = 0; j < C; j++) W[t][j] = rnd_fp16();
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      ref_out[i][j] = '0;
      for (int t = 0; t < T; t++)
        ref_out[i][j] = real_to_fp32(fp32_to_real(ref_out[i][j]) +
                                     fp16_to_real(A[i][t]) * fp16_to_real(W[t][j]));
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int k = 0; k < T + R + C - 1; k++) begin
      for (int j = 0; j < C; j++) begin
        w_top_vld[j] = (k - j >= 0 && k - j < T);
        w_top[j]     = w_top_vld[j] ? W[k - j][j] : 16'($urandom);
      end
      for (int i = 0; i < R; i++) begin
        a_left_vld[i] = (k - i >= 0 && k - i < T);
        a_left[i]     = a_left_vld[i] ? A[i][k - i] : 16'($urandom);
      end
      @(negedge clk);
    end
    w_top_vld = '0; a_left_vld = '0;
    drain = 1; drained = 0;
    while (drained < R) begin
      hold = ($urandom_range(2) == 0);
      if (!hold) begin
        for (int j = 0; j < C; j++)
          check(out_row[j] == ref_out[R-1-drained][j],
                $sformatf("T=%0d out[%0d][%0d]=%h want %h", T, R-1-drained, j,
                          out_row[j], ref_out[R-1-drained][j]));
        drained++;
      end
      @(negedge clk);
    end
    drain = 0; hold = 0;
    for (int j = 0; j < C; j++) check(out_row[j] == 32'd0, "array empty after drain");
  endtask

  initial begin
    clear = 0; drain = 0; hold = 0; w_top = '0; w_top_vld = '0; a_left = '0; a_left_vld = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1); run(5); run(17); run(32);
    for (int n = 0; n < 10; n++) run(int'($urandom_range(40, 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
