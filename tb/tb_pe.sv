// tb_pe: drives one PE with random FP16 weight/input pairs (normal values,
// subnormals and zeros) and bubbles, and compares its FP32 accumulator each
// cycle with a reference computed in double precision and rounded to FP32
// nearest-even by the testbench. Also checks the one-cycle forwarding of
// weight and input, clear, the drain shift, hold, and inf/NaN handling.
module tb_pe;
  import hd_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic clear, drain, hold, w_vld_in, a_vld_in, w_vld_out, a_vld_out;
  fp16_t w_in, a_in, w_out, a_out;
  fp32_t acc_in, acc_out;
  int checks = 0, failures = 0;

  pe dut (.*);
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
    int kind = int'($urandom_range(19));
    logic [15:0] h;
    h[15]    = 1'($urandom_range(1));
    h[9:0]   = 10'($urandom);
    h[14:10] = 5'($urandom_range(30, 1));
    if (kind == 0) h[14:10] = 5'd0;             // subnormal
    if (kind == 1) h[14:0]  = '0;               // zero
    return h;
  endfunction

  initial begin
    logic [31:0] ref_acc;
    logic [15:0] w_prev, a_prev;
    bit          v_prev;
    clear = 0; drain = 0; hold = 0; w_vld_in = 0; a_vld_in = 0;
    w_in = '0; a_in = '0; acc_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 40; blk++) begin
      @(negedge clk); clear = 1; ref_acc = '0;
      @(negedge clk); clear = 0;
      check(acc_out == 32'd0, "clear");
      for (int t = 0; t < 50; t++) begin
        bit v;
        v = ($urandom_range(4) != 0);
        w_in = rnd_fp16(); a_in = rnd_fp16(); w_vld_in = v; a_vld_in = v;
        w_prev = w_in; a_prev = a_in; v_prev = v;
        if (v) ref_acc = real_to_fp32(fp32_to_real(ref_acc) +
                                      fp16_to_real(w_in) * fp16_to_real(a_in));
        @(negedge clk);
        check(acc_out == ref_acc, $sformatf("acc %h want %h (w=%h a=%h)", acc_out, ref_acc, w_prev, a_prev));
        check(w_out == w_prev && a_out == a_prev && w_vld_out == v_prev && a_vld_out == v_prev,
              "forwarding");
      end
      w_vld_in = 0; a_vld_in = 0;
      // drain: accumulator takes acc_in; hold keeps it
      acc_in = $urandom; drain = 1; hold = 1;
      @(negedge clk);
      check(acc_out == ref_acc, "hold keeps ACC");
      hold = 0;
      @(negedge clk);
      check(acc_out == acc_in, "drain loads acc_in");
      drain = 0;
    end
    // infinity and NaN
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    w_in = 16'h7c00; a_in = 16'h3c00; w_vld_in = 1; a_vld_in = 1;   // inf * 1
    @(negedge clk);
    check(acc_out == 32'h7f80_0000, "inf accumulates to inf");
    w_in = 16'hfc00;                                               // + (-inf)
    @(negedge clk);
    check(acc_out == 32'h7fc0_0000, "inf - inf is NaN");
    w_vld_in = 0; a_vld_in = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
