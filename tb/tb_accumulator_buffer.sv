// tb_accumulator_buffer: random pushes and pops on a 3-column, 8-row result
// FIFO, checked against a queue model: order of rows, not_empty, full, and
// that a push into a full buffer is refused.
module tb_accumulator_buffer;
  import hd_pkg::*;

  localparam int C = 3, D = 8;

  logic clk = 0, rst_n = 0;
  logic push, pop, not_empty, full;
  fp32_t [C-1:0] push_row, head_row;
  logic [C*32-1:0] q [$];
  int checks = 0, failures = 0, saw_full = 0;

  accumulator_buffer #(.COLS(C), .DEPTH(D)) dut (.*);
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

  initial begin
    push = 0; pop = 0; push_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int bias;
      bias = (n / 200) % 2;
      check(not_empty == (q.size() != 0), "not_empty");
      check(full == (q.size() == D), "full");
      if (q.size() != 0) check(head_row == q[0], "head row");
      if (full) saw_full++;
      push = ($urandom_range(3) < (bias ? 3 : 1)) && !full;
      pop  = ($urandom_range(3) < (bias ? 1 : 3)) && not_empty;
      for (int c = 0; c < C; c++) push_row[c] = $urandom;
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(push_row);
      @(negedge clk);
    end
    check(saw_full > 0, "buffer filled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
