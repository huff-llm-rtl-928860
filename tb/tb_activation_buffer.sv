// tb_activation_buffer: writes random FP16 values into a 4-row buffer, then
// streams the rows with independent random read enables (as the skewed
// array does) and checks that each row returns its values in order, one
// cycle after each enable, and restarts from 0 after a rewind.
module tb_activation_buffer;
  import hd_pkg::*;

  localparam int R = 4, D = 32;

  logic clk = 0, rst_n = 0;
  logic wr_en; logic [1:0] wr_row; logic [4:0] wr_addr; fp16_t wr_data;
  logic rewind; logic [R-1:0] rd_en;
  fp16_t [R-1:0] a_q; logic [R-1:0] a_vld_q;
  logic [15:0] model [R][D];
  int ptr [R];
  int checks = 0, failures = 0;

  activation_buffer #(.ROWS(R), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [R-1:0] en_prev;
    wr_en = 0; rewind = 0; rd_en = '0; wr_row = '0; wr_addr = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 2'(r); wr_addr = 5'(a); wr_data = 16'($urandom);
      model[r][a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int pass = 0; pass < 3; pass++) begin
      rewind = 1;
      @(negedge clk); rewind = 0;
      for (int r = 0; r < R; r++) ptr[r] = 0;
      for (int n = 0; n < 40; n++) begin
        for (int r = 0; r < R; r++) rd_en[r] = (ptr[r] < D) && ($urandom_range(3) != 0);
        en_prev = rd_en;
        @(negedge clk);
        for (int r = 0; r < R; r++) begin
          checks++;
          if (a_vld_q[r] != en_prev[r] || (en_prev[r] && a_q[r] != model[r][ptr[r]])) begin
            failures++;
            $display("FAIL row %0d index %0d: %h vld %0d", r, ptr[r], a_q[r], a_vld_q[r]);
          end
          if (en_prev[r]) ptr[r]++;
        end
      end
      rd_en = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
