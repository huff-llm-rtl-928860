// tb_weight_buffer: fills a 4-column weight buffer with random words through
// the fill port, then reads every bank of every column through its own read
// port (all ports in parallel, random addresses including ones past the
// bank depth) and checks the data returned one cycle later against a model.
module tb_weight_buffer;
  import hd_pkg::*;

  localparam int C = 4, BW = 10, SW = 2, AW = 4;

  logic clk = 0;
  logic wr_en; logic [1:0] wr_col; split_e wr_bank; logic [AW-1:0] wr_addr; logic [31:0] wr_data;
  logic [C-1:0][3:0] rd_en;
  logic [C-1:0][3:0][AW-1:0] rd_addr;
  logic [C-1:0][3:0][31:0] rd_data;
  logic [31:0] model [C][4][16];
  int checks = 0, failures = 0;

  weight_buffer #(.COLS(C), .BANK_WORDS(BW), .SIGN_WORDS(SW), .ADDR_BITS(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [C-1:0][3:0][AW-1:0] a_prev;
    logic [C-1:0][3:0]         e_prev;
    logic [C-1:0][3:0][31:0]   d_prev;
    wr_en = 0; rd_en = '0; rd_addr = '0; wr_col = '0; wr_bank = SPLIT_EXP; wr_addr = '0; wr_data = '0;
    for (int c = 0; c < C; c++) for (int b = 0; b < 4; b++)
      for (int a = 0; a < (b == 3 ? SW : BW); a++) begin
        @(negedge clk);
        wr_en = 1; wr_col = 2'(c); wr_bank = split_e'(b); wr_addr = AW'(a); wr_data = $urandom;
        model[c][b][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int c = 0; c < C; c++) for (int b = 0; b < 4; b++)
      for (int a = (b == 3 ? SW : BW); a < 16; a++) model[c][b][a] = '0;
    e_prev = '0;
    for (int n = 0; n < 300; n++) begin
      for (int c = 0; c < C; c++) for (int b = 0; b < 4; b++) begin
        rd_en[c][b]   = ($urandom_range(3) != 0);
        rd_addr[c][b] = AW'($urandom_range(15));
      end
      d_prev = rd_data;
      @(negedge clk);
      for (int c = 0; c < C; c++) for (int b = 0; b < 4; b++) begin
        checks++;
        if (rd_data[c][b] != (rd_en[c][b] ? model[c][b][rd_addr[c][b]] : d_prev[c][b])) begin
          failures++;
          $display("FAIL col %0d bank %0d addr %0d: %h", c, b, rd_addr[c][b], rd_data[c][b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
