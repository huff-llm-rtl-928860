// tb_hd_unit: one HD (three 5-bit decoders and the raw sign stream) fed
// from four synchronous bank models. Random FP16 weights are split
// {1,5,5,5}, the three 5-bit fields are Huffman coded with three different
// random codebooks and the sign bits packed raw; the testbench checks that
// the 16-bit weights come back in order, one per advanced cycle.
module tb_hd_unit;
  import hd_pkg::*;
  import tb_pkg::*;

  localparam int AW = 6;
  localparam int NW = 150;

  logic clk = 0, rst_n = 0;
  logic cam_we; split_e cam_split; logic [4:0] cam_idx; cam_entry_t cam_wdata;
  logic start, advance, ready, w_vld_q, miss;
  logic [AW-1:0] base_addr;
  fp16_t w_q;
  logic [3:0] rd_en;
  logic [3:0][AW-1:0] rd_addr;
  logic [3:0][31:0] rd_data;
  logic [31:0] bank [4][1 << AW];
  int checks = 0, failures = 0;

  hd_unit #(.LMAX(12), .ADDR_BITS(AW)) dut (.*);
  always #5 clk = ~clk;
  for (genvar b = 0; b < 4; b++) begin : g_bank
    always_ff @(posedge clk) if (rd_en[b]) rd_data[b] <= bank[b][rd_addr[b]];
  end

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

  task automatic run(input bit gaps);
    logic [15:0] code [3][32];
    int          len  [3][32];
    bit          bits [4][$];
    logic [31:0] words [$];
    logic [15:0] wts [$];
    int got, adv_n;
    for (int k = 0; k < 3; k++) begin
      logic [15:0] c [32]; int l [32];
      gen_codebook(12, c, l);
      code[k] = c; len[k] = l;
      for (int s = 0; s < 32; s++) begin
        @(negedge clk);
        cam_we = 1; cam_split = split_e'(k); cam_idx = 5'(s);
        cam_wdata = '{valid: 1'b1, code: c[s], len: 5'(l[s]), sym: 5'(s)};
      end
    end
    @(negedge clk) cam_we = 0;
    for (int i = 0; i < NW; i++) begin
      logic [15:0] w = 16'($urandom);
      wts.push_back(w);
      bits[3].push_back(w[15]);
      append_code(bits[0], code[0][w[14:10]], len[0][w[14:10]]);
      append_code(bits[1], code[1][w[9:5]],   len[1][w[9:5]]);
      append_code(bits[2], code[2][w[4:0]],   len[2][w[4:0]]);
    end
    for (int b = 0; b < 4; b++) begin
      pack_words(bits[b], words);
      for (int i = 0; i < (1 << AW); i++) bank[b][i] = (i < words.size()) ? words[i] : $urandom;
    end
    @(negedge clk); start = 1; base_addr = '0;
    @(negedge clk); start = 0;
    while (!ready) @(negedge clk);
    got = 0; adv_n = 0;
    while (got < NW) begin
      advance = gaps ? ($urandom_range(2) != 0) : 1'b1;
      @(posedge clk);
      if (advance && ready && adv_n < NW) adv_n++;
      @(negedge clk);
      if (w_vld_q) begin
        check(w_q == wts[got], $sformatf("weight %0d: %h want %h", got, w_q, wts[got]));
        got++;
      end
      check(!miss, "no miss");
      if (!gaps) check(got == adv_n, "one weight per cycle");
    end
    advance = 0;
  endtask

  initial begin
    cam_we = 0; cam_split = SPLIT_EXP; cam_idx = '0; cam_wdata = '0;
    start = 0; advance = 0; base_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1'b0);
    run(1'b1);
    run(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
