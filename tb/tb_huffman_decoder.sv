// tb_huffman_decoder: drives one 5-bit Huffman decoder with random
// prefix-free codebooks (longest code = LMAX = 12, plus a flat 5-bit code)
// and random symbol streams encoded by the testbench, served from a
// synchronous bank model. Checks every decoded symbol, that the decoder
// primes within 4 cycles of start, that it yields one symbol per cycle
// while advanced every cycle, and that it holds its place when not advanced.
module tb_huffman_decoder;
  import hd_pkg::*;
  import tb_pkg::*;

  localparam int LMAX = 12;
  localparam int AW   = 7;
  localparam int NSYM = 200;

  logic clk = 0, rst_n = 0;
  logic cam_we; logic [4:0] cam_idx; cam_entry_t cam_wdata;
  logic start, advance, ready, sym_valid_q, miss, rd_en;
  logic [AW-1:0] base_addr, rd_addr;
  logic [4:0] sym_q;
  logic [31:0] rd_data;
  logic [31:0] bank [1 << AW];

  int checks = 0, failures = 0;

  huffman_decoder #(.LMAX(LMAX), .ADDR_BITS(AW)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (rd_en) rd_data <= bank[rd_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_book(input int lmax, input bit flat, input bit gaps);
    logic [15:0] code [32];
    int          len  [32];
    bit          bits [$];
    logic [31:0] words [$];
    logic [4:0]  syms [$];
    int          got, cyc, base;
    if (flat) for (int s = 0; s < 32; s++) begin
      code[s] = 16'(s); len[s] = 5;
    end else gen_codebook(lmax, code, len);
    // program the CAM
    for (int s = 0; s < 32; s++) begin
      @(negedge clk);
      cam_we = 1; cam_idx = 5'(s);
      cam_wdata = '{valid: 1'b1, code: code[s], len: 5'(len[s]), sym: 5'(s)};
    end
    @(negedge clk) cam_we = 0;
    // random stream, biased towards the short codes like real weights
    for (int i = 0; i < NSYM; i++) begin
      logic [4:0] s;
      s = 5'($urandom_range(31));
      if ($urandom_range(1) == 1) for (int k = 0; k < 32; k++) if (len[k] < len[s]) s = 5'(k);
      syms.push_back(s);
      append_code(bits, code[s], len[s]);
    end
    pack_words(bits, words);
    base = int'($urandom_range(3));
    for (int i = 0; i < (1 << AW); i++) bank[i] = $urandom;
    for (int i = 0; i < words.size(); i++) bank[base + i] = words[i];
    // start and prime
    @(negedge clk); start = 1; base_addr = AW'(base);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!ready) begin @(negedge clk); cyc++; end
    check(cyc <= 4, $sformatf("primed after %0d cycles", cyc));
    // decode
    got = 0;
    fork
      begin
        while (got < NSYM) begin
          advance = gaps ? ($urandom_range(3) != 0) : 1'b1;
          @(negedge clk);
        end
        advance = 0;
      end
      begin
        int adv_cycles = 0, out_cycles = 0, holes = 0;
        while (got < NSYM) begin
          @(posedge clk);
          if (advance && ready) adv_cycles++;
          check(!miss || !advance, "no CAM miss");
          #1;
          if (!sym_valid_q && got > 0) holes++;
          if (sym_valid_q) begin
            out_cycles++;
            check(sym_q == syms[got], $sformatf("symbol %0d: got %0d want %0d", got, sym_q, syms[got]));
            got++;
          end
        end
        check(adv_cycles == out_cycles, "one symbol per advanced cycle");
        if (!gaps) check(holes == 0, $sformatf("%0d bubbles in a continuous stream", holes));
      end
    join
    @(negedge clk);
  endtask

  initial begin
    cam_we = 0; start = 0; advance = 0; base_addr = '0; cam_idx = '0; cam_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_book(LMAX, 1'b0, 1'b0);   // every cycle advanced
    run_book(LMAX, 1'b0, 1'b1);   // random gaps
    run_book(LMAX, 1'b1, 1'b0);   // flat 5-bit code
    for (int k = 0; k < 5; k++) run_book(6 + k, 1'b0, k[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
