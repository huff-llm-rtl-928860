// tb_huffllm_top: end-to-end test of the accelerator at reduced size
// (4 x 3 array, 2-row accumulator buffer, all else at defaults). For each
// tile it draws random FP16 weights whose exponent and mantissa fields
// follow skewed distributions, builds three random codebooks (codes up to
// LMAX = 12 bits), Huffman-encodes the three fields and packs the raw sign
// bits, loads codebooks, compressed banks and activations through the
// external ports, runs the tile and compares every result with an FP32
// reference. It also checks the cycle count 2R+C+T-1 plus the fixed
// start-up and the drain stalls, and counts the mechanisms exercised:
// codeword-register refills during compute, skew bubbles, drain stalls
// caused by a full accumulator buffer, and a nonzero stream base address.
module tb_huffllm_top;
  import hd_pkg::*;
  import tb_pkg::*;

  localparam int R = 4, C = 3, ACC_ROWS = 2, BW = 10, SW = 2;

  logic clk = 0, rst_n = 0;
  logic cam_we; split_e cam_split; logic [4:0] cam_idx; cam_entry_t cam_wdata;
  logic wb_we; logic [1:0] wb_col; split_e wb_bank; logic [3:0] wb_addr; logic [31:0] wb_wdata;
  logic ab_we; logic [1:0] ab_row; logic [4:0] ab_addr; fp16_t ab_wdata;
  logic op_start; logic [5:0] op_len; logic [3:0] op_base;
  logic op_busy, op_done, hd_miss, res_pop, res_valid;
  logic [31:0] op_cycles, stall_cycles;
  fp32_t [C-1:0] res_row;

  int checks = 0, failures = 0;
  int n_refill = 0, n_bubble = 0, n_stall = 0, n_base = 0;

  huffllm_top #(.ROWS(R), .COLS(C), .ACC_ROWS(ACC_ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters, sampled while weights stream
  always @(posedge clk) if (rst_n && dut.col_adv != '0) begin
    for (int c = 0; c < C; c++) if (|dut.wb_rd_en[c]) n_refill++;
    if (dut.col_adv != '0 && dut.col_adv != '1) n_bubble++;
  end

  // a 5-bit symbol drawn from a skewed distribution: 1 of 32 with
  // probability ~1/2, the rest uniform
  function automatic logic [4:0] skewed(input logic [4:0] centre);
    if ($urandom_range(1) == 0) return centre + 5'($urandom_range(2));
    return 5'($urandom);
  endfunction

  task automatic run(input int T, input int base, input bit slow_pop);
    logic [15:0] code [3][32];
    int          len  [3][32];
    bit          bits [4][$];
    logic [31:0] words [4][$];
    logic [15:0] W [32][C];
    logic [15:0] A [R][32];
    logic [31:0] ref_out [R][C];
    int fits, got_rows, cyc_start;
    // codebooks and weights; redraw until every stream fits its bank
    do begin
      for (int k = 0; k < 3; k++) begin
        logic [15:0] cc [32]; int ll [32];
        gen_codebook(12, cc, ll);
        code[k] = cc; len[k] = ll;
      end
      for (int c = 0; c < C; c++) begin
        for (int b = 0; b < 4; b++) bits[b].delete();
        for (int t = 0; t < T; t++) begin
          logic [15:0] w;
          w[15]    = 1'($urandom);
          w[14:10] = skewed(5'd13) % 5'd31;   // keep clear of inf/NaN
          w[9:5]   = skewed(5'd0);
          w[4:0]   = 5'($urandom);
          W[t][c]  = w;
          bits[3].push_back(w[15]);
          append_code(bits[0], code[0][w[14:10]], len[0][w[14:10]]);
          append_code(bits[1], code[1][w[9:5]],   len[1][w[9:5]]);
          append_code(bits[2], code[2][w[4:0]],   len[2][w[4:0]]);
        end
        for (int b = 0; b < 4; b++) begin
          logic [31:0] wq [$];
          pack_words(bits[b], wq);
          words[b] = wq;
        end
        fits = 1;
        for (int b = 0; b < 4; b++) if (base + words[b].size() > (b == 3 ? SW : BW)) fits = 0;
        if (!fits) break;
        for (int b = 0; b < 4; b++) for (int i = 0; i < words[b].size(); i++) begin
          @(negedge clk);
          wb_we = 1; wb_col = 2'(c); wb_bank = split_e'(b); wb_addr = 4'(base + i);
          wb_wdata = words[b][i];
        end
        @(negedge clk) wb_we = 0;
      end
    end while (!fits);
    // codebooks
    for (int k = 0; k < 3; k++) for (int s = 0; s < 32; s++) begin
      @(negedge clk);
      cam_we = 1; cam_split = split_e'(k); cam_idx = 5'(s);
      cam_wdata = '{valid: 1'b1, code: code[k][s], len: 5'(len[k][s]), sym: 5'(s)};
    end
    @(negedge clk) cam_we = 0;
    // activations
    for (int r = 0; r < R; r++) for (int t = 0; t < T; t++) begin
      A[r][t] = 16'($urandom);
      A[r][t][14:10] = 5'($urandom_range(20, 8));
      @(negedge clk);
      ab_we = 1; ab_row = 2'(r); ab_addr = 5'(t); ab_wdata = A[r][t];
    end
    @(negedge clk) ab_we = 0;
    // reference
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      ref_out[r][c] = '0;
      for (int t = 0; t < T; t++)
        ref_out[r][c] = real_to_fp32(fp32_to_real(ref_out[r][c]) +
                                     fp16_to_real(A[r][t]) * fp16_to_real(W[t][c]));
    end
    // run; pop results while the tile drains
    if (base != 0) n_base++;
    @(negedge clk); op_start = 1; op_len = 6'(T); op_base = 4'(base);
    @(negedge clk); op_start = 0;
    got_rows = 0;
    while (got_rows < R) begin
      res_pop = res_valid && (slow_pop ? ($urandom_range(3) == 0) : 1'b1);
      if (res_pop) begin
        for (int c = 0; c < C; c++)
          check(res_row[c] == ref_out[R-1-got_rows][c],
                $sformatf("T=%0d out[%0d][%0d]=%h want %h", T, R-1-got_rows, c,
                          res_row[c], ref_out[R-1-got_rows][c]));
        got_rows++;
      end
      check(!hd_miss, "no codeword miss");
      @(negedge clk);
    end
    res_pop = 0;
    while (op_busy) @(negedge clk);
    n_stall += int'(stall_cycles);
    // start-up: start cycle, 4 cycles of priming, 1 FILL->COMPUTE cycle, DONE cycle
    check(op_cycles == 32'(2 * R + C + T - 1 + 6) + stall_cycles,
          $sformatf("op_cycles %0d, stalls %0d, T=%0d", op_cycles, stall_cycles, T));
  endtask

  initial begin
    cam_we = 0; cam_split = SPLIT_EXP; cam_idx = '0; cam_wdata = '0;
    wb_we = 0; wb_col = '0; wb_bank = SPLIT_EXP; wb_addr = '0; wb_wdata = '0;
    ab_we = 0; ab_row = '0; ab_addr = '0; ab_wdata = '0;
    op_start = 0; op_len = '0; op_base = '0; res_pop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 0, 0);
    run(8, 0, 1);
    run(32, 0, 0);
    run(20, 1, 1);
    for (int n = 0; n < 6; n++) run(int'($urandom_range(32, 1)), 0, n[0]);
    $display("mechanisms: refills=%0d bubbles=%0d drain_stalls=%0d base_offsets=%0d",
             n_refill, n_bubble, n_stall, n_base);
    check(n_refill > 0, "codeword register refilled during compute");
    check(n_bubble > 0, "skew bubbles at the array edge");
    check(n_stall > 0, "drain stalled by a full accumulator buffer");
    check(n_base > 0, "stream started at a nonzero base address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
