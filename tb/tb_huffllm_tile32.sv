// tb_huffllm_tile32: one complete T = 32 tile on a 32 x 32 array with all
// other parameters at their defaults (bank layout, LMAX = 12, 8-row
// accumulator buffer). Three random codebooks are programmed, 32 columns of
// 32 FP16 weights are Huffman-compressed into their banks (a column's
// weights are redrawn if a stream would overflow its bank), 32 x 32
// activations are loaded, the tile runs and all 1024 FP32 results are
// compared with a reference; the cycle count 2R+C+T+5 plus stalls is
// checked. The same test at 128 x 128 is the full-size run; it needs far
// more simulator memory and build time.
module tb_huffllm_tile32;
  import hd_pkg::*;
  import tb_pkg::*;

  localparam int R = 32, C = 32, T = 32, BW = 10, SW = 2;

  logic clk = 0, rst_n = 0;
  logic cam_we; split_e cam_split; logic [4:0] cam_idx; cam_entry_t cam_wdata;
  logic wb_we; logic [4:0] wb_col; split_e wb_bank; logic [3:0] wb_addr; logic [31:0] wb_wdata;
  logic ab_we; logic [4:0] ab_row; logic [4:0] ab_addr; fp16_t ab_wdata;
  logic op_start; logic [5:0] op_len; logic [3:0] op_base;
  logic op_busy, op_done, hd_miss, res_pop, res_valid;
  logic [31:0] op_cycles, stall_cycles;
  fp32_t [C-1:0] res_row;

  int checks = 0, failures = 0;

  huffllm_top #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

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

  function automatic logic [4:0] skewed(input logic [4:0] centre);
    if ($urandom_range(1) == 0) return centre + 5'($urandom_range(2));
    return 5'($urandom);
  endfunction

  logic [15:0] code [3][32];
  int          len  [3][32];
  logic [15:0] W [T][C];
  logic [15:0] A [R][T];
  logic [31:0] ref_out [R][C];

  initial begin
    int got_rows, redraws;
    cam_we = 0; cam_split = SPLIT_EXP; cam_idx = '0; cam_wdata = '0;
    wb_we = 0; wb_col = '0; wb_bank = SPLIT_EXP; wb_addr = '0; wb_wdata = '0;
    ab_we = 0; ab_row = '0; ab_addr = '0; ab_wdata = '0;
    op_start = 0; op_len = '0; op_base = '0; res_pop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      logic [15:0] cc [32]; int ll [32];
      gen_codebook(12, cc, ll);
      code[k] = cc; len[k] = ll;
      for (int s = 0; s < 32; s++) begin
        @(negedge clk);
        cam_we = 1; cam_split = split_e'(k); cam_idx = 5'(s);
        cam_wdata = '{valid: 1'b1, code: cc[s], len: 5'(ll[s]), sym: 5'(s)};
      end
    end
    @(negedge clk) cam_we = 0;
    redraws = 0;
    for (int c = 0; c < C; c++) begin
      bit          bits [4][$];
      logic [31:0] words [4][$];
      bit          fits;
      do begin
        for (int b = 0; b < 4; b++) bits[b].delete();
        for (int t = 0; t < T; t++) begin
          logic [15:0] w;
          w[15]    = 1'($urandom);
          w[14:10] = skewed(5'd13) % 5'd31;
          w[9:5]   = skewed(5'd0);
          w[4:0]   = 5'($urandom);
          W[t][c]  = w;
          bits[3].push_back(w[15]);
          append_code(bits[0], code[0][w[14:10]], len[0][w[14:10]]);
          append_code(bits[1], code[1][w[9:5]],   len[1][w[9:5]]);
          append_code(bits[2], code[2][w[4:0]],   len[2][w[4:0]]);
        end
        fits = 1;
        for (int b = 0; b < 4; b++) begin
          logic [31:0] wq [$];
          pack_words(bits[b], wq);
          words[b] = wq;
          if (wq.size() > (b == 3 ? SW : BW)) fits = 0;
        end
        if (!fits) redraws++;
      end while (!fits && redraws < 10000);
      for (int b = 0; b < 4; b++) for (int i = 0; i < words[b].size(); i++) begin
        @(negedge clk);
        wb_we = 1; wb_col = 5'(c); wb_bank = split_e'(b); wb_addr = 4'(i); wb_wdata = words[b][i];
      end
    end
    @(negedge clk) wb_we = 0;
    check(redraws < 10000, "weights fit the 16 KB weight buffer");
    for (int r = 0; r < R; r++) for (int t = 0; t < T; t++) begin
      A[r][t] = 16'($urandom);
      A[r][t][14:10] = 5'($urandom_range(20, 8));
      @(negedge clk);
      ab_we = 1; ab_row = 5'(r); ab_addr = 5'(t); ab_wdata = A[r][t];
    end
    @(negedge clk) ab_we = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      ref_out[r][c] = '0;
      for (int t = 0; t < T; t++)
        ref_out[r][c] = real_to_fp32(fp32_to_real(ref_out[r][c]) +
                                     fp16_to_real(A[r][t]) * fp16_to_real(W[t][c]));
    end
    @(negedge clk); op_start = 1; op_len = 6'(T); op_base = '0;
    @(negedge clk); op_start = 0;
    got_rows = 0;
    while (got_rows < R) begin
      res_pop = res_valid;
      if (res_pop) begin
        for (int c = 0; c < C; c++)
          check(res_row[c] == ref_out[R-1-got_rows][c],
                $sformatf("result row %0d col %0d", R-1-got_rows, c));
        got_rows++;
      end
      check(!hd_miss, "no codeword miss");
      @(negedge clk);
    end
    res_pop = 0;
    while (op_busy) @(negedge clk);
    $display("tile T=%0d: %0d cycles, %0d drain stalls, %0d weight redraws",
             T, op_cycles, stall_cycles, redraws);
    check(op_cycles == 32'(2 * R + C + T - 1 + 6) + stall_cycles, "cycle count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
