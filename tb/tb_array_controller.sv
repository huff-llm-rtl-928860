// tb_array_controller: runs tiles of random length T on a 4 x 3 controller
// with a random decompressor priming delay and a random full output buffer.
// Checks, cycle by cycle, that column j and row i are enabled exactly for T
// cycles starting j and i cycles after the first, that COMPUTE lasts
// T+ROWS+COLS-1 cycles, that exactly ROWS rows are pushed, that every full
// cycle holds the drain and is counted, and the total cycle count.
module tb_array_controller;

  localparam int R = 4, C = 3;

  logic clk = 0, rst_n = 0;
  logic op_start, hd_ready, out_full, busy, done, hd_start, act_rewind, pe_clear;
  logic [5:0] op_len;
  logic [C-1:0] col_adv; logic [R-1:0] row_rd;
  logic drain, hold, out_push;
  logic [31:0] op_cycles, stall_cycles;
  int checks = 0, failures = 0;

  array_controller #(.ROWS(R), .COLS(C), .T_BITS(6)) dut (.*);
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

  task automatic run(input int T, input int fill, input bit stalls);
    int k, pushes, stalls_seen, total;
    @(negedge clk); op_start = 1; op_len = 6'(T);
    #1 check(hd_start && pe_clear && act_rewind, "start pulses");
    @(negedge clk); op_start = 0;
    check(!hd_start, "start is one cycle");
    total = 1;
    for (int i = 0; i < fill; i++) begin
      check(busy && col_adv == '0 && !drain, "waiting for decoders");
      @(negedge clk); total++;
    end
    hd_ready = 1;
    @(negedge clk); total++;
    // COMPUTE
    for (k = 0; k < T + R + C - 1; k++) begin
      for (int j = 0; j < C; j++)
        check(col_adv[j] == (k - j >= 0 && k - j < T), $sformatf("col_adv[%0d] at %0d", j, k));
      for (int i = 0; i < R; i++)
        check(row_rd[i] == (k - i >= 0 && k - i < T), $sformatf("row_rd[%0d] at %0d", i, k));
      check(!drain, "no drain during compute");
      @(negedge clk); total++;
    end
    // DRAIN
    pushes = 0; stalls_seen = 0;
    while (pushes < R) begin
      out_full = stalls && ($urandom_range(2) == 0);
      #1;
      check(drain && (hold == out_full) && (out_push == !out_full), "drain controls");
      if (out_full) stalls_seen++; else pushes++;
      @(negedge clk); total++;
    end
    out_full = 0;
    #1 check(done && !drain, "done after ROWS pushes");
    check(op_cycles == 32'(total), $sformatf("op_cycles %0d want %0d", op_cycles, total));
    check(stall_cycles == 32'(stalls_seen), "stall count");
    check(total - stalls_seen - fill - 2 == 2 * R + C + T - 1, "2R+C+T-1 cycles of compute and drain");
    @(negedge clk);
    check(!busy, "idle again");
    hd_ready = 0;
  endtask

  initial begin
    op_start = 0; op_len = '0; hd_ready = 0; out_full = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1, 3, 0); run(5, 3, 1); run(32, 0, 1);
    for (int n = 0; n < 20; n++) run(int'($urandom_range(40, 1)), int'($urandom_range(4)), n[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
