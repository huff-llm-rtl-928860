// bit_window: the codeword register of a Huffman decoder. It presents the
// WIN bits that start at the start pointer S of a compressed bit stream and
// advances S by a variable number of bits per cycle, refilling itself from a
// weight-buffer bank one 32-bit word at a time.
//
// The register is 64 bits wide and used as a ring of two 32-bit halves, so
// the bank is read only when S has moved out of a half, i.e. when fewer than
// 32 unread bits are left in the register. Window bit i is register bit
// (S+i) mod 64, so bit 0 of the window is the next stream bit.
//
// Interface: `start` (one cycle) clears the register and loads the stream
// from `base_addr`; two bank reads later `ready` rises and stays high. While
// `ready`, `consume` moves S by `consume_len` (at most WIN) at the clock edge.
// Bank port: `rd_en`/`rd_addr` in one cycle, `rd_data` valid the next cycle
// (synchronous SRAM). A half freed in cycle t is re-read in cycle t and
// written at the end of t+1; since S advances at most WIN<=16 bits a cycle
// the window cannot reach that half before t+2, so decoding never stalls.
// The 64-bit ring follows the paper's remark that a 64-bit register lets
// the buffer be read only when under 32 valid bits remain; the ring
// organisation and the read timing are this design's choice.
module bit_window #(
  parameter int unsigned WIN        = 12,
  parameter int unsigned ADDR_BITS  = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [ADDR_BITS-1:0]   base_addr,
  input  logic                   consume,
  input  logic [4:0]             consume_len,
  output logic                   ready,
  output logic [WIN-1:0]         window,
  output logic                   rd_en,
  output logic [ADDR_BITS-1:0]   rd_addr,
  input  logic [31:0]            rd_data
);

  logic [1:0][31:0]      ring;
  logic [1:0]            full;
  logic [5:0]            s_ptr;
  logic [5:0]            s_next;
  logic [ADDR_BITS-1:0]  addr;
  logic                  pend_v;
  logic                  pend_h;
  logic [1:0]            fill_cnt;
  logic                  step;
  logic                  half_done;
  logic [127:0]          rot;

  assign step   = ready && consume;
  assign s_next = s_ptr + {1'b0, consume_len};
  assign half_done  = step && (s_next[5] != s_ptr[5]);

  // Read request: initial fill of both halves, then refill of a freed half.
  always_comb begin
    rd_en   = 1'b0;
    rd_addr = addr;
    if (!start) begin
      if (fill_cnt != 2'd2) rd_en = 1'b1;
      else if (half_done)       rd_en = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ring     <= '0;
      full     <= '0;
      s_ptr    <= '0;
      addr     <= '0;
      pend_v   <= 1'b0;
      pend_h   <= 1'b0;
      fill_cnt <= 2'd2;
      ready    <= 1'b0;
    end else if (start) begin
      full     <= '0;
      s_ptr    <= '0;
      addr     <= base_addr;
      pend_v   <= 1'b0;
      fill_cnt <= 2'd0;
      ready    <= 1'b0;
    end else begin
      pend_v <= rd_en;
      if (rd_en) begin
        addr   <= addr + 1'b1;
        pend_h <= (fill_cnt != 2'd2) ? fill_cnt[0] : s_ptr[5];
      end
      if (fill_cnt != 2'd2) fill_cnt <= fill_cnt + 2'd1;
      if (pend_v) begin
        ring[pend_h] <= rd_data;
        full[pend_h] <= 1'b1;
      end
      if (half_done) full[s_ptr[5]] <= 1'b0;
      if (step)  s_ptr <= s_next;
      if (!ready && fill_cnt == 2'd2 && pend_v && pend_h) ready <= 1'b1;
    end
  end

  assign rot    = {ring, ring} >> s_ptr;
  assign window = rot[WIN-1:0];

  // The window must only ever cover loaded halves.
  a_window_loaded: assert property (@(posedge clk) disable iff (!rst_n)
    ready |-> (full[s_ptr[5]] && (({1'b0, s_ptr[4:0]} + 6'(WIN) <= 6'd32) || full[~s_ptr[5]])));
  a_consume_len: assert property (@(posedge clk) disable iff (!rst_n)
    step |-> (consume_len <= 5'(WIN)));

endmodule
