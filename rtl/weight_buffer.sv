// weight_buffer: on-chip buffer holding the Huffman-compressed weights of
// the systolic array. Each of the COLS columns has its own storage split
// into equally sized banks, one per coded field (exponent, mantissa MSBs,
// mantissa LSBs), so the three decoders of a column read in parallel, plus
// a small bank of raw sign bits. Every bank has one synchronous read port
// (data valid the cycle after `rd_en`); one 32-bit word per cycle is
// written through the shared fill port from main memory.
//
// Sizes: with the defaults (BANK_WORDS=10, SIGN_WORDS=2, 32-bit words) a
// column holds 3*10+2 = 32 words = 128 bytes, and 128 columns hold the
// paper's 16 KB. The three equal coded banks follow the paper; the sign bank,
// the word width and the split of 128 bytes into 10+10+10+2 words are this
// design's choices. A read beyond a bank's depth returns zero.
module weight_buffer
  import hd_pkg::*;
#(
  parameter int unsigned COLS       = 128,
  parameter int unsigned BANK_WORDS = 10,
  parameter int unsigned SIGN_WORDS = 2,
  parameter int unsigned ADDR_BITS  = 4
) (
  input  logic                                  clk,
  // fill port
  input  logic                                  wr_en,
  input  logic [$clog2(COLS)-1:0]               wr_col,
  input  split_e                                wr_bank,
  input  logic [ADDR_BITS-1:0]                  wr_addr,
  input  logic [WORD_BITS-1:0]                  wr_data,
  // read ports, one per column and bank
  input  logic [COLS-1:0][3:0]                  rd_en,
  input  logic [COLS-1:0][3:0][ADDR_BITS-1:0]   rd_addr,
  output logic [COLS-1:0][3:0][WORD_BITS-1:0]   rd_data
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    for (genvar b = 0; b < 4; b++) begin : g_bank
      localparam int unsigned DEPTH = (b == int'(SPLIT_SIGN)) ? SIGN_WORDS : BANK_WORDS;
      localparam int unsigned IW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
      logic [WORD_BITS-1:0] mem [DEPTH];

      always_ff @(posedge clk) begin
        if (wr_en && wr_col == ($clog2(COLS))'(c) && wr_bank == split_e'(b) &&
            32'(wr_addr) < DEPTH)
          mem[wr_addr[IW-1:0]] <= wr_data;
        if (rd_en[c][b])
          rd_data[c][b] <= (32'(rd_addr[c][b]) < DEPTH) ? mem[rd_addr[c][b][IW-1:0]] : '0;
      end
    end
  end

  initial assert ((1 << ADDR_BITS) >= BANK_WORDS && (1 << ADDR_BITS) >= SIGN_WORDS)
    else $error("ADDR_BITS too small for the bank depth");

endmodule
