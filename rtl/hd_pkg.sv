// hd_pkg: types and constants shared by the Huffman-decompressing systolic
// array. A 16-bit FP16 weight is split {1,5,5,5}: the sign bit is stored
// raw, and the exponent, the five mantissa MSBs and the five mantissa LSBs
// are each Huffman coded with a codebook of their own (32 source symbols).
// Each decoder holds its codebook in a 32-entry CAM of cam_entry_t. A code
// is stored with its first transmitted bit at code[0]; the compressed
// stream is packed into 32-bit words, first bit at word bit 0.
package hd_pkg;

  localparam int unsigned SYM_BITS   = 5;             // source symbol width
  localparam int unsigned NUM_SYMS   = 1 << SYM_BITS;  // CAM entries per decoder
  localparam int unsigned CODE_MAX   = 16;            // widest code a CAM entry can store
  localparam int unsigned LEN_BITS   = 5;             // code length field, 1..CODE_MAX
  localparam int unsigned WORD_BITS  = 32;            // weight-buffer word
  localparam int unsigned NUM_SPLITS = 3;             // coded fields per weight

  // The three coded fields of a weight, in the order of the weight buffer banks.
  typedef enum logic [1:0] {
    SPLIT_EXP   = 2'd0,  // exponent, weight bits [14:10]
    SPLIT_MHI   = 2'd1,  // mantissa MSBs, weight bits [9:5]
    SPLIT_MLO   = 2'd2,  // mantissa LSBs, weight bits [4:0]
    SPLIT_SIGN  = 2'd3   // raw sign bits (bank only, no codebook)
  } split_e;

  // One CAM entry: the code, its length and the symbol it decodes to.
  typedef struct packed {
    logic                  valid;
    logic [CODE_MAX-1:0]   code;
    logic [LEN_BITS-1:0]   len;
    logic [SYM_BITS-1:0]   sym;
  } cam_entry_t;

  typedef struct packed {
    logic       sign;
    logic [4:0] exp;
    logic [9:0] man;
  } fp16_t;

  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] man;
  } fp32_t;

  // Number of leading zeros of a 32-bit word (32 for zero), found in five
  // halving steps rather than a bit-serial scan.
  function automatic logic [5:0] lzc32(input logic [31:0] x);
    logic [31:0] v;
    logic [5:0]  n;
    v = x;
    n = '0;
    if (v == '0) return 6'd32;
    if (v[31:16] == '0) begin v = v << 16; n = n + 6'd16; end
    if (v[31:24] == '0) begin v = v << 8;  n = n + 6'd8;  end
    if (v[31:28] == '0) begin v = v << 4;  n = n + 6'd4;  end
    if (v[31:30] == '0) begin v = v << 2;  n = n + 6'd2;  end
    if (v[31]    == 1'b0) n = n + 6'd1;
    return n;
  endfunction

endpackage
