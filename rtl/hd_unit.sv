// hd_unit: the Huffman decompressor (HD) that sits above one column of the
// systolic array. It holds three 5-bit Huffman decoders, one each for the
// exponent, the mantissa MSBs and the mantissa LSBs of the FP16 weights, each
// reading its own bank of the column's weight buffer. The sign bit is stored
// uncompressed and passed through; sign, exponent and the two mantissa
// halves are concatenated into the 16-bit weight (Fig. 5 of the paper).
//
// Interface: `cam_we`/`cam_split`/`cam_idx`/`cam_wdata` program the codebook
// of decoder `cam_split`. `start` makes all four streams load from address
// `base_addr` of their banks; `ready` is high once all are primed. Each cycle
// with `advance` high while `ready` consumes one weight; the weight appears
// on `w_q` with `w_vld_q` one cycle later, so an HD delivers one FP16 weight
// per cycle without bubbles. `miss` is high if any decoder finds no match.
// Storing the sign bits as a fourth, uncompressed bank that is read one
// 32-bit word at a time is this design's choice; the paper says only that
// the sign bit is passed through.
module hd_unit
  import hd_pkg::*;
#(
  parameter int unsigned LMAX      = 12,
  parameter int unsigned ADDR_BITS = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cam_we,
  input  split_e                          cam_split,
  input  logic [SYM_BITS-1:0]             cam_idx,
  input  cam_entry_t                      cam_wdata,
  input  logic                            start,
  input  logic [ADDR_BITS-1:0]            base_addr,
  input  logic                            advance,
  output logic                            ready,
  output fp16_t                           w_q,
  output logic                            w_vld_q,
  output logic                            miss,
  // bank read ports, indexed by split_e (SPLIT_SIGN = raw sign bank)
  output logic [3:0]                      rd_en,
  output logic [3:0][ADDR_BITS-1:0]       rd_addr,
  input  logic [3:0][WORD_BITS-1:0]       rd_data
);

  logic [NUM_SPLITS-1:0]               dec_ready, dec_vld, dec_miss;
  logic [NUM_SPLITS-1:0][SYM_BITS-1:0] dec_sym;
  logic                                sign_ready;
  logic [0:0]                          sign_bit;
  logic                                sign_q;
  logic                                go;

  assign ready = (&dec_ready) && sign_ready;
  assign go    = advance && ready;

  for (genvar k = 0; k < NUM_SPLITS; k++) begin : g_dec
    huffman_decoder #(.LMAX(LMAX), .ADDR_BITS(ADDR_BITS)) u_dec (
      .clk, .rst_n,
      .cam_we      (cam_we && (cam_split == split_e'(k))),
      .cam_idx, .cam_wdata,
      .start, .base_addr,
      .advance     (go),
      .ready       (dec_ready[k]),
      .sym_q       (dec_sym[k]),
      .sym_valid_q (dec_vld[k]),
      .miss        (dec_miss[k]),
      .rd_en       (rd_en[k]),
      .rd_addr     (rd_addr[k]),
      .rd_data     (rd_data[k])
    );
  end

  // Raw sign bits: a bit stream consumed one bit per weight.
  bit_window #(.WIN(1), .ADDR_BITS(ADDR_BITS)) u_sign (
    .clk, .rst_n, .start, .base_addr,
    .consume     (go),
    .consume_len (5'd1),
    .ready       (sign_ready),
    .window      (sign_bit),
    .rd_en       (rd_en[SPLIT_SIGN]),
    .rd_addr     (rd_addr[SPLIT_SIGN]),
    .rd_data     (rd_data[SPLIT_SIGN])
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sign_q <= 1'b0;
    else if (go) sign_q <= sign_bit[0];
  end

  // Concat: sign | exponent | mantissa MSBs | mantissa LSBs
  assign w_q     = {sign_q, dec_sym[SPLIT_EXP], dec_sym[SPLIT_MHI], dec_sym[SPLIT_MLO]};
  assign w_vld_q = &dec_vld;
  assign miss    = |dec_miss;

endmodule
