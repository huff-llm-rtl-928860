// huffman_decoder: single-cycle decoder for one 5-bit field of the {1,5,5,5}
// weight split. Each cycle it matches the next LMAX bits of the compressed
// stream against all 32 codewords of its codebook at once (a CAM), outputs
// the 5-bit source symbol of the matching entry and advances the stream's
// start pointer by that entry's code length. It therefore yields one symbol
// per cycle with no bubbles, which is what lets it sit as one more pipeline
// stage in front of a systolic array.
//
// Structure (as the paper describes it): codeword register with start
// pointer S (bit_window), a CAM whose entries each hold a code, its length L
// and its source symbol, and the update S <- S+L. The paper's decoder has a
// 32-bit register read L bits at a time; this one uses the 64-bit variant the
// paper suggests, read a 32-bit word at a time (see bit_window).
//
// Interface: the codebook is written one entry per cycle through
// cam_we/cam_idx/cam_wdata (entry valid bit, code with its first bit in
// code[0], length, symbol). `start` loads a stream from `base_addr` of the
// bank; once `ready`, each cycle with `advance` high registers the decoded
// symbol into `sym_q` (valid in `sym_valid_q` the next cycle), one symbol per
// advance. `miss` flags a window that matches no entry (a corrupt stream or a
// codebook with codes longer than LMAX). Priority among several hits (only
// possible with a codebook that is not prefix-free) goes to the lowest
// index, a choice of this design.
module huffman_decoder
  import hd_pkg::*;
#(
  parameter int unsigned LMAX      = 12,  // longest code; the paper's synthesized decoder uses 12
  parameter int unsigned ADDR_BITS = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // codebook programming
  input  logic                  cam_we,
  input  logic [SYM_BITS-1:0]   cam_idx,
  input  cam_entry_t            cam_wdata,
  // stream control
  input  logic                  start,
  input  logic [ADDR_BITS-1:0]  base_addr,
  input  logic                  advance,
  output logic                  ready,
  output logic [SYM_BITS-1:0]   sym_q,
  output logic                  sym_valid_q,
  output logic                  miss,
  // weight-buffer bank read port
  output logic                  rd_en,
  output logic [ADDR_BITS-1:0]  rd_addr,
  input  logic [WORD_BITS-1:0]  rd_data
);

  cam_entry_t            cam [NUM_SYMS];
  logic [LMAX-1:0]       window;
  logic [NUM_SYMS-1:0]   hit;
  logic                  any_hit;
  logic [SYM_BITS-1:0]   hit_sym;
  logic [LEN_BITS-1:0]   hit_len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_SYMS; i++) cam[i] <= '0;
    end else if (cam_we) begin
      cam[cam_idx] <= cam_wdata;
    end
  end

  // CAM match: entry i hits when its L code bits equal the first L window bits.
  always_comb begin
    for (int i = 0; i < NUM_SYMS; i++) begin
      logic [LMAX-1:0] mask;
      for (int k = 0; k < LMAX; k++) mask[k] = (k < 32'(cam[i].len));
      hit[i] = cam[i].valid && (cam[i].len != '0) && (32'(cam[i].len) <= LMAX) &&
               (((window ^ cam[i].code[LMAX-1:0]) & mask) == '0);
    end
  end

  always_comb begin
    any_hit = 1'b0;
    hit_sym = '0;
    hit_len = '0;
    for (int i = NUM_SYMS-1; i >= 0; i--) begin
      if (hit[i]) begin
        any_hit = 1'b1;
        hit_sym = cam[i].sym;
        hit_len = cam[i].len;
      end
    end
  end

  bit_window #(.WIN(LMAX), .ADDR_BITS(ADDR_BITS)) u_window (
    .clk, .rst_n, .start, .base_addr,
    .consume     (advance && any_hit),
    .consume_len (hit_len),
    .ready,
    .window,
    .rd_en, .rd_addr, .rd_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym_q       <= '0;
      sym_valid_q <= 1'b0;
    end else begin
      sym_valid_q <= advance && ready && any_hit;
      if (advance && ready) sym_q <= hit_sym;
    end
  end

  assign miss = ready && !any_hit;

  initial begin
    assert (LMAX >= 1 && LMAX <= CODE_MAX) else $error("LMAX out of range");
  end

endmodule
