// tb_pkg: reference models shared by the testbenches, written independently
// of the RTL: FP16/FP32 <-> real conversion, round-to-nearest-even of a real
// to FP32, a random prefix-free codebook generator and a Huffman bit-stream
// packer (32-bit words, first bit in bit 0).
package tb_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int e = int'(h[14:10]);
    real m = real'(h[9:0]);
    real v;
    if (e == 0) v = m * (2.0 ** -24);
    else        v = (1.0 + m / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    int e = int'(f[30:23]);
    real m = real'(f[22:0]);
    real v;
    if (e == 0) v = m * (2.0 ** -149);
    else        v = (1.0 + m / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -v : v;
  endfunction

  // Round a real (normal FP32 range or zero) to FP32, nearest-even.
  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] b = $realtobits(r);
    logic [10:0] e = b[62:52];
    logic [51:0] m = b[51:0];
    logic [24:0] mant;
    logic [28:0] rest;
    int          ex;
    if (e == 0) return {b[63], 31'd0};
    ex   = int'(e) - 1023 + 127;
    mant = {2'b01, m[51:29]};
    rest = m[28:0];
    if (rest > 29'h1000_0000 || (rest == 29'h1000_0000 && mant[0])) mant = mant + 1;
    if (mant[24]) begin mant = mant >> 1; ex = ex + 1; end
    if (ex <= 0 || ex >= 255) $error("real_to_fp32: out of normal range");
    return {b[63], 8'(ex), mant[22:0]};
  endfunction

  // Random full binary tree with 32 leaves and depth <= lmax: repeatedly
  // split a random leaf that is still shallower than lmax. Leaves are then
  // assigned to the 32 symbols in random order. code[s] holds the first
  // code bit in bit 0.
  function automatic void gen_codebook(input int lmax,
                                       output logic [15:0] code [32],
                                       output int          len  [32]);
    logic [15:0] lc [32];
    int          ld [32];
    int          n = 1;
    int          perm [32];
    lc[0] = '0; ld[0] = 0;
    while (n < 32) begin
      int k;
      do k = int'($urandom_range(n - 1)); while (ld[k] >= lmax);
      lc[n]        = lc[k];
      lc[n][ld[k]] = 1'b1;
      ld[n]        = ld[k] + 1;
      ld[k]        = ld[k] + 1;
      n++;
    end
    for (int i = 0; i < 32; i++) perm[i] = i;
    for (int i = 31; i > 0; i--) begin
      int j = int'($urandom_range(i));
      int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int s = 0; s < 32; s++) begin
      code[s] = lc[perm[s]];
      len[s]  = ld[perm[s]];
    end
  endfunction

  // Append the code of each symbol to a bit queue.
  function automatic void append_code(ref bit bits[$], input logic [15:0] code, input int len);
    for (int i = 0; i < len; i++) bits.push_back(code[i]);
  endfunction

  // Pack a bit queue into 32-bit words, first bit in bit 0, zero padded.
  function automatic void pack_words(ref bit bits[$], ref logic [31:0] words[$]);
    words.delete();
    for (int i = 0; i < bits.size(); i += 32) begin
      logic [31:0] w = '0;
      for (int k = 0; k < 32 && i + k < bits.size(); k++) w[k] = bits[i + k];
      words.push_back(w);
    end
  endfunction

endpackage
