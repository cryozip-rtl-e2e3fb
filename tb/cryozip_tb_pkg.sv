// cryozip_tb_pkg -- reference models shared by the CryoZip testbenches.
//
// Everything here is written from the algorithm's definition, independently of the RTL:
//   sd_ref        Sparse Distance on a whole block given as a bit queue (bit 0 first):
//                 a 1 emits the count of zeros before it; a zero arriving when the count already
//                 equals max_distance emits max_distance+1 and restarts the count; zeros after
//                 the last emitted symbol of a block are not coded.
//   sd_decode     the inverse of sd_ref, given the block length.
//   codebook      a canonical prefix code over all 512 symbols, built from a length table:
//                 length 4 for symbols 0..7, 8 for 8..71, 10 for 72..255 and 13 for 256..511
//                 (Kraft sum 0.96, so the code is prefix-free); codes are handed out in symbol
//                 order, each the previous code plus one, shifted left when the length grows.
//                 It stands in for the Huffman codebook that is built offline from measured
//                 distance statistics and loaded at boot.
//   huff_ref      the code bits of a symbol queue, each code MSB first.
//   huff_decode   bit queue back to symbols, by matching codes bit by bit.
//   pack_words    a bit queue as OUT_W-bit words, first bit in the MSB, last word zero-padded.
package cryozip_tb_pkg;

  localparam int NSYMS  = 512;
  localparam int CODE_W = 16;

  typedef bit bitq_t[$];
  typedef int intq_t[$];

  int unsigned cb_code [NSYMS];
  int unsigned cb_len  [NSYMS];

  function automatic int unsigned len_of(int s);
    if (s < 8)   return 4;
    if (s < 72)  return 8;
    if (s < 256) return 10;
    return 13;
  endfunction

  function automatic void build_codebook();
    int unsigned code;
    int unsigned prev;
    code = 0;
    prev = len_of(0);
    for (int s = 0; s < NSYMS; s++) begin
      if (len_of(s) > prev) begin
        code = code << (len_of(s) - prev);
        prev = len_of(s);
      end
      cb_code[s] = code;
      cb_len[s]  = len_of(s);
      code++;
    end
  endfunction

  function automatic intq_t sd_ref(bitq_t stream, int maxd);
    intq_t syms;
    int    c;
    c = 0;
    foreach (stream[i]) begin
      if (stream[i]) begin
        syms.push_back(c);
        c = 0;
      end else if (c == maxd) begin
        syms.push_back(maxd + 1);
        c = 0;
      end else begin
        c++;
      end
    end
    return syms;
  endfunction

  function automatic bitq_t sd_decode(intq_t syms, int maxd, int nbits);
    bitq_t s;
    foreach (syms[i]) begin
      if (syms[i] <= maxd) begin
        repeat (syms[i]) s.push_back(1'b0);
        s.push_back(1'b1);
      end else begin
        repeat (maxd + 1) s.push_back(1'b0);
      end
    end
    while (s.size() < nbits) s.push_back(1'b0);
    return s;
  endfunction

  function automatic bitq_t huff_ref(intq_t syms);
    bitq_t b;
    foreach (syms[i]) begin
      for (int k = int'(cb_len[syms[i]]) - 1; k >= 0; k--) b.push_back(cb_code[syms[i]][k]);
    end
    return b;
  endfunction

  function automatic intq_t huff_decode(bitq_t b);
    intq_t       syms;
    int unsigned acc;
    int unsigned n;
    bit          hit;
    acc = 0;
    n   = 0;
    foreach (b[i]) begin
      acc = (acc << 1) | 32'(b[i]);
      n++;
      hit = 0;
      for (int s = 0; s < NSYMS && !hit; s++) begin
        if (cb_len[s] == n && cb_code[s] == acc) begin
          syms.push_back(s);
          hit = 1;
        end
      end
      if (hit) begin
        acc = 0;
        n   = 0;
      end
    end
    return syms;
  endfunction

  // Bit k of word w (counting k from the MSB) is stream bit w*out_w + k.
  function automatic bit word_bit(bitq_t b, int w, int k, int out_w);
    int idx;
    idx = w * out_w + k;
    return (idx < b.size()) ? b[idx] : 1'b0;
  endfunction

endpackage
