// cryozip_pkg -- types and default sizes shared by the CryoZip syndrome compressor.
//
// The compressor turns d rounds of QEC syndrome bits into one Huffman-coded bitstream in two
// steps: Sparse Distance (SD) replaces the sparse bit vector by the run lengths of zeros between
// active syndromes, and the Huffman encoder (HEnc) maps each run length ("distance symbol") to
// a variable-length code read from two lookup tables.
//
// Numbers that follow the published design: max_distance = 510 (symbols 0..511, 9 bits), code
// distance d = 21, a 100 MHz clock with 100 ns (10 cycles) per round for compression.
// This design's own choices: 440 syndrome bits per round (d^2-1 for the surface code), a
// 44-bit window, a 16-bit maximum code length, 64-bit output words, FIFO and output-buffer
// depths. The symbol FIFO carries an end-of-block marker next to the symbols so that the bit
// packer knows where a d-round block ends.
package cryozip_pkg;

  // ---- default sizes -----------------------------------------------------------------------
  localparam int unsigned D_DEFAULT            = 21;   // rounds per block (code distance)
  localparam int unsigned N_SYN_DEFAULT        = 440;  // syndrome bits per round, d^2-1
  localparam int unsigned WINDOW_DEFAULT       = 44;   // bits scanned per cycle, ceil(440/10)
  localparam int unsigned MAX_DISTANCE_DEFAULT = 510;  // largest distance with its own symbol
  localparam int unsigned CODE_W_DEFAULT       = 16;   // longest Huffman code, in bits
  localparam int unsigned OUT_W_DEFAULT        = 64;   // width of a bitstream output word
  localparam int unsigned FIFO_DEPTH_DEFAULT   = 128;  // distance FIFO entries
  localparam int unsigned BUF_WORDS_DEFAULT    = 256;  // output buffer, OUT_W-bit words

  // Symbols run 0..MAX_DISTANCE+1; with the default 510 that is 512 symbols in 9 bits.
  localparam int unsigned SYM_W    = 9;
  localparam int unsigned NUM_SYMS = 1 << SYM_W;

  typedef logic [SYM_W-1:0] sym_t;

  // One FIFO entry: a distance symbol, or the end-of-block marker (sym is then unused).
  typedef struct packed {
    logic eob;
    sym_t sym;
  } dist_entry_t;

endpackage
