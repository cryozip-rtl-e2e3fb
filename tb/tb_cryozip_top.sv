// tb_cryozip_top -- end-to-end test of the CryoZip compressor at a reduced size.
//
// Size: 3 rounds of 24 syndrome bits, a 5-bit window (so each round ends in a partial window),
// max_distance 8, 32-bit output words, an 8-word output buffer and a 16-entry FIFO. These small
// numbers make every mechanism happen often; tb_cryozip_full runs the same test at the default
// size.
//
// The codebook of cryozip_tb_pkg is loaded through the configuration port. Then blocks of D
// rounds are sent at several syndrome densities (all zero, sparse, medium, dense, all one),
// some with the rounds spaced out, some back to back; each block gets a random predecoder
// decision and the output side has random back-pressure. For every forwarded block the output
// words are compared with the reference (Sparse Distance, then the codebook, then packing into
// words), the length and overflow flag are checked, and the stream is decoded back into
// syndromes and compared with what was sent. Dropped blocks must give no output.
// Timing: with the rounds spaced out and no stall, a round must finish in ceil(N_SYN/WINDOW)
// cycles (10 cycles, i.e. 100 ns at 100 MHz, at the default size).
// Mechanisms counted, each of which must occur: SD stall on a full FIFO, saturation symbol,
// a distance that crosses a round boundary, a partial last window (reduced size only), a
// buffer overflow, a dropped block, back-pressure on the output.
module tb_cryozip_top;
  import cryozip_pkg::*;
  import cryozip_tb_pkg::*;

  localparam int D = 3, N = 24, W = 5, MAXD = 8, OW = 32, BW = 8, FD = 16;
  localparam int NBLOCKS = 200, PERIOD = 12, WATCHDOG = 500000;
  localparam int CW = 16, LW = 5;
  localparam int NWIN = (N + W - 1) / W;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  sym_t cfg_sym = '0;
  logic [CW-1:0] cfg_code = '0;
  logic [LW-1:0] cfg_len = '0;
  logic round_valid = 0, round_ready;
  logic [N-1:0] round_bits = '0;
  logic fwd_en;
  logic out_valid, out_last, out_overflow, out_ready = 0;
  logic [OW-1:0] out_data;
  logic [31:0] out_bits;
  logic sd_busy, sd_window, sd_stall, blk_sent, blk_dropped;
  logic [$clog2(FD+1)-1:0] fifo_level;

  cryozip_top #(
    .D(D), .N_SYN(N), .WINDOW(W), .MAX_DISTANCE(MAXD), .CODE_W(CW), .OUT_W(OW),
    .FIFO_DEPTH(FD), .BUF_WORDS(BW)
  ) dut (.*);

  `include "tb_cryozip_body.svh"

endmodule
