// tb_cryozip_full -- end-to-end test of the CryoZip compressor at its default size.
//
// The compressor is instantiated with no parameter overrides: blocks of 21 rounds of 440
// syndrome bits, a 44-bit window (10 cycles per round), max_distance 510, 16-bit codes, 64-bit
// output words, a 256-word output buffer and a 128-entry FIFO. The test is the one of
// tb_cryozip_top (see tb_cryozip_body.svh): the reference codebook is loaded, 18 blocks at six
// syndrome densities are compressed with random predecoder decisions and output
// back-pressure, and every forwarded block is compared word by word with the reference and
// decoded back into syndromes. Spaced rounds arrive every 100 cycles (1 us at 100 MHz) and must
// each be finished within 10 cycles, the 100 ns compression budget. Stalls, saturation symbols,
// distances across rounds, buffer overflow (an all-one block), dropped blocks and output
// back-pressure must all occur. The default round is a whole number of windows, so no partial
// window occurs here.
module tb_cryozip_full;
  import cryozip_pkg::*;
  import cryozip_tb_pkg::*;

  localparam int D = D_DEFAULT, N = N_SYN_DEFAULT, W = WINDOW_DEFAULT, MAXD = MAX_DISTANCE_DEFAULT;
  localparam int OW = OUT_W_DEFAULT, BW = BUF_WORDS_DEFAULT, FD = FIFO_DEPTH_DEFAULT;
  localparam int NBLOCKS = 18, PERIOD = 100, WATCHDOG = 2000000;
  localparam int CW = CODE_W_DEFAULT, LW = $clog2(CODE_W_DEFAULT + 1);
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

  cryozip_top dut (.*);

  `include "tb_cryozip_body.svh"

endmodule
