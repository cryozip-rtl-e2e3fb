// cryozip_top -- CryoZip cryogenic syndrome compressor: Sparse Distance -> FIFO -> Huffman
// encoder -> bit packer.
//
// What it does: takes one round of syndrome measurements at a time from a logical-qubit patch
// and, after the D-th round, delivers the Huffman-coded run-length bitstream of the whole
// D-round block. As in the published architecture, the SD stage scans each round through a
// small sliding window (WINDOW bits per cycle) so a round is done within 10 cycles of the
// 100 MHz clock (the 100 ns compression budget per 1 us round); a FIFO matches SD's bursty
// output to the one-symbol-per-cycle Huffman encoder; the encoder looks symbols up in two
// boot-time-loaded tables (code and code length); and the bit packer concatenates the codes of
// all rounds and releases them after the last round, if the predecoder flagged the block.
//
// The predecoder itself, the qubit patch and the 4 K-to-room-temperature link are not part of
// this RTL: the predecoder's decision enters as fwd_en, syndromes enter as round_bits, and the
// stream leaves on the out_* handshake.
//
// Interface:
//   cfg_we/cfg_sym/cfg_code/cfg_len  write one codebook entry (boot time, before compressing)
//   round_valid/round_ready/round_bits  one syndrome round, bit 0 first in the stream
//   fwd_en      predecoder decision for the block ending now; sampled when the block's
//               end marker reaches the packer (1 = send the block, 0 = drop it)
//   out_*       packed words, MSB first, with the block's code length in bits and an overflow
//               flag, valid/ready
//   sd_busy, sd_window, sd_stall, blk_sent, blk_dropped, fifo_level  status for monitoring
//               (sd_window pulses for each window scanned, sd_stall for each window held)
// Timing: a round is accepted every ceil(N_SYN/WINDOW) cycles at most; a symbol goes from
// window to packer in 3 cycles plus its FIFO wait.
// Reset: rst_n resets all registers asynchronously (active low). The FIFO's and packer's
// assertions also use it in 'disable iff', so lint reports it as both an asynchronous and a
// synchronous net; that is intended.
module cryozip_top
  import cryozip_pkg::*;
#(
  parameter int unsigned D            = D_DEFAULT,
  parameter int unsigned N_SYN        = N_SYN_DEFAULT,
  parameter int unsigned WINDOW       = WINDOW_DEFAULT,
  parameter int unsigned MAX_DISTANCE = MAX_DISTANCE_DEFAULT,
  parameter int unsigned CODE_W       = CODE_W_DEFAULT,
  parameter int unsigned OUT_W        = OUT_W_DEFAULT,
  parameter int unsigned FIFO_DEPTH   = FIFO_DEPTH_DEFAULT,
  parameter int unsigned BUF_WORDS    = BUF_WORDS_DEFAULT,
  localparam int unsigned LEN_W       = $clog2(CODE_W + 1),
  localparam int unsigned FREE_W      = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // codebook loading
  input  logic              cfg_we,
  input  sym_t              cfg_sym,
  input  logic [CODE_W-1:0] cfg_code,
  input  logic [LEN_W-1:0]  cfg_len,
  // syndrome rounds
  input  logic              round_valid,
  output logic              round_ready,
  input  logic [N_SYN-1:0]  round_bits,
  // predecoder decision
  input  logic              fwd_en,
  // compressed stream
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_data,
  output logic              out_last,
  output logic [31:0]       out_bits,
  output logic              out_overflow,
  input  logic              out_ready,
  // status
  output logic              sd_busy,
  output logic              sd_window,
  output logic              sd_stall,
  output logic              blk_sent,
  output logic              blk_dropped,
  output logic [FREE_W-1:0] fifo_level
);

  localparam int unsigned LANES = WINDOW + 1;
  localparam int unsigned NL_W  = $clog2(LANES + 1);

  logic [NL_W-1:0]   sd_n;
  dist_entry_t       sd_entries [LANES];
  logic [FREE_W-1:0] fifo_free;

  logic              q_valid, q_ready;
  dist_entry_t       q_entry;

  logic              h_valid, h_ready, h_eob;
  logic [CODE_W-1:0] h_code;
  logic [LEN_W-1:0]  h_len;

  sd_stage #(
    .D(D), .N_SYN(N_SYN), .WINDOW(WINDOW), .MAX_DISTANCE(MAX_DISTANCE), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_sd (
    .clk, .rst_n,
    .round_valid, .round_ready, .round_bits,
    .out_n(sd_n), .out_entries(sd_entries), .fifo_free,
    .busy(sd_busy), .stall(sd_stall), .window_fire(sd_window)
  );

  dist_fifo #(.LANES(LANES), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_n(sd_n), .wr_entries(sd_entries), .free(fifo_free),
    .rd_valid(q_valid), .rd_entry(q_entry), .rd_ready(q_ready),
    .level(fifo_level)
  );

  huff_enc #(.CODE_W(CODE_W)) u_henc (
    .clk, .rst_n,
    .cfg_we, .cfg_sym, .cfg_code, .cfg_len,
    .in_valid(q_valid), .in_entry(q_entry), .in_ready(q_ready),
    .out_valid(h_valid), .out_code(h_code), .out_len(h_len), .out_eob(h_eob),
    .out_ready(h_ready)
  );

  bit_packer #(.CODE_W(CODE_W), .OUT_W(OUT_W), .BUF_WORDS(BUF_WORDS)) u_pack (
    .clk, .rst_n,
    .in_valid(h_valid), .in_code(h_code), .in_len(h_len), .in_eob(h_eob), .in_ready(h_ready),
    .fwd_en,
    .out_valid, .out_data, .out_last, .out_bits, .out_overflow, .out_ready,
    .blk_sent, .blk_dropped
  );

endmodule
