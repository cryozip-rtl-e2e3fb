// bit_packer -- collects the Huffman codes of one d-round block into a single bitstream.
//
// What it does: the published design ends the pipeline with a bit packer that concatenates the
// variable-length codes of all d rounds and produces a valid output only after the final round;
// the stream is passed on towards the room-temperature decoder only when the predecoder has
// flagged the block as one it cannot correct. This module does that. Its structure (word
// buffer, output handshake, overflow flag) is this design's own.
//
// How it works: codes are appended MSB-first to an accumulator; each time OUT_W bits are
// gathered the oldest OUT_W bits are written as one word (the first bit of the stream is bit
// OUT_W-1 of word 0) into a buffer of BUF_WORDS words. The end-of-block marker flushes the last,
// zero-padded, partial word. Then fwd_en is sampled: if set, the words are sent out (state SEND);
// if clear, the block is dropped (the predecoder has handled it) and packing starts afresh.
// A block whose code exceeds the buffer keeps its first BUF_WORDS words, and is sent with
// out_overflow set; out_bits still gives the full code length. A block that codes to no bits at
// all (no active syndrome) is sent as one all-zero word with out_bits = 0.
//
// Interface: in_valid/in_code/in_len/in_eob/in_ready from the Huffman encoder (valid/ready);
// out_valid/out_data/out_last/out_bits/out_overflow/out_ready towards the link (valid/ready;
// out_bits and out_overflow are valid with every word of a block). blk_sent and blk_dropped
// pulse once per block.
// Timing: one code per cycle while packing; in SEND one word per cycle with out_ready, during
// which in_ready is low and the pipeline in front of the packer waits.
//
// Reset: rst_n is an asynchronous, active-low reset of the registers. It also disables the
// assertion below while reset is held, which is why lint tools report rst_n as used both
// asynchronously and synchronously; the assertion is not logic and this is intended.
module bit_packer
  import cryozip_pkg::*;
#(
  parameter int unsigned CODE_W    = CODE_W_DEFAULT,
  parameter int unsigned OUT_W     = OUT_W_DEFAULT,
  parameter int unsigned BUF_WORDS = BUF_WORDS_DEFAULT,
  localparam int unsigned LEN_W    = $clog2(CODE_W + 1),
  localparam int unsigned WC_W     = $clog2(BUF_WORDS + 1),
  localparam int unsigned BA_W     = (BUF_WORDS > 1) ? $clog2(BUF_WORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // codes in
  input  logic              in_valid,
  input  logic [CODE_W-1:0] in_code,
  input  logic [LEN_W-1:0]  in_len,
  input  logic              in_eob,
  output logic              in_ready,
  // predecoder decision for the block now ending: 1 = forward, 0 = drop
  input  logic              fwd_en,
  // packed stream out
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_data,
  output logic              out_last,
  output logic [31:0]       out_bits,
  output logic              out_overflow,
  input  logic              out_ready,
  // status
  output logic              blk_sent,
  output logic              blk_dropped
);

  localparam int unsigned ACC_W = OUT_W + CODE_W;
  localparam int unsigned FILL_W = $clog2(ACC_W + 1);

  typedef enum logic {S_PACK, S_SEND} state_t;

  state_t            state_q;
  logic [OUT_W-1:0]  buf_mem [BUF_WORDS];
  logic [ACC_W-1:0]  acc_q;
  logic [FILL_W-1:0] fill_q;
  logic [WC_W-1:0]   wcnt_q;      // words written in this block
  logic [WC_W-1:0]   rcnt_q;      // words sent in this block
  logic [31:0]       bits_q;
  logic              ovf_q;

  // accumulator update for one code
  logic [ACC_W-1:0]  acc_app;
  logic [FILL_W-1:0] fill_app;
  logic              word_full;
  logic [OUT_W-1:0]  word_full_data;
  logic [ACC_W-1:0]  acc_rest;
  logic [FILL_W-1:0] fill_rest;
  logic [OUT_W-1:0]  word_pad;
  logic              take;

  always_comb begin
    acc_app        = (acc_q << in_len) | ACC_W'(in_code);
    fill_app       = fill_q + FILL_W'(in_len);
    word_full      = (int'(fill_app) >= OUT_W);
    word_full_data = OUT_W'(acc_app >> (int'(fill_app) - OUT_W));
    fill_rest      = word_full ? fill_app - FILL_W'(OUT_W) : fill_app;
    acc_rest       = acc_app & ((ACC_W'(1) << fill_rest) - 1'b1);
    word_pad       = OUT_W'(acc_q << (OUT_W - int'(fill_q)));
  end

  assign in_ready  = (state_q == S_PACK);
  assign take      = in_valid && in_ready;
  assign out_valid = (state_q == S_SEND);
  assign out_data  = (wcnt_q == '0) ? '0 : buf_mem[BA_W'(rcnt_q)];
  assign out_last  = (wcnt_q == '0) || (rcnt_q == wcnt_q - 1'b1);
  assign out_bits  = bits_q;
  assign out_overflow = ovf_q;

  // word buffer
  always_ff @(posedge clk) begin
    if (take && !in_eob && word_full && (int'(wcnt_q) < BUF_WORDS))
      buf_mem[BA_W'(wcnt_q)] <= word_full_data;
    else if (take && in_eob && (fill_q != '0) && (int'(wcnt_q) < BUF_WORDS))
      buf_mem[BA_W'(wcnt_q)] <= word_pad;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_PACK;
      acc_q       <= '0;
      fill_q      <= '0;
      wcnt_q      <= '0;
      rcnt_q      <= '0;
      bits_q      <= '0;
      ovf_q       <= 1'b0;
      blk_sent    <= 1'b0;
      blk_dropped <= 1'b0;
    end else begin
      blk_sent    <= 1'b0;
      blk_dropped <= 1'b0;
      unique case (state_q)
        S_PACK: begin
          if (take && !in_eob) begin
            acc_q  <= acc_rest;
            fill_q <= fill_rest;
            bits_q <= bits_q + 32'(in_len);
            if (word_full) begin
              if (int'(wcnt_q) < BUF_WORDS) wcnt_q <= wcnt_q + 1'b1;
              else                          ovf_q  <= 1'b1;
            end
          end else if (take && in_eob) begin
            acc_q  <= '0;
            fill_q <= '0;
            if (fill_q != '0) begin
              if (int'(wcnt_q) < BUF_WORDS) wcnt_q <= wcnt_q + 1'b1;
              else                          ovf_q  <= 1'b1;
            end
            if (fwd_en) begin
              state_q <= S_SEND;
              rcnt_q  <= '0;
            end else begin
              blk_dropped <= 1'b1;
              wcnt_q      <= '0;
              bits_q      <= '0;
              ovf_q       <= 1'b0;
            end
          end
        end
        S_SEND: begin
          if (out_ready) begin
            rcnt_q <= rcnt_q + 1'b1;
            if (out_last) begin
              state_q  <= S_PACK;
              blk_sent <= 1'b1;
              wcnt_q   <= '0;
              rcnt_q   <= '0;
              bits_q   <= '0;
              ovf_q    <= 1'b0;
            end
          end
        end
        default: state_q <= S_PACK;
      endcase
    end
  end

  // A block in SEND keeps its output stable until it is taken.
  a_send_stable : assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("bit_packer: output word changed before it was taken");

endmodule
