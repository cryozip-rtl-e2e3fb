// huff_enc -- Huffman encoder (HEnc) stage of the CryoZip compressor.
//
// What it does: maps each distance symbol to its Huffman code. As in the published design it
// holds two lookup tables indexed by the symbol, the Huff Code LUT (the code bits) and the Huff
// Code Length LUT (how many of them are used); the length clips the code word to the valid
// bits. Codes are stored right-aligned: a code of length L sits in bits L-1..0 of its entry and
// is sent bit L-1 first (the published example stores "00101101" with length 6 for the
// bitstream "101101"). The codebook is built offline and written at boot time through the cfg_*
// port; it is not changed while blocks are being compressed.
//
// How it works: a single pipeline stage. When the output register is free (or being taken)
// the stage pops the FIFO head and issues the read of both tables; the synchronous table
// outputs are the stage's output register. An end-of-block entry passes through with length 0.
//
// Interface: in_valid/in_entry/in_ready from the FIFO (valid/ready); out_valid/out_code/
// out_len/out_eob/out_ready to the bit packer (valid/ready; out_code bits above out_len are 0).
// Timing: a symbol popped in cycle t is on the output in cycle t+1; one symbol per cycle.
module huff_enc
  import cryozip_pkg::*;
#(
  parameter int unsigned CODE_W  = CODE_W_DEFAULT,
  localparam int unsigned LEN_W  = $clog2(CODE_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // codebook loading
  input  logic              cfg_we,
  input  sym_t              cfg_sym,
  input  logic [CODE_W-1:0] cfg_code,
  input  logic [LEN_W-1:0]  cfg_len,
  // symbols in
  input  logic              in_valid,
  input  dist_entry_t       in_entry,
  output logic              in_ready,
  // codes out
  output logic              out_valid,
  output logic [CODE_W-1:0] out_code,
  output logic [LEN_W-1:0]  out_len,
  output logic              out_eob,
  input  logic              out_ready
);

  logic              advance, pop;
  logic [CODE_W-1:0] code_rd;
  logic [LEN_W-1:0]  len_rd;
  logic [LEN_W-1:0]  len_cl;
  logic              valid_q, eob_q;

  assign advance  = !valid_q || out_ready;
  assign in_ready = advance;
  assign pop      = in_valid && advance;

  lut_sram #(.DEPTH(NUM_SYMS), .WIDTH(CODE_W)) u_code_lut (
    .clk  (clk),
    .we   (cfg_we),
    .waddr(cfg_sym),
    .wdata(cfg_code),
    .re   (pop),
    .raddr(in_entry.sym),
    .rdata(code_rd)
  );

  lut_sram #(.DEPTH(NUM_SYMS), .WIDTH(LEN_W)) u_len_lut (
    .clk  (clk),
    .we   (cfg_we),
    .waddr(cfg_sym),
    .wdata(cfg_len),
    .re   (pop),
    .raddr(in_entry.sym),
    .rdata(len_rd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      eob_q   <= 1'b0;
    end else if (advance) begin
      valid_q <= in_valid;
      eob_q   <= in_valid && in_entry.eob;
    end
  end

  // Clip the code to its length (a length above CODE_W is treated as CODE_W).
  always_comb begin
    len_cl = (int'(len_rd) > CODE_W) ? LEN_W'(CODE_W) : len_rd;
    if (eob_q) len_cl = '0;
    for (int i = 0; i < CODE_W; i++) out_code[i] = code_rd[i] && (i < int'(len_cl));
  end

  assign out_valid = valid_q;
  assign out_len   = len_cl;
  assign out_eob   = eob_q;

endmodule
