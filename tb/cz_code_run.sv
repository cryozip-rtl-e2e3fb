// cz_code_run -- runs one CryoZip compressor, built for one code's block shape, on synthetic
// syndromes, and checks and measures it. Used by tb_cryozip_codes, one instance per code.
//
// The compressor is built with D rounds of N_SYN bits and WINDOW = ceil(N_SYN/10), which keeps
// the ten-cycle round of the default build. The other parameters keep their defaults. The runner
// loads the canonical test codebook of cryozip_tb_pkg through the configuration port, then sends
// NBLK blocks. Each block's syndrome bits are independently 1 with probability PPM parts per
// million (i.i.d. synthetic syndromes; no circuit-level noise simulation). Rounds go in back to
// back. The predecoder input asks for every block, and the output is always ready.
// Every block's words are compared with the reference model. The length and the overflow flag
// are checked, and the stream is decoded back to the syndromes that were sent.
//
// Interface: clk and rst_n come from the bench. done rises when all blocks are out. checks and
// failures count the checks. raw_bits sums D*N_SYN over the blocks, and code_bits sums the
// coded lengths, so raw_bits/code_bits is the compression ratio.
module cz_code_run #(
  parameter string NAME  = "code",
  parameter int    D     = 5,
  parameter int    N_SYN = 24,
  parameter int    NBLK  = 4,
  parameter int    PPM   = 1000
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    done,
  output int      checks,
  output int      failures,
  output longint  raw_bits,
  output longint  code_bits
);
  import cryozip_pkg::*;
  import cryozip_tb_pkg::*;

  localparam int W    = (N_SYN + 9) / 10;
  localparam int OW   = OUT_W_DEFAULT;
  localparam int BW   = BUF_WORDS_DEFAULT;
  localparam int MAXD = MAX_DISTANCE_DEFAULT;
  localparam int CW   = CODE_W_DEFAULT;
  localparam int LW   = $clog2(CW + 1);
  localparam int FD   = FIFO_DEPTH_DEFAULT;

  logic cfg_we = 0;
  sym_t cfg_sym = '0;
  logic [CW-1:0] cfg_code = '0;
  logic [LW-1:0] cfg_len = '0;
  logic round_valid = 0, round_ready;
  logic [N_SYN-1:0] round_bits = '0;
  logic fwd_en = 1'b1;
  logic out_valid, out_last, out_overflow, out_ready = 1'b1;
  logic [OW-1:0] out_data;
  logic [31:0] out_bits;
  logic sd_busy, sd_window, sd_stall, blk_sent, blk_dropped;
  logic [$clog2(FD+1)-1:0] fifo_level;

  cryozip_top #(
    .D(D), .N_SYN(N_SYN), .WINDOW(W), .MAX_DISTANCE(MAXD), .CODE_W(CW), .OUT_W(OW),
    .FIFO_DEPTH(FD), .BUF_WORDS(BW)
  ) dut (.*);

  bitq_t exp_bits_q [$];
  bitq_t exp_syn_q  [$];
  int    nout = 0;
  int    w = 0;
  bitq_t rx_bits;

  initial begin
    done = 0; checks = 0; failures = 0; raw_bits = 0; code_bits = 0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: %s", NAME, what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int nb;
      bit ok;
      if (exp_bits_q.size() == 0) check(0, "output word with no block expected");
      else begin
        nb = exp_bits_q[0].size();
        ok = 1;
        for (int k = 0; k < OW; k++) begin
          if (out_data[OW-1-k] != word_bit(exp_bits_q[0], w, k, OW)) ok = 0;
          if (w * OW + k < nb) rx_bits.push_back(out_data[OW-1-k]);
        end
        check(ok, $sformatf("word %0d differs", w));
        check(int'(out_bits) == nb, $sformatf("code length %0d, expected %0d", out_bits, nb));
        check(!out_overflow, "no overflow at this density");
        if (out_last) begin
          check(w == ((nb == 0) ? 0 : (nb + OW - 1) / OW - 1), "out_last on the block's last word");
          check(sd_decode(huff_decode(rx_bits), MAXD, D * N_SYN) == exp_syn_q[0],
                "decoded block equals the syndromes sent");
          code_bits += nb;
          raw_bits  += D * N_SYN;
          rx_bits.delete();
          w = 0;
          nout++;
          void'(exp_bits_q.pop_front());
          void'(exp_syn_q.pop_front());
        end else w++;
      end
    end
  end

  initial begin
    build_codebook();
    @(posedge rst_n);
    @(negedge clk);
    for (int s = 0; s < NSYMS; s++) begin
      cfg_we = 1; cfg_sym = sym_t'(s); cfg_code = CW'(cb_code[s]); cfg_len = LW'(cb_len[s]);
      @(negedge clk);
    end
    cfg_we = 0;
    for (int b = 0; b < NBLK; b++) begin
      bitq_t blk;
      blk.delete();
      for (int i = 0; i < D * N_SYN; i++) blk.push_back(($urandom % 1000000) < PPM);
      exp_bits_q.push_back(huff_ref(sd_ref(blk, MAXD)));
      exp_syn_q.push_back(blk);
      for (int r = 0; r < D; r++) begin
        for (int k = 0; k < N_SYN; k++) round_bits[k] = blk[r * N_SYN + k];
        // driven at the falling edge; taken at the next rising edge with round_ready high
        round_valid = 1'b1;
        while (!round_ready) @(negedge clk);
        @(negedge clk);
      end
      round_valid = 1'b0;
    end
    while (nout < NBLK) @(negedge clk);
    check(1, "all blocks came out");
    done = 1;
  end

endmodule
