// tb_bit_packer -- self-checking test of the bit packer.
//
// Feeds blocks of Huffman codes (random symbols coded with the reference codebook, each block
// closed by an end-of-block marker) with random gaps, and a random predecoder decision per
// block. Forwarded blocks must come out as the reference bitstream cut into OUT_W-bit words,
// MSB first, last word zero-padded, with the right code length and out_last on the last word;
// dropped blocks must produce no output. Block sizes are chosen so that some blocks are empty
// (one zero word, length 0) and some exceed the 8-word buffer (overflow flag, first 8 words
// kept). Output back-pressure is random; the output must hold while not taken.
module tb_bit_packer;
  import cryozip_pkg::*;
  import cryozip_tb_pkg::*;

  localparam int CW = 16, LW = 5, OW = 32, BW = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_eob = 0, in_ready;
  logic [CW-1:0] in_code = '0;
  logic [LW-1:0] in_len = '0;
  logic fwd_en = 0;
  logic out_valid, out_last, out_overflow, out_ready = 0;
  logic [OW-1:0] out_data;
  logic [31:0] out_bits;
  logic blk_sent, blk_dropped;

  int checks = 0, failures = 0;
  int n_sent = 0, n_dropped = 0, n_ovf = 0, n_empty = 0;

  // expected output blocks: bitstream and whether forwarded
  bitq_t exp_bits [$];
  bit    exp_fwd  [$];

  bit_packer #(.CODE_W(CW), .OUT_W(OW), .BUF_WORDS(BW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // output monitor: compares words of the oldest forwarded block
  int w = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (blk_dropped) begin
        n_dropped++;
        check(exp_fwd.size() > 0 && !exp_fwd[0], "drop only for a block the predecoder resolved");
        if (exp_fwd.size() > 0) begin void'(exp_fwd.pop_front()); void'(exp_bits.pop_front()); end
      end
      if (out_valid && out_ready) begin
        int nb, nw, nkeep;
        bit ok;
        if (exp_fwd.size() == 0 || !exp_fwd[0]) check(0, "output for a block that should not be sent");
        else begin
          nb = exp_bits[0].size();
          nw = (nb + OW - 1) / OW;
          nkeep = (nw == 0) ? 1 : ((nw > BW) ? BW : nw);
          ok = 1;
          for (int k = 0; k < OW; k++) if (out_data[OW-1-k] != word_bit(exp_bits[0], w, k, OW)) ok = 0;
          check(ok, $sformatf("word %0d: %h", w, out_data));
          check(int'(out_bits) == nb, $sformatf("out_bits %0d expected %0d", out_bits, nb));
          check(out_overflow == (nw > BW), "overflow flag");
          check(out_last == (w == nkeep - 1), $sformatf("out_last on word %0d of %0d", w, nkeep));
          if (out_last) begin
            w = 0;
            n_sent++;
            if (nw > BW) n_ovf++;
            if (nb == 0) n_empty++;
            void'(exp_fwd.pop_front());
            void'(exp_bits.pop_front());
          end else w++;
        end
      end
    end
  end

  // output must hold while not taken
  logic [OW-1:0] last_data;
  logic          last_stall = 0;
  always @(posedge clk) begin
    if (rst_n && last_stall) check(out_valid && out_data == last_data, "output held under back-pressure");
    last_stall = rst_n && out_valid && !out_ready;
    last_data  = out_data;
  end

  initial begin
    build_codebook();
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int b = 0; b < 150; b++) begin
      intq_t syms;
      int n;
      syms.delete();
      n = (b % 10 == 0) ? 0 : (b % 7 == 0) ? 40 + $urandom % 40 : $urandom % 25;
      for (int i = 0; i < n; i++) syms.push_back(($urandom % 3 == 0) ? $urandom % 512 : $urandom % 8);
      exp_bits.push_back(huff_ref(syms));
      exp_fwd.push_back((b % 4) != 1);
      for (int i = 0; i <= n; i++) begin
        in_valid = ($urandom % 4 != 0);
        while (!in_valid) begin
          out_ready = ($urandom % 3 != 0);
          @(negedge clk);
          in_valid = ($urandom % 4 != 0);
        end
        in_eob  = (i == n);
        in_code = (i == n) ? '0 : CW'(cb_code[syms[i]]);
        in_len  = (i == n) ? '0 : LW'(cb_len[syms[i]]);
        fwd_en  = exp_fwd[exp_fwd.size() - 1];
        out_ready = ($urandom % 3 != 0);
        // in_ready is stable at the falling edge; the code is taken at the next rising edge
        while (!in_ready) begin
          @(negedge clk);
          out_ready = ($urandom % 3 != 0);
        end
        @(negedge clk);
        in_valid = 0;
        in_eob = 0;
      end
    end
    out_ready = 1;
    repeat (30) @(negedge clk);
    check(exp_fwd.size() == 0, $sformatf("%0d blocks never finished", exp_fwd.size()));
    check(n_ovf > 0, "a block overflowed the buffer");
    check(n_empty > 0, "an empty block was sent");
    check(n_dropped > 0, "a block was dropped");
    $display("sent=%0d dropped=%0d overflow=%0d empty=%0d", n_sent, n_dropped, n_ovf, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
