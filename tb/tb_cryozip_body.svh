// tb_cryozip_body.svh -- the end-to-end test shared by tb_cryozip_top (reduced size) and
// tb_cryozip_full (default size). The including module declares the DUT, its signals, and the
// localparams D, N, W, MAXD, OW, BW, NWIN, NBLOCKS, PERIOD, WATCHDOG, CW and LW.

  int checks = 0, failures = 0;
  int cyc = 0;

  // mechanism counters
  int n_stall = 0, n_sat = 0, n_cross = 0, n_partial = 0, n_empty = 0, n_ovf = 0;
  int n_drop = 0, n_sent = 0, n_backp = 0, n_timed = 0, n_words = 0;

  // blocks whose end marker has not yet reached the packer: predecoder decisions
  bit dec_q [$];
  // forwarded blocks not yet seen at the output: bitstream and syndromes
  bitq_t exp_bits_q [$];
  bitq_t exp_syn_q  [$];

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && sd_stall) n_stall++;
    if (rst_n && out_valid && !out_ready) n_backp++;
  end

  // The predecoder's decision for the block whose end marker reaches the packer next.
  assign fwd_en = (dec_q.size() > 0) ? dec_q[0] : 1'b0;
  always @(negedge clk) begin
    if (rst_n && (blk_sent || blk_dropped)) begin
      if (blk_dropped) n_drop++;
      if (dec_q.size() == 0) check(0, "block ended that was never sent");
      else begin
        check(blk_sent == dec_q[0], "block sent exactly when the predecoder asked for it");
        void'(dec_q.pop_front());
      end
    end
  end

  // output checker
  int w = 0;
  bitq_t rx_bits;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int nb, nw, nkeep;
      bit ok;
      n_words++;
      if (exp_bits_q.size() == 0) check(0, "output word with no block expected");
      else begin
        nb = exp_bits_q[0].size();
        nw = (nb + OW - 1) / OW;
        nkeep = (nw == 0) ? 1 : ((nw > BW) ? BW : nw);
        ok = 1;
        for (int k = 0; k < OW; k++) begin
          if (out_data[OW-1-k] != word_bit(exp_bits_q[0], w, k, OW)) ok = 0;
          if (w * OW + k < nb) rx_bits.push_back(out_data[OW-1-k]);
        end
        check(ok, $sformatf("block word %0d differs: %h", w, out_data));
        check(int'(out_bits) == nb, $sformatf("code length %0d, expected %0d", out_bits, nb));
        check(out_overflow == (nw > BW), "overflow flag");
        check(out_last == (w == nkeep - 1), "out_last position");
        if (out_last) begin
          n_sent++;
          if (nb == 0) n_empty++;
          if (nw > BW) n_ovf++;
          else begin
            // decode what was received back into syndromes
            bitq_t syn;
            syn = sd_decode(huff_decode(rx_bits), MAXD, D * N);
            check(syn == exp_syn_q[0], "decoded block equals the syndromes sent");
          end
          rx_bits.delete();
          w = 0;
          void'(exp_bits_q.pop_front());
          void'(exp_syn_q.pop_front());
        end else w++;
      end
    end
  end

  // random back-pressure on the output
  always @(negedge clk) out_ready <= ($urandom % 4 != 0);

  initial begin
    build_codebook();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // boot-time codebook load
    for (int s = 0; s < NSYMS; s++) begin
      cfg_we = 1; cfg_sym = sym_t'(s); cfg_code = CW'(cb_code[s]); cfg_len = LW'(cb_len[s]);
      @(negedge clk);
    end
    cfg_we = 0;

    for (int b = 0; b < NBLOCKS; b++) begin
      bitq_t blk;
      intq_t syms;
      int    mode, permille, run;
      bit    spaced;
      blk.delete();
      mode = b % 6;
      permille = (mode == 1) ? 2 : (mode == 2) ? 30 : (mode == 3) ? 300 : 0;
      for (int i = 0; i < D * N; i++) begin
        if (mode == 0)      blk.push_back(1'b0);
        else if (mode == 5) blk.push_back(1'b1);
        else if (mode == 4) blk.push_back(($urandom % 10000) < 5);
        else                blk.push_back(($urandom % 1000) < permille);
      end
      // a distance that spans the end of round 0
      if (b % 12 == 7) begin
        blk[N - 2] = 1'b1;
        blk[N] = 1'b0;
        blk[N + 1] = 1'b1;
      end
      syms = sd_ref(blk, MAXD);
      foreach (syms[i]) if (syms[i] == MAXD + 1) n_sat++;
      // distances crossing a round boundary: between consecutive ones in different rounds
      run = -1;
      foreach (blk[i]) if (blk[i]) begin
        if (run >= 0 && run / N != i / N) n_cross++;
        run = i;
      end
      dec_q.push_back((b % 5) != 3);
      if ((b % 5) != 3) begin
        exp_bits_q.push_back(huff_ref(syms));
        exp_syn_q.push_back(blk);
      end
      spaced = (b % 2 == 0);
      for (int r = 0; r < D; r++) begin
        int t_acc, t_done, st0;
        for (int k = 0; k < N; k++) round_bits[k] = blk[r * N + k];
        round_valid = 1'b1;
        while (!round_ready) @(negedge clk);
        t_acc = cyc;
        st0 = n_stall;
        @(negedge clk);
        round_valid = 1'b0;
        if (N % W != 0) n_partial++;
        if (spaced) begin
          while (sd_busy) @(negedge clk);
          t_done = cyc;
          if (n_stall == st0) begin
            n_timed++;
            // accepted at one rising edge, last window scanned NWIN edges later
            check(t_done - t_acc - 1 == NWIN,
                  $sformatf("round took %0d cycles, expected %0d", t_done - t_acc - 1, NWIN));
          end
          repeat (PERIOD - NWIN) @(negedge clk);
        end
      end
    end

    // let everything drain
    begin
      int guard;
      guard = 0;
      while ((exp_bits_q.size() > 0 || dec_q.size() > 0) && guard < 200000) begin
        @(negedge clk);
        guard++;
      end
    end
    repeat (5) @(negedge clk);
    check(exp_bits_q.size() == 0, $sformatf("%0d forwarded blocks never came out", exp_bits_q.size()));
    check(fifo_level == 0, "FIFO empty at the end");

    $display("mechanisms: stall_cycles=%0d saturations=%0d cross_round=%0d partial_windows=%0d empty=%0d overflow=%0d dropped=%0d sent=%0d backpressure=%0d timed_rounds=%0d words=%0d",
             n_stall, n_sat, n_cross, n_partial, n_empty, n_ovf, n_drop, n_sent, n_backp, n_timed, n_words);
    check(n_stall > 0, "SD stalled on a full FIFO");
    check(n_sat > 0, "saturation symbol emitted");
    check(n_cross > 0, "distance across a round boundary");
    check(n_partial > 0 || N % W == 0, "partial last window");
    check(n_ovf > 0, "output buffer overflow");
    check(n_drop > 0, "block dropped on the predecoder's decision");
    check(n_backp > 0, "output back-pressure");
    check(n_timed > 0, "round latency measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
