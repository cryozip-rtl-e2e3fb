// tb_sd_stage -- self-checking test of the Sparse Distance stage.
//
// Runs the stage at a small size (3 rounds of 20 bits, 6-bit window so the last window of each
// round is partial, max_distance 8) and compares every symbol with the reference model of
// cryozip_tb_pkg. It models the FIFO's free count itself, draining one entry per cycle, and can
// throttle it to force stalls. Directed blocks: the 0 1 0 0 0 1 example (distances 1 and 3), a
// saturating run (8 zeros then another zero gives symbol 9), a distance that crosses a round
// boundary, an all-zero block and an all-one block; then random blocks of several densities.
// Timing checks: a round takes ceil(N_SYN/WINDOW) = 4 window cycles, a window's symbols appear
// the cycle after it is scanned, and back-to-back rounds are accepted every 4 cycles.
module tb_sd_stage;
  import cryozip_pkg::*;
  import cryozip_tb_pkg::*;

  localparam int D = 3, N = 20, W = 6, MAXD = 8, DEPTH = 32;
  localparam int LANES = W + 1, NWIN = (N + W - 1) / W;

  logic clk = 0, rst_n = 0;
  logic round_valid = 0, round_ready;
  logic [N-1:0] round_bits = '0;
  logic [$clog2(LANES+1)-1:0] out_n;
  dist_entry_t out_entries [LANES];
  logic [$clog2(DEPTH+1)-1:0] fifo_free;
  logic busy, stall, window_fire;

  int checks = 0, failures = 0;
  int level = 0;            // modelled FIFO occupancy
  bit throttle = 0;         // when set, the modelled FIFO does not drain
  int stalls = 0, windows = 0, sats = 0, eobs = 0;
  intq_t got;               // symbols seen, eob as -1
  int cyc = 0;

  sd_stage #(.D(D), .N_SYN(N), .WINDOW(W), .MAX_DISTANCE(MAXD), .FIFO_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  assign fifo_free = 6'(DEPTH - level);

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (stall) stalls++;
      if (window_fire) windows++;
      for (int i = 0; i < int'(out_n); i++) begin
        if (out_entries[i].eob) begin got.push_back(-1); eobs++; end
        else begin
          got.push_back(int'(out_entries[i].sym));
          if (int'(out_entries[i].sym) == MAXD + 1) sats++;
        end
      end
      level = level + int'(out_n) - ((level > 0 && !throttle) ? 1 : 0);
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Send one block (D rounds given as a bit queue) and check the symbols that come out.
  task automatic run_block(bitq_t blk, bit b2b);
    intq_t exp;
    int    t1;
    exp = sd_ref(blk, MAXD);
    exp.push_back(-1);
    got.delete();
    @(negedge clk);
    for (int r = 0; r < D; r++) begin
      // drive at the falling edge; the round is taken at the next rising edge with ready high
      for (int k = 0; k < N; k++) round_bits[k] = blk[r*N + k];
      round_valid = 1'b1;
      while (!round_ready) @(negedge clk);
      t1 = windows;
      @(negedge clk);
      round_valid = 1'b0;
      if (!b2b) begin
        // wait for the round to finish and count its window cycles
        while (busy) @(negedge clk);
        if (!throttle) check(windows - t1 == NWIN, $sformatf("round took %0d windows, expected %0d", windows - t1, NWIN));
      end
    end
    repeat (4) @(posedge clk);
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    check(got.size() == exp.size(), $sformatf("block gave %0d entries, expected %0d", got.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < got.size(); i++)
      check(got[i] == exp[i], $sformatf("entry %0d: got %0d expected %0d", i, got[i], exp[i]));
  endtask

  function automatic bitq_t rand_block(int permille);
    bitq_t b;
    for (int i = 0; i < D*N; i++) b.push_back(($urandom % 1000) < permille);
    return b;
  endfunction

  // timing: a burst appears only in the cycle after a window was scanned
  bit prev_fire = 0;
  always @(posedge clk) begin
    if (rst_n && out_n != 0) check(prev_fire, "burst without a window scanned the cycle before");
    prev_fire = rst_n && window_fire;
  end

  initial begin
    bitq_t b;
    build_codebook();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // Example of the algorithm: 0 1 0 0 0 1 -> distances 1, 3
    b = {};
    for (int i = 0; i < D*N; i++) b.push_back(0);
    b[1] = 1; b[5] = 1;
    run_block(b, 0);
    check(got.size() >= 2 && got[0] == 1 && got[1] == 3, "example 010001 gives 1,3");

    // Saturation: 9 zeros, then a zero-run of 1 and an active bit -> 9 (=8+1), 1
    b = {};
    for (int i = 0; i < D*N; i++) b.push_back(0);
    b[10] = 1;
    run_block(b, 0);
    check(got.size() >= 2 && got[0] == MAXD + 1 && got[1] == 1, "saturation gives 9,1");

    // A distance that crosses the round boundary: bit 18 of round 0, bit 2 of round 1
    b = {};
    for (int i = 0; i < D*N; i++) b.push_back(0);
    b[18] = 1; b[N + 2] = 1;
    run_block(b, 0);
    check(got.size() >= 5 && got[3] == 3, "distance across rounds is 3 (after 9,9,0)");

    // all zero and all one
    b = {};
    for (int i = 0; i < D*N; i++) b.push_back(0);
    run_block(b, 0);
    b = {};
    for (int i = 0; i < D*N; i++) b.push_back(1);
    run_block(b, 0);

    // back-to-back rounds: accepted every NWIN cycles
    begin
      int acc_cycles [$];
      b = rand_block(100);
      got.delete();
      fork
        run_block(b, 1);
        begin
          for (int k = 0; k < 3*NWIN + 3; k++) begin
            @(posedge clk);
            if (round_valid && round_ready) acc_cycles.push_back(cyc);
          end
        end
      join
      if (acc_cycles.size() >= 3) begin
        check(acc_cycles[1] - acc_cycles[0] == NWIN, $sformatf("round spacing %0d", acc_cycles[1] - acc_cycles[0]));
        check(acc_cycles[2] - acc_cycles[1] == NWIN, $sformatf("round spacing %0d", acc_cycles[2] - acc_cycles[1]));
      end else check(0, "back-to-back rounds not accepted");
    end

    // random blocks, some with a throttled FIFO so the stage must stall
    for (int t = 0; t < 60; t++) begin
      int dens;
      dens = (t % 4 == 0) ? 20 : (t % 4 == 1) ? 150 : (t % 4 == 2) ? 500 : 900;
      b = rand_block(dens);
      throttle = (t % 3 == 2);
      fork
        run_block(b, bit'(t % 2));
        begin
          if (throttle) begin
            repeat (30) @(posedge clk);
            throttle = 0;
          end
        end
      join
      throttle = 0;
    end

    check(stalls > 0, "the stage stalled on a full FIFO at least once");
    check(sats > 0, "saturation symbol emitted");
    $display("windows=%0d stalls=%0d saturations=%0d blocks=%0d", windows, stalls, sats, eobs);
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
