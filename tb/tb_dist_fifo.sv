// tb_dist_fifo -- self-checking test of the multi-lane distance FIFO.
//
// Writes random bursts of 0..LANES entries (never more than the free count) while reading with a
// random ready, and checks every entry read against a queue model, the free and level counts
// every cycle, that an entry written in one cycle is readable in the next, and that the
// pointers wrap (several hundred entries go through a 16-entry FIFO).
module tb_dist_fifo;
  import cryozip_pkg::*;

  localparam int LANES = 5, DEPTH = 16;

  logic clk = 0, rst_n = 0;
  logic [$clog2(LANES+1)-1:0] wr_n = '0;
  dist_entry_t wr_entries [LANES];
  logic [$clog2(DEPTH+1)-1:0] free, level;
  logic rd_valid, rd_ready = 0;
  dist_entry_t rd_entry;

  int checks = 0, failures = 0;
  dist_entry_t model [$];
  int pops = 0, full_cycles = 0;

  dist_fifo #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < LANES; i++) wr_entries[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(free == DEPTH && level == 0 && !rd_valid, "empty after reset");
    for (int t = 0; t < 2000; t++) begin
      int n, maxn;
      // drive at the falling edge
      maxn = (int'(free) < LANES) ? int'(free) : LANES;
      n = (t % 50 < 25) ? ($urandom % (maxn + 1)) : (($urandom % 4 == 0) ? ($urandom % (maxn + 1)) : 0);
      wr_n = n[$clog2(LANES+1)-1:0];
      for (int i = 0; i < LANES; i++) begin
        wr_entries[i].eob = ($urandom % 8 == 0);
        wr_entries[i].sym = sym_t'($urandom);
      end
      rd_ready = ($urandom % 3 != 0);
      // checks of the current state
      check(int'(level) == model.size(), $sformatf("level %0d, model %0d", level, model.size()));
      check(int'(free) == DEPTH - model.size(), "free count");
      check(rd_valid == (model.size() > 0), "rd_valid");
      if (rd_valid && model.size() > 0)
        check(rd_entry == model[0], $sformatf("head %0h, model %0h", rd_entry, model[0]));
      if (model.size() == DEPTH) full_cycles++;
      @(posedge clk);
      if (rd_valid && rd_ready && model.size() > 0) begin void'(model.pop_front()); pops++; end
      for (int i = 0; i < n; i++) model.push_back(wr_entries[i]);
      @(negedge clk);
    end
    check(pops > 300, $sformatf("only %0d entries went through", pops));
    check(full_cycles > 0, "FIFO was full at least once");
    $display("pops=%0d full_cycles=%0d", pops, full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
