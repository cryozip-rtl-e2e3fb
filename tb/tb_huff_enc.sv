// tb_huff_enc -- self-checking test of the Huffman encoder stage.
//
// Loads the reference codebook of cryozip_tb_pkg into both tables, with random junk written
// above each code's length so that the clipping by the length table is exercised. Then streams
// random symbols and end-of-block markers through it with random gaps on the input and random
// back-pressure on the output, and checks every output code, length and marker against the
// codebook, in order. With a steady input and no back-pressure it checks one symbol per cycle
// and a latency of one cycle from pop to output.
module tb_huff_enc;
  import cryozip_pkg::*;
  import cryozip_tb_pkg::*;

  localparam int CW = 16, LW = 5;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  sym_t cfg_sym = '0;
  logic [CW-1:0] cfg_code = '0;
  logic [LW-1:0] cfg_len = '0;
  logic in_valid = 0, in_ready;
  dist_entry_t in_entry = '0;
  logic out_valid, out_eob, out_ready = 0;
  logic [CW-1:0] out_code;
  logic [LW-1:0] out_len;

  int checks = 0, failures = 0;
  dist_entry_t sent [$];
  int nout = 0, clipped = 0;

  huff_enc #(.CODE_W(CW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      dist_entry_t e;
      nout++;
      if (sent.size() == 0) check(0, "output without input");
      else begin
        e = sent.pop_front();
        if (e.eob) check(out_eob && out_len == 0, "end marker passes with length 0");
        else begin
          check(!out_eob, "symbol not flagged as end marker");
          check(int'(out_len) == int'(cb_len[e.sym]), $sformatf("sym %0d len %0d expected %0d", e.sym, out_len, cb_len[e.sym]));
          check(32'(out_code) == cb_code[e.sym], $sformatf("sym %0d code %h expected %h", e.sym, out_code, cb_code[e.sym]));
        end
      end
    end
  end

  initial begin
    build_codebook();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load the codebook, junk above the valid length
    for (int s = 0; s < NSYMS; s++) begin
      logic [CW-1:0] junk;
      junk = CW'($urandom) & ~CW'((32'd1 << cb_len[s]) - 1);
      if (junk != 0) clipped++;
      cfg_we = 1; cfg_sym = sym_t'(s); cfg_code = CW'(cb_code[s]) | junk; cfg_len = LW'(cb_len[s]);
      @(negedge clk);
    end
    cfg_we = 0;

    // steady stream, no back-pressure: one per cycle, one cycle latency
    out_ready = 1;
    for (int t = 0; t < 200; t++) begin
      in_valid = 1;
      in_entry.eob = (t % 37 == 36);
      in_entry.sym = sym_t'($urandom);
      @(posedge clk);
      check(in_ready, "input taken every cycle without back-pressure");
      sent.push_back(in_entry);
      @(negedge clk);
      check(out_valid, "output valid one cycle after each pop");
    end
    in_valid = 0;
    @(negedge clk);

    // random gaps and back-pressure
    for (int t = 0; t < 4000; t++) begin
      if (!in_valid || in_ready) begin
        in_valid = ($urandom % 3 != 0);
        in_entry.eob = ($urandom % 20 == 0);
        in_entry.sym = ($urandom % 2) ? sym_t'($urandom % 16) : sym_t'($urandom);
      end
      out_ready = ($urandom % 4 != 0);
      @(posedge clk);
      if (in_valid && in_ready) sent.push_back(in_entry);
      @(negedge clk);
    end
    in_valid = 0;
    out_ready = 1;
    repeat (4) @(negedge clk);
    check(sent.size() == 0, $sformatf("%0d inputs never came out", sent.size()));
    check(clipped > 100, "codebook entries with junk above their length");
    $display("outputs=%0d", nout);
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
