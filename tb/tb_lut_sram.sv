// tb_lut_sram -- self-checking test of the codebook lookup table.
//
// Loads every entry of a 512 x 16 table with a value derived from its address (a multiplicative
// hash, so neighbouring entries differ in many bits), reads all entries back in random order,
// and checks the one-cycle read latency, that rdata holds while re is low, and that a write
// and a read of different addresses in the same cycle do not disturb each other.
module tb_lut_sram;

  localparam int DEPTH = 512, WIDTH = 16;

  logic clk = 0;
  logic we = 0, re = 0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];

  lut_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] val(int a, int salt);
    int unsigned h;
    h = (a + salt) * 32'h9E3779B1;
    return h[31:16];
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 9'(a); wdata = val(a, 0); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    // random reads, some with re low between them
    for (int t = 0; t < 3000; t++) begin
      int a;
      logic [WIDTH-1:0] held;
      a = $urandom % DEPTH;
      re = 1; raddr = 9'(a);
      // a write elsewhere in the same cycle
      we = ($urandom % 4 == 0);
      waddr = 9'((a + 1 + $urandom % (DEPTH - 1)) % DEPTH);
      wdata = val(int'(waddr), t + 1);
      @(posedge clk);
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0;
      check(rdata == model[a], $sformatf("addr %0d read %h expected %h", a, rdata, model[a]));
      if ($urandom % 3 == 0) begin
        re = 0; raddr = 9'($urandom);
        held = rdata;
        @(negedge clk);
        check(rdata == held, "rdata holds while re is low");
      end
    end
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
