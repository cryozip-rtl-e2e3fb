// tb_cryozip_codes -- CryoZip on the block shapes of the codes it is meant for.
//
// One compressor is built per code shape. Each gets D rounds of N_SYN syndrome bits, with
// WINDOW = ceil(N_SYN/10), so a round still takes ten cycles:
//   surface code, distance d = 5, 9, 13, 17, 21:  D = d, N_SYN = d*d - 1 stabilizers per round
//   bivariate-bicycle codes [[72,12,6]], [[90,8,10]], [[144,12,12]], [[288,12,18]],
//     [[360,12,24]]:                              D = d, N_SYN = n checks per round
//   6.6.6 colour code, d = 5, 9, 13, 17, 21:      D = d, N_SYN = (3d*d - 3)/4 stabilizers per round
// Every instance runs blocks at two syndrome densities: 0.5 % and 0.05 % active bits, drawn
// independently per bit. These are synthetic stand-ins for syndromes at a higher and a lower
// physical error rate; they are not circuit-level noise, and the codebook is the fixed test code
// of cryozip_tb_pkg, not one trained for each code. The ratios printed therefore show how the
// design behaves, not what a trained codebook would reach.
// Each block is checked word by word against the reference model and decoded back to the
// syndromes sent. The bench prints the compression ratio (raw bits / coded bits) per code.
module tb_cryozip_codes;

  localparam int NBLK = 40;
  localparam int NRUN = 30;
  localparam int WATCHDOG = 2000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   done [NRUN];
  int     chk  [NRUN];
  int     fail [NRUN];
  longint raw  [NRUN];
  longint code [NRUN];

  // surface code
  cz_code_run #(.NAME("surface d=5 hi"),  .D(5),  .N_SYN(24),  .NBLK(NBLK), .PPM(5000)) u0  (clk, rst_n, done[0],  chk[0],  fail[0],  raw[0],  code[0]);
  cz_code_run #(.NAME("surface d=9 hi"),  .D(9),  .N_SYN(80),  .NBLK(NBLK), .PPM(5000)) u1  (clk, rst_n, done[1],  chk[1],  fail[1],  raw[1],  code[1]);
  cz_code_run #(.NAME("surface d=13 hi"), .D(13), .N_SYN(168), .NBLK(NBLK), .PPM(5000)) u2  (clk, rst_n, done[2],  chk[2],  fail[2],  raw[2],  code[2]);
  cz_code_run #(.NAME("surface d=17 hi"), .D(17), .N_SYN(288), .NBLK(NBLK), .PPM(5000)) u3  (clk, rst_n, done[3],  chk[3],  fail[3],  raw[3],  code[3]);
  cz_code_run #(.NAME("surface d=21 hi"), .D(21), .N_SYN(440), .NBLK(NBLK), .PPM(5000)) u4  (clk, rst_n, done[4],  chk[4],  fail[4],  raw[4],  code[4]);
  cz_code_run #(.NAME("surface d=5 lo"),  .D(5),  .N_SYN(24),  .NBLK(NBLK), .PPM(500))  u5  (clk, rst_n, done[5],  chk[5],  fail[5],  raw[5],  code[5]);
  cz_code_run #(.NAME("surface d=9 lo"),  .D(9),  .N_SYN(80),  .NBLK(NBLK), .PPM(500))  u6  (clk, rst_n, done[6],  chk[6],  fail[6],  raw[6],  code[6]);
  cz_code_run #(.NAME("surface d=13 lo"), .D(13), .N_SYN(168), .NBLK(NBLK), .PPM(500))  u7  (clk, rst_n, done[7],  chk[7],  fail[7],  raw[7],  code[7]);
  cz_code_run #(.NAME("surface d=17 lo"), .D(17), .N_SYN(288), .NBLK(NBLK), .PPM(500))  u8  (clk, rst_n, done[8],  chk[8],  fail[8],  raw[8],  code[8]);
  cz_code_run #(.NAME("surface d=21 lo"), .D(21), .N_SYN(440), .NBLK(NBLK), .PPM(500))  u9  (clk, rst_n, done[9],  chk[9],  fail[9],  raw[9],  code[9]);
  // bivariate-bicycle codes
  cz_code_run #(.NAME("BB [[72,12,6]] hi"),   .D(6),  .N_SYN(72),  .NBLK(NBLK), .PPM(5000)) u10 (clk, rst_n, done[10], chk[10], fail[10], raw[10], code[10]);
  cz_code_run #(.NAME("BB [[90,8,10]] hi"),   .D(10), .N_SYN(90),  .NBLK(NBLK), .PPM(5000)) u11 (clk, rst_n, done[11], chk[11], fail[11], raw[11], code[11]);
  cz_code_run #(.NAME("BB [[144,12,12]] hi"), .D(12), .N_SYN(144), .NBLK(NBLK), .PPM(5000)) u12 (clk, rst_n, done[12], chk[12], fail[12], raw[12], code[12]);
  cz_code_run #(.NAME("BB [[288,12,18]] hi"), .D(18), .N_SYN(288), .NBLK(NBLK), .PPM(5000)) u13 (clk, rst_n, done[13], chk[13], fail[13], raw[13], code[13]);
  cz_code_run #(.NAME("BB [[360,12,24]] hi"), .D(24), .N_SYN(360), .NBLK(NBLK), .PPM(5000)) u14 (clk, rst_n, done[14], chk[14], fail[14], raw[14], code[14]);
  cz_code_run #(.NAME("BB [[72,12,6]] lo"),   .D(6),  .N_SYN(72),  .NBLK(NBLK), .PPM(500))  u15 (clk, rst_n, done[15], chk[15], fail[15], raw[15], code[15]);
  cz_code_run #(.NAME("BB [[90,8,10]] lo"),   .D(10), .N_SYN(90),  .NBLK(NBLK), .PPM(500))  u16 (clk, rst_n, done[16], chk[16], fail[16], raw[16], code[16]);
  cz_code_run #(.NAME("BB [[144,12,12]] lo"), .D(12), .N_SYN(144), .NBLK(NBLK), .PPM(500))  u17 (clk, rst_n, done[17], chk[17], fail[17], raw[17], code[17]);
  cz_code_run #(.NAME("BB [[288,12,18]] lo"), .D(18), .N_SYN(288), .NBLK(NBLK), .PPM(500))  u18 (clk, rst_n, done[18], chk[18], fail[18], raw[18], code[18]);
  cz_code_run #(.NAME("BB [[360,12,24]] lo"), .D(24), .N_SYN(360), .NBLK(NBLK), .PPM(500))  u19 (clk, rst_n, done[19], chk[19], fail[19], raw[19], code[19]);
  // colour code
  cz_code_run #(.NAME("color d=5 hi"),  .D(5),  .N_SYN(18),  .NBLK(NBLK), .PPM(5000)) u20 (clk, rst_n, done[20], chk[20], fail[20], raw[20], code[20]);
  cz_code_run #(.NAME("color d=9 hi"),  .D(9),  .N_SYN(60),  .NBLK(NBLK), .PPM(5000)) u21 (clk, rst_n, done[21], chk[21], fail[21], raw[21], code[21]);
  cz_code_run #(.NAME("color d=13 hi"), .D(13), .N_SYN(126), .NBLK(NBLK), .PPM(5000)) u22 (clk, rst_n, done[22], chk[22], fail[22], raw[22], code[22]);
  cz_code_run #(.NAME("color d=17 hi"), .D(17), .N_SYN(216), .NBLK(NBLK), .PPM(5000)) u23 (clk, rst_n, done[23], chk[23], fail[23], raw[23], code[23]);
  cz_code_run #(.NAME("color d=21 hi"), .D(21), .N_SYN(330), .NBLK(NBLK), .PPM(5000)) u24 (clk, rst_n, done[24], chk[24], fail[24], raw[24], code[24]);
  cz_code_run #(.NAME("color d=5 lo"),  .D(5),  .N_SYN(18),  .NBLK(NBLK), .PPM(500))  u25 (clk, rst_n, done[25], chk[25], fail[25], raw[25], code[25]);
  cz_code_run #(.NAME("color d=9 lo"),  .D(9),  .N_SYN(60),  .NBLK(NBLK), .PPM(500))  u26 (clk, rst_n, done[26], chk[26], fail[26], raw[26], code[26]);
  cz_code_run #(.NAME("color d=13 lo"), .D(13), .N_SYN(126), .NBLK(NBLK), .PPM(500))  u27 (clk, rst_n, done[27], chk[27], fail[27], raw[27], code[27]);
  cz_code_run #(.NAME("color d=17 lo"), .D(17), .N_SYN(216), .NBLK(NBLK), .PPM(500))  u28 (clk, rst_n, done[28], chk[28], fail[28], raw[28], code[28]);
  cz_code_run #(.NAME("color d=21 lo"), .D(21), .N_SYN(330), .NBLK(NBLK), .PPM(500))  u29 (clk, rst_n, done[29], chk[29], fail[29], raw[29], code[29]);

  string names [NRUN] = '{
    "surface d=5 0.5%", "surface d=9 0.5%", "surface d=13 0.5%", "surface d=17 0.5%", "surface d=21 0.5%",
    "surface d=5 0.05%", "surface d=9 0.05%", "surface d=13 0.05%", "surface d=17 0.05%", "surface d=21 0.05%",
    "BB [[72,12,6]] 0.5%", "BB [[90,8,10]] 0.5%", "BB [[144,12,12]] 0.5%", "BB [[288,12,18]] 0.5%", "BB [[360,12,24]] 0.5%",
    "BB [[72,12,6]] 0.05%", "BB [[90,8,10]] 0.05%", "BB [[144,12,12]] 0.05%", "BB [[288,12,18]] 0.05%", "BB [[360,12,24]] 0.05%",
    "color d=5 0.5%", "color d=9 0.5%", "color d=13 0.5%", "color d=17 0.5%", "color d=21 0.5%",
    "color d=5 0.05%", "color d=9 0.05%", "color d=13 0.05%", "color d=17 0.05%", "color d=21 0.05%"};

  function automatic bit all_done();
    foreach (done[i]) if (!done[i]) return 0;
    return 1;
  endfunction

  initial begin
    int checks, failures;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!all_done()) @(negedge clk);
    checks = 0;
    failures = 0;
    for (int i = 0; i < NRUN; i++) begin
      checks += chk[i];
      failures += fail[i];
      if (code[i] == 0)
        $display("%-24s raw %7d bits  coded      0 bits  (no active syndrome)", names[i], raw[i]);
      else
        $display("%-24s raw %7d bits  coded %6d bits  ratio %0d.%0d%0d", names[i], raw[i], code[i],
                 int'(raw[i] / code[i]), int'((raw[i] * 100 / code[i]) % 100) / 10,
                 int'((raw[i] * 100 / code[i]) % 10));
      // the sparser blocks of a shape must not compress worse than the denser ones
      if (i % 10 < 5) begin
        checks++;
        if (raw[i] * code[i + 5] > raw[i + 5] * code[i]) begin
          failures++;
          $display("FAIL: %s compresses better than its sparser blocks", names[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

endmodule
