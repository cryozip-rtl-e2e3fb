// sd_stage -- Sparse Distance (SD) stage of the CryoZip compressor, with a sliding window.
//
// What it does: it turns the syndrome bits of d consecutive rounds into distance symbols. The
// first active (1) syndrome of a block is coded as the number of zeros in front of it; every
// later one as the number of zeros since the previous active syndrome. Zeros are counted on
// across round boundaries. A run of zeros that reaches MAX_DISTANCE and is followed by one more
// zero is cut there and coded as the symbol MAX_DISTANCE+1 (which thus stands for
// MAX_DISTANCE+1 zeros and no active syndrome); counting then starts again from zero. Symbols
// therefore span 0..MAX_DISTANCE+1. All of this follows the published algorithm.
//
// How it works: a round is loaded into a shift register and scanned WINDOW bits per cycle
// (bit 0 of the round first), so a round takes ceil(N_SYN/WINDOW) cycles. The zero counter is
// the only state carried from one window, and from one round, to the next. The up to WINDOW
// symbols found in one window are packed to the low lanes of the output, in stream order.
// After the last window of the D-th round an end-of-block marker is appended and the counter is
// cleared; zeros after the last active syndrome of a block are not coded, since the receiver
// knows the block length (this last point is this design's choice).
//
// Interface: round_bits/round_valid/round_ready take one round (valid/ready handshake). A new
// round is accepted while the last window of the previous one is scanned, so rounds can follow
// each other every ceil(N_SYN/WINDOW) cycles. out_n/out_entries is a registered, one-cycle
// burst of out_n FIFO entries (lanes 0..out_n-1 valid). The stage scans a window only if
// fifo_free, the FIFO's free count, leaves room for the burst still in the output register
// plus a whole new burst; otherwise it holds the window and pulses stall.
//
// Timing: a window scanned in cycle t appears on out_entries in cycle t+1 (as drawn in the
// published schedule, where window 0 of a round gives its distance one cycle later).
module sd_stage
  import cryozip_pkg::*;
#(
  parameter int unsigned D            = D_DEFAULT,
  parameter int unsigned N_SYN        = N_SYN_DEFAULT,
  parameter int unsigned WINDOW       = WINDOW_DEFAULT,
  parameter int unsigned MAX_DISTANCE = MAX_DISTANCE_DEFAULT,
  parameter int unsigned FIFO_DEPTH   = FIFO_DEPTH_DEFAULT,
  localparam int unsigned LANES       = WINDOW + 1,              // symbols + end marker
  localparam int unsigned NWIN        = (N_SYN + WINDOW - 1) / WINDOW,
  localparam int unsigned NL_W        = $clog2(LANES + 1),
  localparam int unsigned FREE_W      = $clog2(FIFO_DEPTH + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // one syndrome round
  input  logic                    round_valid,
  output logic                    round_ready,
  input  logic [N_SYN-1:0]        round_bits,
  // burst of distance entries to the FIFO
  output logic [NL_W-1:0]         out_n,
  output dist_entry_t             out_entries [LANES],
  input  logic [FREE_W-1:0]       fifo_free,
  // status
  output logic                    busy,
  output logic                    stall,
  output logic                    window_fire
);

  localparam int unsigned CNT_W = $clog2(MAX_DISTANCE + 1);
  localparam int unsigned WIN_W = (NWIN > 1) ? $clog2(NWIN) : 1;
  localparam int unsigned RND_W = (D > 1) ? $clog2(D) : 1;

  logic [N_SYN-1:0] shreg_q;
  logic             busy_q;
  logic [WIN_W-1:0] win_q;
  logic [RND_W-1:0] rnd_q;
  logic [CNT_W-1:0] cnt_q;

  logic             room;
  logic             fire;
  logic             last_win;
  logic             last_rnd;

  // results of scanning the current window
  logic [CNT_W-1:0] cnt_d;
  logic [NL_W-1:0]  n_d;
  dist_entry_t      ent_d [LANES];

  assign room        = (int'(fifo_free) >= int'(out_n) + LANES);
  assign fire        = busy_q && room;
  assign last_win    = (int'(win_q) == NWIN - 1);
  assign last_rnd    = (int'(rnd_q) == D - 1);
  assign round_ready = !busy_q || (fire && last_win);
  assign busy        = busy_q;
  assign stall       = busy_q && !room;
  assign window_fire = fire;

  // Scan one window. The bits beyond N_SYN in the last window of a round are not part of it.
  always_comb begin
    logic [CNT_W-1:0] c;
    logic [NL_W-1:0]  n;
    int unsigned      base;
    c    = cnt_q;
    n    = '0;
    base = int'(win_q) * WINDOW;
    for (int i = 0; i < LANES; i++) ent_d[i] = '0;
    for (int i = 0; i < WINDOW; i++) begin
      if (base + i < N_SYN) begin
        if (shreg_q[i]) begin
          ent_d[n].sym = sym_t'(c);
          n = n + 1'b1;
          c = '0;
        end else if (int'(c) == MAX_DISTANCE) begin
          ent_d[n].sym = sym_t'(MAX_DISTANCE + 1);
          n = n + 1'b1;
          c = '0;
        end else begin
          c = c + 1'b1;
        end
      end
    end
    if (last_win && last_rnd) begin
      ent_d[n].eob = 1'b1;
      n = n + 1'b1;
      c = '0;
    end
    cnt_d = c;
    n_d   = n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg_q <= '0;
      busy_q  <= 1'b0;
      win_q   <= '0;
      rnd_q   <= '0;
      cnt_q   <= '0;
      out_n   <= '0;
      for (int i = 0; i < LANES; i++) out_entries[i] <= '0;
    end else begin
      out_n <= fire ? n_d : '0;
      if (fire) begin
        for (int i = 0; i < LANES; i++) out_entries[i] <= ent_d[i];
        cnt_q <= cnt_d;
      end
      if (round_valid && round_ready) begin
        // load the next round; its first window is scanned in the next cycle
        shreg_q <= round_bits;
        busy_q  <= 1'b1;
        win_q   <= '0;
        if (busy_q) rnd_q <= last_rnd ? '0 : rnd_q + 1'b1;
      end else if (fire) begin
        shreg_q <= shreg_q >> WINDOW;
        if (last_win) begin
          busy_q <= 1'b0;
          win_q  <= '0;
          rnd_q  <= last_rnd ? '0 : rnd_q + 1'b1;
        end else begin
          win_q <= win_q + 1'b1;
        end
      end
    end
  end

endmodule
