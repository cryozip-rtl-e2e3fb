// dist_fifo -- distance-symbol FIFO between the Sparse Distance stage and the Huffman encoder.
//
// What it does: the SD stage finds a varying number of symbols per cycle (none to a whole
// window's worth), while the Huffman encoder takes one symbol per cycle. The FIFO absorbs the
// difference; this role is as published, its structure is this design's choice.
//
// How it works: a circular buffer of DEPTH entries with a multi-lane write port. In one cycle
// wr_n entries (lanes 0..wr_n-1 of wr_entries, in order) are written at the write pointer and
// at most one entry is read at the read pointer. The writer must not offer more entries than
// the free count allows; an assertion checks this. free counts the entries not yet occupied
// at the start of the cycle.
//
// Interface: write side wr_n/wr_entries/free; read side rd_valid/rd_entry/rd_ready
// (valid/ready, first-word-fall-through: rd_entry shows the head entry whenever rd_valid).
//
// Timing: an entry written in cycle t can be read from cycle t+1.
//
// Reset: rst_n is an asynchronous, active-low reset of the registers. It also disables the
// assertion below while reset is held, which is why lint tools report rst_n as used both
// asynchronously and synchronously; the assertion is not logic and this is intended.
module dist_fifo
  import cryozip_pkg::*;
#(
  parameter int unsigned LANES     = WINDOW_DEFAULT + 1,
  parameter int unsigned DEPTH     = FIFO_DEPTH_DEFAULT,   // a power of two
  localparam int unsigned NL_W     = $clog2(LANES + 1),
  localparam int unsigned PTR_W    = $clog2(DEPTH),
  localparam int unsigned FREE_W   = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NL_W-1:0]   wr_n,
  input  dist_entry_t       wr_entries [LANES],
  output logic [FREE_W-1:0] free,
  output logic              rd_valid,
  output dist_entry_t       rd_entry,
  input  logic              rd_ready,
  output logic [FREE_W-1:0] level
);

  dist_entry_t      mem [DEPTH];
  logic [PTR_W-1:0] wp_q, rp_q;
  logic [FREE_W-1:0] cnt_q;
  logic             pop;

  assign level    = cnt_q;
  assign free     = FREE_W'(DEPTH) - cnt_q;
  assign rd_valid = (cnt_q != '0);
  assign rd_entry = mem[rp_q];
  assign pop      = rd_valid && rd_ready;

  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++) begin
      if (i < int'(wr_n)) mem[PTR_W'(int'(wp_q) + i)] <= wr_entries[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      wp_q  <= wp_q + PTR_W'(wr_n);
      if (pop) rp_q <= rp_q + 1'b1;
      cnt_q <= cnt_q + FREE_W'(wr_n) - FREE_W'(pop);
    end
  end

  // The writer may only offer what fits.
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n) int'(wr_n) <= int'(free))
    else $error("dist_fifo: write of %0d entries with only %0d free", wr_n, free);

endmodule
