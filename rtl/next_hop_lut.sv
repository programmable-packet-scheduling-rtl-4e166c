// next_hop_lut: per-logical-PIFO configuration of one PIFO block.
//
// For every logical PIFO of the block it holds the "next hop" applied after
// an element is dequeued from that logical PIFO: transmit the element as a
// packet, dequeue a logical PIFO in another block (the element is a reference
// to it), or enqueue into another block (the element was released by a
// shaping PIFO). The published design describes this small table and what an
// entry names (an operation, the block of the next operation, and its
// arguments); the entry layout (pifo_pkg::nh_entry_t) is this design's own.
// It also holds one bit per logical PIFO saying whether the logical PIFO is a
// shaping PIFO, whose elements are released when their rank (a wall-clock
// time) arrives.
//
// Interface: a write port for configuration (cfg_we), one read port for the
// dequeue side (lookup of the logical PIFO just dequeued) and one for the
// enqueue side (shaping flag of the logical PIFO being enqueued). Reads are
// combinational; a write takes effect in the next cycle. Reset (synchronous,
// active low) sets every entry to NH_NONE and clears the shaping flags.
module next_hop_lut
  import pifo_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cfg_we,
  input  lpifo_t    cfg_lpifo,
  input  nh_entry_t cfg_entry,
  input  logic      cfg_shaping,
  input  lpifo_t    rd_lpifo,
  output nh_entry_t rd_entry,
  input  lpifo_t    sh_lpifo,
  output logic      sh_flag
);

  nh_entry_t tbl [N_LPIFO];
  logic [N_LPIFO-1:0] shaping;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_LPIFO; i++) tbl[i] <= '{op: NH_NONE, default: '0};
      shaping <= '0;
    end else if (cfg_we) begin
      tbl[cfg_lpifo]     <= cfg_entry;
      shaping[cfg_lpifo] <= cfg_shaping;
    end
  end

  assign rd_entry = tbl[rd_lpifo];
  assign sh_flag  = shaping[sh_lpifo];

endmodule
