// pifo_mesh: the programmable scheduler, a full mesh of PIFO blocks.
//
// Each level of a scheduling tree is mapped onto a PIFO block; each block
// holds many logical PIFOs. The blocks are joined by a full mesh: any block
// can send any other block an enqueue (a shaping PIFO releasing an element
// into its parent) or a dequeue (walking a PIFO reference from the root
// towards a leaf). What a block sends after a dequeue is set by its next-hop
// table, loaded through the cfg_* port, so the same hardware runs different
// scheduling trees. The structure (blocks, full mesh, per-block next-hop
// tables, one enqueue and one dequeue per block per cycle) follows the
// published design.
//
// Arbitration, one enqueue and one dequeue per block and cycle:
//   enqueue: the external enqueue (from the rank-computing transactions) wins
//            over releases from shaping PIFOs in other blocks; among those the
//            lowest block number wins. A release that loses waits in its
//            block's output FIFO and tries again: shaping PIFOs get
//            best-effort service, as in the published design.
//   dequeue: a dequeue from another block (a walk already under way) wins
//            over the external dequeue from the link; among blocks the lowest
//            number wins. The block's own readiness (three-cycle rule for one
//            logical PIFO, room in its output FIFO) gates the grant.
// The priority order among equals and of walks over new link dequeues is this
// design's choice.
//
// Ports are per block, packed into arrays indexed by block number. The
// external enqueue is always taken. ext_deq_ready tells whether a link
// dequeue was taken this cycle. Transmitted packets leave on tx_* with a
// ready per block. now is the wall clock used as the rank of shaping PIFOs.
// The rank-computing atom pipelines are not part of this module: ranks arrive
// computed on ext_enq. Reset is synchronous, active low.
module pifo_mesh
  import pifo_pkg::*;
#(
  parameter int unsigned NB   = N_BLOCKS,
  parameter int unsigned FS_N = N_FLOWS,
  parameter int unsigned RS_N = RS_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  rank_t               now,
  // configuration of one block's next-hop table per cycle
  input  logic                cfg_we,
  input  blk_t                cfg_blk,
  input  lpifo_t              cfg_lpifo,
  input  nh_entry_t           cfg_entry,
  input  logic                cfg_shaping,
  // external enqueues, one per block
  input  logic   [NB-1:0]     ext_enq_valid,
  input  enq_t                ext_enq [NB],
  // link dequeues, one per block
  input  logic   [NB-1:0]     ext_deq_valid,
  input  lpifo_t              ext_deq_lpifo [NB],
  output logic   [NB-1:0]     ext_deq_ready,
  // transmitted packets
  output logic   [NB-1:0]     tx_valid,
  output tx_t                 tx [NB],
  input  logic   [NB-1:0]     tx_ready,
  // status, per block
  output logic   [NB-1:0]     ev_release,        // a shaping release was taken by its parent
  output logic   [NB-1:0]     ev_release_stall,  // a shaping release lost arbitration
  output logic   [NB-1:0]     ev_walk,           // a mesh dequeue was taken
  output logic   [NB-1:0]     ev_link_stall,     // a link dequeue was not taken
  output logic   [NB-1:0]     ev_bypass,
  output logic   [NB-1:0]     ev_reinsert,
  output logic   [NB-1:0]     ev_drop,
  output logic   [NB-1:0]     ev_deq_done,       // a dequeue left a flow scheduler
  output logic   [NB-1:0]     ev_deq_found,      // ... and found an element
  output logic   [NB-1:0]     ev_shaping_out,    // ... and it was a shaping element
  output logic   [31:0]       drops [NB]         // enqueues dropped, rank store full
);

  logic     [NB-1:0] mop_valid, mop_all_ready, mop_dq_ready;
  mesh_op_t          mop [NB];

  logic     [NB-1:0] b_enq_valid, b_deq_valid, b_deq_ready;
  enq_t              b_enq [NB];
  lpifo_t            b_deq_lpifo [NB];

  // ---------------- arbitration per target block
  logic [NB-1:0] deq_from_mesh;
  int unsigned   deq_src [NB];

  always_comb begin
    ev_release       = '0;
    ev_release_stall = '0;
    for (int b = 0; b < NB; b++) begin
      logic enq_taken;
      // enqueue port of block b
      b_enq_valid[b] = ext_enq_valid[b];
      b_enq[b]       = ext_enq[b];
      enq_taken      = ext_enq_valid[b];
      for (int s = 0; s < NB; s++) begin
        if (s != b && mop_valid[s] && mop[s].is_enq && int'(mop[s].blk) == b) begin
          if (!enq_taken) begin
            enq_taken      = 1'b1;
            b_enq_valid[b] = 1'b1;
            b_enq[b]       = mop[s].enq;
            ev_release[s]  = 1'b1;
          end else begin
            ev_release_stall[s] = 1'b1;
          end
        end
      end
      // dequeue port of block b: choose the source
      deq_from_mesh[b] = 1'b0;
      deq_src[b]       = 0;
      b_deq_valid[b]   = ext_deq_valid[b];
      b_deq_lpifo[b]   = ext_deq_lpifo[b];
      for (int s = NB - 1; s >= 0; s--) begin
        if (s != b && mop_valid[s] && !mop[s].is_enq && int'(mop[s].blk) == b) begin
          deq_from_mesh[b] = 1'b1;
          deq_src[b]       = s;
          b_deq_valid[b]   = 1'b1;
          b_deq_lpifo[b]   = mop[s].lpifo;
        end
      end
    end
  end

  // grants, from each block's readiness
  always_comb begin
    ev_walk       = '0;
    ext_deq_ready = '0;
    mop_dq_ready  = '0;
    for (int b = 0; b < NB; b++) begin
      if (deq_from_mesh[b]) begin
        mop_dq_ready[deq_src[b]] = b_deq_ready[b];
        ev_walk[deq_src[b]]      = b_deq_ready[b];
      end else begin
        ext_deq_ready[b] = b_deq_ready[b];
      end
    end
    ev_link_stall = ext_deq_valid & ~ext_deq_ready;
  end

  assign mop_all_ready = ev_release | mop_dq_ready;

  // ---------------- the blocks
  for (genvar b = 0; b < NB; b++) begin : g_blk
    logic cfg_we_b;
    assign cfg_we_b = cfg_we && (int'(cfg_blk) == b);

    pifo_block #(.BLK_ID(blk_t'(b)), .FS_N(FS_N), .RS_N(RS_N)) u_blk (
      .clk, .rst_n, .now,
      .cfg_we(cfg_we_b), .cfg_lpifo, .cfg_entry, .cfg_shaping,
      .enq_valid(b_enq_valid[b]), .enq(b_enq[b]),
      .deq_valid(b_deq_valid[b]), .deq_lpifo(b_deq_lpifo[b]), .deq_ready(b_deq_ready[b]),
      .tx_valid(tx_valid[b]), .tx(tx[b]), .tx_ready(tx_ready[b]),
      .mop_valid(mop_valid[b]), .mop(mop[b]), .mop_ready(mop_all_ready[b]),
      .fs_deq_done(ev_deq_done[b]), .fs_deq_found(ev_deq_found[b]), .fs_deq_shaping(ev_shaping_out[b]),
      .ev_bypass(ev_bypass[b]), .ev_reinsert(ev_reinsert[b]), .ev_drop(ev_drop[b]),
      .drops(drops[b])
    );
  end

endmodule
