// pifo_block: one PIFO block of the mesh, holding up to N_LPIFO logical
// PIFOs over N_FLOWS flows.
//
// An element is enqueued with a logical PIFO ID, a flow ID, a rank and
// metadata. If its flow holds nothing yet the element goes straight into the
// flow scheduler (the bypass); otherwise it is appended to the flow's FIFO in
// the rank store. A dequeue names a logical PIFO; the flow scheduler removes
// that logical PIFO's lowest-rank flow head, and if the flow still has
// elements its next one is read from the rank store and reinserted into the
// flow scheduler. This split follows the published design, as does the rule
// that dequeues of one logical PIFO are at least three cycles apart (two for
// the pop, one for the rank-store read) while dequeues of different logical
// PIFOs may come every cycle.
//
// After a dequeue the next-hop table says what to do with the element:
// transmit it (tx_*), or send an operation to another block over the mesh
// (mop_*): a dequeue of the logical PIFO the element refers to, or, for an
// element released by a shaping PIFO, an enqueue into the parent. Results
// wait in a small output FIFO; a dequeue is accepted only while that FIFO has
// room, so a blocked mesh port stalls the block instead of losing elements.
//
// Shaping PIFOs: in a cycle with no external dequeue the block pops, by
// itself, the lowest-rank element of any shaping logical PIFO whose rank is
// <= now. Such pops are kept three cycles apart and take second place to
// ordinary dequeues, which gives the best-effort service the published design
// describes for shaping PIFOs. The rank of a release's enqueue into its parent
// is taken from the low RANK_W bits of the shaping element's metadata: the
// parent's scheduling transaction runs outside this block (in the atom
// pipelines), so it has to be evaluated before the element is shaped. That
// is this design's simplification.
//
// Buffer full: an enqueue that would need the rank store while it is full is
// dropped and counted in drops (the published design leaves buffer
// management to thresholds outside the scheduler).
//
// Timing: enqueue and dequeue are single-cycle requests with a ready
// (deq_ready must be high for a dequeue to be taken; enqueues are always
// taken). A dequeue taken in cycle t leaves the flow scheduler in t+1 and its
// next-hop result is at the output FIFO head from t+2. Reset is synchronous,
// active low.
module pifo_block
  import pifo_pkg::*;
#(
  parameter blk_t        BLK_ID   = '0,
  parameter int unsigned FS_N     = N_FLOWS,
  parameter int unsigned RS_N     = RS_DEPTH,
  parameter int unsigned OQ_DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  rank_t     now,
  // configuration
  input  logic      cfg_we,
  input  lpifo_t    cfg_lpifo,
  input  nh_entry_t cfg_entry,
  input  logic      cfg_shaping,
  // enqueue
  input  logic      enq_valid,
  input  enq_t      enq,
  // dequeue
  input  logic      deq_valid,
  input  lpifo_t    deq_lpifo,
  output logic      deq_ready,
  // post-dequeue results
  output logic      tx_valid,
  output tx_t       tx,
  input  logic      tx_ready,
  output logic      mop_valid,
  output mesh_op_t  mop,
  input  logic      mop_ready,
  // status
  output logic      fs_deq_done,     // a dequeue left the flow scheduler
  output logic      fs_deq_found,    // ... and found an element
  output logic      fs_deq_shaping,  // ... and it was a shaping release
  output logic      ev_bypass,       // an enqueue went straight to the flow scheduler
  output logic      ev_reinsert,     // a flow's next element was reinserted
  output logic      ev_drop,         // an enqueue was dropped (rank store full)
  output logic [31:0] drops
);

  localparam int unsigned FCW = $clog2(RS_N + FS_N + 1);
  typedef logic [FCW-1:0] fcnt_t;

  // ---------------- configuration table
  nh_entry_t nh;
  logic      enq_shaping;
  elem_t     fs_out;

  next_hop_lut u_lut (
    .clk, .rst_n, .cfg_we, .cfg_lpifo, .cfg_entry, .cfg_shaping,
    .rd_lpifo(fs_out.lpifo), .rd_entry(nh),
    .sh_lpifo(enq.lpifo),    .sh_flag(enq_shaping)
  );

  // ---------------- per-flow element counts (head included)
  fcnt_t total [N_FLOWS];
  logic  flow_empty;
  elem_t enq_elem;
  logic  fs_deq_v, fs_found;

  assign flow_empty = (total[enq.flow] == '0);
  assign enq_elem   = '{lpifo: enq.lpifo, flow: enq.flow, rank: enq.rank,
                        meta: enq.meta, shaping: enq_shaping};

  logic rs_full, rs_out_v;
  elem_t rs_out;
  logic to_fs, to_rs;
  assign to_fs   = enq_valid && flow_empty;
  assign to_rs   = enq_valid && !flow_empty && !rs_full;
  assign ev_drop = enq_valid && !flow_empty && rs_full;
  assign ev_bypass   = to_fs;
  assign ev_reinsert = rs_out_v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int f = 0; f < N_FLOWS; f++) total[f] <= '0;
      drops <= '0;
    end else begin
      if ((to_fs || to_rs) && fs_found && fs_out.flow == enq.flow) begin
        // one in, one out
      end else begin
        if (to_fs || to_rs) total[enq.flow]   <= total[enq.flow] + 1'b1;
        if (fs_found)       total[fs_out.flow] <= total[fs_out.flow] - 1'b1;
      end
      if (ev_drop) drops <= drops + 1;
    end
  end

  // ---------------- dequeue issue
  // output FIFO
  typedef struct packed {
    logic     is_tx;
    tx_t      tx;
    mesh_op_t op;
  } oq_t;

  localparam int unsigned OQW = $clog2(OQ_DEPTH + 1);
  oq_t oq [OQ_DEPTH];
  logic [OQW-1:0] oq_cnt;
  logic [$clog2(OQ_DEPTH)-1:0] oq_rd, oq_wr;
  logic oq_push, oq_pop;
  oq_t  oq_in;

  // recent pops, for the three-cycle rule
  logic   r1_v, r2_v, r1_sh, r2_sh;
  lpifo_t r1_lp, r2_lp;
  logic   room;
  assign room = (int'(oq_cnt) + int'(fs_deq_v) + 1) <= int'(OQ_DEPTH);

  assign deq_ready = room &&
                     !(r1_v && !r1_sh && r1_lp == deq_lpifo) &&
                     !(r2_v && !r2_sh && r2_lp == deq_lpifo);

  logic pop_ext, pop_sh, pop_v;
  assign pop_ext = deq_valid && deq_ready;
  assign pop_sh  = !pop_ext && room && !(r1_v && r1_sh) && !(r2_v && r2_sh);
  assign pop_v   = pop_ext || pop_sh;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r1_v <= 1'b0; r2_v <= 1'b0; r1_sh <= 1'b0; r2_sh <= 1'b0;
      r1_lp <= '0;  r2_lp <= '0;
    end else begin
      r1_v <= pop_v;  r1_sh <= pop_sh; r1_lp <= deq_lpifo;
      r2_v <= r1_v;   r2_sh <= r1_sh;  r2_lp <= r1_lp;
    end
  end

  // ---------------- flow scheduler and rank store
  logic [$clog2(FS_N+1)-1:0] fs_occ;
  logic [$clog2(RS_N+1)-1:0] rs_used;

  flow_scheduler #(.N(FS_N)) u_fs (
    .clk, .rst_n,
    .ins_valid(to_fs),    .ins_elem(enq_elem),
    .rei_valid(rs_out_v), .rei_elem(rs_out),
    .pop_valid(pop_v),    .pop_shaping(pop_sh), .pop_lpifo(deq_lpifo),
    .now,
    .deq_valid(fs_deq_v), .deq_found(fs_found), .deq_elem(fs_out),
    .occupancy(fs_occ)
  );

  rank_store #(.DEPTH(RS_N)) u_rs (
    .clk, .rst_n,
    .push_valid(to_rs),   .push_flow(enq.flow), .push_elem(enq_elem),
    .pop_valid(fs_found), .pop_flow(fs_out.flow),
    .out_valid(rs_out_v), .out_elem(rs_out),
    .full(rs_full),       .used(rs_used)
  );

  assign fs_deq_done    = fs_deq_v;
  assign fs_deq_found   = fs_found;
  assign fs_deq_shaping = fs_found && fs_out.shaping;

  // ---------------- next hop
  always_comb begin
    oq_in = '0;
    oq_in.tx = '{blk: BLK_ID, lpifo: fs_out.lpifo, flow: fs_out.flow, meta: fs_out.meta};
    oq_push = 1'b0;
    unique case (nh.op)
      NH_TRANSMIT: begin
        oq_in.is_tx = 1'b1;
        oq_push     = fs_found;
      end
      NH_DEQUEUE: begin
        oq_in.op.is_enq = 1'b0;
        oq_in.op.blk    = nh.blk;
        oq_in.op.lpifo  = nh.lp_from_meta ? fs_out.meta[LP_W-1:0] : nh.lpifo;
        oq_push         = fs_found;
      end
      NH_ENQUEUE: begin
        oq_in.op.is_enq = 1'b1;
        oq_in.op.blk    = nh.blk;
        oq_in.op.enq    = '{lpifo: nh.lpifo, rank: fs_out.meta[RANK_W-1:0],
                            meta: nh.meta, flow: nh.flow};
        oq_push         = fs_found;
      end
      default: oq_push = 1'b0;
    endcase
  end

  assign tx_valid  = (oq_cnt != '0) && oq[oq_rd].is_tx;
  assign mop_valid = (oq_cnt != '0) && !oq[oq_rd].is_tx;
  assign tx        = oq[oq_rd].tx;
  assign mop       = oq[oq_rd].op;
  assign oq_pop    = (tx_valid && tx_ready) || (mop_valid && mop_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      oq_cnt <= '0;
      oq_rd  <= '0;
      oq_wr  <= '0;
    end else begin
      if (oq_push) begin
        oq[oq_wr] <= oq_in;
        oq_wr     <= (int'(oq_wr) == OQ_DEPTH - 1) ? '0 : oq_wr + 1'b1;
      end
      if (oq_pop) oq_rd <= (int'(oq_rd) == OQ_DEPTH - 1) ? '0 : oq_rd + 1'b1;
      oq_cnt <= oq_cnt + OQW'(oq_push) - OQW'(oq_pop);
    end
  end

  a_oq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(oq_push && !oq_pop && int'(oq_cnt) == OQ_DEPTH));
  a_no_self_op: assert property (@(posedge clk) disable iff (!rst_n)
    !(mop_valid && mop.blk == BLK_ID));

endmodule
