// tb_pifo_mesh: end-to-end test of the PIFO mesh running a two-level
// hierarchy with a shaped class, at reduced flow-scheduler and rank-store
// sizes.
//
// Mapping (one tree level per block, as the published mesh mapping does):
//   block 0, root:  logical PIFO 0 holds references to the classes; its next
//                   hop is a dequeue in block 1 of the logical PIFO named by
//                   the reference's low metadata byte.
//   block 1, leaves: logical PIFOs 1 and 2 hold packets; next hop transmit.
//   block 2, shaper: logical PIFO 3 is a shaping PIFO; its next hop enqueues
//                   a reference to class 2 into the root (flow 50), with the
//                   parent rank taken from the element's metadata.
// A packet of class 1 is enqueued into leaf 1 and, in the same cycle, a
// reference into the root. A packet of class 2 is enqueued into leaf 2 and a
// shaping element into block 2, so its root reference only appears when the
// wall clock reaches the shaping time. The link dequeues the root.
//
// Checks: every transmitted packet was enqueued and not yet sent, it carries
// the right block, logical PIFO and flow, packets of one flow leave in order,
// no more packets leave than were accepted, the drop counters agree with the
// drop events, and after a drain phase a packet is only left behind when the
// reference that would have fetched it was dropped (a drop in one block can
// orphan what was enqueued with it in another).
// Counts each mechanism: release, release stall, walk, link stall, bypass,
// reinsert, drop, shaping output, transmit; one that never happened fails.
module tb_pifo_mesh;
  import pifo_pkg::*;

  localparam int NB = 5, FS_N = 16, RS_N = 16;
  localparam int NCYC = 12000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rank_t     now;
  logic      cfg_we, cfg_shaping;
  blk_t      cfg_blk;
  lpifo_t    cfg_lpifo;
  nh_entry_t cfg_entry;
  logic   [NB-1:0] ext_enq_valid, ext_deq_valid, ext_deq_ready, tx_valid, tx_ready;
  enq_t            ext_enq [NB];
  lpifo_t          ext_deq_lpifo [NB];
  tx_t             tx [NB];
  logic   [NB-1:0] ev_release, ev_release_stall, ev_walk, ev_link_stall, ev_bypass,
                   ev_reinsert, ev_drop, ev_deq_done, ev_deq_found, ev_shaping_out;
  logic   [31:0]   drops [NB];

  pifo_mesh #(.NB(NB), .FS_N(FS_N), .RS_N(RS_N)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;

  // per packet: meta = sequence number
  int    pk_flow [int];
  int    pk_lp   [int];
  int    pk_rel  [int];      // shaping time of class-2 packets
  int    last_seq_out [8];
  int    last_rank [8];
  int    sent = 0, accepted = 0;

  int n_rel = 0, n_rstall = 0, n_walk = 0, n_lstall = 0, n_byp = 0, n_rei = 0;
  int n_drop = 0, n_shout = 0, n_tx = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("cyc %0d: %s", cyc, msg);
  endtask

  initial begin : watchdog
    repeat (NCYC + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input int b, input int lp, input nh_entry_t e, input logic sh);
    @(negedge clk);
    cfg_we = 1; cfg_blk = blk_t'(b); cfg_lpifo = lpifo_t'(lp); cfg_entry = e; cfg_shaping = sh;
  endtask

  initial begin
    int seq = 1;
    now = '0; cfg_we = 0; cfg_blk = '0; cfg_lpifo = '0; cfg_entry = '0; cfg_shaping = 0;
    ext_enq_valid = '0; ext_deq_valid = '0; tx_ready = '1;
    foreach (ext_enq[i]) ext_enq[i] = '0;
    foreach (ext_deq_lpifo[i]) ext_deq_lpifo[i] = '0;
    foreach (last_seq_out[i]) last_seq_out[i] = 0;
    foreach (last_rank[i]) last_rank[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg(0, 0, '{op: NH_DEQUEUE, blk: blk_t'(1), lp_from_meta: 1'b1, default: '0}, 1'b0);
    cfg(1, 1, '{op: NH_TRANSMIT, default: '0}, 1'b0);
    cfg(1, 2, '{op: NH_TRANSMIT, default: '0}, 1'b0);
    cfg(2, 3, '{op: NH_ENQUEUE, blk: blk_t'(0), lp_from_meta: 1'b0, lpifo: lpifo_t'(0),
                flow: flow_t'(50), meta: meta_t'(2)}, 1'b1);
    @(negedge clk);
    cfg_we = 0;

    for (cyc = 0; cyc < NCYC; cyc++) begin
      @(negedge clk);
      if (cyc % 3 == 0) now = now + 1'b1;
      ext_enq_valid = '0;
      ext_deq_valid = '0;
      tx_ready      = '1;
      tx_ready[1]   = ($urandom_range(0, 7) != 0);
      // packet arrivals, heavier in alternate phases so the rank stores fill
      if (cyc < NCYC - 2000 && $urandom_range(0, 99) < (((cyc / 1000) % 2) ? 30 : 75)) begin
        int f, cls, r;
        f   = $urandom_range(0, 5);          // flows 0-2 class 1, 3-5 class 2
        cls = (f < 3) ? 1 : 2;
        r   = last_rank[f] + $urandom_range(1, 4);
        last_rank[f] = r;
        ext_enq_valid[1] = 1'b1;
        ext_enq[1] = '{lpifo: lpifo_t'(cls), rank: rank_t'(r), meta: meta_t'(seq), flow: flow_t'(f)};
        if (cls == 1) begin
          ext_enq_valid[0] = 1'b1;
          ext_enq[0] = '{lpifo: lpifo_t'(0), rank: rank_t'(r), meta: meta_t'(1), flow: flow_t'(10 + f)};
        end else begin
          int t_rel;
          t_rel = int'(now) + $urandom_range(0, 30);
          ext_enq_valid[2] = 1'b1;
          // shaping rank = release time, metadata = rank for the root
          ext_enq[2] = '{lpifo: lpifo_t'(3), rank: rank_t'(t_rel), meta: meta_t'(r), flow: flow_t'(f)};
          pk_rel[seq] = t_rel;
        end
        pk_flow[seq] = f;
        pk_lp[seq]   = cls;
      end
      // the link asks the root for a packet
      ext_deq_valid[0] = ($urandom_range(0, 99) < ((cyc >= NCYC - 2000) ? 90 : 45));
      ext_deq_lpifo[0] = lpifo_t'(0);
      // an occasional stray link dequeue into the leaves, to compete with walks
      ext_deq_valid[1] = ($urandom_range(0, 99) < 3);
      ext_deq_lpifo[1] = lpifo_t'($urandom_range(1, 2));
      #1;
      // ---- bookkeeping at the coming edge
      if (ext_enq_valid[1]) begin
        if (ev_drop[1]) begin
          pk_flow.delete(seq); pk_lp.delete(seq);
          if (pk_rel.exists(seq)) pk_rel.delete(seq);
        end else accepted++;
        seq++;
      end
      n_rel    += $countones(ev_release);
      n_rstall += $countones(ev_release_stall);
      n_walk   += $countones(ev_walk);
      n_lstall += $countones(ev_link_stall);
      n_byp    += $countones(ev_bypass);
      n_rei    += $countones(ev_reinsert);
      n_drop   += $countones(ev_drop);
      n_shout  += $countones(ev_shaping_out);
      for (int b = 0; b < NB; b++) begin
        if (tx_valid[b] && tx_ready[b]) begin
          int m;
          checks++;
          m = int'(tx[b].meta);
          if (b != 1) fail($sformatf("transmit from block %0d", b));
          else if (!pk_flow.exists(m)) fail($sformatf("packet %0d sent twice or never enqueued", m));
          else begin
            if (int'(tx[b].lpifo) != pk_lp[m] || int'(tx[b].flow) != pk_flow[m] || tx[b].blk != blk_t'(1))
              fail($sformatf("packet %0d has the wrong fields", m));
            if (m < last_seq_out[pk_flow[m]])
              fail($sformatf("flow %0d out of order", pk_flow[m]));
            last_seq_out[pk_flow[m]] = m;
            if (pk_rel.exists(m)) pk_rel.delete(m);
            pk_flow.delete(m); pk_lp.delete(m);
            sent++; n_tx++;
          end
        end
      end
    end
    // ---- conservation: sent never exceeds accepted
    checks++;
    if (sent > accepted) fail("more packets sent than accepted");
    checks++;
    if (int'(drops[1]) + int'(drops[0]) + int'(drops[2]) != n_drop) fail("drop counters disagree with drop events");
    // after the drain, a packet may only be left behind if the reference that
    // would have fetched it was dropped in the root or the shaping block
    checks++;
    if (pk_flow.size() > int'(drops[0]) + int'(drops[2]))
      fail($sformatf("%0d packets stranded, only %0d references dropped", pk_flow.size(),
                     int'(drops[0]) + int'(drops[2])));
    $display("accepted=%0d sent=%0d left=%0d", accepted, sent, pk_flow.size());
    $display("release=%0d release_stall=%0d walk=%0d link_stall=%0d bypass=%0d reinsert=%0d drop=%0d shaping_out=%0d tx=%0d",
             n_rel, n_rstall, n_walk, n_lstall, n_byp, n_rei, n_drop, n_shout, n_tx);
    if (n_rel == 0 || n_rstall == 0 || n_walk == 0 || n_lstall == 0 || n_byp == 0 ||
        n_rei == 0 || n_drop == 0 || n_shout == 0 || n_tx == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
