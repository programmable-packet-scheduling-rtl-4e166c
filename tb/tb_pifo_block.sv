// tb_pifo_block: random enqueues and dequeues on one PIFO block, checked
// against a model of its logical PIFOs.
//
// Configuration: 12 flows, flow f in logical PIFO f % 6. Logical PIFOs 0-3
// transmit, 4 holds references (its next hop is a dequeue in block 2 of the
// logical PIFO named by the element's low metadata byte), 5 is a shaping
// PIFO whose elements are released into block 1 (logical PIFO 9, flow 77,
// metadata 0xCAFE) with the parent rank taken from the low metadata bits.
// Ranks rise within each flow and are unique within a logical PIFO, the
// condition under which a flow-scheduler block is an exact PIFO.
//
// Checks: every output (transmit or mesh operation) carries an element of the
// logical PIFO that was dequeued, no lower-ranked element of that logical
// PIFO that was enqueued at least two cycles before the dequeue is skipped,
// a dequeue that finds nothing only happens when the logical PIFO holds
// nothing that old, shaping releases only happen when their time has come,
// the three-cycle rule is kept, the next hop fields are right, the first
// output appears two cycles after its dequeue, and at the end every accepted
// element has come out exactly once. Small flow-scheduler and rank-store
// sizes make the rank store fill and drop enqueues.
module tb_pifo_block;
  import pifo_pkg::*;

  localparam int FS_N = 16, RS_N = 16;
  localparam int NCYC = 16000, K = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rank_t     now;
  logic      cfg_we, cfg_shaping;
  lpifo_t    cfg_lpifo;
  nh_entry_t cfg_entry;
  logic      enq_valid, deq_valid, deq_ready;
  enq_t      enq;
  lpifo_t    deq_lpifo;
  logic      tx_valid, tx_ready, mop_valid, mop_ready;
  tx_t       tx;
  mesh_op_t  mop;
  logic      fs_deq_done, fs_deq_found, fs_deq_shaping, ev_bypass, ev_reinsert, ev_drop;
  logic [31:0] drops;

  pifo_block #(.BLK_ID(blk_t'(0)), .FS_N(FS_N), .RS_N(RS_N)) dut (.*);

  int checks = 0, failures = 0;

  typedef struct {
    int    lp;
    int    rank;
    int    meta;
    int    t_enq;
  } item_t;

  item_t live [$];            // accepted, not yet out
  int    last_rank [12];
  int    cyc = 0;
  int    seq = 0;

  typedef struct { int lp; int t_iss; logic shp; } pend_t;
  pend_t outq [$];            // found pops whose result has not left yet

  int n_tx = 0, n_ref = 0, n_rel = 0, n_empty = 0, n_spacing = 0, n_drop = 0;
  int n_bypass = 0, n_reinsert = 0, n_lat2 = 0, n_oqstall = 0;
  int last_acc [6];

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("cyc %0d: %s", cyc, msg);
  endtask

  // index of the element an output names, or -1
  function automatic int find_meta(input int lp, input int key, input int mask);
    foreach (live[i]) if (live[i].lp == lp && (live[i].meta & mask) == key) return i;
    return -1;
  endfunction

  task automatic check_order(input int idx, input int t_iss, input logic shp);
    foreach (live[i])
      if (i != idx && live[i].lp == live[idx].lp && live[i].rank < live[idx].rank &&
          live[i].t_enq <= t_iss - K)
        fail($sformatf("lp %0d: rank %0d came out before rank %0d", live[idx].lp,
                       live[idx].rank, live[i].rank));
  endtask

  initial begin : watchdog
    repeat (NCYC + 6000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // shaping time at each dequeue issue, for the release check
  int now_at [int];

  initial begin
    logic   iss, iss_q;
    lpifo_t iss_lp, iss_lp_q;
    int     t_first_out;
    now = '0; cfg_we = 0; cfg_shaping = 0; cfg_lpifo = '0; cfg_entry = '0;
    enq_valid = 0; enq = '0; deq_valid = 0; deq_lpifo = '0; tx_ready = 1; mop_ready = 1;
    iss_q = 0; iss_lp_q = '0;
    foreach (last_rank[i]) last_rank[i] = 0;
    foreach (last_acc[i]) last_acc[i] = -100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- configure the next-hop table
    for (int lp = 0; lp < 6; lp++) begin
      @(negedge clk);
      cfg_we = 1; cfg_lpifo = lpifo_t'(lp); cfg_shaping = (lp == 5);
      cfg_entry = '{op: NH_TRANSMIT, default: '0};
      if (lp == 4) cfg_entry = '{op: NH_DEQUEUE, blk: blk_t'(2), lp_from_meta: 1'b1, default: '0};
      if (lp == 5) cfg_entry = '{op: NH_ENQUEUE, blk: blk_t'(1), lp_from_meta: 1'b0,
                                 lpifo: lpifo_t'(9), flow: flow_t'(77), meta: meta_t'('hCAFE)};
    end
    @(negedge clk);
    cfg_we = 0;

    for (cyc = 0; cyc < NCYC + 4000; cyc++) begin
      @(negedge clk);
      // ---------- results of the dequeue issued last cycle
      if (fs_deq_done) begin
        if (iss_q) begin
          if (fs_deq_found) outq.push_back('{lp: int'(iss_lp_q), t_iss: cyc - 1, shp: 1'b0});
          else begin
            n_empty++;
            checks++;
            foreach (live[i])
              if (live[i].lp == int'(iss_lp_q) && live[i].t_enq <= cyc - 1 - K)
                fail($sformatf("empty dequeue of lp %0d that holds rank %0d", iss_lp_q, live[i].rank));
          end
        end else if (fs_deq_shaping) begin
          outq.push_back('{lp: 5, t_iss: cyc - 1, shp: 1'b1});
        end
      end
      if (ev_reinsert) n_reinsert++;
      // ---------- drive
      if (cyc % 4 == 0) now = now + 1'b1;
      tx_ready  = ($urandom_range(0, 9) != 0);
      mop_ready = ($urandom_range(0, 9) != 0);
      // enqueue: heavy in some phases, none in the drain phase
      enq_valid = (cyc < NCYC) && ($urandom_range(0, 99) < (((cyc / 1500) % 2) ? 25 : 70));
      if (enq_valid) begin
        int f, lp, r, m;
        logic clash;
        f  = $urandom_range(0, 11);
        if (f % 6 == 4 && live.size() > 200) f = 0;
        lp = f % 6;
        r  = (lp == 5) ? ((int'(now) + $urandom_range(0, 40)) > last_rank[f] ?
                          int'(now) + $urandom_range(0, 40) : last_rank[f] + 1)
                       : last_rank[f] + $urandom_range(1, 6);
        if (r <= last_rank[f]) r = last_rank[f] + 1;
        do begin
          clash = 0;
          foreach (live[i]) if (live[i].lp == lp && live[i].rank == r) clash = 1;
          if (clash) r++;
        end while (clash);
        last_rank[f] = r;
        // low byte unique among live references, low half unique among releases
        m = seq;
        if (lp == 4) while (find_meta(4, m & 'hFF, 'hFF) >= 0) m++;
        if (lp == 5) while (find_meta(5, m & 'hFFFF, 'hFFFF) >= 0) m++;
        seq = m + 1;
        enq = '{lpifo: lpifo_t'(lp), rank: rank_t'(r), meta: meta_t'(m), flow: flow_t'(f)};
      end
      // dequeue: random scheduling PIFO, sometimes the same one as before
      deq_valid = ($urandom_range(0, 99) < ((cyc >= NCYC) ? 80 : (((cyc / 1500) % 2) ? 70 : 30)));
      deq_lpifo = lpifo_t'(($urandom_range(0, 2) == 0) ? iss_lp_q : lpifo_t'($urandom_range(0, 4)));
      #1;
      now_at[cyc] = int'(now);
      // three-cycle rule, as seen on deq_ready
      if (deq_valid && !deq_ready) n_spacing++;
      iss    = deq_valid && deq_ready;
      iss_lp = deq_lpifo;
      if (iss) begin
        checks++;
        if (cyc - last_acc[deq_lpifo] < 3) fail("same logical PIFO dequeued within three cycles");
        last_acc[deq_lpifo] = cyc;
      end
      // ---------- outputs taken at the coming clock edge
      if (tx_valid && tx_ready || mop_valid && mop_ready) begin
        pend_t p;
        int idx;
        checks++;
        if (outq.size() == 0) fail("output with no dequeue behind it");
        else begin
          p = outq.pop_front();
          if (cyc - p.t_iss == 2) n_lat2++;
          if (cyc - p.t_iss < 2) fail("output earlier than two cycles after its dequeue");
          if (tx_valid) begin
            idx = find_meta(p.lp, int'(tx.meta), -1);
            if (p.lp > 3 || tx.lpifo != lpifo_t'(p.lp) || tx.blk != '0) fail("bad transmit");
            n_tx++;
          end else if (!mop.is_enq) begin
            idx = find_meta(p.lp, int'(mop.lpifo), 'hFF);
            if (p.lp != 4 || mop.blk != blk_t'(2)) fail("bad reference dequeue");
            n_ref++;
          end else begin
            idx = find_meta(p.lp, int'(mop.enq.rank), 'hFFFF);
            if (p.lp != 5 || mop.blk != blk_t'(1) || mop.enq.lpifo != lpifo_t'(9) ||
                mop.enq.flow != flow_t'(77) || mop.enq.meta != meta_t'('hCAFE))
              fail("bad shaping release");
            if (idx >= 0 && live[idx].rank > now_at[p.t_iss]) fail("released before its time");
            n_rel++;
          end
          if (idx < 0) fail($sformatf("output names no live element of lp %0d", p.lp));
          else begin
            check_order(idx, p.t_iss, p.shp);
            live.delete(idx);
          end
        end
      end
      if (ev_bypass) n_bypass++;
      if (enq_valid && ev_drop) n_drop++;
      else if (enq_valid)
        live.push_back('{lp: int'(enq.lpifo), rank: int'(enq.rank), meta: int'(enq.meta), t_enq: cyc});
      iss_q = iss; iss_lp_q = iss_lp;
    end
    // ---------- everything accepted must have come out
    checks++;
    if (live.size() != 0) fail($sformatf("%0d elements never came out", live.size()));
    checks++;
    if (int'(drops) != n_drop) fail("drop counter mismatch");
    $display("tx=%0d refs=%0d releases=%0d empty=%0d spacing_stalls=%0d drops=%0d bypass=%0d reinsert=%0d lat2=%0d",
             n_tx, n_ref, n_rel, n_empty, n_spacing, n_drop, n_bypass, n_reinsert, n_lat2);
    if (n_tx == 0 || n_ref == 0 || n_rel == 0 || n_empty == 0 || n_spacing == 0 ||
        n_drop == 0 || n_bypass == 0 || n_reinsert == 0 || n_lat2 == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
