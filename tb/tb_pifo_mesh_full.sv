// tb_pifo_mesh_full: one complete scheduling operation on the mesh at its
// default sizes (five blocks, 1024-entry flow schedulers, 65536-entry rank
// stores, 256 logical PIFOs per block).
//
// Block 0 is the root of a two-level tree whose logical PIFO 0 holds
// references to the leaf logical PIFOs 1 and 2 of block 1. Eight packets,
// four per class and two per flow, are enqueued together with their root
// references; the root ranks interleave the classes. The link then dequeues
// the root eight times and the packets must leave in root-rank order, each
// one by a walk from block 0 to block 1, with no drops.
module tb_pifo_mesh_full;
  import pifo_pkg::*;

  localparam int NB = N_BLOCKS;

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

  pifo_mesh dut (.*);

  int checks = 0, failures = 0;
  int expect_q [$];
  int n_walk = 0;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    n_walk <= n_walk + $countones(ev_walk);
    for (int b = 0; b < NB; b++)
      if (tx_valid[b] && tx_ready[b]) begin
        checks++;
        if (b != 1 || expect_q.size() == 0 || int'(tx[b].meta) != expect_q[0]) begin
          failures++;
          $display("block %0d sent packet %0d out of order", b, tx[b].meta);
        end
        if (expect_q.size() != 0) void'(expect_q.pop_front());
      end
  end

  initial begin
    now = '0; cfg_we = 0; cfg_blk = '0; cfg_lpifo = '0; cfg_entry = '0; cfg_shaping = 0;
    ext_enq_valid = '0; ext_deq_valid = '0; tx_ready = '1;
    foreach (ext_enq[i]) ext_enq[i] = '0;
    foreach (ext_deq_lpifo[i]) ext_deq_lpifo[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_blk = blk_t'(0); cfg_lpifo = lpifo_t'(0); cfg_shaping = 0;
    cfg_entry = '{op: NH_DEQUEUE, blk: blk_t'(1), lp_from_meta: 1'b1, default: '0};
    @(negedge clk);
    cfg_blk = blk_t'(1); cfg_lpifo = lpifo_t'(1); cfg_entry = '{op: NH_TRANSMIT, default: '0};
    @(negedge clk);
    cfg_lpifo = lpifo_t'(2);
    @(negedge clk);
    cfg_we = 0;
    // packet k: class 1 + k % 2, flow k % 4, root rank 100 - 10 * k (last in
    // is first out), leaf rank k (so each leaf is FIFO by arrival)
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      ext_enq_valid = '0;
      ext_enq_valid[0] = 1'b1;
      ext_enq_valid[1] = 1'b1;
      ext_enq[1] = '{lpifo: lpifo_t'(1 + k % 2), rank: rank_t'(k), meta: meta_t'(k), flow: flow_t'(k % 4)};
      ext_enq[0] = '{lpifo: lpifo_t'(0), rank: rank_t'(100 - 10 * k), meta: meta_t'(1 + k % 2),
                     flow: flow_t'(8 + k)};
    end
    @(negedge clk);
    ext_enq_valid = '0;
    // the root hands out references k = 7, 6, ..., 0, that is classes
    // 2, 1, 2, 1, ...; each walk takes the head of that class's leaf, and
    // leaves are in arrival order, so the packets leave as below
    expect_q = '{1, 0, 3, 2, 5, 4, 7, 6};
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      ext_deq_valid[0] = 1'b1;
      ext_deq_lpifo[0] = lpifo_t'(0);
      #1;
      while (!ext_deq_ready[0]) begin
        @(negedge clk);
        #1;
      end
    end
    @(negedge clk);
    ext_deq_valid = '0;
    repeat (20) @(negedge clk);
    checks++;
    if (expect_q.size() != 0) begin
      failures++;
      $display("%0d packets never left", expect_q.size());
    end
    checks++;
    if (n_walk != 8 || drops[0] != 0 || drops[1] != 0) begin
      failures++;
      $display("walks=%0d drops=%0d/%0d", n_walk, drops[0], drops[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
