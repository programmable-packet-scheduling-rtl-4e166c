// tb_rank_store: random pushes and pops on eight flows of a 32-entry rank
// store, checked against one queue per flow.
//
// A pop returns the flow's oldest element one cycle later; a pop of an empty
// flow in the same cycle as a push to it returns the pushed element; a push
// is only issued while the store is not full. The small depth makes the store
// fill up and forces addresses to be recycled through the free list many
// times. The full flag and the used count are checked every cycle.
module tb_rank_store;
  import pifo_pkg::*;

  localparam int DEPTH = 32;
  localparam int NCYC  = 20000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  push_valid, pop_valid, out_valid, full;
  flow_t push_flow, pop_flow;
  elem_t push_elem, out_elem;
  logic [$clog2(DEPTH+1)-1:0] used;

  rank_store #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  elem_t q [8][$];
  int    total = 0, seq = 0;
  logic  exp_v;
  elem_t exp_e;
  int    n_full = 0, n_bypass = 0, n_pops = 0;

  initial begin : watchdog
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pf, qf;
    logic will_push;
    push_valid = 0; pop_valid = 0; push_flow = '0; pop_flow = '0; push_elem = '0;
    exp_v = 0; exp_e = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < NCYC; cyc++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== exp_v || (exp_v && out_elem !== exp_e)) begin
        failures++;
        $display("cyc %0d: out_valid=%0b rank=%0d meta=%0d, expected %0b rank=%0d meta=%0d",
                 cyc, out_valid, out_elem.rank, out_elem.meta, exp_v, exp_e.rank, exp_e.meta);
      end
      checks++;
      if (full !== (total == DEPTH) || int'(used) != total) begin
        failures++;
        $display("cyc %0d: full=%0b used=%0d, model total=%0d", cyc, full, used, total);
      end
      if (total == DEPTH) n_full++;
      // ---- drive; bias towards pushing so the store fills up
      pf = $urandom_range(0, 7);
      qf = $urandom_range(0, 7);
      if ($urandom_range(0, 3) == 0) qf = pf;
      pop_valid  = ($urandom_range(0, 99) < ((cyc / 2000) % 2 == 0 ? 35 : 65));
      will_push  = ($urandom_range(0, 99) < 55);
      push_flow  = flow_t'(pf);
      pop_flow   = flow_t'(qf);
      push_elem  = '{lpifo: lpifo_t'(pf % 4), flow: flow_t'(pf),
                     rank: rank_t'($urandom), meta: meta_t'(seq), shaping: (pf == 7)};
      seq++;
      // model
      exp_v = 0;
      if (pop_valid && q[qf].size() != 0) begin
        exp_v = 1; exp_e = q[qf].pop_front(); total--; n_pops++;
        if (will_push && total + 1 == DEPTH) will_push = 0;  // full at issue time
      end else if (pop_valid && will_push && pf == qf) begin
        exp_v = 1; exp_e = push_elem; n_bypass++;
        will_push = 0;  // consumed by the bypass, but still drive it
        push_valid = 1;
      end
      if (exp_v && exp_e.meta == push_elem.meta) begin
        push_valid = 1;
      end else if (will_push && total < DEPTH) begin
        push_valid = 1; q[pf].push_back(push_elem); total++;
      end else begin
        push_valid = 0;
      end
    end
    @(negedge clk);
    push_valid = 0; pop_valid = 0;
    checks++;
    if (out_valid !== exp_v || (exp_v && out_elem !== exp_e)) failures++;
    $display("cycles_full=%0d bypasses=%0d pops=%0d", n_full, n_bypass, n_pops);
    if (n_full == 0 || n_bypass == 0) begin
      failures++;
      $display("a case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
