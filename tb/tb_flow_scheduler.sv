// tb_flow_scheduler: random test of the flow scheduler against a sorted-list
// model.
//
// Each cycle it may issue an insert, a reinsert and a pop (by logical PIFO,
// or a shaping pop of the earliest element whose rank is <= now). The model
// is an ordered list: a pop issued in cycle t takes the first matching element
// among those pushed up to cycle t-1, then the pushes of cycle t are placed
// after every element of equal or lower rank (reinsert before insert). The
// element's metadata is a unique sequence number, so tie order is checked
// too. The pop result must appear exactly one cycle after the pop. Pops that
// could match the same element are kept two cycles apart, as the block does.
module tb_flow_scheduler;
  import pifo_pkg::*;

  localparam int N     = 16;
  localparam int NCYC  = 20000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   ins_valid, rei_valid, pop_valid, pop_shaping;
  elem_t  ins_elem, rei_elem;
  lpifo_t pop_lpifo;
  rank_t  now;
  logic   deq_valid, deq_found;
  elem_t  deq_elem;
  logic [$clog2(N+1)-1:0] occupancy;

  flow_scheduler #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  elem_t model [$];
  logic  exp_v, exp_found;
  elem_t exp_e;
  int    seq = 0;
  int    n_ties = 0, n_two = 0, n_sh = 0, n_empty = 0;

  function automatic elem_t rnd_elem();
    elem_t e;
    // logical PIFO 3 is the shaping one, 0..2 are scheduling PIFOs
    e.shaping = ($urandom_range(0, 3) == 0);
    e.lpifo   = e.shaping ? lpifo_t'(3) : lpifo_t'($urandom_range(0, 2));
    e.flow    = flow_t'($urandom_range(0, 1023));
    e.rank    = rank_t'($urandom_range(0, 15)) + now;
    e.meta    = meta_t'(seq);
    seq++;
    return e;
  endfunction

  task automatic model_insert(input elem_t e);
    int pos = model.size();
    for (int i = 0; i < model.size(); i++)
      if (model[i].rank > e.rank) begin pos = i; break; end
    foreach (model[i]) if (model[i].rank == e.rank) n_ties++;
    model.insert(pos, e);
  endtask

  initial begin : watchdog
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic  last_pop, last_sh;
    lpifo_t last_lp;
    int    inflight;
    ins_valid = 0; rei_valid = 0; pop_valid = 0; pop_shaping = 0;
    ins_elem = '0; rei_elem = '0; pop_lpifo = '0; now = '0;
    exp_v = 0; exp_found = 0; exp_e = '0;
    last_pop = 0; last_sh = 0; last_lp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < NCYC; cyc++) begin
      @(negedge clk);
      // ---- check the pop issued last cycle
      checks++;
      if (deq_valid !== exp_v) begin
        failures++;
        $display("cyc %0d: deq_valid %0b expected %0b", cyc, deq_valid, exp_v);
      end else if (exp_v) begin
        if (deq_found !== exp_found ||
            (exp_found && deq_elem !== exp_e)) begin
          failures++;
          $display("cyc %0d: got found=%0b rank=%0d meta=%0d, expected found=%0b rank=%0d meta=%0d",
                   cyc, deq_found, deq_elem.rank, deq_elem.meta, exp_found, exp_e.rank, exp_e.meta);
        end
      end
      // ---- drive this cycle
      inflight = model.size();
      now = now + rank_t'($urandom_range(0, 1));
      pop_valid   = ($urandom_range(0, 99) < 55);
      pop_shaping = pop_valid && ($urandom_range(0, 4) == 0);
      pop_lpifo   = lpifo_t'($urandom_range(0, 2));
      if (pop_valid && !pop_shaping && last_pop && !last_sh && pop_lpifo == last_lp) pop_valid = 0;
      if (pop_valid && pop_shaping && last_pop && last_sh) pop_valid = 0;
      // keep at least two entries free
      ins_valid = (inflight < N - 2) && ($urandom_range(0, 99) < 50);
      rei_valid = (inflight < N - 3) && ($urandom_range(0, 99) < 40);
      ins_elem  = rnd_elem();
      rei_elem  = rnd_elem();
      if (ins_valid && rei_valid) begin
        n_two++;
        if ($urandom_range(0, 3) == 0) ins_elem.rank = rei_elem.rank;  // tie between the two
      end
      // ---- model
      exp_v = pop_valid;
      exp_found = 0;
      if (pop_valid) begin
        for (int i = 0; i < model.size(); i++) begin
          if (pop_shaping ? (model[i].shaping && model[i].rank <= now)
                          : (model[i].lpifo == pop_lpifo)) begin
            exp_found = 1; exp_e = model[i]; model.delete(i); break;
          end
        end
        if (pop_shaping && exp_found) n_sh++;
        if (!exp_found) n_empty++;
      end
      if (rei_valid) model_insert(rei_elem);
      if (ins_valid) model_insert(ins_elem);
      last_pop = pop_valid; last_sh = pop_shaping; last_lp = pop_lpifo;
    end
    @(negedge clk);
    ins_valid = 0; rei_valid = 0; pop_valid = 0;
    checks++;
    if (deq_valid !== exp_v || (exp_v && (deq_found !== exp_found ||
        (exp_found && deq_elem !== exp_e)))) failures++;
    repeat (2) @(negedge clk);
    checks++;
    if (int'(occupancy) != model.size()) begin
      failures++;
      $display("occupancy %0d expected %0d", occupancy, model.size());
    end
    $display("ties=%0d double_push=%0d shaping_pops=%0d empty_pops=%0d", n_ties, n_two, n_sh, n_empty);
    if (n_ties == 0 || n_two == 0 || n_sh == 0 || n_empty == 0) begin
      failures++;
      $display("a case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
