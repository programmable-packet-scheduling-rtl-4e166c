// flow_scheduler: the sorting core of a PIFO block.
//
// Holds one element per backlogged flow (the flow's head) in a flip-flop
// array kept sorted by rank, lowest first, ties in arrival order. Elements
// of all logical PIFOs of the block share the one array. Each cycle it takes
// up to two pushes and one pop:
//   ins  - a flow going from empty to non-empty (enqueue side),
//   rei  - a flow's next element after its head was popped (reinsert),
//   pop  - remove the first element of logical PIFO pop_lpifo, or, with
//          pop_shaping set, the first shaping element whose rank (a wall-clock
//          release time) is <= now.
//
// Two-stage pipeline, as in the published design:
//   stage 1: compare the request against every entry in parallel (rank <= r
//            for a push, logical-PIFO equality for a pop) and priority-encode
//            the bit mask into an index;
//   stage 2: shift the array to insert/remove at those indices.
// Stage 1 looks at the array before the operation in stage 2 has been
// written back. Stage 2 therefore corrects the indices from stage 1 with the
// effect of the operation written back in the previous cycle: a push index is
// a count of entries with rank <= r, so it moves by one for each element that
// operation removed or added below r; a pop picks, among the stale first match
// and the elements just inserted that match, the one at the lowest position.
// This correction logic is this design's own; the published design only says
// that the two stages are pipelined.
//
// Timing: a pop issued in cycle t returns its element (deq_valid, deq_found,
// deq_elem) combinationally in cycle t+1. A push issued in cycle t is written
// at the end of t+1 and is visible to pops issued from cycle t+1 on, but not
// to a pop issued in the same cycle t. Two pops that match the same element
// must be at least two cycles apart (the block keeps same-logical-PIFO pops
// three cycles apart, as the published design does); this is asserted.
// The array cannot overflow while each flow holds at most one entry and
// there are no more flows than entries; this is asserted too. Reset is
// synchronous and active low and empties the array.
module flow_scheduler
  import pifo_pkg::*;
#(
  parameter int unsigned N = N_FLOWS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   ins_valid,
  input  elem_t  ins_elem,
  input  logic   rei_valid,
  input  elem_t  rei_elem,
  input  logic   pop_valid,
  input  logic   pop_shaping,
  input  lpifo_t pop_lpifo,
  input  rank_t  now,
  output logic   deq_valid,   // a pop finished this cycle
  output logic   deq_found,   // ... and its logical PIFO held an element
  output elem_t  deq_elem,
  output logic [$clog2(N+1)-1:0] occupancy
);

  localparam int unsigned IW = $clog2(N+1);
  typedef logic [IW-1:0] idx_t;

  elem_t arr [N];
  idx_t  n;

  // ------------------------------------------------------------------
  // Stage 1: parallel compare + priority encode on the current array.
  // ------------------------------------------------------------------
  idx_t  c_ins, c_rei, h_idx;
  logic  h_found;
  elem_t h_elem;

  always_comb begin
    c_ins   = idx_t'(n);
    c_rei   = idx_t'(n);
    h_idx   = '0;
    h_found = 1'b0;
    // scan from the top so the lowest index wins
    for (int i = N - 1; i >= 0; i--) begin
      if (idx_t'(i) < n) begin
        if (!(arr[i].rank <= ins_elem.rank)) c_ins = idx_t'(i);
        if (!(arr[i].rank <= rei_elem.rank)) c_rei = idx_t'(i);
        if (pop_shaping ? (arr[i].shaping && arr[i].rank <= now)
                        : (arr[i].lpifo == pop_lpifo)) begin
          h_idx   = idx_t'(i);
          h_found = 1'b1;
        end
      end
    end
    h_elem = arr[h_idx[$clog2(N)-1:0]];
  end

  // stage-1 -> stage-2 registers
  typedef struct packed {
    logic   v;
    elem_t  e;
    idx_t   c;
  } push_s;

  typedef struct packed {
    logic   v;
    logic   shaping;
    lpifo_t lpifo;
    rank_t  now;
    logic   found;
    idx_t   idx;
    elem_t  e;
  } pop_s;

  push_s s2_ins, s2_rei;
  pop_s  s2_pop;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2_ins <= '0;
      s2_rei <= '0;
      s2_pop <= '0;
    end else begin
      s2_ins <= '{v: ins_valid, e: ins_elem, c: c_ins};
      s2_rei <= '{v: rei_valid, e: rei_elem, c: c_rei};
      s2_pop <= '{v: pop_valid, shaping: pop_shaping, lpifo: pop_lpifo, now: now,
                  found: h_found, idx: h_idx, e: h_elem};
    end
  end

  // What the operation written back last cycle did (for the correction).
  logic  p_pop;  idx_t p_q;  rank_t p_rank;
  logic  p_a;    idx_t p_fa; elem_t p_ea;
  logic  p_b;    idx_t p_fb; elem_t p_eb;

  // ------------------------------------------------------------------
  // Stage 2: correct indices, pick the pop, shift the array.
  // ------------------------------------------------------------------
  function automatic logic pop_match(input elem_t e, input pop_s p);
    return p.shaping ? (e.shaping && e.rank <= p.now) : (e.lpifo == p.lpifo);
  endfunction

  function automatic int corr(input idx_t c, input rank_t r,
                              input logic pp, input rank_t prk,
                              input logic pa, input rank_t ra,
                              input logic pb, input rank_t rb);
    int k;
    k = int'(c);
    if (pp && prk <= r) k--;
    if (pa && ra  <= r) k++;
    if (pb && rb  <= r) k++;
    return k;
  endfunction

  logic  pop_do;
  int    pp_pos;
  elem_t pop_e;
  int    ca, cb, f1, f2;
  logic  has1, has2;
  elem_t x1, x2;
  int    fa_new, fb_new;
  int    n_new;

  always_comb begin
    int sp;
    int ka, kb;
    sp = 0;
    // ---- pop: choose the lowest-position matching candidate in the array
    pop_do = 1'b0;
    pp_pos = 0;
    pop_e  = s2_pop.e;
    if (s2_pop.v) begin
      if (s2_pop.found) begin
        sp = int'(s2_pop.idx);
        if (p_pop && p_q < s2_pop.idx) sp--;
        if (p_a && p_ea.rank < s2_pop.e.rank) sp++;
        if (p_b && p_eb.rank < s2_pop.e.rank) sp++;
        pop_do = 1'b1;
        pp_pos = sp;
        pop_e  = s2_pop.e;
      end
      if (p_a && pop_match(p_ea, s2_pop) && (!pop_do || int'(p_fa) < pp_pos)) begin
        pop_do = 1'b1;
        pp_pos = int'(p_fa);
        pop_e  = p_ea;
      end
      if (p_b && pop_match(p_eb, s2_pop) && (!pop_do || int'(p_fb) < pp_pos)) begin
        pop_do = 1'b1;
        pp_pos = int'(p_fb);
        pop_e  = p_eb;
      end
    end

    // ---- pushes: correct for last cycle's write-back, then for this pop
    ka = corr(s2_ins.c, s2_ins.e.rank, p_pop, p_rank, p_a, p_ea.rank, p_b, p_eb.rank);
    kb = corr(s2_rei.c, s2_rei.e.rank, p_pop, p_rank, p_a, p_ea.rank, p_b, p_eb.rank);
    if (pop_do && pop_e.rank <= s2_ins.e.rank) ka--;
    if (pop_do && pop_e.rank <= s2_rei.e.rank) kb--;
    ca = ka;
    cb = kb;

    // order the two inserts; on equal rank the reinsert (older) goes first
    has1 = 1'b0; has2 = 1'b0; x1 = s2_rei.e; x2 = s2_ins.e; f1 = 0; f2 = 0;
    fa_new = 0; fb_new = 0;
    if (s2_ins.v && s2_rei.v) begin
      has1 = 1'b1; has2 = 1'b1;
      if (s2_rei.e.rank <= s2_ins.e.rank) begin
        x1 = s2_rei.e; f1 = cb;     x2 = s2_ins.e; f2 = ca + 1;
        fb_new = f1; fa_new = f2;
      end else begin
        x1 = s2_ins.e; f1 = ca;     x2 = s2_rei.e; f2 = cb + 1;
        fa_new = f1; fb_new = f2;
      end
    end else if (s2_ins.v) begin
      has1 = 1'b1; x1 = s2_ins.e; f1 = ca; fa_new = ca;
    end else if (s2_rei.v) begin
      has1 = 1'b1; x1 = s2_rei.e; f1 = cb; fb_new = cb;
    end

    n_new = int'(n) - int'(pop_do) + int'(s2_ins.v) + int'(s2_rei.v);
  end

  // new array: entry i takes an insert, or old entry i-2 .. i+1
  elem_t arr_nx [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      int j, k;
      j = i - ((has1 && i > f1) ? 1 : 0) - ((has2 && i > f2) ? 1 : 0);
      k = j + ((pop_do && j >= pp_pos) ? 1 : 0);
      if (has1 && i == f1)      arr_nx[i] = x1;
      else if (has2 && i == f2) arr_nx[i] = x2;
      else begin
        unique case (k - i)
          -2:      arr_nx[i] = (i >= 2)    ? arr[(i >= 2) ? i - 2 : 0] : arr[i];
          -1:      arr_nx[i] = (i >= 1)    ? arr[(i >= 1) ? i - 1 : 0] : arr[i];
          1:       arr_nx[i] = (i + 1 < N) ? arr[(i + 1 < N) ? i + 1 : i] : arr[i];
          default: arr_nx[i] = arr[i];
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n      <= '0;
      p_pop  <= 1'b0; p_q  <= '0; p_rank <= '0;
      p_a    <= 1'b0; p_fa <= '0; p_ea   <= '0;
      p_b    <= 1'b0; p_fb <= '0; p_eb   <= '0;
    end else begin
      n      <= idx_t'(n_new);
      p_pop  <= pop_do;     p_q  <= idx_t'(pp_pos); p_rank <= pop_e.rank;
      p_a    <= s2_ins.v;   p_fa <= idx_t'(fa_new); p_ea   <= s2_ins.e;
      p_b    <= s2_rei.v;   p_fb <= idx_t'(fb_new); p_eb   <= s2_rei.e;
    end
  end

  // the entries themselves need no reset: only the first n are ever read
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) arr[i] <= arr_nx[i];
  end

  assign deq_valid = s2_pop.v;
  assign deq_found = pop_do;
  assign deq_elem  = pop_e;
  assign occupancy = n;

  // a pop must not find the element the previous cycle's pop removed
  a_pop_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    !(s2_pop.v && s2_pop.found && p_pop && p_q == s2_pop.idx));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    n_new <= int'(N));

endmodule
