// rank_store: a bank of per-flow FIFOs in one shared element memory.
//
// Holds the elements of each flow that wait behind the flow's head (the head
// itself lives in the flow scheduler). Storage is allocated dynamically, as
// in the published design: one element memory (rank + metadata, 48 bits at
// the defaults), one next-pointer memory and one free-list memory, each
// DEPTH deep, plus head, tail and count registers per flow. Each flow is a
// linked list through the next-pointer memory. The logical PIFO and shaping
// flag of a flow are kept per flow (all elements of a flow are assumed to go
// to the same logical PIFO).
//
// The free list starts empty: addresses are handed out from a counter until
// every address has been used once, and from the free-list FIFO after that,
// so no initialisation pass over the memories is needed. This, the memories
// being read combinationally (a register-file style array; an SRAM macro
// with a registered output gives the same one-cycle latency), and the
// bypass below are this implementation's choices.
//
// Interface and timing (one push and one pop per cycle):
//   push_valid/push_flow/push_elem  append to a flow's FIFO (ignored when
//                                   full is high; the caller must check).
//   pop_valid/pop_flow              remove the oldest element of the flow.
//   out_valid/out_elem              one cycle after a pop, if the flow had an
//                                   element. A pop of an empty flow in the
//                                   same cycle as a push to it returns the
//                                   pushed element without storing it.
// Reset is synchronous and active low.
module rank_store
  import pifo_pkg::*;
#(
  parameter int unsigned DEPTH  = RS_DEPTH
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  input  flow_t  push_flow,
  input  elem_t  push_elem,
  input  logic   pop_valid,
  input  flow_t  pop_flow,
  output logic   out_valid,
  output elem_t  out_elem,
  output logic   full,
  output logic [$clog2(DEPTH+1)-1:0] used
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);
  typedef logic [AW-1:0] addr_t;
  typedef logic [CW-1:0] cnt_t;

  typedef struct packed {
    rank_t rank;
    meta_t meta;
  } word_t;

  typedef struct packed {
    lpifo_t lpifo;
    logic   shaping;
  } fattr_t;

  // memories
  word_t  data_mem [DEPTH];
  addr_t  next_mem [DEPTH];
  addr_t  free_mem [DEPTH];
  // per-flow state
  addr_t  head [N_FLOWS];
  addr_t  tail [N_FLOWS];
  cnt_t   cnt  [N_FLOWS];
  fattr_t attr [N_FLOWS];

  // allocator
  cnt_t  fresh;          // addresses [fresh, DEPTH) never used yet
  addr_t fl_rd, fl_wr;   // free-list FIFO pointers
  cnt_t  fl_cnt;
  cnt_t  n_used;

  logic  fl_fb_push, fl_fb_pop;
  flow_t fpush, fpop;
  assign fpush = push_flow;
  assign fpop  = pop_flow;

  logic  pop_has, bypass, do_push, do_pop;
  addr_t alloc, h;
  assign full    = (n_used == cnt_t'(DEPTH));
  assign pop_has = pop_valid && (cnt[fpop] != '0);
  assign bypass  = pop_valid && !pop_has && push_valid && (fpush == fpop);
  assign do_push = push_valid && !full && !bypass;
  assign do_pop  = pop_has;
  assign h       = head[fpop];
  assign alloc   = (fresh != cnt_t'(DEPTH)) ? addr_t'(fresh) : free_mem[fl_rd];
  assign fl_fb_pop  = do_push && (fresh == cnt_t'(DEPTH));
  assign fl_fb_push = do_pop;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_elem  <= '0;
      fresh     <= '0;
      fl_rd     <= '0;
      fl_wr     <= '0;
      fl_cnt    <= '0;
      n_used    <= '0;
      for (int f = 0; f < N_FLOWS; f++) cnt[f] <= '0;
    end else begin
      // ---- output (one-cycle read latency)
      out_valid <= do_pop || bypass;
      if (bypass)
        out_elem <= push_elem;
      else if (do_pop)
        out_elem <= '{lpifo: attr[fpop].lpifo, flow: fpop,
                      rank: data_mem[h].rank, meta: data_mem[h].meta,
                      shaping: attr[fpop].shaping};

      // ---- allocator
      if (do_push && fresh != cnt_t'(DEPTH)) fresh <= fresh + 1'b1;
      if (fl_fb_pop)  fl_rd <= fl_rd + 1'b1;
      if (fl_fb_push) fl_wr <= fl_wr + 1'b1;
      fl_cnt <= fl_cnt + cnt_t'(fl_fb_push) - cnt_t'(fl_fb_pop);
      n_used <= n_used + cnt_t'(do_push) - cnt_t'(do_pop);

      // ---- per-flow counts
      if (do_push && do_pop && fpush == fpop) begin
        // count unchanged
      end else begin
        if (do_push) cnt[fpush] <= cnt[fpush] + 1'b1;
        if (do_pop)  cnt[fpop]  <= cnt[fpop]  - 1'b1;
      end

      // ---- pop: advance the head
      if (do_pop) begin
        if (do_push && fpush == fpop && cnt[fpop] == cnt_t'(1))
          head[fpop] <= alloc;            // next element is the one arriving now
        else
          head[fpop] <= next_mem[h];
      end

      // ---- push: link at the tail
      if (do_push) begin
        data_mem[alloc] <= '{rank: push_elem.rank, meta: push_elem.meta};
        attr[fpush]     <= '{lpifo: push_elem.lpifo, shaping: push_elem.shaping};
        tail[fpush]     <= alloc;
        if (cnt[fpush] == '0)
          head[fpush] <= alloc;
        else
          next_mem[tail[fpush]] <= alloc;
      end

      if (fl_fb_push) free_mem[fl_wr] <= h;
    end
  end

  assign used = n_used;

  a_push_not_full: assert property (@(posedge clk) disable iff (!rst_n)
    !(push_valid && full && !bypass));
  a_free_list_sane: assert property (@(posedge clk) disable iff (!rst_n)
    !(fl_fb_pop && fl_cnt == '0));

endmodule
