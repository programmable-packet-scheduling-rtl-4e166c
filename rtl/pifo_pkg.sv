// pifo_pkg: widths, element and operation types shared by the PIFO mesh.
//
// The default sizes are the baseline PIFO block: 16-bit ranks, 32-bit
// element metadata, 256 logical PIFOs sharing 1024 flows, a rank store of
// 64K elements, and a mesh of five blocks. These numbers come from the
// published design. The field layout of the structs (and the next-hop
// table entry in particular) is this implementation's own choice.
package pifo_pkg;

  parameter int unsigned RANK_W   = 16;     // element rank
  parameter int unsigned META_W   = 32;     // element metadata
  parameter int unsigned N_LPIFO  = 256;    // logical PIFOs per block
  parameter int unsigned N_FLOWS  = 1024;   // flows per block
  parameter int unsigned RS_DEPTH = 65536;  // rank-store elements per block
  parameter int unsigned N_BLOCKS = 5;      // PIFO blocks in the mesh

  parameter int unsigned LP_W  = $clog2(N_LPIFO);   // 8
  parameter int unsigned FL_W  = $clog2(N_FLOWS);   // 10
  parameter int unsigned BLK_W = $clog2(N_BLOCKS);  // 3

  typedef logic [RANK_W-1:0] rank_t;
  typedef logic [META_W-1:0] meta_t;
  typedef logic [LP_W-1:0]   lpifo_t;
  typedef logic [FL_W-1:0]   flow_t;
  typedef logic [BLK_W-1:0]  blk_t;

  // Enqueue request: 8 + 16 + 32 + 10 = 66 wires, as counted for one mesh
  // link in the published design.
  typedef struct packed {
    lpifo_t lpifo;
    rank_t  rank;
    meta_t  meta;
    flow_t  flow;
  } enq_t;

  // Element as it sits in the flow scheduler / leaves a dequeue.
  typedef struct packed {
    lpifo_t lpifo;
    flow_t  flow;
    rank_t  rank;
    meta_t  meta;
    logic   shaping;   // belongs to a shaping PIFO (released on wall clock)
  } elem_t;

  // Post-dequeue operation taken from the next-hop lookup table.
  typedef enum logic [1:0] {
    NH_NONE     = 2'd0,   // drop the dequeued element (unconfigured entry)
    NH_TRANSMIT = 2'd1,   // element is a packet: send it out of the mesh
    NH_DEQUEUE  = 2'd2,   // element is a PIFO reference: dequeue the child
    NH_ENQUEUE  = 2'd3    // element was released by a shaping PIFO: enqueue it
  } nh_op_e;

  // One next-hop table entry. For NH_DEQUEUE the target logical PIFO is taken
  // from the element metadata when lp_from_meta is set (a reference), else
  // from lpifo. For NH_ENQUEUE the parent's rank is the low RANK_W bits of the
  // released element's metadata, and flow/meta give the reference enqueued.
  typedef struct packed {
    nh_op_e op;
    blk_t   blk;
    logic   lp_from_meta;
    lpifo_t lpifo;
    flow_t  flow;
    meta_t  meta;
  } nh_entry_t;

  // Operation sent over the mesh from one block to another.
  typedef struct packed {
    logic   is_enq;   // 1: enqueue (enq valid), 0: dequeue of lpifo
    blk_t   blk;      // target block
    enq_t   enq;
    lpifo_t lpifo;
  } mesh_op_t;

  // Packet handed to the link.
  typedef struct packed {
    blk_t   blk;
    lpifo_t lpifo;
    flow_t  flow;
    meta_t  meta;
  } tx_t;

endpackage
