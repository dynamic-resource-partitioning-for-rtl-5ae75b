// mt_sa_pkg: types and constants shared by the multi-tenant systolic array.
//
// The array is split into vertical partitions (groups of adjacent columns). A
// partition is named by a small id (PID_W bits). A layer running on a partition
// is described by a job: where its weights sit in the load buffer, where its
// input vectors sit in the feed buffer, how many vectors to stream and where the
// results go in the drain buffer. Task assignment ranks layers by the MAC count
// Opr = M*N*C*R*S*H*W and needs the seven shape fields of each layer.
//
// The 128x128 array and up to eight partitions follow the evaluated
// configuration; the address widths and the 16-bit shape fields are this
// design's own choices.
package mt_sa_pkg;

  localparam int unsigned ADDR_W  = 16;  // width of every buffer address field in a job
  localparam int unsigned SHAPE_W = 16;  // width of one layer shape field
  localparam int unsigned OPR_W   = 7 * SHAPE_W;

  // Per-partition sequencer steps: 1 load, 2 feed, 3 drain.
  typedef enum logic [1:0] {
    PS_IDLE  = 2'd0,
    PS_LOAD  = 2'd1,
    PS_FEED  = 2'd2,
    PS_DRAIN = 2'd3
  } part_state_t;

  // One layer job on one partition.
  typedef struct packed {
    logic [ADDR_W-1:0] lb_base;  // load buffer row of the layer's weight row 0
    logic [ADDR_W-1:0] fb_base;  // feed buffer address of the first input vector
    logic [ADDR_W-1:0] n_vec;    // number of input vectors to stream (>= 1)
    logic [ADDR_W-1:0] db_base;  // drain buffer address of the first result
  } job_t;

  // Layer shape, the seven factors of Opr(l) = M*N*C*R*S*H*W.
  typedef struct packed {
    logic [SHAPE_W-1:0] m;
    logic [SHAPE_W-1:0] n;
    logic [SHAPE_W-1:0] c;
    logic [SHAPE_W-1:0] r;
    logic [SHAPE_W-1:0] s;
    logic [SHAPE_W-1:0] h;
    logic [SHAPE_W-1:0] w;
  } layer_shape_t;

endpackage
