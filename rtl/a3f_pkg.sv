// a3f_pkg: sizes, the layer-job descriptor and shared types of the
// two-half fusion accelerator.
//
// Each half of the accelerator runs a list of layer jobs. A job is one
// matrix pass over a stream of pixels (a 1x1 convolution, or a KxK
// convolution laid out as im2col by the host): for every pixel it forms
// COLS outputs, each a sum over n_pass*ROWS inputs. A job can take part in a
// fuseLink, the cross-modal connection of the fusion network:
//   ROLE_PRODUCE  the job computes the fuseFilter of a link; its results go
//                 to the fuseLink buffer of the other half, not to this half.
//                 It is skipped when the link is pruned.
//   ROLE_CONSUME  the job adds the fuseLink buffer contents into its sums. It
//                 waits until the other half has produced the link, and
//                 ignores the buffer when the link is pruned.
// Array size 8x16 per half follows the paper's accelerator configuration;
// NLINKS = 8 follows the eight link weights w1..w8 of the fusion network.
// Buffer depths and field widths are this design's choice.
package a3f_pkg;

  localparam int unsigned ROWS_DEF       = 8;    // PE rows per half
  localparam int unsigned COLS_DEF       = 16;   // PE columns per half
  localparam int unsigned NLINKS_DEF     = 8;    // fuseLinks w1..w8
  localparam int unsigned IBUF_DEPTH_DEF = 1024; // input buffer words (ROWS values each)
  localparam int unsigned WBUF_DEPTH_DEF = 1024; // weight buffer words (ROWS values each)
  localparam int unsigned PSUM_DEPTH_DEF = 256;  // psum buffer words (COLS values each)
  localparam int unsigned FL_DEPTH_DEF   = 256;  // fuseLink buffer words (COLS values each)
  localparam int unsigned NJOBS_DEF      = 16;   // job table entries per half
  localparam int unsigned POOL_WIN       = 4;    // 2x2 pooling window, pixels in block order

  localparam int unsigned ADDR_W = 16;           // address fields of a job
  localparam int unsigned LINK_W = 3;            // link index width (NLINKS <= 8)

  typedef enum logic [1:0] {
    ROLE_NONE    = 2'd0,
    ROLE_PRODUCE = 2'd1,
    ROLE_CONSUME = 2'd2
  } link_role_e;

  typedef struct packed {
    logic [ADDR_W-1:0] n_pix;    // pixels streamed per pass (before pooling)
    logic [7:0]        n_pass;   // input-channel groups of ROWS (>= 1)
    logic [ADDR_W-1:0] in_base;  // input buffer: word in_base + pass*n_pix + pixel
    logic [ADDR_W-1:0] w_base;   // weight buffer: word w_base + pass*COLS + j
    logic [ADDR_W-1:0] out_base; // destination base address (see a3f_half)
    logic [ADDR_W-1:0] fl_base;  // fuseLink buffer base read by a consumer
    logic              relu_en;
    logic              pool_en;
    link_role_e        role;
    logic [LINK_W-1:0] link;
  } job_t;

  typedef enum logic [2:0] {
    S_IDLE  = 3'd0,
    S_FETCH = 3'd1,
    S_WAIT  = 3'd2,
    S_LOADW = 3'd3,
    S_STREAM= 3'd4,
    S_DRAIN = 3'd5,
    S_DONE  = 3'd6
  } ctrl_state_e;

endpackage
