// meloppr_pkg: shared widths, default sizes and stream word formats of the
// MeLoPPR graph-diffusion accelerator.
//
// Scores are unsigned 32-bit integers: the seed node starts with a large
// integer Max and every later score is an integer fraction of it. The decay
// factor alpha is the 16-bit integer alpha_p over 2^Q (Q = 10), so dividing
// by 2^Q is a shift. These widths and Q, P = 16 processing elements and a
// global table of c*k = 10*200 entries follow the paper. The per-PE table
// depths are this design's choice (sized so that 16 PEs use about the share
// of KC705 block RAM the paper reports); the host stream format is this
// design's own.
package meloppr_pkg;

  localparam int unsigned SCORE_W   = 32;   // score word
  localparam int unsigned ALPHA_W   = 16;   // alpha_p
  localparam int unsigned Q_SHIFT   = 10;   // alpha = alpha_p / 2^Q
  localparam int unsigned COEF_W    = Q_SHIFT + 1; // coefficients in [0, 2^Q]
  localparam int unsigned GID_W     = 32;   // global node id
  localparam int unsigned DEPTH_W   = 4;    // diffusion depth l

  localparam int unsigned DEF_P         = 16;    // PEs
  localparam int unsigned DEF_NODES_PE  = 2048;  // nodes per PE
  localparam int unsigned DEF_EDGES_PE  = 8192;  // neighbour-list entries per PE
  localparam int unsigned DEF_C         = 10;
  localparam int unsigned DEF_K         = 200;

  // Host -> accelerator command word
  typedef enum logic [2:0] {
    OP_CFG   = 3'd0,  // a[15:0] alpha_p, a[19:16] depth, a[20] final stage, a[21] emit residuals
    OP_NODE  = 3'd1,  // a = global id, b = number of neighbour words that follow
    OP_NBR   = 3'd2,  // a = local id of one neighbour
    OP_SEED  = 3'd3,  // a = local id, b = initial score
    OP_RUN   = 3'd4,  // diffuse the loaded sub-graph and aggregate into the global table
    OP_CLEAR = 3'd5,  // empty the global score table (new query)
    OP_TOPK  = 3'd6   // send the top-k nodes of the global table
  } op_e;

  typedef struct packed {
    op_e               op;
    logic [31:0]       a;
    logic [31:0]       b;
  } host_word_t;

  // Accelerator -> host word
  typedef enum logic [1:0] {
    TAG_RES  = 2'd0,  // next-stage candidate: a = global id, b = alpha^l * residual
    TAG_TOPK = 2'd1,  // result: a = global id, b = score
    TAG_DONE = 2'd2   // end of a RUN / CLEAR / TOPK; a = op that finished
  } tag_e;

  typedef struct packed {
    tag_e              tag;
    logic [31:0]       a;
    logic [31:0]       b;
  } out_word_t;

  // (score * coef) >> Q, coef <= 2^Q so the result never exceeds score
  function automatic logic [SCORE_W-1:0] scale(input logic [SCORE_W-1:0] s,
                                               input logic [COEF_W-1:0] c);
    logic [SCORE_W+COEF_W-1:0] p;
    p = (SCORE_W+COEF_W)'(s) * (SCORE_W+COEF_W)'(c);
    return SCORE_W'(p >> Q_SHIFT);
  endfunction

endpackage
