// synetgy_pkg: types and constants shared by the Synetgy accelerator.
//
// The accelerator computes one 1x1-convolution -> conversion -> 2x2 max-pool
// -> shift -> shuffle subgraph of a 4-bit quantized network per invocation.
// Every stage exchanges vectors of 32 channels (IC or OC lanes) of 4-bit
// activations over valid/ready streams.
//
// From the paper: IC = OC = 32 (channel parallelism), 4-bit weights and
// activations, 17-bit partial sums.  This design's own choices: activations
// are unsigned (PACT clips them to [0, s]), weights are two's complement
// (DoReFa weights lie in [-1, 1]), partial sums are signed, and one DRAM word
// holds exactly one 32-channel vector (128 bits).
package synetgy_pkg;

  localparam int unsigned IC      = 32;  // input-channel parallelism
  localparam int unsigned OC      = 32;  // output-channel parallelism
  localparam int unsigned ACT_W   = 4;   // activation bits
  localparam int unsigned WGT_W   = 4;   // weight bits
  localparam int unsigned PSUM_W  = 17;  // partial-sum bits
  localparam int unsigned NTHR    = 15;  // thresholds of the 16-interval step function
  localparam int unsigned WORD_W  = IC * ACT_W;  // one DRAM word = one channel vector
  localparam int unsigned ADDR_W  = 32;  // word address into DRAM
  localparam int unsigned DIM_W   = 9;   // width / height field (up to 511)
  localparam int unsigned GRP_W   = 6;   // channel-group count field (up to 63 groups)

  typedef logic [ACT_W-1:0]            act_t;
  typedef logic signed [WGT_W-1:0]     wgt_t;
  typedef logic signed [PSUM_W-1:0]    psum_t;
  typedef logic [IC-1:0][ACT_W-1:0]    act_vec_t;   // IC activations
  typedef logic [OC-1:0][ACT_W-1:0]    out_vec_t;   // OC activations
  typedef logic [OC-1:0][PSUM_W-1:0]   psum_vec_t;  // OC partial sums
  typedef logic [IC-1:0][WGT_W-1:0]    wgt_row_t;   // IC weights of one output channel
  typedef logic [OC-1:0][IC-1:0][WGT_W-1:0] wgt_blk_t; // OC x IC weight block
  typedef logic [WORD_W-1:0]           word_t;
  typedef logic [ADDR_W-1:0]           addr_t;
  typedef logic [DIM_W-1:0]            dim_t;
  typedef logic [GRP_W-1:0]            grp_t;

  // Shift directions of the shift operator (identity plus 4 cardinal ones).
  typedef enum logic [2:0] {
    SH_ID    = 3'd0,
    SH_UP    = 3'd1,  // output (x,y) takes input (x, y-1)
    SH_DOWN  = 3'd2,  // output (x,y) takes input (x, y+1)
    SH_LEFT  = 3'd3,  // output (x,y) takes input (x-1, y)
    SH_RIGHT = 3'd4   // output (x,y) takes input (x+1, y)
  } shift_dir_e;

  // Direction of channel c: c mod 5.
  function automatic shift_dir_e shift_dir_of(input int unsigned c);
    return shift_dir_e'(3'(c % 5));
  endfunction

  // Per-invocation layer configuration, written by the host into the
  // controller's registers.
  typedef struct packed {
    dim_t  width;          // input feature-map width
    dim_t  height;         // input feature-map height
    grp_t  ic_grp;         // IC_TOTAL / IC
    grp_t  oc_grp;         // OC_TOTAL / OC
    logic  pool_en;        // 2x2 max-pooling on
    logic  shift_en;       // shift on
    logic [5:0] thr_set;   // threshold set used by the conversion unit
    grp_t  out_grp_total;  // channel groups of a pixel in the output tensor
    grp_t  shuffle_off;    // circular channel-group offset of the writeback
    addr_t in_base;        // word address of input image 0
    addr_t w_base;         // word address of the weights
    addr_t out_base;       // word address of output image 0
    logic [7:0] batch;     // images per invocation
  } layer_cfg_t;

endpackage
