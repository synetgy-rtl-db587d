// synetgy_top: the Synetgy accelerator for 4-bit 1x1-convolution networks.
//
// One invocation computes one 1x1 Conv -> conversion -> 2x2 max-pool -> shift
// -> shuffle subgraph over a batch of images held in DRAM.  The stages are
// separate process units that run concurrently and are chained by FIFOs
// (blocking read, write blocking when full):
//
//   DRAM --fmap_loader--> [fifo] --conv_unit (32x32 MACs, weight_buf)-->
//   [fifo] --conversion_unit--> [fifo] --pool_unit--> [fifo] --shift_unit-->
//   [fifo = out_fmap_stream] --shuffle_unit--> DRAM
//
// Before the run the weight_loader prefetches the layer's weights into
// weight_buf.  Pooling and shift can each be bypassed; the shuffle is a
// circular channel-group offset on the writeback address.  The controller
// holds the host-visible registers and sequences the two phases.
//
// Interfaces: a host register bus (see controller), two DRAM read ports
// (feature maps and weights, each a request channel and an in-order response
// channel with valid/ready) and one DRAM write port.  One DRAM word is one
// 32-channel vector of 4-bit values (128 bits).  The DRAM itself, the host
// processor, the shuffle's concatenation copy and average pooling are outside
// this block.
// Timing: after the weight phase (one DRAM word per cycle when not stalled)
// the pipeline consumes one 32x32 weight block per cycle, i.e. the run takes
// about batch*width*height*ic_grp*oc_grp cycles plus the pipeline fill.
// Follows the paper: the unit chain, the FIFO coupling, 32x32 parallelism,
// 4-bit data with 17-bit partial sums, threshold conversion, the line-buffer
// pooling and shift, shuffle by address offset.  This design's choices: the
// memory ports (plain request/response rather than AXI), the register map,
// the buffer and FIFO depths (parameters), and one block per cycle where the
// original HLS build needed several.
// Lint notes: the batch field of cfg is read only inside the controller, so
// the copy here leaves those bits unused; rst_n is both the asynchronous
// reset and the disable condition of the handshake assertions, which lint
// reports as a net used synchronously and asynchronously.
module synetgy_top
  import synetgy_pkg::*;
#(
  parameter int unsigned WBUF_DEPTH = 512,
  parameter int unsigned NSETS      = 64,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned MAX_ICG    = 32,
  parameter int unsigned POOL_LB    = 256,
  parameter int unsigned SHIFT_BUF  = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register bus
  input  logic        reg_we,
  input  logic        reg_re,
  input  logic [3:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        busy,
  output logic        done,
  // DRAM read port: feature maps
  output logic        fm_req_valid,
  input  logic        fm_req_ready,
  output addr_t       fm_req_addr,
  input  logic        fm_rsp_valid,
  output logic        fm_rsp_ready,
  input  word_t       fm_rsp_data,
  // DRAM read port: weights
  output logic        wt_req_valid,
  input  logic        wt_req_ready,
  output addr_t       wt_req_addr,
  input  logic        wt_rsp_valid,
  output logic        wt_rsp_ready,
  input  word_t       wt_rsp_data,
  // DRAM write port: output feature maps
  output logic        wr_valid,
  input  logic        wr_ready,
  output addr_t       wr_addr,
  output word_t       wr_data
);
  localparam int unsigned WEA = $clog2(WBUF_DEPTH);

  layer_cfg_t  cfg;
  logic        thr_we;
  logic [5:0]  thr_wset;
  logic [3:0]  thr_widx;
  psum_t       thr_wdata;
  logic        wload_start, wload_busy, run_start;
  logic [31:0] wload_words, in_words, wr_count;

  controller u_ctrl (
    .clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata,
    .cfg, .thr_we, .thr_wset, .thr_widx, .thr_wdata,
    .wload_start, .wload_words, .wload_busy, .run_start, .in_words, .wr_count,
    .busy, .done
  );

  // ---------------- weights ----------------
  logic           wb_en, w_re;
  logic [WEA-1:0] wb_entry, w_entry;
  logic [$clog2(OC)-1:0] wb_lane;
  wgt_row_t       wb_data;
  wgt_blk_t       w_data;

  weight_loader #(.WBUF_DEPTH(WBUF_DEPTH)) u_wload (
    .clk, .rst_n, .start(wload_start), .w_base(cfg.w_base), .n_words(wload_words),
    .busy(wload_busy),
    .rd_req_valid(wt_req_valid), .rd_req_ready(wt_req_ready), .rd_req_addr(wt_req_addr),
    .rd_rsp_valid(wt_rsp_valid), .rd_rsp_ready(wt_rsp_ready), .rd_rsp_data(wt_rsp_data),
    .wb_en, .wb_entry, .wb_lane, .wb_data
  );

  weight_buf #(.DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk, .w_en(wb_en), .w_entry(wb_entry), .w_lane(wb_lane), .w_data(wb_data),
    .r_en(w_re), .r_entry(w_entry), .r_data(w_data)
  );

  // ---------------- in_fmap_stream ----------------
  logic     ld_valid, ld_ready, cv_in_valid, cv_in_ready;
  act_vec_t ld_data, cv_in_data;

  fmap_loader #(.MAX_ICG(MAX_ICG)) u_load (
    .clk, .rst_n, .start(run_start), .in_base(cfg.in_base), .n_words(in_words),
    .ic_grp(cfg.ic_grp), .oc_grp(cfg.oc_grp),
    .rd_req_valid(fm_req_valid), .rd_req_ready(fm_req_ready), .rd_req_addr(fm_req_addr),
    .rd_rsp_valid(fm_rsp_valid), .rd_rsp_ready(fm_rsp_ready), .rd_rsp_data(fm_rsp_data),
    .out_valid(ld_valid), .out_ready(ld_ready), .out_data(ld_data)
  );

  stream_fifo #(.WIDTH($bits(act_vec_t)), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .in_valid(ld_valid), .in_ready(ld_ready), .in_data(ld_data),
    .out_valid(cv_in_valid), .out_ready(cv_in_ready), .out_data(cv_in_data)
  );

  // ---------------- convolution ----------------
  logic      cv_valid, cv_ready, cq_valid, cq_ready;
  psum_vec_t cv_data, cq_data;

  conv_unit #(.WBUF_DEPTH(WBUF_DEPTH)) u_conv (
    .clk, .rst_n, .start(run_start), .ic_grp(cfg.ic_grp), .oc_grp(cfg.oc_grp),
    .in_valid(cv_in_valid), .in_ready(cv_in_ready), .in_data(cv_in_data),
    .w_re, .w_entry, .w_data,
    .out_valid(cv_valid), .out_ready(cv_ready), .out_data(cv_data)
  );

  stream_fifo #(.WIDTH($bits(psum_vec_t)), .DEPTH(FIFO_DEPTH)) u_psum_fifo (
    .clk, .rst_n, .in_valid(cv_valid), .in_ready(cv_ready), .in_data(cv_data),
    .out_valid(cq_valid), .out_ready(cq_ready), .out_data(cq_data)
  );

  // ---------------- conversion ----------------
  logic     qt_valid, qt_ready, pl_in_valid, pl_in_ready;
  out_vec_t qt_data, pl_in_data;

  conversion_unit #(.NSETS(NSETS)) u_conv_q (
    .clk, .rst_n, .thr_we, .thr_wset($clog2(NSETS)'(thr_wset)), .thr_widx, .thr_wdata,
    .thr_set($clog2(NSETS)'(cfg.thr_set)),
    .in_valid(cq_valid), .in_ready(cq_ready), .in_data(cq_data),
    .out_valid(qt_valid), .out_ready(qt_ready), .out_data(qt_data)
  );

  stream_fifo #(.WIDTH($bits(out_vec_t)), .DEPTH(FIFO_DEPTH)) u_q_fifo (
    .clk, .rst_n, .in_valid(qt_valid), .in_ready(qt_ready), .in_data(qt_data),
    .out_valid(pl_in_valid), .out_ready(pl_in_ready), .out_data(pl_in_data)
  );

  // ---------------- pooling ----------------
  logic     pl_valid, pl_ready, sh_in_valid, sh_in_ready;
  out_vec_t pl_data, sh_in_data;

  pool_unit #(.LB_DEPTH(POOL_LB), .MAX_G(MAX_ICG)) u_pool (
    .clk, .rst_n, .start(run_start), .pool_en(cfg.pool_en),
    .width(cfg.width), .height(cfg.height), .grp(cfg.oc_grp),
    .in_valid(pl_in_valid), .in_ready(pl_in_ready), .in_data(pl_in_data),
    .out_valid(pl_valid), .out_ready(pl_ready), .out_data(pl_data)
  );

  stream_fifo #(.WIDTH($bits(out_vec_t)), .DEPTH(FIFO_DEPTH)) u_p_fifo (
    .clk, .rst_n, .in_valid(pl_valid), .in_ready(pl_ready), .in_data(pl_data),
    .out_valid(sh_in_valid), .out_ready(sh_in_ready), .out_data(sh_in_data)
  );

  // ---------------- shift ----------------
  logic     sh_valid, sh_ready, wb_in_valid, wb_in_ready;
  out_vec_t sh_data, wb_in_data;
  dim_t     sh_w, sh_h;
  assign sh_w = cfg.pool_en ? (cfg.width  >> 1) : cfg.width;
  assign sh_h = cfg.pool_en ? (cfg.height >> 1) : cfg.height;

  shift_unit #(.NBUF(SHIFT_BUF)) u_shift (
    .clk, .rst_n, .start(run_start), .shift_en(cfg.shift_en),
    .width(sh_w), .height(sh_h), .grp(cfg.oc_grp),
    .in_valid(sh_in_valid), .in_ready(sh_in_ready), .in_data(sh_in_data),
    .out_valid(sh_valid), .out_ready(sh_ready), .out_data(sh_data)
  );

  // out_fmap_stream
  stream_fifo #(.WIDTH($bits(out_vec_t)), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .in_valid(sh_valid), .in_ready(sh_ready), .in_data(sh_data),
    .out_valid(wb_in_valid), .out_ready(wb_in_ready), .out_data(wb_in_data)
  );

  // ---------------- shuffle / writeback ----------------
  shuffle_unit u_shuffle (
    .clk, .rst_n, .start(run_start), .out_base(cfg.out_base), .oc_grp(cfg.oc_grp),
    .out_grp_total(cfg.out_grp_total), .shuffle_off(cfg.shuffle_off),
    .in_valid(wb_in_valid), .in_ready(wb_in_ready), .in_data(wb_in_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_count
  );
endmodule
