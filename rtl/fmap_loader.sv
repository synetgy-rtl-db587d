// fmap_loader: the input feature-map loader (in_fmap_stream).
//
// Input feature maps lie in DRAM pixel by pixel, each pixel as IC_TOTAL/IC
// consecutive words of IC 4-bit channels; the images of a batch follow one
// another.  The loader reads every word once, in address order, through a
// request/response read port; the request side runs ahead independently of
// the response side, limited only by the memory's rd_req_ready.
// The convolution unit needs each pixel's IC_TOTAL/IC words once per output
// block oc_t.  The first pass forwards the DRAM words and stores them in a
// small pixel buffer; the other OC_TOTAL/OC - 1 passes replay the buffer, so
// every input feature is fetched from DRAM only once (compute-to-communication
// ratio OC_TOTAL, as the paper states).  The pixel buffer is this design's
// way of getting that ratio; the paper's pseudo code shows the loop order only.
// Timing: one vector per cycle when DRAM data and the output are ready.
module fmap_loader
  import synetgy_pkg::*;
#(
  parameter int unsigned MAX_ICG = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  addr_t    in_base,
  input  logic [31:0] n_words,  // batch * width * height * ic_grp
  input  grp_t     ic_grp,
  input  grp_t     oc_grp,
  // DRAM read port
  output logic     rd_req_valid,
  input  logic     rd_req_ready,
  output addr_t    rd_req_addr,
  input  logic     rd_rsp_valid,
  output logic     rd_rsp_ready,
  input  word_t    rd_rsp_data,
  // stream to the convolution unit
  output logic     out_valid,
  input  logic     out_ready,
  output act_vec_t out_data
);
  localparam int unsigned PA = $clog2(MAX_ICG);

  logic [31:0] req_cnt, rsp_cnt;
  act_vec_t    pixbuf [MAX_ICG];
  grp_t        ic_t, oc_t;
  logic        active;

  // request side
  assign rd_req_valid = active && (req_cnt != n_words);
  assign rd_req_addr  = in_base + addr_t'(req_cnt);

  // response / replay side
  wire fetching = active && (oc_t == '0) && (rsp_cnt != n_words);
  assign rd_rsp_ready = fetching && out_ready;
  assign out_valid    = fetching ? rd_rsp_valid : (active && oc_t != '0);
  assign out_data     = fetching ? act_vec_t'(rd_rsp_data) : pixbuf[PA'(ic_t)];
  wire advance = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (fetching && rd_rsp_valid && out_ready) pixbuf[PA'(ic_t)] <= act_vec_t'(rd_rsp_data);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_cnt <= '0; rsp_cnt <= '0; ic_t <= '0; oc_t <= '0; active <= 1'b0;
    end else if (start) begin
      req_cnt <= '0; rsp_cnt <= '0; ic_t <= '0; oc_t <= '0; active <= 1'b1;
    end else if (active) begin
      if (rd_req_valid && rd_req_ready) req_cnt <= req_cnt + 1'b1;
      if (fetching && advance) rsp_cnt <= rsp_cnt + 1'b1;
      if (advance) begin
        if (ic_t == ic_grp - 1'b1) begin
          ic_t <= '0;
          oc_t <= (oc_t == oc_grp - 1'b1) ? '0 : oc_t + 1'b1;
          if (oc_t == oc_grp - 1'b1 && rsp_cnt == n_words - (fetching ? 32'd1 : 32'd0))
            active <= 1'b0;
        end else ic_t <= ic_t + 1'b1;
      end
    end
  end
endmodule
