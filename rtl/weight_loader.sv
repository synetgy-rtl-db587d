// weight_loader: prefetches one layer's weights from DRAM into weight_buf.
//
// DRAM holds the weights as words of IC 4-bit weights; word k belongs to
// output lane k mod OC of weight-buffer entry k / OC, with entries ordered
// oc_t-major, ic_t-minor (entry = oc_t * IC_TOTAL/IC + ic_t).  This is the
// weight memory layout of the paper.  The loader reads n_words = OC_TOTAL/OC
// * IC_TOTAL/IC * OC words from w_base, requests running ahead of responses,
// and writes each response into the buffer the cycle it arrives.
// busy drops when the last word has been written.
module weight_loader
  import synetgy_pkg::*;
#(
  parameter int unsigned WBUF_DEPTH = 512
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  addr_t    w_base,
  input  logic [31:0] n_words,
  output logic     busy,
  // DRAM read port
  output logic     rd_req_valid,
  input  logic     rd_req_ready,
  output addr_t    rd_req_addr,
  input  logic     rd_rsp_valid,
  output logic     rd_rsp_ready,
  input  word_t    rd_rsp_data,
  // weight buffer write port
  output logic     wb_en,
  output logic [$clog2(WBUF_DEPTH)-1:0] wb_entry,
  output logic [$clog2(OC)-1:0] wb_lane,
  output wgt_row_t wb_data
);
  localparam int unsigned LW = $clog2(OC);
  logic [31:0] req_cnt, rsp_cnt;

  assign rd_req_valid = busy && (req_cnt != n_words);
  assign rd_req_addr  = w_base + addr_t'(req_cnt);
  assign rd_rsp_ready = busy;
  assign wb_en    = busy && rd_rsp_valid;
  assign wb_lane  = rsp_cnt[LW-1:0];
  assign wb_entry = $clog2(WBUF_DEPTH)'(rsp_cnt >> LW);
  assign wb_data  = wgt_row_t'(rd_rsp_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_cnt <= '0; rsp_cnt <= '0; busy <= 1'b0;
    end else if (start) begin
      req_cnt <= '0; rsp_cnt <= '0; busy <= n_words != 0;
    end else if (busy) begin
      if (rd_req_valid && rd_req_ready) req_cnt <= req_cnt + 1'b1;
      if (rd_rsp_valid) begin
        rsp_cnt <= rsp_cnt + 1'b1;
        if (rsp_cnt == n_words - 1) busy <= 1'b0;
      end
    end
  end
endmodule
