// weight_buf: on-chip weight buffer of the convolution unit.
//
// Holds the weights of one layer, prefetched from DRAM before the layer runs.
// It is organised as OC banks, one per output-channel lane; an entry of a bank
// holds the IC 4-bit weights that lane needs for one block of IC input
// channels.  Entry e = oc_t * (IC_TOTAL/IC) + ic_t, so one read returns the
// whole OC x IC weight block of one loop iteration (weight_stream of the
// paper's pseudo code).
//
// Write port: one IC-weight word per cycle into bank w_lane, entry w_entry,
// matching the DRAM weight layout (word address = entry * OC + lane).
// Read port: synchronous, one cycle of latency; r_data holds its value while
// r_en is low, as a block RAM output register does.
// DEPTH is this design's choice (512 entries fit the largest convolution of
// the network, 512 -> 1024 channels); the paper gives no size.
module weight_buf
  import synetgy_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     w_en,
  input  logic [$clog2(DEPTH)-1:0] w_entry,
  input  logic [$clog2(OC)-1:0]    w_lane,
  input  wgt_row_t                 w_data,
  input  logic                     r_en,
  input  logic [$clog2(DEPTH)-1:0] r_entry,
  output wgt_blk_t                 r_data
);
  for (genvar o = 0; o < OC; o++) begin : g_bank
    wgt_row_t bank [DEPTH];
    always_ff @(posedge clk) begin
      if (w_en && w_lane == o) bank[w_entry] <= w_data;
      if (r_en) r_data[o] <= bank[r_entry];
    end
  end
endmodule
