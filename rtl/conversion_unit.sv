// conversion_unit: turns OC 17-bit partial sums into OC 4-bit activations.
//
// The conversion is the network's ActQuant (clipping plus quantization)
// folded into a step function with 16 intervals: the output is the number of
// the 15 ascending thresholds t[0..14] that the partial sum reaches
// (x >= t[k]).  Each lane finds that number with a 4-level binary search
// tree of comparators: t[7] decides bit 3, then t[3] or t[11] bit 2, and so
// on, so only 4 comparisons lie on the path.  Thresholds must be ascending.
//
// Threshold sets differ per layer.  NSETS sets live in an on-chip memory that
// the host fills through the write port (one threshold per write);
// thr_set selects the set of the current layer.  The selected set is read
// into a register every cycle, so thr_set must be stable one cycle before
// data arrives (the controller guarantees this).
// Stream: one vector per cycle, one register stage (latency 1 cycle).
// From the paper: 16 intervals, 17-bit in, 4-bit out, thresholds in on-chip
// RAM selected by an index, binary comparator tree.  The paper counts 16
// comparators; 16 intervals need only 15 boundaries, which is what is built.
// NSETS = 64 is this design's choice.
module conversion_unit
  import synetgy_pkg::*;
#(
  parameter int unsigned NSETS = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // threshold memory write port
  input  logic                     thr_we,
  input  logic [$clog2(NSETS)-1:0] thr_wset,
  input  logic [3:0]               thr_widx,
  input  psum_t                    thr_wdata,
  // set of the current layer
  input  logic [$clog2(NSETS)-1:0] thr_set,
  // streams
  input  logic                     in_valid,
  output logic                     in_ready,
  input  psum_vec_t                in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output out_vec_t                 out_data
);
  typedef logic [NTHR-1:0][PSUM_W-1:0] thr_set_t;

  thr_set_t thr_mem [NSETS];
  thr_set_t cur;

  always_ff @(posedge clk) begin
    if (thr_we && thr_widx < 4'(NTHR)) thr_mem[thr_wset][thr_widx] <= thr_wdata;
    cur <= thr_mem[thr_set];
  end

  function automatic act_t step(input psum_t x, input thr_set_t t);
    logic b3, b2, b1, b0;
    b3 = x >= $signed(t[7]);
    b2 = x >= $signed(t[{b3, 3'b011}]);
    b1 = x >= $signed(t[{b3, b2, 2'b01}]);
    b0 = x >= $signed(t[{b3, b2, b1, 1'b0}]);
    return {b3, b2, b1, b0};
  endfunction

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid)
        for (int o = 0; o < OC; o++) out_data[o] <= step(psum_t'(in_data[o]), cur);
    end
  end
endmodule
