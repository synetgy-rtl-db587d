// conv_unit: the 1x1 convolution unit, an IC x OC array of 4-bit x 4-bit
// multipliers with output-stationary accumulation.
//
// For every output pixel the unit walks oc_t over OC_TOTAL/OC output-channel
// blocks and, inside, ic_t over IC_TOTAL/IC input-channel blocks, as in the
// paper's scheduling loop.  Each accepted input vector (IC activations) is
// multiplied with the OC x IC weight block of entry oc_t*(IC_TOTAL/IC)+ic_t
// and the OC dot products are added to OC partial-sum registers that are
// cleared at ic_t = 0.  After the last ic_t the OC partial sums leave on the
// output stream.  The input stream must therefore carry each pixel's
// IC_TOTAL/IC vectors once per oc_t block (the loader replays them).
//
// Timing: one IC x OC block per cycle (initiation interval 1), so a pixel
// takes (IC_TOTAL/IC)*(OC_TOTAL/OC) cycles; the weight read adds one cycle of
// latency.  The paper's HLS build needed 7 to 38 cycles per block; the
// single-cycle block is this design's choice.
// Activations are unsigned, weights two's complement, partial sums 17-bit
// signed (paper: "the largest partial sum is 17-bit").
module conv_unit
  import synetgy_pkg::*;
#(
  parameter int unsigned WBUF_DEPTH = 512
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,       // pulse: restart the loop counters
  input  grp_t      ic_grp,      // IC_TOTAL / IC
  input  grp_t      oc_grp,      // OC_TOTAL / OC
  // input feature stream
  input  logic      in_valid,
  output logic      in_ready,
  input  act_vec_t  in_data,
  // weight buffer read port
  output logic      w_re,
  output logic [$clog2(WBUF_DEPTH)-1:0] w_entry,
  input  wgt_blk_t  w_data,
  // partial-sum stream
  output logic      out_valid,
  input  logic      out_ready,
  output psum_vec_t out_data
);
  grp_t      ic_t, oc_t;
  logic      s1_valid, s1_first, s1_last;
  act_vec_t  s1_act;
  psum_t     acc [OC];
  logic      s1_stall;
  logic      accept;

  assign s1_stall = s1_valid && s1_last && out_valid && !out_ready;
  assign in_ready = !s1_valid || !s1_stall;
  assign accept   = in_valid && in_ready;
  assign w_re     = accept;
  assign w_entry  = $clog2(WBUF_DEPTH)'(oc_t * ic_grp + ic_t);

  // loop counters of the stage that issues the weight read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ic_t <= '0;
      oc_t <= '0;
    end else if (start) begin
      ic_t <= '0;
      oc_t <= '0;
    end else if (accept) begin
      if (ic_t == ic_grp - 1'b1) begin
        ic_t <= '0;
        oc_t <= (oc_t == oc_grp - 1'b1) ? '0 : oc_t + 1'b1;
      end else begin
        ic_t <= ic_t + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_act   <= '0;
    end else if (start) begin
      s1_valid <= 1'b0;
    end else if (in_ready) begin
      s1_valid <= accept;
      if (accept) begin
        s1_first <= ic_t == '0;
        s1_last  <= ic_t == ic_grp - 1'b1;
        s1_act   <= in_data;
      end
    end
  end

  // OC dot products of IC unsigned activations and signed weights
  psum_t dot [OC];
  always_comb begin
    for (int o = 0; o < OC; o++) begin
      wgt_row_t row;
      row    = w_data[o];
      dot[o] = '0;
      for (int i = 0; i < IC; i++) begin
        logic signed [ACT_W:0] a;
        wgt_t                  w;
        a      = {1'b0, s1_act[i]};
        w      = row[i];
        dot[o] = dot[o] + psum_t'(a) * psum_t'(w);
      end
    end
  end

  wire s1_fire = s1_valid && !s1_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int o = 0; o < OC; o++) acc[o] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (s1_fire) begin
        for (int o = 0; o < OC; o++) begin
          acc[o] <= (s1_first ? psum_t'(0) : acc[o]) + dot[o];
          if (s1_last) out_data[o] <= (s1_first ? psum_t'(0) : acc[o]) + dot[o];
        end
        if (s1_last) out_valid <= 1'b1;
      end
    end
  end

endmodule
