// pool_unit: 2x2 max pooling with stride 2, built on a line buffer.
//
// Input and output are streams of OC-channel activation vectors in
// pixel-major order: for each pixel (row by row, left to right) the grp
// channel groups follow one another.  On even rows every vector is written
// into the line buffer (one row of WIDTH pixels).  On odd rows the vector at
// an even column is held in a register together with the line-buffer pixel
// above it; at the odd column the four values of the 2x2 window are compared
// per channel and the largest leaves.  The line buffer plus these registers
// hold WIDTH+1 pixels' worth of window state, as in the paper's design.
// Odd widths or heights drop the last column or row (floor).
//
// With pool_en low the unit passes every vector through unchanged (the
// bypass path of the accelerator's block diagram).
// Timing: one input vector per cycle; output register adds 1 cycle.
// start resets the position counters; frames of a batch follow back to back.
// LB_DEPTH (>= width * grp) and MAX_G are this design's choices.
module pool_unit
  import synetgy_pkg::*;
#(
  parameter int unsigned LB_DEPTH = 256,
  parameter int unsigned MAX_G    = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  logic     pool_en,
  input  dim_t     width,
  input  dim_t     height,
  input  grp_t     grp,
  input  logic     in_valid,
  output logic     in_ready,
  input  out_vec_t in_data,
  output logic     out_valid,
  input  logic     out_ready,
  output out_vec_t out_data
);
  localparam int unsigned LBA = $clog2(LB_DEPTH);
  localparam int unsigned GA  = $clog2(MAX_G);

  out_vec_t linebuf [LB_DEPTH];
  out_vec_t left    [MAX_G];
  out_vec_t upleft  [MAX_G];

  dim_t x, y;
  grp_t g;
  logic [LBA-1:0] lb_addr;

  assign in_ready = !out_valid || out_ready;
  wire accept = in_valid && in_ready;
  assign lb_addr = LBA'(x * grp + g);

  function automatic act_t amax(input act_t a, input act_t b);
    return (a > b) ? a : b;
  endfunction

  out_vec_t win_max;
  always_comb begin
    for (int c = 0; c < OC; c++)
      win_max[c] = amax(amax(upleft[GA'(g)][c], linebuf[lb_addr][c]),
                        amax(left[GA'(g)][c], in_data[c]));
  end

  always_ff @(posedge clk) begin
    if (accept && pool_en) begin
      if (!y[0]) linebuf[lb_addr] <= in_data;
      else if (!x[0]) begin
        left[GA'(g)]   <= in_data;
        upleft[GA'(g)] <= linebuf[lb_addr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; g <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (start) begin
      x <= '0; y <= '0; g <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (!pool_en) begin
          out_valid <= 1'b1;
          out_data  <= in_data;
        end else if (y[0] && x[0]) begin
          out_valid <= 1'b1;
          out_data  <= win_max;
        end
        if (g == grp - 1'b1) begin
          g <= '0;
          if (x == width - 1'b1) begin
            x <= '0;
            y <= (y == height - 1'b1) ? '0 : y + 1'b1;
          end else x <= x + 1'b1;
        end else g <= g + 1'b1;
      end
    end
  end
endmodule
