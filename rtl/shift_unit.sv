// shift_unit: the shift operator, which replaces 3x3 spatial convolutions.
//
// Every output channel copies one pixel of its 3x3 neighbourhood to the
// centre: itself (identity) or the pixel above, below, left or right.  The
// direction of channel c is c mod 5 (0 identity, 1 up, 2 down, 3 left,
// 4 right; see synetgy_pkg::shift_dir_e).
//
// Structure: the unit walks the input frame padded with one zero pixel on
// every side, (width+2) x (height+2) positions, each made of grp channel
// vectors.  Padding positions push zeros without consuming input; interior
// positions consume one input vector each.  Pushed vectors enter a circular
// line buffer that covers 2*(width+2)+2 pixels, so when position (px,py) is
// pushed the full 3x3 window around (px-1,py-1) is present.  When that centre
// is an interior pixel the unit emits one output vector, each lane taking
// the window element its channel's direction selects.
// Streams are pixel-major, channel groups inner, as everywhere in the
// pipeline.  With shift_en low vectors pass through unchanged.
// Timing: one push per cycle; one output vector per cycle once the window is
// filled, (width+2)*(height+2)*grp cycles per frame.  Output is registered.
// From the paper: padding by one zero pixel, 2*(WIDTH+2)+2 pixel buffer,
// 3x3 window, four cardinal directions plus identity chosen by the channel
// index.  This design's choices: the c mod 5 rule, the buffer depth NBUF
// (power of two, >= (2*(width+2)+2)*grp) and the handshake.
module shift_unit
  import synetgy_pkg::*;
#(
  parameter int unsigned NBUF = 512
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  logic     shift_en,
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
  localparam int unsigned BA = $clog2(NBUF);

  out_vec_t       buffer [NBUF];
  logic [BA-1:0]  v;            // index of the vector pushed next
  dim_t           px, py;       // padded position
  grp_t           g;

  wire  interior  = (px >= 1) && (px <= width) && (py >= 1) && (py <= height);
  wire  centre_in = (px >= 2) && (px <= width + 1'b1) && (py >= 2) && (py <= height + 1'b1);
  wire  out_free  = !out_valid || out_ready;

  assign in_ready = shift_en ? (interior && out_free) : out_free;
  wire   step     = shift_en && out_free && (interior ? in_valid : 1'b1);
  wire   bypass   = !shift_en && in_valid && out_free;

  // read offsets, in vectors, back from the vector being pushed
  logic [BA-1:0] row_v;   // (width+2)*grp
  assign row_v = BA'((width + dim_t'(2)) * grp);

  logic [BA-1:0] a_c, a_u, a_d, a_l, a_r;
  always_comb begin
    a_d = v - BA'(grp);
    a_r = v - row_v;
    a_c = v - row_v - BA'(grp);
    a_l = v - row_v - BA'(2 * grp);
    a_u = v - row_v - row_v - BA'(grp);
  end

  // channel index of lane 0 modulo 5, then the direction of every lane
  logic [2:0] base5;
  assign base5 = 3'((32'(g) * OC) % 5);

  out_vec_t shifted;
  always_comb begin
    for (int c = 0; c < OC; c++) begin
      unique case (shift_dir_e'(3'((32'(base5) + c) % 5)))
        SH_UP:    shifted[c] = buffer[a_u][c];
        SH_DOWN:  shifted[c] = buffer[a_d][c];
        SH_LEFT:  shifted[c] = buffer[a_l][c];
        SH_RIGHT: shifted[c] = buffer[a_r][c];
        default:  shifted[c] = buffer[a_c][c];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (step) buffer[v] <= interior ? in_data : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; px <= '0; py <= '0; g <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (start) begin
      v <= '0; px <= '0; py <= '0; g <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (bypass) begin
        out_valid <= 1'b1;
        out_data  <= in_data;
      end
      if (step) begin
        v <= v + 1'b1;
        if (centre_in) begin
          out_valid <= 1'b1;
          out_data  <= shifted;
        end
        if (g == grp - 1'b1) begin
          g <= '0;
          if (px == width + 1'b1) begin
            px <= '0;
            py <= (py == height + 1'b1) ? '0 : py + 1'b1;
          end else px <= px + 1'b1;
        end else g <= g + 1'b1;
      end
    end
  end
endmodule
