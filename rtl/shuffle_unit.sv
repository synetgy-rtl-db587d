// shuffle_unit: writeback of output features with the channel shuffle folded
// into the address.
//
// The network's channel shuffle is a circular rotation of the channel
// dimension (instead of a transpose), so it costs nothing but an address
// offset on writeback.  The unit receives OC-channel vectors in pixel-major
// order (oc_grp groups per pixel) and writes each to DRAM word
//     pix_addr + ((g + shuffle_off) mod out_grp_total)
// where pix_addr starts at out_base and advances by out_grp_total words per
// pixel, so a pixel's groups land inside a row of out_grp_total groups.  With
// out_grp_total > oc_grp the rest of the row is left for the other branch of
// the block, which the host copies in (the concatenation).  shuffle_off = 0
// and out_grp_total = oc_grp give a plain, unshuffled store.
// Rotation is by whole 32-channel groups; shuffle_off < out_grp_total.
// Timing: one write request per cycle, registered; wr_count counts accepted
// writes since start so the controller can tell when a run is complete.
module shuffle_unit
  import synetgy_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  addr_t    out_base,
  input  grp_t     oc_grp,
  input  grp_t     out_grp_total,
  input  grp_t     shuffle_off,
  input  logic     in_valid,
  output logic     in_ready,
  input  out_vec_t in_data,
  output logic     wr_valid,
  input  logic     wr_ready,
  output addr_t    wr_addr,
  output word_t    wr_data,
  output logic [31:0] wr_count
);
  addr_t pix_addr;
  grp_t  g;
  logic [GRP_W:0] gs;

  always_comb begin
    gs = {1'b0, g} + {1'b0, shuffle_off};
    if (gs >= {1'b0, out_grp_total}) gs = gs - {1'b0, out_grp_total};
  end

  assign in_ready = !wr_valid || wr_ready;
  wire accept = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_addr <= '0; g <= '0;
      wr_valid <= 1'b0; wr_addr <= '0; wr_data <= '0;
      wr_count <= '0;
    end else if (start) begin
      pix_addr <= out_base; g <= '0;
      wr_valid <= 1'b0;
      wr_count <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        wr_count <= wr_count + 1'b1;
      end
      if (accept) begin
        wr_valid <= 1'b1;
        wr_addr  <= pix_addr + addr_t'(gs);
        wr_data  <= in_data;
        if (g == oc_grp - 1'b1) begin
          g        <= '0;
          pix_addr <= pix_addr + addr_t'(out_grp_total);
        end else g <= g + 1'b1;
      end
    end
  end

  // A write request holds its address and data until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n || start)
                   wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));
endmodule
