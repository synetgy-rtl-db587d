// tb_conv_unit: self-checking test of the 1x1 convolution unit.
//
// A weight_buf is filled with random signed 4-bit weights; random unsigned
// activations are streamed in, each pixel's IC_TOTAL/IC vectors repeated for
// every output block as the loader does.  Every OC-wide partial-sum vector is
// compared with a dot product computed here.  Random output back-pressure
// exercises the stall path; an unstalled phase checks the rate of one IC x OC
// block per cycle (initiation interval 1).
module tb_conv_unit;
  import synetgy_pkg::*;
  localparam int ICG = 3, OCG = 2, NPIX = 12, DEPTH = 512;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      start = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_vec_t  in_data = '0;
  psum_vec_t out_data;
  logic      w_re, wb_en = 0;
  logic [$clog2(DEPTH)-1:0] w_entry, wb_entry = '0;
  logic [4:0] wb_lane = '0;
  wgt_row_t  wb_data = '0;
  wgt_blk_t  w_data;
  grp_t      icg = grp_t'(ICG), ocg = grp_t'(OCG);

  weight_buf #(.DEPTH(DEPTH)) u_wb (.clk, .w_en(wb_en), .w_entry(wb_entry), .w_lane(wb_lane),
    .w_data(wb_data), .r_en(w_re), .r_entry(w_entry), .r_data(w_data));
  conv_unit #(.WBUF_DEPTH(DEPTH)) dut (.clk, .rst_n, .start, .ic_grp(icg), .oc_grp(ocg),
    .in_valid, .in_ready, .in_data, .w_re, .w_entry, .w_data, .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  int wgt [OCG*32][ICG*32];
  int act [NPIX][ICG*32];
  int n_out = 0, n_stall = 0;
  bit random_ready = 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      automatic int p = n_out / OCG, ot = n_out % OCG;
      for (int l = 0; l < 32; l++) begin
        automatic int s = 0;
        for (int i = 0; i < ICG*32; i++) s += act[p][i] * wgt[ot*32+l][i];
        checks++;
        if ($signed(out_data[l]) != s) begin
          failures++;
          if (failures < 5) $display("FAIL pix %0d oc %0d: %0d vs %0d", p, ot*32+l, $signed(out_data[l]), s);
        end
      end
      n_out++;
    end
  end
  always @(negedge clk) out_ready <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  int cycle = 0;
  always @(posedge clk) cycle++;

  task automatic send_all(output int cycles);
    int t0 = 0;
    for (int p = 0; p < NPIX; p++)
      for (int ot = 0; ot < OCG; ot++)
        for (int it = 0; it < ICG; it++) begin
          @(negedge clk);
          if (p == 0 && ot == 0 && it == 0) t0 = cycle;
          in_valid = 1;
          for (int i = 0; i < 32; i++) in_data[i] = 4'(act[p][it*32+i]);
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(posedge clk);
        end
    @(negedge clk) in_valid = 0;
    cycles = cycle - t0;
  endtask

  initial begin
    int cyc;
    for (int o = 0; o < OCG*32; o++)
      for (int i = 0; i < ICG*32; i++) wgt[o][i] = int'($urandom_range(0, 15)) - 8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ot = 0; ot < OCG; ot++)
      for (int it = 0; it < ICG; it++)
        for (int l = 0; l < 32; l++) begin
          @(negedge clk);
          wb_en = 1; wb_entry = 9'(ot*ICG + it); wb_lane = 5'(l);
          for (int i = 0; i < 32; i++) wb_data[i] = 4'(wgt[ot*32+l][it*32+i]);
        end
    @(negedge clk) wb_en = 0;
    // phase 1: random data, random back-pressure
    for (int p = 0; p < NPIX; p++)
      for (int i = 0; i < ICG*32; i++) act[p][i] = int'($urandom_range(0, 15));
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    send_all(cyc);
    repeat (20) @(negedge clk);
    checks++; if (n_out != NPIX*OCG) begin failures++; $display("FAIL outputs %0d", n_out); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end
    // phase 2: extreme values, no back-pressure, rate check
    random_ready = 0;
    n_out = 0;
    for (int p = 0; p < NPIX; p++)
      for (int i = 0; i < ICG*32; i++) act[p][i] = (p % 2) ? 15 : int'($urandom_range(0, 15));
    for (int o = 0; o < 32; o++) for (int i = 0; i < ICG*32; i++) wgt[o][i] = -8;
    for (int it = 0; it < ICG; it++)
      for (int l = 0; l < 32; l++) begin
        @(negedge clk); wb_en = 1; wb_entry = 9'(it); wb_lane = 5'(l); wb_data = {32{4'h8}};
      end
    @(negedge clk) wb_en = 0;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    send_all(cyc);
    repeat (20) @(negedge clk);
    checks++;
    if (cyc != NPIX*OCG*ICG) begin failures++; $display("FAIL rate: %0d cycles for %0d blocks", cyc, NPIX*OCG*ICG); end
    checks++; if (n_out != NPIX*OCG) begin failures++; $display("FAIL outputs %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
