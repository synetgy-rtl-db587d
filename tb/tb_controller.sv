// tb_controller: self-checking test of the register file and sequencer.
//
// Writes every configuration register and reads it back, writes thresholds
// and checks the threshold write port, then runs two invocations against a
// modelled datapath: one with weight prefetch (start -> wload_start, wait for
// wload_busy to drop -> run_start -> wait for wr_count = output words -> done)
// and one with keep_weights (straight to run_start).  Checks the derived word
// counts for pooled and unpooled layers, busy/done and the cycle counter.
// Then 30 random layer configurations: every register read back, the word
// counts recomputed here, done raised exactly when the modelled writeback has
// produced all output words, and a start written while busy ignored.
module tb_controller;
  import synetgy_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic reg_we = 0, reg_re = 0;
  logic [3:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  layer_cfg_t cfg;
  logic thr_we;
  logic [5:0] thr_wset;
  logic [3:0] thr_widx;
  psum_t thr_wdata;
  logic wload_start, wload_busy, run_start, busy, done;
  logic [31:0] wload_words, in_words, wr_count = '0;

  controller dut (.clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .cfg,
    .thr_we, .thr_wset, .thr_widx, .thr_wdata, .wload_start, .wload_words, .wload_busy,
    .run_start, .in_words, .wr_count, .busy, .done);

  int checks = 0, failures = 0;
  int n_wstart = 0, n_rstart = 0, n_thr = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wreg(input int a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = 4'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rreg(input int a, output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_addr = 4'(a);
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask

  always @(posedge clk) begin
    if (rst_n && wload_start) n_wstart++;
    if (rst_n && run_start) n_rstart++;
    if (rst_n && thr_we) begin
      n_thr++;
      if (thr_wset != 6'd5 || thr_widx != 4'd9 || thr_wdata != -17'sd1234) begin
        failures++; $display("FAIL threshold port");
      end
    end
  end

  // datapath model: weight load takes 40 cycles, then one output word per cycle
  logic [31:0] target = '0;
  int wl_cnt = 0;
  assign wload_busy = wl_cnt > 0;
  // If the controller is still busy 20 cycles after the last expected word,
  // the model keeps writing, so a wrong word count ends in a visible mismatch
  // instead of a hang.
  int over = 0;
  always @(posedge clk) begin
    if (wload_start) wl_cnt <= 40;
    else if (wl_cnt > 0) wl_cnt <= wl_cnt - 1;
    if (run_start) begin
      wr_count <= '0;
      over     <= 0;
    end else if (wr_count != target || over > 20) wr_count <= wr_count + 1;
    else if (busy) over <= over + 1;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wreg(2, {7'd0, 9'd12, 7'd0, 9'd10});
    wreg(3, {2'd0, 6'd1, 2'd0, 6'd4, 2'd0, 6'd2, 2'd0, 6'd3});
    wreg(4, {8'd2, 10'd0, 6'd7, 5'd0, 1'b0, 1'b1, 1'b1});
    wreg(5, 32'h1000); wreg(6, 32'h2000); wreg(7, 32'h3000);
    rreg(2, d); chk(d == {7'd0, 9'd12, 7'd0, 9'd10}, "DIM readback");
    rreg(3, d); chk(d == {2'd0, 6'd1, 2'd0, 6'd4, 2'd0, 6'd2, 2'd0, 6'd3}, "GRP readback");
    rreg(4, d); chk(d == {8'd2, 10'd0, 6'd7, 5'd0, 1'b0, 1'b1, 1'b1}, "MODE readback");
    rreg(5, d); chk(d == 32'h1000, "IN_BASE");
    rreg(6, d); chk(d == 32'h2000, "W_BASE");
    rreg(7, d); chk(d == 32'h3000, "OUT_BASE");
    chk(cfg.width == 10 && cfg.height == 12 && cfg.ic_grp == 3 && cfg.oc_grp == 2 &&
        cfg.out_grp_total == 4 && cfg.shuffle_off == 1 && cfg.pool_en && cfg.shift_en &&
        cfg.thr_set == 7 && cfg.batch == 2, "cfg fields");
    chk(wload_words == 2*3*32, "weight word count");
    chk(in_words == 2*10*12*3, "input word count");
    wreg(8, {2'd0, 6'd5, 4'd9, 3'd0, 17'h1fb2e});
    chk(n_thr == 1, "one threshold write");
    // run 1: pooled 5x6 outputs x 2 groups x batch 2 = 120 words
    target = 120;
    wreg(0, 1);
    rreg(1, d); chk(d[0] == 1 && d[1] == 0, "busy after start");
    do rreg(1, d); while (!d[1]);
    chk(n_wstart == 1 && n_rstart == 1, "weight load then run");
    rreg(9, d); chk(d >= 32'd160 && d < 32'd200, $sformatf("cycle count %0d", d));
    // run 2: keep weights, no pooling: 10x12 x 2 groups x batch 2 = 480 words
    target = 480;
    wreg(4, {8'd2, 10'd0, 6'd7, 5'd0, 1'b1, 1'b0, 1'b0});
    wreg(0, 1);
    do rreg(1, d); while (!d[1]);
    chk(n_wstart == 1 && n_rstart == 2, "weights kept");
    rreg(9, d); chk(d >= 32'd480 && d < 32'd500, $sformatf("cycle count %0d", d));
    // random configurations
    for (int k = 0; k < 30; k++) begin
      int W, H, ig, og, tt, of, B, ts, ow, oh, nw, nr;
      bit pe, se, kw;
      logic [31:0] dim, grp, mode, ib, wb, ob;
      W = $urandom_range(1, 12); H = $urandom_range(1, 12);
      ig = $urandom_range(1, 3); og = $urandom_range(1, 3);
      tt = og + $urandom_range(0, 3); of = $urandom_range(0, tt - 1);
      B = $urandom_range(1, 3); ts = $urandom_range(0, 63);
      pe = 1'($urandom); se = 1'($urandom); kw = 1'($urandom);
      ib = $urandom; wb = $urandom; ob = $urandom;
      dim  = {7'd0, 9'(H), 7'd0, 9'(W)};
      grp  = {2'd0, 6'(of), 2'd0, 6'(tt), 2'd0, 6'(og), 2'd0, 6'(ig)};
      mode = {8'(B), 10'd0, 6'(ts), 5'd0, kw, se, pe};
      wreg(2, dim); wreg(3, grp); wreg(4, mode); wreg(5, ib); wreg(6, wb); wreg(7, ob);
      rreg(2, d); chk(d == dim, "random DIM readback");
      rreg(3, d); chk(d == grp, "random GRP readback");
      rreg(4, d); chk(d == mode, "random MODE readback");
      rreg(5, d); chk(d == ib, "random IN_BASE readback");
      rreg(6, d); chk(d == wb, "random W_BASE readback");
      rreg(7, d); chk(d == ob, "random OUT_BASE readback");
      chk(cfg.in_base == ib && cfg.w_base == wb && cfg.out_base == ob, "random bases in cfg");
      chk(wload_words == 32'(ig * og * 32), "random weight word count");
      chk(in_words == 32'(B * W * H * ig), "random input word count");
      ow = pe ? W / 2 : W; oh = pe ? H / 2 : H;
      target = 32'(B * ow * oh * og);
      nw = n_wstart; nr = n_rstart;
      wreg(0, 1);
      wreg(0, 1);   // start while busy: ignored
      do rreg(1, d); while (!d[1]);
      chk(wr_count == target, $sformatf("done at %0d of %0d output words", wr_count, target));
      chk(n_rstart == nr + 1, "one run per start");
      chk(n_wstart == nw + (kw ? 0 : 1), "weight load unless kept");
      rreg(1, d); chk(d[0] == 0, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
