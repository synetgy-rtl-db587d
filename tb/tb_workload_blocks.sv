// tb_workload_blocks: the accelerator at its default parameters on layer
// shapes of the target network, at their real sizes.
//
// Runs four invocations, each checked word by word against a reference
// computed here (same model as the end-to-end test: 1x1 convolution of
// unsigned 4-bit activations with signed 4-bit weights, threshold counting,
// 2x2 max pooling, zero-padded shift with direction c mod 5, circular group
// offset on writeback):
//   - last-stage block: 7x7, 512 -> 512 channels, shift, no pooling
//   - first-stage block: 28x28, 128 -> 128 channels, shift, no pooling
//   - downsampling block: 28x28, 128 -> 256 channels, pooling and shift,
//     written into the upper half of 512-channel output rows
//   - final 1x1 layer: 7x7, 512 -> 1024 channels, batch 2, which fills the
//     weight buffer (16 x 32 = 512 entries) exactly
// Memory runs without back-pressure so the cycle count of every invocation
// is checked against the one-block-per-cycle rate.
module tb_workload_blocks;
  import synetgy_pkg::*;

  localparam int unsigned MW = 28, MH = 28, MG = 32, MB = 2;
  localparam addr_t W_BASE = 32'h0000, IN_BASE = 32'h8000, OUT_BASE = 32'hC000;
  localparam word_t SENT = {4{32'hdead_beef}};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        reg_we = 0, reg_re = 0;
  logic [3:0]  reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic        busy, done, stall = 0, wr_hold = 0;

  logic  rq_v [2], rq_r [2], rs_v [2], rs_r [2];
  addr_t rq_a [2];
  word_t rs_d [2];
  logic  wr_valid, wr_ready;
  addr_t wr_addr;
  word_t wr_data;

  synetgy_top dut (
    .clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .busy, .done,
    .fm_req_valid(rq_v[0]), .fm_req_ready(rq_r[0]), .fm_req_addr(rq_a[0]),
    .fm_rsp_valid(rs_v[0]), .fm_rsp_ready(rs_r[0]), .fm_rsp_data(rs_d[0]),
    .wt_req_valid(rq_v[1]), .wt_req_ready(rq_r[1]), .wt_req_addr(rq_a[1]),
    .wt_rsp_valid(rs_v[1]), .wt_rsp_ready(rs_r[1]), .wt_rsp_data(rs_d[1]),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  dram_model #(.WORDS(1 << 16), .NRD(2), .LAT(4)) u_dram (
    .clk, .rst_n, .stall, .wr_hold,
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_ready(rs_r), .rd_rsp_data(rs_d),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  int checks = 0, failures = 0;
  // watchdog
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic wreg(input int a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = 4'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  task automatic rreg(input int a, output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_addr = 4'(a);
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask

  // reference data
  int act  [MB][MH][MW][MG*32];
  int wgt  [MG*32][MG*32];        // [oc][ic]
  int thr  [4][15];
  int conv [MB][MH][MW][MG*32];
  int pool [MB][MH][MW][MG*32];
  int res  [MB][MH][MW][MG*32];

  function automatic int sdiv_floor_dummy(int a); return a; endfunction

  task automatic make_thresholds(input int set, input int scale);
    int t = -scale * 8;
    for (int k = 0; k < 15; k++) begin
      t += 1 + int'($urandom_range(0, 2 * scale));
      thr[set][k] = t;
      wreg(8, {2'b0, 6'(set), 4'(k), 3'b0, 17'(t)});
    end
  endtask

  task automatic load_weights(input int icg, input int ocg);
    for (int o = 0; o < ocg * 32; o++)
      for (int i = 0; i < icg * 32; i++)
        wgt[o][i] = int'($urandom_range(0, 15)) - 8;
    // word address = ((oc_t*icg + ic_t)*32 + lane)
    for (int ot = 0; ot < ocg; ot++)
      for (int it = 0; it < icg; it++)
        for (int l = 0; l < 32; l++) begin
          word_t w;
          for (int i = 0; i < 32; i++) w[i*4 +: 4] = 4'(wgt[ot*32+l][it*32+i]);
          u_dram.mem[W_BASE + (ot*icg + it)*32 + l] = w;
        end
  endtask

  task automatic run_layer(input int W, input int H, input int icg, input int ocg,
                           input int B, input bit pool_en, input bit shift_en,
                           input int tot, input int off, input int set,
                           input bit keep, input bit stall_en, input bit max_act);
    int OW, OH, ideal;
    logic [31:0] st, cyc;
    OW = pool_en ? W / 2 : W;
    OH = pool_en ? H / 2 : H;
    // inputs
    for (int b = 0; b < B; b++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int it = 0; it < icg; it++) begin
            word_t w;
            for (int i = 0; i < 32; i++) begin
              act[b][y][x][it*32+i] = max_act ? 15 : int'($urandom_range(0, 15));
              w[i*4 +: 4] = 4'(act[b][y][x][it*32+i]);
            end
            u_dram.mem[IN_BASE + ((b*H + y)*W + x)*icg + it] = w;
          end
    for (int a = 0; a < B*OW*OH*tot; a++) u_dram.mem[OUT_BASE + a] = SENT;
    // reference
    for (int b = 0; b < B; b++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int o = 0; o < ocg*32; o++) begin
            int s = 0, q = 0;
            for (int i = 0; i < icg*32; i++) s += act[b][y][x][i] * wgt[o][i];
            for (int k = 0; k < 15; k++) if (s >= thr[set][k]) q++;
            conv[b][y][x][o] = q;
          end
    for (int b = 0; b < B; b++)
      for (int y = 0; y < OH; y++)
        for (int x = 0; x < OW; x++)
          for (int o = 0; o < ocg*32; o++)
            if (pool_en) begin
              int m = conv[b][2*y][2*x][o];
              if (conv[b][2*y][2*x+1][o] > m) m = conv[b][2*y][2*x+1][o];
              if (conv[b][2*y+1][2*x][o] > m) m = conv[b][2*y+1][2*x][o];
              if (conv[b][2*y+1][2*x+1][o] > m) m = conv[b][2*y+1][2*x+1][o];
              pool[b][y][x][o] = m;
            end else pool[b][y][x][o] = conv[b][y][x][o];
    for (int b = 0; b < B; b++)
      for (int y = 0; y < OH; y++)
        for (int x = 0; x < OW; x++)
          for (int o = 0; o < ocg*32; o++) begin
            int sx = x, sy = y;
            if (shift_en)
              case (o % 5)
                1: sy = y - 1;
                2: sy = y + 1;
                3: sx = x - 1;
                4: sx = x + 1;
                default: ;
              endcase
            res[b][y][x][o] = (sx < 0 || sy < 0 || sx >= OW || sy >= OH) ? 0 : pool[b][sy][sx][o];
          end
    // program and run
    stall = stall_en;
    wreg(2, {7'd0, 9'(H), 7'd0, 9'(W)});
    wreg(3, {2'd0, 6'(off), 2'd0, 6'(tot), 2'd0, 6'(ocg), 2'd0, 6'(icg)});
    wreg(4, {8'(B), 10'd0, 6'(set), 5'd0, keep, shift_en, pool_en});
    wreg(5, IN_BASE); wreg(6, W_BASE); wreg(7, OUT_BASE);
    wreg(0, 1);
    if (stall_en) fork begin wr_hold = 1; repeat (600) @(negedge clk); wr_hold = 0; end join_none
    do rreg(1, st); while (!st[1]);
    rreg(9, cyc);
    stall = 0;
    // compare
    for (int b = 0; b < B; b++)
      for (int p = 0; p < OW*OH; p++)
        for (int gt = 0; gt < tot; gt++) begin
          word_t got = u_dram.mem[OUT_BASE + (b*OW*OH + p)*tot + gt];
          int g = gt - off; if (g < 0) g += tot;
          if (g < ocg) begin
            word_t exp;
            for (int l = 0; l < 32; l++) exp[l*4 +: 4] = 4'(res[b][p / OW][p % OW][g*32+l]);
            chk(got == exp, $sformatf("out b%0d pix%0d grp%0d: %h vs %h", b, p, g, got, exp));
          end else
            chk(got == SENT, $sformatf("word of other branch written b%0d pix%0d slot%0d", b, p, gt));
        end
    // rate: one IC x OC block per cycle for the convolution
    ideal = B * W * H * icg * ocg;
    chk(cyc >= 32'(ideal), $sformatf("cycles %0d below the convolution bound %0d", cyc, ideal));
    if (!stall_en) begin
      int bound = ideal + (shift_en ? B*(2*OW + 2*OH + 4)*ocg : 0) + (keep ? 0 : icg*ocg*32) + 64;
      chk(cyc <= 32'(bound), $sformatf("cycles %0d above %0d", cyc, bound));
    end
    $display("failures so far %0d", failures);
    $display("layer %0dx%0d icg=%0d ocg=%0d B=%0d pool=%0d shift=%0d tot=%0d off=%0d: %0d cycles (conv bound %0d)",
             W, H, icg, ocg, B, pool_en, shift_en, tot, off, cyc, ideal);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_thresholds(0, 120);
    make_thresholds(1, 60);
    load_weights(16, 16);
    //        W  H  icg ocg B pool shift tot off set keep stall max
    run_layer(7, 7, 16, 16, 1, 0, 1, 16, 0, 0, 0, 0, 0);
    load_weights(4, 4);
    run_layer(28, 28, 4, 4, 1, 0, 1, 4, 0, 1, 0, 0, 0);
    load_weights(4, 8);
    run_layer(28, 28, 4, 8, 1, 1, 1, 16, 8, 1, 0, 0, 0);
    load_weights(16, 32);
    run_layer(7, 7, 16, 32, 2, 0, 0, 32, 0, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
