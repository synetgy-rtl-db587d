// tb_shift_unit: self-checking test of the shift unit.
//
// Streams frames of random activations with random valid gaps and output
// back-pressure and compares every output vector with a reference shift:
// channel c copies its neighbour in direction c mod 5 (identity, up, down,
// left, right), zero outside the frame.  Covers several channel groups (so
// the direction pattern runs across groups), two frames back to back, a
// 1-pixel-wide corner case, and the bypass mode.  An unstalled frame checks
// the rate: (width+2)*(height+2)*groups cycles per frame.
module tb_shift_unit;
  import synetgy_pkg::*;
  localparam int MAXV = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, shift_en = 1;
  dim_t width = '0, height = '0;
  grp_t grp = '0;
  logic in_valid, in_ready, out_valid, out_ready = 1;
  out_vec_t in_data, out_data;

  shift_unit dut (.clk, .rst_n, .start, .shift_en, .width, .height, .grp,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  out_vec_t src [MAXV];
  out_vec_t exp_q [MAXV];
  int n_in = 0, n_src = 0, n_out = 0, n_exp = 0, cycle = 0, t_last = 0;
  bit run = 0, gate = 1, rnd = 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign in_valid = run && n_in < n_src && gate;
  assign in_data  = src[n_in < n_src ? n_in : 0];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    gate      <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
    out_ready <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (in_valid && in_ready) n_in <= n_in + 1;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (n_out >= n_exp || out_data != exp_q[n_out]) begin
        failures++;
        if (failures < 5) $display("FAIL out %0d of %0d (w%0d h%0d g%0d en%0d): %h vs %h", n_out, n_exp, width, height, grp, shift_en, out_data, exp_q[n_out]);
      end
      n_out <= n_out + 1;
      t_last <= cycle;
    end
  end

  task automatic run_frames(input int W, input int H, input int G, input int F, input bit en,
                            output int cycles);
    int t0;
    n_src = 0; n_exp = 0;
    for (int f = 0; f < F; f++) begin
      int base = n_src;
      for (int p = 0; p < W*H*G; p++) begin
        for (int c = 0; c < 32; c++) src[n_src][c] = 4'($urandom_range(0, 15));
        n_src++;
      end
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int g = 0; g < G; g++) begin
            out_vec_t e;
            for (int c = 0; c < 32; c++) begin
              int sx = x, sy = y;
              if (en)
                case ((g*32 + c) % 5)
                  1: sy = y - 1;
                  2: sy = y + 1;
                  3: sx = x - 1;
                  4: sx = x + 1;
                  default: ;
                endcase
              e[c] = (sx < 0 || sy < 0 || sx >= W || sy >= H) ? 4'd0
                     : src[base + (sy*W + sx)*G + g][c];
            end
            exp_q[n_exp++] = e;
          end
    end
    @(negedge clk);
    width = dim_t'(W); height = dim_t'(H); grp = grp_t'(G); shift_en = en;
    n_in = 0; n_out = 0;
    start = 1; @(negedge clk) start = 0; run = 1;
    t0 = cycle;
    wait (n_out == n_exp);
    cycles = t_last - t0 + 1;
    repeat (10) @(negedge clk);
    run = 0;
    checks++;
    if (n_out != n_exp || n_in != n_src) begin
      failures++; $display("FAIL count %0d vs %0d, in %0d of %0d", n_out, n_exp, n_in, n_src);
    end
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_frames(6, 5, 2, 2, 1, cyc);
    run_frames(7, 4, 3, 1, 1, cyc);
    run_frames(1, 3, 1, 1, 1, cyc);
    run_frames(5, 3, 2, 1, 0, cyc);
    rnd = 0;
    run_frames(8, 6, 2, 1, 1, cyc);
    checks++;
    if (cyc != 10*8*2 + 1) begin failures++; $display("FAIL rate: %0d cycles, expected %0d", cyc, 10*8*2 + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
