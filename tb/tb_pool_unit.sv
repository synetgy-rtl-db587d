// tb_pool_unit: self-checking test of the 2x2 max-pooling unit.
//
// Streams frames of random 4-bit activations (pixel-major, channel groups
// inner) with random valid gaps and output back-pressure, and compares every
// output vector with a 2x2 stride-2 maximum computed here.  Covers several
// groups per pixel, odd width and height (last column/row dropped), two
// frames back to back, and the bypass mode in which vectors pass unchanged.
module tb_pool_unit;
  import synetgy_pkg::*;
  localparam int MAXV = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, pool_en = 1;
  dim_t width = '0, height = '0;
  grp_t grp = '0;
  logic in_valid, in_ready, out_valid, out_ready = 1;
  out_vec_t in_data, out_data;

  pool_unit dut (.clk, .rst_n, .start, .pool_en, .width, .height, .grp,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  out_vec_t src [MAXV];
  out_vec_t exp_q [MAXV];
  int n_in = 0, n_src = 0, n_out = 0, n_exp = 0;
  bit run = 0, gate = 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign in_valid = run && n_in < n_src && gate;
  assign in_data  = src[n_in < n_src ? n_in : 0];

  always @(posedge clk) begin
    gate      <= $urandom_range(0, 3) != 0;
    out_ready <= $urandom_range(0, 3) != 0;
    if (in_valid && in_ready) n_in <= n_in + 1;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (n_out >= n_exp || out_data != exp_q[n_out]) begin
        failures++;
        if (failures < 5) $display("FAIL out %0d: %h vs %h", n_out, out_data, exp_q[n_out]);
      end
      n_out <= n_out + 1;
    end
  end

  task automatic run_frames(input int W, input int H, input int G, input int F, input bit en);
    n_src = 0; n_exp = 0;
    for (int f = 0; f < F; f++) begin
      int base = n_src;
      for (int p = 0; p < W*H*G; p++) begin
        for (int c = 0; c < 32; c++) src[n_src][c] = 4'($urandom_range(0, 15));
        n_src++;
      end
      for (int y = 0; y < (en ? H/2 : H); y++)
        for (int x = 0; x < (en ? W/2 : W); x++)
          for (int g = 0; g < G; g++) begin
            out_vec_t e;
            if (!en) e = src[base + (y*W + x)*G + g];
            else
              for (int c = 0; c < 32; c++) begin
                act_t m = 0;
                for (int dy = 0; dy < 2; dy++)
                  for (int dx = 0; dx < 2; dx++) begin
                    act_t v = src[base + ((2*y+dy)*W + 2*x+dx)*G + g][c];
                    if (v > m) m = v;
                  end
                e[c] = m;
              end
            exp_q[n_exp++] = e;
          end
    end
    @(negedge clk);
    width = dim_t'(W); height = dim_t'(H); grp = grp_t'(G); pool_en = en;
    n_in = 0; n_out = 0;
    start = 1; @(negedge clk) start = 0; run = 1;
    wait (n_in == n_src);
    repeat (20) @(negedge clk);
    run = 0;
    checks++;
    if (n_out != n_exp) begin failures++; $display("FAIL count %0d vs %0d", n_out, n_exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_frames(8, 6, 2, 2, 1);
    run_frames(7, 5, 3, 1, 1);
    run_frames(4, 4, 1, 1, 1);
    run_frames(5, 3, 2, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
