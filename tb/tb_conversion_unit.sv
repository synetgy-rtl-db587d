// tb_conversion_unit: self-checking test of the partial-sum to activation
// conversion.
//
// Two threshold sets are written (ascending, random steps).  Random partial
// sums, including each threshold value itself, one below it and the 17-bit
// extremes, are streamed through with random back-pressure; each output
// lane must equal the number of thresholds of the selected set that the input
// reaches.  Latency must be one cycle when the output is not stalled.
module tb_conversion_unit;
  import synetgy_pkg::*;
  localparam int N = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic thr_we = 0;
  logic [5:0] thr_wset = '0, thr_set = '0;
  logic [3:0] thr_widx = '0;
  psum_t thr_wdata = '0;
  logic in_valid, in_ready, out_valid, out_ready = 1;
  psum_vec_t in_data;
  out_vec_t out_data;

  conversion_unit dut (.clk, .rst_n, .thr_we, .thr_wset, .thr_widx, .thr_wdata, .thr_set,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  int thr [2][15];
  int vals [N][32];
  int idx = 0, n_out = 0, set_of_run = 0;
  bit run = 0, gate = 1, rnd = 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign in_valid = run && idx < N && gate;
  always_comb for (int l = 0; l < 32; l++) in_data[l] = PSUM_W'(vals[idx < N ? idx : 0][l]);

  always @(posedge clk) begin
    gate      <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
    out_ready <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (in_valid && in_ready) idx <= idx + 1;
    if (rst_n && out_valid && out_ready) begin
      for (int l = 0; l < 32; l++) begin
        automatic int q = 0;
        for (int k = 0; k < 15; k++) if (vals[n_out][l] >= thr[set_of_run][k]) q++;
        checks++;
        if (int'(out_data[l]) != q) begin
          failures++;
          if (failures < 5) $display("FAIL vec %0d lane %0d: %0d vs %0d (x=%0d)", n_out, l, out_data[l], q, vals[n_out][l]);
        end
      end
      n_out <= n_out + 1;
    end
  end

  task automatic run_set(input int s);
    for (int v = 0; v < N; v++)
      for (int l = 0; l < 32; l++) begin
        int k = int'($urandom_range(0, 14));
        case ($urandom_range(0, 5))
          0: vals[v][l] = thr[s][k];
          1: vals[v][l] = thr[s][k] - 1;
          2: vals[v][l] = ($urandom_range(0, 1)) ? 65535 : -65536;
          default: vals[v][l] = int'($urandom_range(0, 4000)) - 2000;
        endcase
      end
    @(negedge clk);
    thr_set = 6'(s); set_of_run = s;
    idx = 0; n_out = 0;
    repeat (2) @(negedge clk);
    run = 1;
    wait (n_out == N);
    @(negedge clk) run = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      int t = -1500;
      for (int k = 0; k < 15; k++) begin
        t += 1 + int'($urandom_range(0, 200));
        thr[s][k] = t;
        @(negedge clk); thr_we = 1; thr_wset = 6'(s); thr_widx = 4'(k); thr_wdata = PSUM_W'(t);
      end
    end
    @(negedge clk) thr_we = 0;
    run_set(0);
    run_set(1);
    // latency: one cycle without back-pressure
    rnd = 0;
    @(negedge clk); idx = N - 1; n_out = N - 1; run = 1;
    @(posedge clk); #1;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL latency"); end
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
