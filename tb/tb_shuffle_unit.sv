// tb_shuffle_unit: self-checking test of the writeback unit with channel
// shuffle.
//
// Streams random output vectors with random gaps and write back-pressure and
// checks each write request: address out_base + pixel*out_grp_total +
// ((group + shuffle_off) mod out_grp_total), data unchanged.  Covers the
// plain store (offset 0, no spare groups), an offset that wraps around the
// row, and wr_count, which must equal the number of accepted writes.
module tb_shuffle_unit;
  import synetgy_pkg::*;
  localparam int MAXV = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  addr_t out_base = '0;
  grp_t oc_grp = '0, tot = '0, off = '0;
  logic in_valid, in_ready, wr_valid, wr_ready = 1;
  out_vec_t in_data;
  addr_t wr_addr;
  word_t wr_data;
  logic [31:0] wr_count;

  shuffle_unit dut (.clk, .rst_n, .start, .out_base, .oc_grp, .out_grp_total(tot), .shuffle_off(off),
    .in_valid, .in_ready, .in_data, .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_count);

  int checks = 0, failures = 0;
  out_vec_t src [MAXV];
  int n_in = 0, n_src = 0, n_out = 0;
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
    gate     <= $urandom_range(0, 3) != 0;
    wr_ready <= $urandom_range(0, 2) != 0;
    if (in_valid && in_ready) n_in <= n_in + 1;
    if (rst_n && run && wr_valid && wr_ready) begin
      automatic int p = n_out / int'(oc_grp), g = n_out % int'(oc_grp);
      automatic addr_t ea = out_base + addr_t'(p * int'(tot) + (g + int'(off)) % int'(tot));
      checks++;
      if (wr_addr != ea || wr_data != src[n_out]) begin
        failures++;
        if (failures < 5) $display("FAIL write %0d: addr %0h vs %0h", n_out, wr_addr, ea);
      end
      n_out <= n_out + 1;
    end
  end

  task automatic run_case(input int npix, input int G, input int T, input int O);
    n_src = npix * G;
    for (int i = 0; i < n_src; i++)
      for (int c = 0; c < 32; c++) src[i][c] = 4'($urandom_range(0, 15));
    @(negedge clk);
    oc_grp = grp_t'(G); tot = grp_t'(T); off = grp_t'(O); out_base = addr_t'($urandom_range(0, 4096));
    n_in = 0; n_out = 0;
    start = 1; @(negedge clk) start = 0; run = 1;
    wait (n_out == n_src);
    repeat (5) @(negedge clk);
    checks++;
    if (wr_count != 32'(n_src)) begin failures++; $display("FAIL wr_count %0d vs %0d", wr_count, n_src); end
    run = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_case(20, 2, 2, 0);
    run_case(15, 2, 4, 3);
    run_case(10, 3, 5, 4);
    run_case(12, 1, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
