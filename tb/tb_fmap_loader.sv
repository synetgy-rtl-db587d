// tb_fmap_loader: self-checking test of the input feature-map loader.
//
// A behavioural DRAM with random stalls holds random input words.  For each
// pixel the loader must emit the pixel's ic_grp words in order, oc_grp times
// (first from DRAM, then replayed from its pixel buffer), must read each DRAM
// word exactly once and in address order, and must stop after n_words.
module tb_fmap_loader;
  import synetgy_pkg::*;
  localparam addr_t BASE = 32'h100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stall = 1;
  logic [31:0] n_words = '0;
  grp_t icg = '0, ocg = '0;
  logic  rq_v [1], rq_r [1], rs_v [1], rs_r [1];
  addr_t rq_a [1];
  word_t rs_d [1];
  logic out_valid, out_ready = 1;
  act_vec_t out_data;
  logic unused_wr_ready;

  fmap_loader dut (.clk, .rst_n, .start, .in_base(BASE), .n_words, .ic_grp(icg), .oc_grp(ocg),
    .rd_req_valid(rq_v[0]), .rd_req_ready(rq_r[0]), .rd_req_addr(rq_a[0]),
    .rd_rsp_valid(rs_v[0]), .rd_rsp_ready(rs_r[0]), .rd_rsp_data(rs_d[0]),
    .out_valid, .out_ready, .out_data);

  dram_model #(.WORDS(4096), .NRD(1), .LAT(3)) u_dram (.clk, .rst_n, .stall, .wr_hold(1'b0),
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_ready(rs_r), .rd_rsp_data(rs_d),
    .wr_valid(1'b0), .wr_ready(unused_wr_ready), .wr_addr('0), .wr_data('0));

  int checks = 0, failures = 0;
  int n_out = 0, n_req = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    out_ready <= $urandom_range(0, 3) != 0;
    if (rst_n && rq_v[0] && rq_r[0]) begin
      checks++;
      if (rq_a[0] != BASE + addr_t'(n_req)) begin failures++; $display("FAIL request %0d addr %0h", n_req, rq_a[0]); end
      n_req <= n_req + 1;
    end
    if (rst_n && out_valid && out_ready) begin
      automatic int per_pix = int'(icg) * int'(ocg);
      automatic int p = n_out / per_pix, r = n_out % per_pix;
      automatic int it = r % int'(icg);
      checks++;
      if (out_data != act_vec_t'(u_dram.mem[BASE + addr_t'(p*int'(icg) + it)])) begin
        failures++;
        if (failures < 5) $display("FAIL out %0d (pix %0d ic_t %0d)", n_out, p, it);
      end
      n_out <= n_out + 1;
    end
  end

  task automatic run_case(input int npix, input int IG, input int OG);
    for (int a = 0; a < npix*IG; a++) u_dram.mem[BASE + a] = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    icg = grp_t'(IG); ocg = grp_t'(OG); n_words = 32'(npix*IG);
    n_out = 0; n_req = 0;
    start = 1; @(negedge clk) start = 0;
    wait (n_out == npix*IG*OG);
    repeat (30) @(negedge clk);
    checks++;
    if (n_out != npix*IG*OG || n_req != npix*IG) begin
      failures++; $display("FAIL counts: out %0d req %0d", n_out, n_req);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_case(10, 2, 3);
    run_case(7, 3, 1);
    run_case(5, 1, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
