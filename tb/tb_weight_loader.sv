// tb_weight_loader: self-checking test of the weight prefetch.
//
// A behavioural DRAM with random stalls holds random weight words at w_base.
// Every weight-buffer write must carry word k to entry k / 32, lane k mod 32;
// exactly n_words writes must happen and busy must then drop.
module tb_weight_loader;
  import synetgy_pkg::*;
  localparam addr_t BASE = 32'h40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stall = 1, busy;
  logic [31:0] n_words = '0;
  logic  rq_v [1], rq_r [1], rs_v [1], rs_r [1];
  addr_t rq_a [1];
  word_t rs_d [1];
  logic wb_en;
  logic [8:0] wb_entry;
  logic [4:0] wb_lane;
  wgt_row_t wb_data;
  logic unused_wr_ready;

  weight_loader dut (.clk, .rst_n, .start, .w_base(BASE), .n_words, .busy,
    .rd_req_valid(rq_v[0]), .rd_req_ready(rq_r[0]), .rd_req_addr(rq_a[0]),
    .rd_rsp_valid(rs_v[0]), .rd_rsp_ready(rs_r[0]), .rd_rsp_data(rs_d[0]),
    .wb_en, .wb_entry, .wb_lane, .wb_data);

  dram_model #(.WORDS(4096), .NRD(1), .LAT(5)) u_dram (.clk, .rst_n, .stall, .wr_hold(1'b0),
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_ready(rs_r), .rd_rsp_data(rs_d),
    .wr_valid(1'b0), .wr_ready(unused_wr_ready), .wr_addr('0), .wr_data('0));

  int checks = 0, failures = 0, n_wr = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && wb_en) begin
      checks++;
      if (int'(wb_entry) != n_wr / 32 || int'(wb_lane) != n_wr % 32 ||
          wb_data != wgt_row_t'(u_dram.mem[BASE + addr_t'(n_wr)])) begin
        failures++;
        if (failures < 5) $display("FAIL write %0d: entry %0d lane %0d", n_wr, wb_entry, wb_lane);
      end
      n_wr <= n_wr + 1;
    end
  end

  task automatic run_case(input int nw);
    for (int a = 0; a < nw; a++) u_dram.mem[BASE + a] = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    n_words = 32'(nw); n_wr = 0;
    start = 1; @(negedge clk) start = 0;
    wait (!busy);
    repeat (20) @(negedge clk);
    checks++;
    if (n_wr != nw) begin failures++; $display("FAIL %0d writes of %0d", n_wr, nw); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_case(2*3*32);
    stall = 0;
    run_case(32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
