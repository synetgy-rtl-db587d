// tb_stream_fifo: self-checking test of the dataflow FIFO channel.
//
// Random pushes and pops against a reference queue: data order must be kept,
// in_ready must drop exactly when DEPTH words are stored (blocking write) and
// out_valid exactly when none are (blocking read).  Phases with a stalled
// reader and a stalled writer make both limits occur.
module tb_stream_fifo;
  localparam int W = 16, D = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q [$];
  int wprob = 50, rprob = 50;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (in_ready != (q.size() < D) || out_valid != (q.size() > 0)) begin
        failures++;
        if (failures < 5) $display("FAIL flags: size %0d ready %0d valid %0d", q.size(), in_ready, out_valid);
      end
      if (!in_ready) n_full++;
      if (!out_valid) n_empty++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("FAIL data %h vs %h", out_data, q[0]); end
        void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
      in_valid  <= $urandom_range(0, 99) < wprob;
      out_ready <= $urandom_range(0, 99) < rprob;
      in_data   <= W'($urandom);
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (500) @(negedge clk);
    wprob = 90; rprob = 10;
    repeat (500) @(negedge clk);
    wprob = 10; rprob = 90;
    repeat (500) @(negedge clk);
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL limits not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
