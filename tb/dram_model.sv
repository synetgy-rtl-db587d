// dram_model: behavioural model of the off-chip DDR memory, for testbenches.
//
// Word-addressed memory of 128-bit words with NRD independent read ports
// (request channel + in-order response channel, valid/ready) and one write
// port.  Read data appears LAT cycles after the request at the earliest.
// With stall high the model drops its ready signals on a pseudo-random subset
// of cycles, so that back-pressure reaches the design.  Testbenches preload
// and inspect mem[] hierarchically.  Not synthesizable.
module dram_model
  import synetgy_pkg::*;
#(
  parameter int unsigned WORDS = 1 << 16,
  parameter int unsigned NRD   = 2,
  parameter int unsigned LAT   = 4
) (
  input  logic  clk,
  input  logic  rst_n,          // clears the outstanding-read queues
  input  logic  stall,
  input  logic  wr_hold,        // holds the write port not ready
  input  logic  rd_req_valid [NRD],
  output logic  rd_req_ready [NRD],
  input  addr_t rd_req_addr  [NRD],
  output logic  rd_rsp_valid [NRD],
  input  logic  rd_rsp_ready [NRD],
  output word_t rd_rsp_data  [NRD],
  input  logic  wr_valid,
  output logic  wr_ready,
  input  addr_t wr_addr,
  input  word_t wr_data
);
  localparam int unsigned QD = 64;   // outstanding reads per port

  word_t  mem [WORDS];
  addr_t  q_addr [NRD][QD];
  longint q_time [NRD][QD];
  int unsigned q_head [NRD], q_tail [NRD];
  longint now = 0;
  int unsigned lfsr = 32'h1234_5678;
  int unsigned rd_stall_cycles = 0;

  initial for (int p = 0; p < NRD; p++) begin q_head[p] = 0; q_tail[p] = 0; end

  always @(posedge clk) begin
    now <= now + 1;
    lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    wire empty = q_head[p] == q_tail[p];
    wire full  = (q_tail[p] - q_head[p]) == QD;
    assign rd_req_ready[p] = !full && !(stall && lfsr[p*3 +: 2] == 2'b00);
    assign rd_rsp_valid[p] = !empty && (now - q_time[p][q_head[p] % QD]) >= longint'(LAT)
                             && !(stall && lfsr[p*3+8 +: 2] == 2'b11);
    assign rd_rsp_data[p]  = mem[q_addr[p][q_head[p] % QD] % WORDS];
    always @(posedge clk) begin
      if (!rst_n) begin
        q_head[p] <= 0;
        q_tail[p] <= 0;
      end else begin
      if (rd_rsp_valid[p] && rd_rsp_ready[p]) q_head[p] <= q_head[p] + 1;
      if (rd_req_valid[p] && rd_req_ready[p]) begin
        q_addr[p][q_tail[p] % QD] <= rd_req_addr[p];
        q_time[p][q_tail[p] % QD] <= now;
        q_tail[p] <= q_tail[p] + 1;
      end
      if (rd_req_valid[p] && !rd_req_ready[p]) rd_stall_cycles <= rd_stall_cycles + 1;
      end
    end
  end

  assign wr_ready = !wr_hold && !(stall && lfsr[20 +: 2] == 2'b01);
  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) mem[wr_addr % WORDS] <= wr_data;
  end
endmodule
