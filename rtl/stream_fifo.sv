// stream_fifo: the FIFO channel that links two process functions of the
// dataflow pipeline.
//
// Reads block while the FIFO is empty (out_valid low) and writes block while it
// is full (in_ready low), as the dataflow template of the accelerator
// requires.  Storage is a circular array with separate read and write
// pointers; a word written in one cycle can be read in the next.  DEPTH must
// be a power of two.  The depth is this design's choice; the paper only says
// that most block RAM goes to these channels.
module stream_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (wptr - rptr) != (AW+1)'(DEPTH);
  assign out_valid = wptr != rptr;
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  // The occupancy never exceeds DEPTH.
  assert property (@(posedge clk) disable iff (!rst_n) (wptr - rptr) <= (AW+1)'(DEPTH));

endmodule
