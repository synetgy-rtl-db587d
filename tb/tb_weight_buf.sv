// tb_weight_buf: self-checking test of the on-chip weight buffer.
//
// Writes random IC-weight words into every lane of a set of entries, then
// reads entries back and checks that one read returns all OC lanes of the
// entry one cycle later, and that the output holds while r_en is low.
module tb_weight_buf;
  import synetgy_pkg::*;
  localparam int DEPTH = 512, NE = 40;

  logic clk = 0;
  always #5 clk = ~clk;
  logic w_en = 0, r_en = 0;
  logic [8:0] w_entry = '0, r_entry = '0;
  logic [4:0] w_lane = '0;
  wgt_row_t w_data = '0;
  wgt_blk_t r_data;

  weight_buf #(.DEPTH(DEPTH)) dut (.clk, .w_en, .w_entry, .w_lane, .w_data, .r_en, .r_entry, .r_data);

  int checks = 0, failures = 0;
  wgt_row_t ref_mem [NE][32];
  int entries [NE];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < NE; e++) entries[e] = (e * 13 + 7) % DEPTH;
    for (int e = 0; e < NE; e++)
      for (int l = 0; l < 32; l++) begin
        wgt_row_t v;
        for (int k = 0; k < 4; k++) v[k*32 +: 32] = $urandom;
        ref_mem[e][l] = v;
        @(negedge clk); w_en = 1; w_entry = 9'(entries[e]); w_lane = 5'(l); w_data = v;
      end
    @(negedge clk) w_en = 0;
    for (int e = NE - 1; e >= 0; e--) begin
      @(negedge clk); r_en = 1; r_entry = 9'(entries[e]);
      @(negedge clk); r_en = 0; r_entry = 9'(entries[(e + 1) % NE]);
      for (int l = 0; l < 32; l++) begin
        checks++;
        if (r_data[l] != ref_mem[e][l]) begin
          failures++;
          if (failures < 5) $display("FAIL entry %0d lane %0d", entries[e], l);
        end
      end
      @(negedge clk);
      checks++;
      if (r_data[5] != ref_mem[e][5]) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
