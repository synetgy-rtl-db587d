// controller: the host-facing control block of the accelerator.
//
// The host CPU programs a layer through a small memory-mapped register file,
// writes START, and polls STATUS until DONE (the accelerator is poll based).
// One invocation runs one 1x1 Conv-Pool-Shift-Shuffle subgraph over a batch of
// images.  The controller first lets the weight loader prefetch the layer's
// weights (unless MODE.keep_weights says the buffer already holds them), then
// pulses run_start to every stage of the dataflow pipeline and waits until the
// writeback unit has written all output words.
//
// Register map (32-bit words, reg_addr is a word index):
//   0 CTRL    W  bit0 start
//   1 STATUS  R  bit0 busy, bit1 done (cleared by start)
//   2 DIM     RW width [8:0], height [24:16]
//   3 GRP     RW ic_grp [5:0], oc_grp [13:8], out_grp_total [21:16],
//                shuffle_off [29:24]
//   4 MODE    RW pool_en [0], shift_en [1], keep_weights [2],
//                thr_set [13:8], batch [31:24]
//   5 IN_BASE RW   6 W_BASE RW   7 OUT_BASE RW  (DRAM word addresses)
//   8 THR     W  threshold write: value [16:0], index [23:20], set [29:24]
//   9 CYCLES  R  clock cycles of the last invocation
// The register map, the handshake and the cycle counter are this design's
// choices; the paper names a controller and a control register only.
// reg_rdata is registered: valid the cycle after reg_re.
module controller
  import synetgy_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host register bus
  input  logic        reg_we,
  input  logic        reg_re,
  input  logic [3:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  // configuration to the datapath
  output layer_cfg_t  cfg,
  // threshold memory write port
  output logic        thr_we,
  output logic [5:0]  thr_wset,
  output logic [3:0]  thr_widx,
  output psum_t       thr_wdata,
  // sequencing
  output logic        wload_start,
  output logic [31:0] wload_words,
  input  logic        wload_busy,
  output logic        run_start,
  output logic [31:0] in_words,
  input  logic [31:0] wr_count,
  output logic        busy,
  output logic        done
);
  typedef enum logic [1:0] {S_IDLE, S_WLOAD, S_RUN} state_e;
  state_e      state;
  logic        keep_weights;
  logic [31:0] cycles;
  logic [31:0] out_words;
  logic        wload_started;

  // derived sizes
  dim_t out_w, out_h;
  always_comb begin
    out_w       = cfg.pool_en ? (cfg.width  >> 1) : cfg.width;
    out_h       = cfg.pool_en ? (cfg.height >> 1) : cfg.height;
    wload_words = 32'(cfg.oc_grp) * 32'(cfg.ic_grp) * OC;
    in_words    = 32'(cfg.batch) * 32'(cfg.width) * 32'(cfg.height) * 32'(cfg.ic_grp);
    out_words   = 32'(cfg.batch) * 32'(out_w) * 32'(out_h) * 32'(cfg.oc_grp);
  end

  wire start_wr = reg_we && reg_addr == 4'd0 && reg_wdata[0] && state == S_IDLE;

  assign thr_we    = reg_we && reg_addr == 4'd8;
  assign thr_wdata = psum_t'(reg_wdata[16:0]);
  assign thr_widx  = reg_wdata[23:20];
  assign thr_wset  = reg_wdata[29:24];
  assign busy      = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg          <= '0;
      keep_weights <= 1'b0;
      reg_rdata    <= '0;
    end else begin
      if (reg_we) begin
        unique case (reg_addr)
          4'd2: begin cfg.width <= reg_wdata[8:0]; cfg.height <= reg_wdata[24:16]; end
          4'd3: begin
            cfg.ic_grp        <= reg_wdata[5:0];
            cfg.oc_grp        <= reg_wdata[13:8];
            cfg.out_grp_total <= reg_wdata[21:16];
            cfg.shuffle_off   <= reg_wdata[29:24];
          end
          4'd4: begin
            cfg.pool_en  <= reg_wdata[0];
            cfg.shift_en <= reg_wdata[1];
            keep_weights <= reg_wdata[2];
            cfg.thr_set  <= reg_wdata[13:8];
            cfg.batch    <= reg_wdata[31:24];
          end
          4'd5: cfg.in_base  <= reg_wdata;
          4'd6: cfg.w_base   <= reg_wdata;
          4'd7: cfg.out_base <= reg_wdata;
          default: ;
        endcase
      end
      if (reg_re) begin
        unique case (reg_addr)
          4'd1: reg_rdata <= {30'd0, done, busy};
          4'd2: reg_rdata <= {7'd0, cfg.height, 7'd0, cfg.width};
          4'd3: reg_rdata <= {2'd0, cfg.shuffle_off, 2'd0, cfg.out_grp_total,
                              2'd0, cfg.oc_grp, 2'd0, cfg.ic_grp};
          4'd4: reg_rdata <= {cfg.batch, 10'd0, cfg.thr_set, 5'd0, keep_weights,
                              cfg.shift_en, cfg.pool_en};
          4'd5: reg_rdata <= cfg.in_base;
          4'd6: reg_rdata <= cfg.w_base;
          4'd7: reg_rdata <= cfg.out_base;
          4'd9: reg_rdata <= cycles;
          default: reg_rdata <= '0;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; cycles <= '0;
      wload_start <= 1'b0; run_start <= 1'b0; wload_started <= 1'b0;
    end else begin
      wload_start <= 1'b0;
      run_start   <= 1'b0;
      unique case (state)
        S_IDLE: if (start_wr) begin
          done   <= 1'b0;
          cycles <= '0;
          if (keep_weights) begin
            state     <= S_RUN;
            run_start <= 1'b1;
          end else begin
            state         <= S_WLOAD;
            wload_start   <= 1'b1;
            wload_started <= 1'b0;
          end
        end
        S_WLOAD: begin
          cycles        <= cycles + 1'b1;
          wload_started <= 1'b1;
          if (wload_started && !wload_busy) begin
            state     <= S_RUN;
            run_start <= 1'b1;
          end
        end
        S_RUN: begin
          cycles <= cycles + 1'b1;
          if (!run_start && wr_count == out_words) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
