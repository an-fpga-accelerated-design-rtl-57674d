// Control and status registers, written by the soft processor.
//
// The processor programs one convolution layer at a time through a 32-bit
// Avalon-MM slave port (word addresses, fixed read latency of one cycle):
// it writes the layer description, then writes 1 to CTRL to start the
// engine, and waits for the done interrupt or polls STATUS. It also sets
// where camera frames are stored and reads the frame and activity counters.
//   0 CTRL        w  bit0: start the layer (one-cycle pulse to the engine)
//   1 STATUS      r  bit0 busy, bit1 done (set when a layer ends, cleared by
//                    start or by writing 1 to bit1); irq = done
//   2 IN_BASE  3 W_BASE  4 OUT_BASE                  word addresses
//   5 IN_C  6 IN_H  7 IN_W  8 OUT_C  9 OUT_H  10 OUT_W  layer sizes
//   11 K  12 STRIDE  13 TR (output rows per tile)  14 FRAC_SHIFT
//   15 RELU  16 OUT_PAD
//   17 FRAME_BASE  18 FRAME_WORDS                   camera frame slots
//   19 FRAME_COUNT  20 DONE_SLOT                    r  frame status
//   21 N_STEPS  22 N_WFETCH  23 N_WREUSE  24 N_OVERLAP  25 N_STALL
//   26 N_IREUSE (input tiles not fetched again)                      r
// That a soft processor sets up the transfers follows the design; the
// register map is this design's own.
module csr_regs
  import ssd_accel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // Avalon-MM slave
  input  logic [4:0]  avs_address,
  input  logic        avs_write,
  input  logic [31:0] avs_writedata,
  input  logic        avs_read,
  output logic [31:0] avs_readdata,
  output logic        irq,
  // to and from the engine
  output layer_cfg_t  cfg,
  output logic        start,
  input  logic        busy,
  input  logic        done,
  input  logic [31:0] n_steps,
  input  logic [31:0] n_wfetch,
  input  logic [31:0] n_wreuse,
  input  logic [31:0] n_ireuse,
  input  logic [31:0] n_overlap,
  input  logic [31:0] n_stall,
  // to and from the frame writer
  output addr_t       frame_base,
  output logic [31:0] frame_words,
  input  logic [31:0] frame_count,
  input  logic        done_slot
);

  typedef enum logic [4:0] {
    R_CTRL, R_STATUS, R_IN_BASE, R_W_BASE, R_OUT_BASE, R_IN_C, R_IN_H, R_IN_W,
    R_OUT_C, R_OUT_H, R_OUT_W, R_K, R_STRIDE, R_TR, R_FRAC, R_RELU, R_OUT_PAD,
    R_FRAME_BASE, R_FRAME_WORDS, R_FRAME_COUNT, R_DONE_SLOT, R_N_STEPS,
    R_N_WFETCH, R_N_WREUSE, R_N_OVERLAP, R_N_STALL, R_N_IREUSE
  } reg_t;

  logic done_q;
  reg_t a;
  assign a   = reg_t'(avs_address);
  assign irq = done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '0;
      start       <= 1'b0;
      done_q      <= 1'b0;
      frame_base  <= '0;
      frame_words <= '0;
    end else begin
      start <= 1'b0;
      if (done) done_q <= 1'b1;
      if (avs_write) begin
        unique case (a)
          R_CTRL:        if (avs_writedata[0]) begin start <= 1'b1; done_q <= 1'b0; end
          R_STATUS:      if (avs_writedata[1]) done_q <= 1'b0;
          R_IN_BASE:     cfg.in_base    <= avs_writedata;
          R_W_BASE:      cfg.w_base     <= avs_writedata;
          R_OUT_BASE:    cfg.out_base   <= avs_writedata;
          R_IN_C:        cfg.in_c       <= dim_t'(avs_writedata);
          R_IN_H:        cfg.in_h       <= dim_t'(avs_writedata);
          R_IN_W:        cfg.in_w       <= dim_t'(avs_writedata);
          R_OUT_C:       cfg.out_c      <= dim_t'(avs_writedata);
          R_OUT_H:       cfg.out_h      <= dim_t'(avs_writedata);
          R_OUT_W:       cfg.out_w      <= dim_t'(avs_writedata);
          R_K:           cfg.k          <= avs_writedata[3:0];
          R_STRIDE:      cfg.stride     <= avs_writedata[1:0];
          R_TR:          cfg.tr         <= dim_t'(avs_writedata);
          R_FRAC:        cfg.frac_shift <= avs_writedata[5:0];
          R_RELU:        cfg.relu       <= avs_writedata[0];
          R_OUT_PAD:     cfg.out_pad    <= avs_writedata[3:0];
          R_FRAME_BASE:  frame_base     <= avs_writedata;
          R_FRAME_WORDS: frame_words    <= avs_writedata;
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) avs_readdata <= '0;
    else if (avs_read) begin
      unique case (a)
        R_STATUS:      avs_readdata <= {30'd0, done_q, busy};
        R_IN_BASE:     avs_readdata <= cfg.in_base;
        R_W_BASE:      avs_readdata <= cfg.w_base;
        R_OUT_BASE:    avs_readdata <= cfg.out_base;
        R_IN_C:        avs_readdata <= 32'(cfg.in_c);
        R_IN_H:        avs_readdata <= 32'(cfg.in_h);
        R_IN_W:        avs_readdata <= 32'(cfg.in_w);
        R_OUT_C:       avs_readdata <= 32'(cfg.out_c);
        R_OUT_H:       avs_readdata <= 32'(cfg.out_h);
        R_OUT_W:       avs_readdata <= 32'(cfg.out_w);
        R_K:           avs_readdata <= 32'(cfg.k);
        R_STRIDE:      avs_readdata <= 32'(cfg.stride);
        R_TR:          avs_readdata <= 32'(cfg.tr);
        R_FRAC:        avs_readdata <= 32'(cfg.frac_shift);
        R_RELU:        avs_readdata <= 32'(cfg.relu);
        R_OUT_PAD:     avs_readdata <= 32'(cfg.out_pad);
        R_FRAME_BASE:  avs_readdata <= frame_base;
        R_FRAME_WORDS: avs_readdata <= frame_words;
        R_FRAME_COUNT: avs_readdata <= frame_count;
        R_DONE_SLOT:   avs_readdata <= 32'(done_slot);
        R_N_STEPS:     avs_readdata <= n_steps;
        R_N_WFETCH:    avs_readdata <= n_wfetch;
        R_N_WREUSE:    avs_readdata <= n_wreuse;
        R_N_OVERLAP:   avs_readdata <= n_overlap;
        R_N_STALL:     avs_readdata <= n_stall;
        R_N_IREUSE:    avs_readdata <= n_ireuse;
        default:       avs_readdata <= '0;
      endcase
    end
  end

endmodule
