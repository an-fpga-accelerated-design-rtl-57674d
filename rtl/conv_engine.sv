// Tiled convolution engine: buffers, processing-element array, DMA and the
// controller that sequences them for one convolution layer.
//
// A layer computes Y[r][m][n] = sum over q,k,l of W[r][q][k][l] *
// X[q][S*m+k][S*n+l] for R output channels, Q input channels and a K x K
// kernel with stride S (the host stores each kernel flipped relative to the
// X[q][m-k][n-l] form of the loop nest, and pads the input in memory).
// The loop nest is tiled because neither the layer's coefficients nor its
// feature maps fit on chip:
//   for each output-channel tile of TM channels            (oi)
//     for each band of cfg.tr output rows                   (r0)
//       for each input-channel tile of TN channels          (ii)
//         load the TN input rows the band needs and the TM x TN x K x K
//         weight tile; for every output pixel of the band and every kernel
//         tap, the PE array does TM*TN MACs in one cycle; the per-pixel sums
//         are added to the accumulation buffer
//       write the band's TM output channels back, requantized
// Each (oi, r0, ii) step is loaded into one bank of the two-bank input and
// weight buffers while the compute side works on the other bank, so memory
// transfers overlap computation. Every bank remembers which weight tile it
// holds; when a step needs the weight tile already resident in its bank
// (always the case when all input channels fit in one tile, so every row band
// of an output tile uses the same weights), the fetch is skipped. Input
// tiles are tagged the same way with their (row band, input-channel tile):
// when a layer has a single row band and one or two input-channel tiles, the
// input planes stay resident while the output-channel tiles go by.
// Partial sums stay in the accumulation buffer across input-channel tiles
// and are written to memory only once, requantized to 16 bits. The
// accumulation buffer has two banks of OBUF_DEPTH pixels as well: while the
// DMA writer drains one finished band, the PE array accumulates the next
// band into the other bank. A band waits only if the write-back of the band
// before the previous one is still running. (One bank is written by the
// accumulate while the other is read by the writer, so the buffer has two
// read ports and one write port.)
// Timing: one kernel tap per cycle, i.e. out_rows*out_w*K*K cycles per step
// plus a 3-cycle drain; the write-back sends one output word per cycle
// while the memory port is ready, in parallel with the next band.
// Interface: start with cfg stable; done pulses when the last band is in
// memory. rd_* is the DMA reader's memory master, wr_* the writer's.
// The tiling, the double buffers, the PE array and the reuse of resident
// coefficients follow the design; tile sizes, the loop order, the memory
// layout and all interfaces are this design's choices.
module conv_engine
  import ssd_accel_pkg::*;
#(
  parameter int TN         = 8,
  parameter int TM         = 16,
  parameter int KMAX       = 3,
  parameter int IBUF_DEPTH = 4096,
  parameter int OBUF_DEPTH = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  // memory masters
  output mem_req_t    rd_req,
  input  logic        rd_ready,
  input  mem_rsp_t    rd_rsp,
  output mem_req_t    wr_req,
  input  logic        wr_ready,
  // activity counters of the last layer
  output logic [31:0] n_steps,
  output logic [31:0] n_wfetch,
  output logic [31:0] n_wreuse,
  output logic [31:0] n_ireuse,
  output logic [31:0] n_overlap,
  output logic [31:0] n_stall
);

  localparam int WDEPTH = KMAX * KMAX;
  localparam int WLANES = TM * TN;
  localparam int IAW    = $clog2(IBUF_DEPTH);
  localparam int WAW    = (WDEPTH <= 1) ? 1 : $clog2(WDEPTH);
  localparam int OAW    = $clog2(OBUF_DEPTH);
  localparam int RLW    = $clog2(WLANES);

  // ---------------------------------------------------------------- config
  layer_cfg_t c;
  dim_t  nti, nto;            // number of input / output channel tiles
  addr_t wtile_words;         // TM*TN*K*K
  addr_t plane_in, plane_out, row_out;

  always_ff @(posedge clk) if (start && !busy) c <= cfg;

  assign nti         = dim_t'((32'(c.in_c)  + TN - 1) / TN);
  assign nto         = dim_t'((32'(c.out_c) + TM - 1) / TM);
  assign wtile_words = addr_t'(TM * TN) * addr_t'(c.k) * addr_t'(c.k);
  assign plane_in    = addr_t'(c.in_h) * addr_t'(c.in_w);
  assign row_out     = addr_t'(c.out_w) + 2 * addr_t'(c.out_pad);
  assign plane_out   = (addr_t'(c.out_h) + 2 * addr_t'(c.out_pad)) * row_out;

  // ---------------------------------------------------------------- buffers
  logic                 ib_wr_en, wb_wr_en;
  logic                 ld_bank;
  logic [RLW-1:0]       dma_lane;
  logic [IAW-1:0]       dma_addr;
  data_t                dma_data;
  logic                 dma_wr;
  logic                 ld_is_w;

  logic                 cp_rd_en, cp_bank;
  logic [IAW-1:0]       cp_iaddr;
  logic [WAW-1:0]       cp_waddr;
  data_t [TN-1:0]       x_vec;
  data_t [WLANES-1:0]   w_flat;
  data_t [TM-1:0][TN-1:0] w_vec;

  assign ib_wr_en = dma_wr && !ld_is_w;
  assign wb_wr_en = dma_wr &&  ld_is_w;

  pingpong_buffer #(.LANES(TN), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_bank(ld_bank),
    .wr_lane(dma_lane[$clog2(TN)-1:0]), .wr_addr(dma_addr), .wr_data(dma_data),
    .rd_en(cp_rd_en), .rd_bank(cp_bank), .rd_addr(cp_iaddr), .rd_data(x_vec)
  );

  pingpong_buffer #(.LANES(WLANES), .DEPTH(WDEPTH)) u_wbuf (
    .clk, .wr_en(wb_wr_en), .wr_bank(ld_bank),
    .wr_lane(dma_lane), .wr_addr(dma_addr[WAW-1:0]), .wr_data(dma_data),
    .rd_en(cp_rd_en), .rd_bank(cp_bank), .rd_addr(cp_waddr), .rd_data(w_flat)
  );

  assign w_vec = w_flat;

  // ---------------------------------------------------------------- DMA reader
  logic        dr_start, dr_busy, dr_done;
  addr_t       dr_addr;
  logic [31:0] dr_len;
  logic [RLW-1:0] dr_lane0;
  logic [IAW-1:0] dr_wrap;

  dma_reader #(.LANES(WLANES), .DEPTH(IBUF_DEPTH)) u_rd (
    .clk, .rst_n, .start(dr_start), .mem_addr(dr_addr), .len(dr_len),
    .lane0(dr_lane0), .wrap(dr_wrap), .busy(dr_busy), .done(dr_done),
    .req(rd_req), .req_ready(rd_ready), .rsp(rd_rsp),
    .wr_en(dma_wr), .wr_lane(dma_lane), .wr_addr(dma_addr), .wr_data(dma_data)
  );

  // ---------------------------------------------------------------- bank state
  typedef struct packed {
    dim_t oi;
    dim_t ii;
    dim_t r0;
    dim_t rows;
    logic first_i;
    logic last_i;
  } step_t;

  logic  [1:0] full_q;
  step_t [1:0] meta_q;
  dim_t  [1:0] wtag_oi_q, wtag_ii_q;
  logic  [1:0] wtag_v_q;
  dim_t  [1:0] itag_r0_q, itag_ii_q;
  logic  [1:0] itag_v_q;
  logic        ld_set, cp_clr;

  // ---------------------------------------------------------------- loader
  typedef enum logic [2:0] {L_IDLE, L_WAIT, L_W, L_IN, L_INWAIT, L_DONE} lstate_t;
  lstate_t ls;
  dim_t    l_oi, l_ii, l_r0, l_tn;
  dim_t    l_rows;
  dim_t    l_in_rows;
  logic    l_hit, l_ihit;
  dim_t    l_q;

  assign l_rows    = (c.out_h - l_r0 < c.tr) ? dim_t'(c.out_h - l_r0) : c.tr;
  assign l_in_rows = dim_t'((32'(l_rows) - 1) * 32'(c.stride) + 32'(c.k));
  assign l_hit     = wtag_v_q[ld_bank] && wtag_oi_q[ld_bank] == l_oi
                     && wtag_ii_q[ld_bank] == l_ii;
  assign l_ihit    = itag_v_q[ld_bank] && itag_r0_q[ld_bank] == l_r0
                     && itag_ii_q[ld_bank] == l_ii;
  assign l_q       = dim_t'(32'(l_ii) * TN + 32'(l_tn));

  always_comb begin
    dr_start = 1'b0;
    dr_addr  = '0;
    dr_len   = '0;
    dr_lane0 = '0;
    dr_wrap  = '0;
    ld_set   = 1'b0;
    unique case (ls)
      L_WAIT: if (!full_q[ld_bank] && !l_hit) begin
        dr_start = 1'b1;
        dr_addr  = c.w_base + (addr_t'(l_oi) * addr_t'(nti) + addr_t'(l_ii)) * wtile_words;
        dr_len   = wtile_words;
        dr_wrap  = IAW'(32'(c.k) * 32'(c.k));
      end
      L_IN: if (!l_ihit && l_tn < dim_t'(TN) && l_q < c.in_c) begin
        dr_start = 1'b1;
        dr_addr  = c.in_base + addr_t'(l_q) * plane_in
                   + addr_t'(l_r0) * addr_t'(c.stride) * addr_t'(c.in_w);
        dr_len   = 32'(l_in_rows) * 32'(c.in_w);
        dr_lane0 = RLW'(l_tn);
        dr_wrap  = IAW'(dr_len);
      end else begin
        ld_set = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls        <= L_IDLE;
      ld_bank   <= 1'b0;
      ld_is_w   <= 1'b0;
      {l_oi, l_ii, l_r0, l_tn} <= '0;
      wtag_v_q  <= '0;
      wtag_oi_q <= '0;
      wtag_ii_q <= '0;
      itag_v_q  <= '0;
      itag_r0_q <= '0;
      itag_ii_q <= '0;
      meta_q    <= '0;
      n_wfetch  <= '0;
      n_wreuse  <= '0;
      n_ireuse  <= '0;
    end else begin
      unique case (ls)
        L_IDLE: if (start && !busy) begin
          ls       <= L_WAIT;
          ld_bank  <= 1'b0;
          {l_oi, l_ii, l_r0} <= '0;
          wtag_v_q <= '0;      // a new layer brings new coefficients
          itag_v_q <= '0;      // and new input maps
          n_wfetch <= '0;
          n_wreuse <= '0;
          n_ireuse <= '0;
        end
        L_WAIT: if (!full_q[ld_bank]) begin
          l_tn <= '0;
          if (l_hit) begin
            n_wreuse <= n_wreuse + 1;
            ls       <= L_IN;
          end else begin
            n_wfetch <= n_wfetch + 1;
            ld_is_w  <= 1'b1;
            wtag_v_q[ld_bank]  <= 1'b0;
            wtag_oi_q[ld_bank] <= l_oi;
            wtag_ii_q[ld_bank] <= l_ii;
            ls       <= L_W;
          end
        end
        L_W: if (dr_done) begin
          wtag_v_q[ld_bank] <= 1'b1;
          ld_is_w <= 1'b0;
          ls      <= L_IN;
        end
        L_IN: begin
          ld_is_w <= 1'b0;
          if (dr_start) begin
            ls <= L_INWAIT;
            if (l_tn == 0) itag_v_q[ld_bank] <= 1'b0;  // bank is being overwritten
          end else begin
            if (l_ihit) n_ireuse <= n_ireuse + 1;
            itag_v_q[ld_bank]  <= 1'b1;
            itag_r0_q[ld_bank] <= l_r0;
            itag_ii_q[ld_bank] <= l_ii;
            // bank complete: record the step and advance (ii, r0, oi)
            meta_q[ld_bank] <= '{oi: l_oi, ii: l_ii, r0: l_r0, rows: l_rows,
                                 first_i: (l_ii == 0), last_i: (l_ii + 1 == nti)};
            ld_bank <= ~ld_bank;
            ls      <= L_WAIT;
            if (l_ii + 1 < nti) begin
              l_ii <= l_ii + 1;
            end else begin
              l_ii <= '0;
              if (l_r0 + l_rows < c.out_h) begin
                l_r0 <= l_r0 + l_rows;
              end else begin
                l_r0 <= '0;
                l_oi <= l_oi + 1;
                if (l_oi + 1 == nto) ls <= L_DONE;
              end
            end
          end
        end
        L_INWAIT: if (dr_done) begin
          l_tn <= l_tn + 1;
          ls   <= L_IN;
        end
        L_DONE: if (done) ls <= L_IDLE;
        default: ls <= L_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- compute
  typedef enum logic [2:0] {C_IDLE, C_WAIT, C_RUN, C_DRAIN, C_WB, C_FIN} cstate_t;
  cstate_t cs;
  step_t   cur;
  dim_t    m_q, n_q;
  logic [3:0] kr_q, kc_q;
  logic [1:0] drain_q;
  logic [OAW-1:0] pix_q;

  // issue-stage flags and their two pipeline stages
  logic       s0_v, s0_first, s0_last;
  logic       s1_v, s1_first, s1_last;
  logic [OAW-1:0] s1_pix, s2_pix;
  logic       s1_clr, s2_clr;

  assign cp_rd_en = (cs == C_RUN);
  assign cp_iaddr = IAW'((32'(m_q) * 32'(c.stride) + 32'(kr_q)) * 32'(c.in_w)
                         + 32'(n_q) * 32'(c.stride) + 32'(kc_q));
  assign cp_waddr = WAW'(32'(kr_q) * 32'(c.k) + 32'(kc_q));
  assign s0_v     = (cs == C_RUN);
  assign s0_first = (kr_q == 0) && (kc_q == 0);
  assign s0_last  = (kr_q == c.k - 1) && (kc_q == c.k - 1);

  logic         pa_v;
  acc_t [TM-1:0] pa_sum;

  pe_array #(.TN(TN), .TM(TM)) u_pes (
    .clk, .rst_n, .in_valid(s1_v), .in_first(s1_first), .in_last(s1_last),
    .x(x_vec), .w(w_vec), .out_valid(pa_v), .out_sum(pa_sum)
  );

  logic           wb_rd_en;
  logic [OAW-1:0] wb_rd_addr;
  logic           ob_q;        // accumulation bank of the band being computed
  logic           wb_bank_q;   // bank the writer drains
  acc_t [TM-1:0]  wb_rd_data;

  acc_buffer #(.TM(TM), .DEPTH(2 * OBUF_DEPTH)) u_obuf (
    .clk, .acc_valid(pa_v), .acc_clear(s2_clr), .acc_addr({ob_q, s2_pix}), .acc_in(pa_sum),
    .rd_en(wb_rd_en), .rd_addr({wb_bank_q, wb_rd_addr}), .rd_data(wb_rd_data)
  );

  logic  dw_start, dw_busy, dw_done;
  dim_t  dw_nch_full;
  logic [$clog2(TM+1)-1:0] dw_nch;

  assign dw_nch_full = c.out_c - dim_t'(32'(cur.oi) * TM);
  assign dw_nch      = (dw_nch_full >= dim_t'(TM)) ? ($clog2(TM+1))'(TM)
                                                  : ($clog2(TM+1))'(dw_nch_full);

  dma_writer #(.TM(TM), .DEPTH(OBUF_DEPTH)) u_wr (
    .clk, .rst_n, .start(dw_start),
    .mem_base(c.out_base + addr_t'(32'(cur.oi) * TM) * plane_out
              + (addr_t'(cur.r0) + addr_t'(c.out_pad)) * row_out + addr_t'(c.out_pad)),
    .n_ch(dw_nch), .rows(cur.rows), .cols(c.out_w),
    .ch_stride(plane_out), .row_stride(row_out),
    .frac_shift(c.frac_shift), .relu(c.relu),
    .busy(dw_busy), .done(dw_done),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data),
    .req(wr_req), .req_ready(wr_ready)
  );

  assign cp_clr   = (cs == C_DRAIN) && (drain_q == 2'd2);
  assign dw_start = (cs == C_WB) && !dw_busy;

  logic last_step;
  assign last_step = cur.last_i && (cur.r0 + cur.rows >= c.out_h)
                     && (32'(cur.oi) + 1 == 32'(nto));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs      <= C_IDLE;
      cp_bank <= 1'b0;
      cur     <= '0;
      ob_q    <= 1'b0;
      wb_bank_q <= 1'b0;
      {m_q, n_q} <= '0;
      {kr_q, kc_q} <= '0;
      drain_q <= '0;
      pix_q   <= '0;
      done    <= 1'b0;
      n_steps <= '0;
      n_overlap <= '0;
      n_stall <= '0;
    end else begin
      done <= 1'b0;
      if (cs == C_RUN && dr_busy) n_overlap <= n_overlap + 1;
      unique case (cs)
        C_IDLE: if (start && !busy) begin
          cs        <= C_WAIT;
          cp_bank   <= 1'b0;
          n_steps   <= '0;
          n_overlap <= '0;
          n_stall   <= '0;
        end
        C_WAIT: begin
          if (full_q[cp_bank]) begin
            cur   <= meta_q[cp_bank];
            cs    <= C_RUN;
            {m_q, n_q, kr_q, kc_q} <= '0;
            pix_q <= '0;
          end else begin
            n_stall <= n_stall + 1;
          end
        end
        C_RUN: begin
          if (32'(kc_q) + 1 < 32'(c.k)) begin
            kc_q <= kc_q + 1'b1;
          end else begin
            kc_q <= '0;
            if (32'(kr_q) + 1 < 32'(c.k)) begin
              kr_q <= kr_q + 1'b1;
            end else begin
              kr_q  <= '0;
              pix_q <= pix_q + 1'b1;
              if (n_q + 1 < c.out_w) begin
                n_q <= n_q + 1;
              end else begin
                n_q <= '0;
                if (m_q + 1 < cur.rows) m_q <= m_q + 1;
                else begin
                  cs      <= C_DRAIN;
                  drain_q <= '0;
                end
              end
            end
          end
        end
        C_DRAIN: begin
          drain_q <= drain_q + 1'b1;
          if (drain_q == 2'd2) begin
            n_steps <= n_steps + 1;
            cp_bank <= ~cp_bank;
            if (cur.last_i) cs <= C_WB;
            else            cs <= C_WAIT;
          end
        end
        C_WB: if (!dw_busy) begin
          // hand the finished bank to the writer, go on in the other one
          wb_bank_q <= ob_q;
          ob_q      <= ~ob_q;
          cs        <= last_step ? C_FIN : C_WAIT;
        end
        C_FIN: if (dw_done) begin
          cs   <= C_IDLE;
          done <= 1'b1;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  // pipeline: issue -> buffer read -> PE array -> accumulation buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s1_v, s1_first, s1_last, s1_clr, s2_clr} <= '0;
      s1_pix <= '0;
      s2_pix <= '0;
    end else begin
      s1_v     <= s0_v;
      s1_first <= s0_first;
      s1_last  <= s0_last;
      s1_pix   <= pix_q;
      s1_clr   <= cur.first_i;
      s2_pix   <= s1_pix;
      s2_clr   <= s1_clr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) full_q <= '0;
    else begin
      if (ld_set) full_q[ld_bank] <= 1'b1;
      if (cp_clr) full_q[cp_bank] <= 1'b0;
    end
  end

  assign busy = (ls != L_IDLE) || (cs != C_IDLE);

  // The host must size the tiles to the buffers.
  a_ibuf_fits: assert property (@(posedge clk) disable iff (!rst_n)
    dr_start && ls == L_IN |-> dr_len <= IBUF_DEPTH);
  a_obuf_fits: assert property (@(posedge clk) disable iff (!rst_n)
    cs == C_RUN |-> 32'(pix_q) < OBUF_DEPTH);
  a_wr_idle: assert property (@(posedge clk) disable iff (!rst_n)
    dw_start |-> !dw_busy);
  a_kmax: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> c.k != 0 && 32'(c.k) <= KMAX);

endmodule
