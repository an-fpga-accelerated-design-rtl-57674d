// Memory arbiter: shares the single memory-controller port among NP masters.
//
// Each cycle the arbiter grants the port to one requesting master in
// round-robin order, starting after the master granted last, and forwards
// that master's request with the controller's ready. The grant is
// combinational, so an accepted request costs no extra cycle. The controller
// returns read data in request order; the arbiter records the master of
// every accepted read in a FIFO and routes each response back to it.
// Masters must keep a request stable until it is accepted (checked by an
// assertion). The FIFO depth bounds the reads in flight: requests stall when
// it is full.
// The paper names only the off-chip bus between on-chip buffers and external
// memory; the round-robin policy and the response FIFO are this design's.
module mem_arbiter
  import ssd_accel_pkg::*;
#(
  parameter int NP        = 3,
  parameter int MAX_READS = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mem_req_t [NP-1:0]    m_req,
  output logic     [NP-1:0]    m_ready,
  output mem_rsp_t [NP-1:0]    m_rsp,
  output mem_req_t             s_req,
  input  logic                 s_ready,
  input  mem_rsp_t             s_rsp
);

  localparam int IW = (NP <= 1) ? 1 : $clog2(NP);
  localparam int FW = $clog2(MAX_READS);

  logic [IW-1:0] last_q, gnt;
  logic          any;

  // read-return FIFO
  logic [IW-1:0] fifo [MAX_READS];
  logic [FW-1:0] wp_q, rp_q;
  logic [FW:0]   cnt_q;
  logic          full;

  assign full = (cnt_q == (FW+1)'(MAX_READS));

  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int i = 1; i <= NP; i++) begin
      int p;
      p = (int'(last_q) + i) % NP;
      if (!any && m_req[p].valid) begin
        any = 1'b1;
        gnt = IW'(p);
      end
    end
  end

  logic stall;
  assign stall = full && m_req[gnt].valid && !m_req[gnt].we;

  always_comb begin
    s_req = any ? m_req[gnt] : '0;
    if (stall) s_req.valid = 1'b0;
    m_ready = '0;
    if (any && !stall) m_ready[gnt] = s_ready;
  end

  logic push, pop;
  assign push = s_req.valid && s_ready && !s_req.we;
  assign pop  = s_rsp.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q <= IW'(NP-1);
      wp_q   <= '0;
      rp_q   <= '0;
      cnt_q  <= '0;
    end else begin
      if (s_req.valid && s_ready) last_q <= gnt;
      if (push) begin
        fifo[wp_q] <= gnt;
        wp_q       <= wp_q + 1'b1;
      end
      if (pop) rp_q <= rp_q + 1'b1;
      cnt_q <= cnt_q + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  always_comb begin
    m_rsp = '0;
    for (int i = 0; i < NP; i++) begin
      m_rsp[i].rdata = s_rsp.rdata;
      m_rsp[i].valid = s_rsp.valid && (fifo[rp_q] == IW'(i));
    end
  end

  // A response needs an outstanding read.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    s_rsp.valid |-> cnt_q != 0);
  // A request that is not accepted stays unchanged.
  for (genvar i = 0; i < NP; i++) begin : g_chk
    a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[i].valid && !m_ready[i] |=> m_req[i].valid && $stable(m_req[i]));
  end

endmodule
