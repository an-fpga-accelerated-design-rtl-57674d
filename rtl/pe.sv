// Processing element: one output channel's multiply-accumulate.
//
// Each cycle with in_valid high the PE multiplies TN input-feature values by
// TN coefficients (the TN input channels of the current tile at one kernel
// tap), adds the TN products in a binary adder tree and adds the tree sum to
// its accumulator. in_first starts a new sum; on a cycle with in_last high
// the finished sum (the contribution of one input-channel tile to one output
// pixel) is presented on out_sum with out_valid one cycle later.
// The multiplier-plus-adder-tree shape follows the PE drawing of the tiled
// accelerator the design builds on; the accumulator and its control flags
// are this design's choice.
module pe
  import ssd_accel_pkg::*;
#(
  parameter int TN = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  data_t [TN-1:0]    x,
  input  data_t [TN-1:0]    w,
  output logic              out_valid,
  output acc_t              out_sum
);

  // Adder tree over a power-of-two number of leaves; unused leaves are zero.
  localparam int LEAVES = (TN <= 1) ? 1 : (1 << $clog2(TN));

  acc_t tree [2*LEAVES-1];

  always_comb begin
    for (int i = 0; i < LEAVES; i++) begin
      if (i < TN) tree[LEAVES-1+i] = acc_t'(PROD_W'(x[i] * w[i]));
      else        tree[LEAVES-1+i] = '0;
    end
    for (int i = LEAVES-2; i >= 0; i--) begin
      tree[i] = tree[2*i+1] + tree[2*i+2];
    end
  end

  acc_t acc_q;
  acc_t acc_next;

  // x*w is formed at PROD_W bits and sign-extended before the tree.
  assign acc_next = (in_first ? acc_t'(0) : acc_q) + tree[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_sum   <= '0;
    end else begin
      out_valid <= in_valid & in_last;
      if (in_valid) begin
        acc_q <= acc_next;
        if (in_last) out_sum <= acc_next;
      end
    end
  end

endmodule
