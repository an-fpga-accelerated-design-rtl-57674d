// Array of TM processing elements with a broadcast interconnect.
//
// The TN input-feature values read from the input buffer are broadcast to all
// TM PEs; PE j receives its own TN coefficients (output channel j of the
// weight tile). One cycle therefore performs TM*TN multiply-accumulates for
// one kernel tap of one output pixel, and out_sum[j] carries the partial sum
// of output channel j one cycle after the tap flagged in_last.
// The array of PEs fed through an interconnect from the on-chip buffers
// follows the tiled accelerator structure the design builds on; the plain
// broadcast is the simplest interconnect that computes the convolution.
module pe_array
  import ssd_accel_pkg::*;
#(
  parameter int TN = 8,
  parameter int TM = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  data_t [TN-1:0]          x,
  input  data_t [TM-1:0][TN-1:0]  w,
  output logic                    out_valid,
  output acc_t  [TM-1:0]          out_sum
);

  logic [TM-1:0] v;

  for (genvar j = 0; j < TM; j++) begin : g_pe
    pe #(.TN(TN)) u_pe (
      .clk, .rst_n, .in_valid, .in_first, .in_last,
      .x(x), .w(w[j]),
      .out_valid(v[j]), .out_sum(out_sum[j])
    );
  end

  assign out_valid = &v;  // all PEs run in lock step

endmodule
