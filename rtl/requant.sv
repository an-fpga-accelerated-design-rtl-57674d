// Requantizer: accumulator to 16-bit dynamic fixed point.
//
// A sum of products carries the sum of the input's and the coefficient's
// fractional bits. The layer's output has its own fractional width, so the
// sum is shifted right by frac_shift bits with round-half-up, saturated to
// the 16-bit range and, when relu is set, negative results are set to zero.
// Purely combinational.
// The 16-bit width and the per-layer choice of fractional bits follow the
// quantization the design uses; the rounding mode, the saturation and the
// optional ReLU are this design's choices.
module requant
  import ssd_accel_pkg::*;
(
  input  acc_t       acc,
  input  logic [5:0] frac_shift,
  input  logic       relu,
  output data_t      q
);

  localparam acc_t MAXV = acc_t'(2**(DATA_W-1) - 1);
  localparam acc_t MINV = -acc_t'(2**(DATA_W-1));

  acc_t rounded;
  acc_t shifted;

  always_comb begin
    if (frac_shift == 0) rounded = acc;
    else                 rounded = acc + (acc_t'(1) <<< (frac_shift - 6'd1));
    shifted = rounded >>> frac_shift;
    if (relu && shifted < 0)  q = '0;
    else if (shifted > MAXV)  q = data_t'(MAXV);
    else if (shifted < MINV)  q = data_t'(MINV);
    else                      q = data_t'(shifted);
  end

endmodule
