// Output (accumulation) buffer.
//
// Holds the partial sums of TM output channels for every pixel of the
// current output tile. A convolution over many input channels is computed one
// input-channel tile at a time; each tile's contribution arrives on
// acc_valid/acc_in for pixel acc_addr and is added to the stored sum
// (acc_clear starts the sum at zero for the first input-channel tile). Keeping
// these sums on chip, instead of writing partial results to external memory
// and reading them back, is how the design reuses stored results to save
// memory traffic. The accumulate is a read-modify-write done in one cycle.
// A separate read port, used by the DMA writer, returns all TM sums of pixel
// rd_addr one cycle after rd_en.
module acc_buffer
  import ssd_accel_pkg::*;
#(
  parameter int TM    = 16,
  parameter int DEPTH = 2048
) (
  input  logic                      clk,
  input  logic                      acc_valid,
  input  logic                      acc_clear,
  input  logic [$clog2(DEPTH)-1:0]  acc_addr,
  input  acc_t [TM-1:0]             acc_in,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output acc_t [TM-1:0]             rd_data
);

  for (genvar j = 0; j < TM; j++) begin : g_lane
    acc_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (acc_valid)
        mem[acc_addr] <= (acc_clear ? acc_t'(0) : mem[acc_addr]) + acc_in[j];
      if (rd_en) rd_data[j] <= mem[rd_addr];
    end
  end

endmodule
