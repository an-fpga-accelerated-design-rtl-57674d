// Shared types and constants of the tiled convolution accelerator.
//
// All feature-map values and coefficients are 16-bit two's-complement
// fixed-point numbers whose binary point may differ per layer (dynamic fixed
// point). Products are 32 bits wide and are summed in ACC_W-bit accumulators,
// wide enough that no realistic layer of the SSD network can overflow them.
// External memory is addressed in 16-bit words. The memory request and
// response structs below are the bundle every memory master in the design
// uses; a request is accepted in the cycle both valid and ready are high, and
// read responses come back in request order.
package ssd_accel_pkg;

  localparam int DATA_W = 16;   // paper: 16-bit parameters and features
  localparam int PROD_W = 2 * DATA_W;
  localparam int ACC_W  = 48;   // own choice: accumulator width
  localparam int ADDR_W = 32;   // word address of external memory
  localparam int DIM_W  = 16;   // width of the layer-size fields

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic        [ADDR_W-1:0] addr_t;
  typedef logic        [DIM_W-1:0]  dim_t;

  typedef struct packed {
    logic  valid;
    logic  we;
    addr_t addr;
    data_t wdata;
  } mem_req_t;

  typedef struct packed {
    logic  valid;
    data_t rdata;
  } mem_rsp_t;

  // One convolution layer as the processor programs it. Input maps are
  // stored zero-padded by the host ([in_c][in_h][in_w], in_h/in_w include the
  // padding); weights are stored tile by tile, each tile one contiguous run of
  // TM*TN*k*k words in [tm][tn][kr][kc] order; the output is written as
  // [out_c][out_h+2*out_pad][out_w+2*out_pad] into a pre-zeroed frame so the
  // next layer finds its own padding in place.
  typedef struct packed {
    addr_t      in_base;
    addr_t      w_base;
    addr_t      out_base;
    dim_t       in_c;
    dim_t       in_h;
    dim_t       in_w;
    dim_t       out_c;
    dim_t       out_h;
    dim_t       out_w;
    logic [3:0] k;          // kernel size K (square)
    logic [1:0] stride;     // 1 or 2
    dim_t       tr;         // output rows per tile
    logic [5:0] frac_shift; // right shift that takes the product point to the output point
    logic       relu;
    logic [3:0] out_pad;
  } layer_cfg_t;

endpackage
