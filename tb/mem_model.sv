// Behavioural model of the memory controller and its external DRAM.
//
// Words are 16 bits. A request is accepted when req.valid and req_ready are
// both high; req_ready is randomly low about one cycle in four when
// RAND_READY is set, to exercise back-pressure. Writes take effect at once;
// read data returns in request order LAT cycles after acceptance. The
// array mem is public so testbenches can preload and inspect it. Addresses
// wrap at DEPTH. Not synthesizable: it stands in for vendor IP and a chip.
module mem_model
  import ssd_accel_pkg::*;
#(
  parameter int DEPTH      = 65536,
  parameter int LAT        = 4,
  parameter bit RAND_READY = 1'b1
) (
  input  logic     clk,
  input  mem_req_t req,
  output logic     req_ready,
  output mem_rsp_t rsp
);

  data_t mem [DEPTH];
  logic  [LAT-1:0] pv = '0;
  data_t pd [LAT];

  initial req_ready = 1'b1;

  always @(posedge clk) begin
    if (req.valid && req_ready && req.we) mem[req.addr % DEPTH] <= req.wdata;
    pv[0] <= req.valid && req_ready && !req.we;
    pd[0] <= mem[req.addr % DEPTH];
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    req_ready <= RAND_READY ? (($urandom % 4) != 0) : 1'b1;
  end

  assign rsp.valid = pv[LAT-1];
  assign rsp.rdata = pd[LAT-1];

endmodule
