// layer_param_memory: layer parameter memory of the control unit.
//
// One layer descriptor (cnet_pkg::layer_param_t) per convolution layer: filter
// size, channel counts, feature map and weight base addresses, and the
// parameters that enable cross-channel pooling, choose its operation and set
// the activation. The paper lists what the memory holds; the field layout is
// this design's. Synchronous write; synchronous read with one clock latency.
module layer_param_memory #(
  parameter int unsigned DEPTH = cnet_pkg::LP_DEPTH,
  parameter int unsigned AW    = cnet_pkg::LP_AW
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  cnet_pkg::layer_param_t  wdata,
  input  logic                    re,
  input  logic [AW-1:0]           raddr,
  output cnet_pkg::layer_param_t  rdata
);
  cnet_pkg::layer_param_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
