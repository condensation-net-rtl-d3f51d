// weight_memory: filter weight memory.
//
// Holds every 1-bit filter weight of the network (1,935 KB for the quantized
// Condensation-Net with alpha = 2), densely packed, 32 weights per word. The
// read port is addressed by weight bit: it returns, one clock after the
// request, the single weight at that bit address. Bit b of the flat weight
// space is bit b[4:0] of word b >> 5. The write port loads whole words.
// Capacity and 1-bit weights follow the paper; word width and bit order are
// this design's choices.
module weight_memory #(
  parameter int unsigned DEPTH = cnet_pkg::WM_DEPTH,
  parameter int unsigned AW    = cnet_pkg::WM_AW
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [cnet_pkg::WM_WORD-1:0] wdata,
  input  logic                       re,
  input  logic [AW+4:0]              rbit_addr,
  output logic                       rbit
);
  logic [cnet_pkg::WM_WORD-1:0] mem [DEPTH];
  logic [cnet_pkg::WM_WORD-1:0] word_q;
  logic [4:0]                   sel_q;

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    if (re) begin
      word_q <= (32'(rbit_addr[AW+4:5]) < DEPTH) ? mem[rbit_addr[AW+4:5]] : '0;
      sel_q  <= rbit_addr[4:0];
    end
  end

  assign rbit = word_q[sel_q];
endmodule
