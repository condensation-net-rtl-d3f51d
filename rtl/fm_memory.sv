// fm_memory: feature map memory.
//
// Holds the feature maps of two consecutive layers: the input channels of the
// layer being processed and the output channels it produces (the "input" and
// "output" parts of one memory). Where the two parts sit is decided by the
// base addresses in the layer descriptors, not by this memory.
//
// One pixel per address. The memory is split into NB byte-wide banks, pixel
// address p living in bank p % NB at row p / NB. Because any NB consecutive
// addresses fall into NB different banks, the read port returns NB
// consecutive pixels, rdata[i] = pixel (raddr + i), from any start address in
// one clock: a whole row of a block plus its filter halo. Addresses wrap
// modulo DEPTH (a power of two). The write port writes one pixel per clock.
//
// Timing: rdata is valid one clock after `re`; it holds while `re` is low.
// The 4,096 KB capacity is the paper's; the byte per pixel and the banked
// row-wide read port are this design's choices (in silicon each bank would be
// an SRAM macro).
module fm_memory #(
  parameter int unsigned W     = cnet_pkg::PIX_W,
  parameter int unsigned DEPTH = cnet_pkg::FM_DEPTH,
  parameter int unsigned AW    = cnet_pkg::FM_AW,
  parameter int unsigned NB    = cnet_pkg::FM_BANKS
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata [NB]
);
  localparam int unsigned BS = $clog2(NB);        // bank select bits
  localparam int unsigned RW = AW - BS;           // row address bits
  localparam int unsigned ROWS = DEPTH / NB;

  logic [W-1:0]    bank_q [NB];
  logic [BS-1:0]   rot_q;

  for (genvar b = 0; b < int'(NB); b++) begin : g_bank
    logic [W-1:0]  mem [ROWS];
    logic [RW-1:0] row;

    // bank b serves lane (b - raddr) % NB, i.e. address raddr + that lane
    assign row = raddr[AW-1:BS] + RW'(BS'(b) < raddr[BS-1:0]);

    always_ff @(posedge clk) begin
      if (we && waddr[BS-1:0] == BS'(b)) mem[waddr[AW-1:BS]] <= wdata;
      if (re) bank_q[b] <= mem[row];
    end
  end

  always_ff @(posedge clk) begin
    if (re) rot_q <= raddr[BS-1:0];
  end

  // rotate the banks back into address order
  always_comb begin
    for (int i = 0; i < int'(NB); i++) rdata[i] = bank_q[BS'(i + int'(rot_q))];
  end

  initial assert (DEPTH == (1 << AW) && NB == (1 << BS))
    else $error("fm_memory: DEPTH and NB must be powers of two, DEPTH = 2**AW");
endmodule
