// plpu: Pooling Layer Processing Unit.
//
// Receives the activated virtual blocks of one output group one at a time,
// tagged `first` and `last`. With cross-channel pooling enabled it keeps a
// single block of running results (max, min or sum over the alpha virtual
// channels), so only one block of storage is needed however large alpha is;
// after the `last` block it presents one condensed output block (the average
// is the sum shifted right by log2(alpha)). With pooling disabled every
// virtual block is passed through as an output block of its own, so one
// group yields alpha output blocks instead of one.
//
// Optionally (`sp_pool`) the output block is then reduced by 2 x 2, stride 2
// spatial max pooling, the pooling layer that follows a convolution layer in
// Tiny-YOLOv2. The block is BLK_W x BLK_H pixels, row-major; the pooled block
// is BLK_W/2 x BLK_H/2 and occupies the first quarter of `out`.
//
// Timing: `out_valid` pulses one clock after the input that completes a block
// (the `last` one, or every input when pooling is off); `out` then holds until
// the next block completes. The running single-block reduction and the
// enable/disable switch follow the paper; fusing the spatial pooling here and
// the min operation are this design's choices.
module plpu #(
  parameter int unsigned BW    = cnet_pkg::BLK_W,
  parameter int unsigned BH    = cnet_pkg::BLK_H,
  parameter int unsigned PIX_W = cnet_pkg::PIX_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ccp_en,
  input  cnet_pkg::ccp_mode_e ccp_mode,
  input  logic [1:0]          alpha_log2,
  input  logic                sp_pool,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [PIX_W-1:0]    in_blk [BW*BH],
  output logic                out_valid,
  output logic [PIX_W-1:0]    out [BW*BH]
);
  localparam int unsigned LANES = BW * BH;
  localparam int unsigned RW    = PIX_W + 2;   // room for a sum of 4

  logic [RW-1:0]    run_q [LANES];   // the one block of running results
  logic [RW-1:0]    run_d [LANES];
  logic [PIX_W-1:0] fin   [LANES];
  logic [PIX_W-1:0] blk_q [LANES];

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      logic [RW-1:0] x;
      x = RW'(in_blk[l]);
      if (in_first) run_d[l] = x;
      else unique case (ccp_mode)
        cnet_pkg::CCP_MAX: run_d[l] = (x > run_q[l]) ? x : run_q[l];
        cnet_pkg::CCP_MIN: run_d[l] = (x < run_q[l]) ? x : run_q[l];
        default:           run_d[l] = run_q[l] + x;
      endcase
      fin[l] = (ccp_mode == cnet_pkg::CCP_AVG) ? PIX_W'(run_d[l] >> alpha_log2)
                                               : PIX_W'(run_d[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && (!ccp_en || in_last);
  end

  always_ff @(posedge clk) begin
    if (in_valid && ccp_en) run_q <= run_d;
    if (in_valid && (!ccp_en || in_last)) blk_q <= ccp_en ? fin : in_blk;
  end

  // 2 x 2 / 2 spatial max pooling of the held block
  logic [PIX_W-1:0] row0 [LANES/4];
  logic [PIX_W-1:0] row1 [LANES/4];

  always_comb begin
    for (int q = 0; q < int'(LANES / 4); q++) begin
      int py, px, i0, i1;
      py = q / int'(BW / 2);
      px = q % int'(BW / 2);
      i0 = (2*py) * int'(BW) + 2*px;
      i1 = i0 + int'(BW);
      row0[q] = (blk_q[i0] > blk_q[i0 + 1]) ? blk_q[i0] : blk_q[i0 + 1];
      row1[q] = (blk_q[i1] > blk_q[i1 + 1]) ? blk_q[i1] : blk_q[i1 + 1];
    end
    for (int l = 0; l < int'(LANES); l++) out[l] = blk_q[l];
    if (sp_pool)
      for (int q = 0; q < int'(LANES / 4); q++)
        out[q] = (row0[q] > row1[q]) ? row0[q] : row1[q];
  end
endmodule
