// cnet_top: Condensation-Net accelerator.
//
// The feature map memory feeds blocks of input feature maps to the CLPU
// (convolution cores + activation unit). The CLPU produces alpha blocks of
// virtual feature maps per output group; the PLPU condenses them by
// cross-channel pooling into one block of output feature map (or passes all
// alpha through when the layer descriptor disables pooling), and the block is
// written back into the feature map memory. The control unit holds the weight
// memory and the layer parameter memory and runs the layer / output channel /
// block / input channel loops. Virtual feature maps never reach the memory.
//
// Host side (the loading agent is outside this design): while the accelerator
// is idle the host may write the feature map memory (input image), the weight
// memory (32 weights per word) and the layer parameter memory, and read the
// feature map memory (results; one clock read latency). A `start` pulse runs
// the network; `done` pulses when the layer marked `last` has been written.
// Host accesses while `busy` are ignored.
//
// The feature map memory reads a whole tile row (up to 32 consecutive pixels)
// per clock from 32 interleaved banks; the host read port sees the first pixel.
//
// Default sizes are the paper's: M = 320 cores (16 x 20 output block),
// 4,096 KB of feature maps, 1,935 KB of weights, filters up to 7 x 7,
// alpha up to 4.
module cnet_top
  import cnet_pkg::*;
#(
  parameter int unsigned BW       = cnet_pkg::BLK_W,
  parameter int unsigned BH       = cnet_pkg::BLK_H,
  parameter int unsigned FM_WORDS = cnet_pkg::FM_DEPTH,
  parameter int unsigned WM_WORDS = cnet_pkg::WM_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  // host access to the memories
  input  logic                host_fm_we,
  input  logic [FM_AW-1:0]    host_fm_waddr,
  input  logic [PIX_W-1:0]    host_fm_wdata,
  input  logic                host_fm_re,
  input  logic [FM_AW-1:0]    host_fm_raddr,
  output logic [PIX_W-1:0]    host_fm_rdata,
  input  logic                host_wm_we,
  input  logic [WM_AW-1:0]    host_wm_waddr,
  input  logic [WM_WORD-1:0]  host_wm_wdata,
  input  logic                host_lp_we,
  input  logic [LP_AW-1:0]    host_lp_waddr,
  input  layer_param_t        host_lp_wdata
);
  localparam int unsigned KM = cnet_pkg::KMAX;
  localparam int unsigned AL = cnet_pkg::ALPHA_MAX;
  localparam int unsigned LANES = BW * BH;

  // control <-> memories
  logic                 lp_re;
  logic [LP_AW-1:0]     lp_raddr;
  layer_param_t         lp_rdata, lp;
  logic                 c_fm_re, c_fm_we;
  logic [FM_AW-1:0]     c_fm_raddr, c_fm_waddr;
  logic [PIX_W-1:0]     c_fm_wdata;
  logic [PIX_W-1:0]     fm_rdata [FM_BANKS];
  logic                 wm_re, wm_rbit;
  logic [WB_AW-1:0]     wm_raddr;
  // control <-> CLPU
  logic                 tw_en, mac_en, mac_clear, mac_max, mac_w, act_en, act_first, act_last;
  logic [$clog2(BH+KM-1)-1:0] tw_row;
  logic [PIX_W-1:0]     tw_data [BW+KM-1];
  logic [$clog2(AL)-1:0] mac_sel, act_sel;
  logic [2:0]           mac_kx, mac_ky;
  // CLPU -> PLPU -> control
  logic                 v_valid, v_first, v_last, pl_valid;
  logic [PIX_W-1:0]     vblk   [LANES];
  logic [PIX_W-1:0]     pl_blk [LANES];

  control_unit #(.BW(BW), .BH(BH), .KMAX(KM), .ALPHA(AL), .PIX_W(PIX_W), .NB(FM_BANKS)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .lp_re, .lp_raddr, .lp_rdata, .lp,
    .fm_re (c_fm_re), .fm_raddr (c_fm_raddr), .fm_rdata,
    .fm_we (c_fm_we), .fm_waddr (c_fm_waddr), .fm_wdata (c_fm_wdata),
    .wm_re, .wm_raddr, .wm_rbit,
    .tw_en, .tw_row, .tw_data,
    .mac_en, .mac_clear, .mac_max, .mac_sel, .mac_kx, .mac_ky, .mac_w,
    .act_en, .act_sel, .act_first, .act_last,
    .pl_valid, .pl_blk
  );

  // the host owns the memory ports while the accelerator is idle
  fm_memory #(.W(PIX_W), .DEPTH(FM_WORDS), .AW(FM_AW), .NB(FM_BANKS)) u_fm (
    .clk,
    .we    (busy ? c_fm_we    : host_fm_we),
    .waddr (busy ? c_fm_waddr : host_fm_waddr),
    .wdata (busy ? c_fm_wdata : host_fm_wdata),
    .re    (busy ? c_fm_re    : host_fm_re),
    .raddr (busy ? c_fm_raddr : host_fm_raddr),
    .rdata (fm_rdata)
  );
  assign host_fm_rdata = fm_rdata[0];

  weight_memory #(.DEPTH(WM_WORDS), .AW(WM_AW)) u_wm (
    .clk,
    .we        (host_wm_we && !busy),
    .waddr     (host_wm_waddr),
    .wdata     (host_wm_wdata),
    .re        (wm_re),
    .rbit_addr (wm_raddr),
    .rbit      (wm_rbit)
  );

  layer_param_memory #(.DEPTH(LP_DEPTH), .AW(LP_AW)) u_lp (
    .clk,
    .we    (host_lp_we && !busy),
    .waddr (host_lp_waddr),
    .wdata (host_lp_wdata),
    .re    (lp_re),
    .raddr (lp_raddr),
    .rdata (lp_rdata)
  );

  clpu #(.BW(BW), .BH(BH), .KMAX(KM), .ALPHA(AL), .PIX_W(PIX_W), .ACC_W(ACC_W)) u_clpu (
    .clk, .rst_n,
    .tw_en, .tw_row, .tw_data,
    .mac_en, .mac_clear, .mac_max, .mac_sel, .mac_kx, .mac_ky, .mac_w,
    .act_en, .act_sel, .act_first, .act_last,
    .act_shift  (lp.act_shift),
    .act_bits   (lp.act_bits),
    .vblk_valid (v_valid),
    .vblk_first (v_first),
    .vblk_last  (v_last),
    .vblk       (vblk)
  );

  plpu #(.BW(BW), .BH(BH), .PIX_W(PIX_W)) u_plpu (
    .clk, .rst_n,
    .ccp_en     (lp.ccp_en),
    .ccp_mode   (lp.ccp_mode),
    .alpha_log2 (lp.alpha_log2),
    .sp_pool    (lp.sp_pool),
    .in_valid   (v_valid),
    .in_first   (v_first),
    .in_last    (v_last),
    .in_blk     (vblk),
    .out_valid  (pl_valid),
    .out        (pl_blk)
  );
endmodule
