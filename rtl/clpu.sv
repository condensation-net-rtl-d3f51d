// clpu: Convolution Layer Processing Unit.
//
// Holds one block of one input channel (a tile of (BW+KMAX-1) x (BH+KMAX-1)
// pixels: the BW x BH output block plus the filter halo) and M = BW*BH
// convolution cores, one per output pixel of the block. In a MAC cycle every
// core takes the tile pixel under filter tap (kx, ky) relative to its own
// output position, multiplies it by the broadcast weight and accumulates into
// buffer entry `mac_sel` (the virtual channel). So M MACs are done per clock
// (320 with the default 16 x 20 block), and a K x K filter on one input
// channel for alpha virtual channels takes alpha*K*K clocks.
//
// When all input channels are summed, `act_en` with `act_sel` = a sends the
// block of virtual channel a from every core through the activation unit; the
// activated virtual block leaves on `vblk` one clock later, with the
// `first`/`last` tags, towards the PLPU.
//
// With `mac_max` set (pooling layers) the cores take the window maximum
// instead of the weighted sum.
//
// The tile is written a whole row (BW+KMAX-1 pixels) per clock.
// Interface timing: tile writes (`tw_*`) and MAC commands (`mac_*`) take effect
// at the clock edge; `vblk_valid` follows `act_en` by one clock.
// Cores, buffer and activation unit in one unit follow the paper; the tile
// buffer, one core per output pixel and the block shape are this design's.
module clpu #(
  parameter int unsigned BW    = cnet_pkg::BLK_W,
  parameter int unsigned BH    = cnet_pkg::BLK_H,
  parameter int unsigned KMAX  = cnet_pkg::KMAX,
  parameter int unsigned ALPHA = cnet_pkg::ALPHA_MAX,
  parameter int unsigned PIX_W = cnet_pkg::PIX_W,
  parameter int unsigned ACC_W = cnet_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // tile load, one row per clock
  input  logic                     tw_en,
  input  logic [$clog2(BH+KMAX-1)-1:0] tw_row,
  input  logic [PIX_W-1:0]         tw_data [BW+KMAX-1],
  // multiply-accumulate
  input  logic                     mac_en,
  input  logic                     mac_clear,
  input  logic                     mac_max,
  input  logic [$clog2(ALPHA)-1:0] mac_sel,
  input  logic [2:0]               mac_kx,
  input  logic [2:0]               mac_ky,
  input  logic                     mac_w,
  // activation
  input  logic                     act_en,
  input  logic [$clog2(ALPHA)-1:0] act_sel,
  input  logic                     act_first,
  input  logic                     act_last,
  input  logic [4:0]               act_shift,
  input  logic [3:0]               act_bits,
  output logic                     vblk_valid,
  output logic                     vblk_first,
  output logic                     vblk_last,
  output logic [PIX_W-1:0]         vblk [BW*BH]
);
  localparam int unsigned TW    = BW + KMAX - 1;
  localparam int unsigned TH    = BH + KMAX - 1;
  localparam int unsigned LANES = BW * BH;

  logic [PIX_W-1:0]        tile [TH][TW];
  logic signed [ACC_W-1:0] acc_sel [LANES];

  always_ff @(posedge clk) begin
    if (tw_en) tile[tw_row] <= tw_data;
  end

  for (genvar cy = 0; cy < int'(BH); cy++) begin : g_row
    for (genvar cx = 0; cx < int'(BW); cx++) begin : g_col
      logic [PIX_W-1:0]        win [KMAX][KMAX];
      logic [PIX_W-1:0]        pix;
      logic signed [ACC_W-1:0] acc [ALPHA];

      for (genvar dy = 0; dy < int'(KMAX); dy++) begin : g_wy
        for (genvar dx = 0; dx < int'(KMAX); dx++) begin : g_wx
          assign win[dy][dx] = tile[cy + dy][cx + dx];
        end
      end
      assign pix = win[mac_ky][mac_kx];

      conv_core #(.PIX_W(PIX_W), .ACC_W(ACC_W), .ALPHA(ALPHA)) u_core (
        .clk    (clk),
        .rst_n  (rst_n),
        .en     (mac_en),
        .clear  (mac_clear),
        .max_mode (mac_max),
        .sel    (mac_sel),
        .pixel  (pix),
        .weight (mac_w),
        .acc    (acc)
      );

      assign acc_sel[cy*BW + cx] = acc[act_sel];
    end
  end

  activation_unit #(.LANES(LANES), .ACC_W(ACC_W), .PIX_W(PIX_W)) u_act (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (act_en),
    .in_first  (act_first),
    .in_last   (act_last),
    .in_acc    (acc_sel),
    .shift     (act_shift),
    .bits      (act_bits),
    .out_valid (vblk_valid),
    .out_first (vblk_first),
    .out_last  (vblk_last),
    .out       (vblk)
  );
endmodule
