// control_unit: sequencer of the Condensation-Net accelerator.
//
// Runs the paper's four nested loops:
//
//   for each layer i                (descriptor read from the layer parameter memory)
//     for each output group j       (one stored output channel when cross-channel
//                                    pooling is on, alpha of them when it is off)
//       for each block m            (BW x BH output pixels, row-major over the image)
//         for each input channel n
//           load the block of channel n (with filter halo, zero padded) into the CLPU
//           for each virtual channel a < alpha, for each filter tap:
//             read one weight bit, all M cores do one MAC
//         for each a: activate virtual block a and hand it to the PLPU
//         write the condensed block (or each of the alpha blocks) back
//
// The cores hold ALPHA accumulators. When a layer's alpha is smaller, the j
// loop takes ALPHA/alpha output groups at a time (fewer for the last ones),
// so every loaded block of an input channel serves all of them: entry
// e = g*alpha + a of the cores holds virtual channel j*alpha + e. The groups
// are then activated and written back one after the other. This is this
// design's choice, made to cut the number of block loads.
//
// A descriptor with `pool_only` set describes a pooling layer with a window
// of ksize x ksize and stride 1 instead of a convolution: the n loop then
// visits only input channel j, the cores take the window maximum, alpha is 1
// and cross-channel pooling is off.
//
// Only the virtual blocks of the current (j, m) exist, in the cores'
// accumulation buffers; the virtual feature maps are never written to memory.
//
// Memory layout (this design's choice): channel c of a feature map of
// W x H pixels starts at base + c*W*H, rows are W pixels. The weight of
// virtual channel v = j*alpha + a, input channel n, tap (ky, kx) is bit
// w_base + (v*n_in + n)*K*K + ky*K + kx of the weight memory. Convolution is
// stride 1 with zero padding of (K-1)/2 before and K/2 after, so the output
// has the input's size (half
// of it in each direction with spatial pooling). Output pixels of a block that
// fall outside the image are not written.
//
// Handshake: a one-clock `start` pulse while idle runs layers 0, 1, ... until a
// descriptor with `last` set has been processed; `busy` is high meanwhile and
// `done` pulses for one clock at the end. Every memory read has one clock of
// latency. A tile row (BW+K-1 pixels) is read from the feature map memory
// in one clock, so the cycle cost per (j, m, n) is BH+K tile clocks plus
// E*K*K+1 MAC clocks, E being the number of accumulator entries in use.
// The weight bit reaches the cores (`mac_w`) straight from the weight memory
// output, in step with the registered MAC command it belongs to.
module control_unit
  import cnet_pkg::*;
#(
  parameter int unsigned BW    = cnet_pkg::BLK_W,
  parameter int unsigned BH    = cnet_pkg::BLK_H,
  parameter int unsigned KMAX  = cnet_pkg::KMAX,
  parameter int unsigned ALPHA = cnet_pkg::ALPHA_MAX,
  parameter int unsigned PIX_W = cnet_pkg::PIX_W,
  parameter int unsigned NB    = cnet_pkg::FM_BANKS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // layer parameter memory
  output logic                     lp_re,
  output logic [LP_AW-1:0]         lp_raddr,
  input  layer_param_t             lp_rdata,
  output layer_param_t             lp,          // descriptor of the current layer
  // feature map memory
  output logic                     fm_re,
  output logic [FM_AW-1:0]         fm_raddr,
  input  logic [PIX_W-1:0]         fm_rdata [NB],
  output logic                     fm_we,
  output logic [FM_AW-1:0]         fm_waddr,
  output logic [PIX_W-1:0]         fm_wdata,
  // weight memory
  output logic                     wm_re,
  output logic [WB_AW-1:0]         wm_raddr,
  input  logic                     wm_rbit,
  // CLPU
  output logic                     tw_en,
  output logic [$clog2(BH+KMAX-1)-1:0] tw_row,
  output logic [PIX_W-1:0]         tw_data [BW+KMAX-1],
  output logic                     mac_en,
  output logic                     mac_clear,
  output logic                     mac_max,
  output logic [$clog2(ALPHA)-1:0] mac_sel,
  output logic [2:0]               mac_kx,
  output logic [2:0]               mac_ky,
  output logic                     mac_w,
  output logic                     act_en,
  output logic [$clog2(ALPHA)-1:0] act_sel,
  output logic                     act_first,
  output logic                     act_last,
  // PLPU
  input  logic                     pl_valid,
  input  logic [PIX_W-1:0]         pl_blk [BW*BH]
);
  localparam int unsigned AS = $clog2(ALPHA);
  localparam int unsigned TW = BW + KMAX - 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LP_RD, S_LP_WAIT, S_TILE, S_TILE_DRAIN, S_MAC, S_MAC_DRAIN,
    S_ACT, S_WAIT_OUT, S_WRITE, S_NEXT, S_DONE
  } state_e;

  state_e state;

  logic [LP_AW-1:0]  layer;
  logic [CH_W-1:0]   j, n;
  logic [DIM_W-1:0]  bx, by;
  logic [AS-1:0]     a;
  logic [4:0]        ty;          // tile row
  logic [2:0]        kx, ky;      // filter tap
  logic [4:0]        px, py;      // write-back position inside the block

  // derived from the current descriptor
  logic [2:0]        pad;
  logic [CH_W-1:0]   n_groups;
  logic [DIM_W-1:0]  nbx, nby;
  logic [AS:0]       alpha;
  logic [4:0]        tile_h;
  logic [4:0]        ob_w, ob_h;
  logic [DIM_W-1:0]  out_w, out_h;
  logic [CH_W+AS-1:0] oc;
  logic [AS:0]       n_ent;       // accumulator entries used per (j, m)
  logic [AS:0]       g_step;      // output groups per j step
  int                rem_v;       // virtual channels left from group j on

  always_comb begin
    pad      = (lp.ksize - 3'd1) >> 1;
    alpha    = (AS+1)'(1) << lp.alpha_log2;
    n_groups = lp.ccp_en ? lp.n_out : (lp.n_out >> lp.alpha_log2);
    nbx      = DIM_W'((32'(lp.width)  + BW - 1) / BW);
    nby      = DIM_W'((32'(lp.height) + BH - 1) / BH);
    tile_h   = 5'(BH) + 5'(lp.ksize) - 5'd1;
    ob_w     = lp.sp_pool ? 5'(BW / 2) : 5'(BW);
    ob_h     = lp.sp_pool ? 5'(BH / 2) : 5'(BH);
    out_w    = lp.sp_pool ? (lp.width  >> 1) : lp.width;
    out_h    = lp.sp_pool ? (lp.height >> 1) : lp.height;
    rem_v    = (int'(n_groups) - int'(j)) << lp.alpha_log2;
    n_ent    = lp.pool_only ? (AS+1)'(1)
             : (rem_v >= int'(ALPHA)) ? (AS+1)'(ALPHA) : (AS+1)'(rem_v);
    g_step   = n_ent >> lp.alpha_log2;
    oc       = lp.ccp_en ? (CH_W+AS)'(j) + (CH_W+AS)'((AS+1)'(a) >> lp.alpha_log2)
                         : ((CH_W+AS)'(j) << lp.alpha_log2) + (CH_W+AS)'(a);
  end

  // ------------------------------------------------------------ addressing
  int gx0, gy;                // tile row start in the input image
  logic in_img;               // tile row inside the image
  logic col_ok [TW];          // tile column inside the image
  int wx, wy;                 // write-back position in the output image
  logic w_in;

  always_comb begin
    gx0    = int'(bx) * int'(BW) - int'(pad);
    gy     = int'(by) * int'(BH) + int'(ty) - int'(pad);
    in_img = gy >= 0 && gy < int'(lp.height);
    for (int c = 0; c < int'(TW); c++)
      col_ok[c] = gx0 + c >= 0 && gx0 + c < int'(lp.width);
    wx     = int'(bx) * int'(ob_w) + int'(px);
    wy     = int'(by) * int'(ob_h) + int'(py);
    w_in   = wx < int'(out_w) && wy < int'(out_h);
  end

  // read pipeline registers (one clock memory latency)
  logic                          t_v, t_zero;
  logic [4:0]                    t_row;
  logic                          m_v, m_clear;
  logic [AS-1:0]                 m_sel;
  logic [2:0]                    m_kx, m_ky;

  wire last_tile = (ty == tile_h - 5'd1);
  wire last_tap  = (kx == lp.ksize - 3'd1) && (ky == lp.ksize - 3'd1);
  wire last_a    = (AS+1)'(a) == n_ent - (AS+1)'(1);                // last entry
  wire grp_first = ((AS+1)'(a) & (alpha - (AS+1)'(1))) == '0;       // first of its group
  wire grp_last  = ((AS+1)'(a) & (alpha - (AS+1)'(1))) == alpha - (AS+1)'(1);
  wire last_pix  = (px == ob_w - 5'd1) && (py == ob_h - 5'd1);

  // ------------------------------------------------------------ outputs
  always_comb begin
    lp_re     = (state == S_LP_RD);
    lp_raddr  = layer;
    fm_re     = (state == S_TILE) && in_img;
    fm_raddr  = FM_AW'(32'(lp.in_base)
                + (32'(lp.pool_only ? j : n) * 32'(lp.height) + 32'(gy)) * 32'(lp.width)
                + 32'(gx0));
    wm_re     = (state == S_MAC);
    wm_raddr  = WB_AW'(32'(lp.w_base)
                + ((((32'(j) << lp.alpha_log2) + 32'(a)) * 32'(lp.n_in) + 32'(n))
                   * 32'(lp.ksize) * 32'(lp.ksize))
                + 32'(ky) * 32'(lp.ksize) + 32'(kx));
    tw_en     = t_v;
    tw_row    = $bits(tw_row)'(t_row);
    for (int c = 0; c < int'(TW); c++)
      tw_data[c] = (t_zero || !col_ok[c]) ? '0 : fm_rdata[c];
    mac_en    = m_v;
    mac_clear = m_clear;
    mac_max   = lp.pool_only;
    mac_sel   = m_sel;
    mac_kx    = m_kx;
    mac_ky    = m_ky;
    mac_w     = wm_rbit;
    act_en    = (state == S_ACT);
    act_sel   = a;
    act_first = lp.ccp_en ? grp_first : 1'b1;
    act_last  = lp.ccp_en ? grp_last : 1'b1;
    fm_we     = (state == S_WRITE) && w_in;
    fm_waddr  = FM_AW'(32'(lp.out_base)
                + (32'(oc) * 32'(out_h) + 32'(wy)) * 32'(out_w) + 32'(wx));
    fm_wdata  = pl_blk[32'(py) * 32'(ob_w) + 32'(px)];
    busy      = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_v <= 1'b0;
      m_v <= 1'b0;
    end else begin
      t_v <= (state == S_TILE);
      m_v <= (state == S_MAC);
    end
  end

  always_ff @(posedge clk) begin
    t_zero  <= !in_img;
    t_row   <= ty;
    m_clear <= (n == '0) && (kx == '0) && (ky == '0);
    m_sel   <= a;
    m_kx    <= kx;
    m_ky    <= ky;
  end

  // ------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      layer <= '0;
      lp    <= '0;
      {j, n, bx, by, a, ty, kx, ky, px, py} <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          layer <= '0;
          state <= S_LP_RD;
        end
        S_LP_RD:   state <= S_LP_WAIT;
        S_LP_WAIT: begin
          lp    <= lp_rdata;
          {j, n, bx, by, a, ty, kx, ky, px, py} <= '0;
          state <= S_TILE;
        end
        // load block m of input channel n, halo included, one row per clock
        S_TILE: begin
          if (last_tile) begin
            ty    <= '0;
            state <= S_TILE_DRAIN;
          end else begin
            ty <= ty + 5'd1;
          end
        end
        S_TILE_DRAIN: state <= S_MAC;
        // alpha virtual channels x K*K taps, one MAC per core per clock
        S_MAC: begin
          if (last_tap) begin
            kx <= '0;
            ky <= '0;
            if (last_a) begin
              a     <= '0;
              state <= S_MAC_DRAIN;
            end else begin
              a <= a + 1'b1;
            end
          end else if (kx == lp.ksize - 3'd1) begin
            kx <= '0;
            ky <= ky + 3'd1;
          end else begin
            kx <= kx + 3'd1;
          end
        end
        S_MAC_DRAIN: begin
          if (n == lp.n_in - 1'b1 || lp.pool_only) begin
            n     <= '0;
            state <= S_ACT;
          end else begin
            n     <= n + 1'b1;
            state <= S_TILE;
          end
        end
        // activation -> PLPU: the alpha blocks of one group in a row when
        // condensing, one at a time (each written back) when not
        S_ACT: begin
          if (lp.ccp_en && !grp_last) a <= a + 1'b1;
          else                      state <= S_WAIT_OUT;
        end
        S_WAIT_OUT: if (pl_valid) state <= S_WRITE;
        S_WRITE: begin
          if (last_pix) begin
            px <= '0;
            py <= '0;
            if (!last_a) begin
              a     <= a + 1'b1;
              state <= S_ACT;
            end else begin
              a     <= '0;
              state <= S_NEXT;
            end
          end else if (px == ob_w - 5'd1) begin
            px <= '0;
            py <= py + 5'd1;
          end else begin
            px <= px + 5'd1;
          end
        end
        // next block, next output group, next layer
        S_NEXT: begin
          state <= S_TILE;
          if (bx != nbx - 1'b1) bx <= bx + 1'b1;
          else begin
            bx <= '0;
            if (by != nby - 1'b1) by <= by + 1'b1;
            else begin
              by <= '0;
              if (int'(j) + int'(g_step) < int'(n_groups)) j <= j + CH_W'(g_step);
              else begin
                j <= '0;
                if (lp.last || layer == LP_AW'(LP_DEPTH - 1)) state <= S_DONE;
                else begin
                  layer <= layer + 1'b1;
                  state <= S_LP_RD;
                end
              end
            end
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a descriptor must describe something the datapath can do
  property p_desc_ok;
    @(posedge clk) disable iff (!rst_n)
      (state == S_TILE) |-> (int'(lp.ksize) <= int'(KMAX) && int'(alpha) <= int'(ALPHA)
                             && lp.n_in != '0 && n_ent != '0
                             && (lp.pool_only ? (alpha == 1 && !lp.ccp_en && lp.ksize != '0)
                                              : lp.ksize[0]));
  endproperty
  a_desc_ok: assert property (p_desc_ok);
endmodule
