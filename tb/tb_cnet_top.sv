// tb_cnet_top: end-to-end test of the accelerator at its default sizes
// (320 cores, 4,096 KB feature map memory, 1,935 KB weight memory).
//
// The host loads a 36 x 24 x 3 image, random 1-bit weights and a five-layer
// network into the memories, starts the accelerator and, after `done`, reads
// every output feature map back through the host port. The expected maps are
// computed here from the same image and weights by a direct loop-nest model
// of convolution (stride 1, zero padding), activation (ReLU, shift,
// saturate), cross-channel pooling, 2 x 2 spatial max pooling and the
// 2 x 2 / stride 1 window pooling layer.
//
// The five layers exercise: cross-channel max, average and min pooling,
// pooling disabled (alpha output channels per group), alpha = 2 and 4,
// 1 x 1, 3 x 3, 5 x 5 and 7 x 7 filters, spatial pooling on and off, a
// window pooling layer (pool_only, 2 x 2, stride 1), several output groups
// sharing one block load (alpha < 4), zero
// padding at the image border and blocks that overhang the image. Each of
// these is counted and must happen at least once. The number of MAC clocks is
// checked against alpha*K*K per (output group, block, input channel), i.e.
// M = 320 MACs per clock.
module tb_cnet_top;
  import cnet_pkg::*;

  localparam int NL     = 5;
  localparam int IMG_W  = 36;
  localparam int IMG_H  = 24;
  localparam int MODEL  = 500_000;   // modelled part of the feature map memory

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               start, busy, done;
  logic               host_fm_we, host_fm_re, host_wm_we, host_lp_we;
  logic [FM_AW-1:0]   host_fm_waddr, host_fm_raddr;
  logic [PIX_W-1:0]   host_fm_wdata, host_fm_rdata;
  logic [WM_AW-1:0]   host_wm_waddr;
  logic [WM_WORD-1:0] host_wm_wdata;
  logic [LP_AW-1:0]   host_lp_waddr;
  layer_param_t       host_lp_wdata;

  cnet_top dut (.*);

  int checks = 0;
  int failures = 0;

  // ---------------------------------------------------------------- network
  layer_param_t L [NL];
  byte unsigned model [MODEL];
  bit           wbits [8192];
  int           wtotal;

  function automatic layer_param_t mk(int in_b, int out_b, int w_b, int w, int h, int ni,
                                      int no, int k, int al2, bit ccp, ccp_mode_e md,
                                      bit sp, int sh, int bits, bit last);
    layer_param_t p;
    p = '0;
    p.in_base = FM_AW'(in_b);  p.out_base = FM_AW'(out_b); p.w_base = WB_AW'(w_b);
    p.width = DIM_W'(w);       p.height = DIM_W'(h);
    p.n_in = CH_W'(ni);        p.n_out = CH_W'(no);
    p.ksize = 3'(k);           p.alpha_log2 = 2'(al2);
    p.ccp_en = ccp;            p.ccp_mode = md;          p.sp_pool = sp;
    p.act_shift = 5'(sh);      p.act_bits = 4'(bits);    p.last = last;
    return p;
  endfunction

  function automatic int n_virt(layer_param_t p);
    return p.ccp_en ? (int'(p.n_out) << p.alpha_log2) : int'(p.n_out);
  endfunction

  // reference model of one layer, reading and writing `model`
  task automatic ref_layer(layer_param_t p);
    int w, h, k, pad, al, nv, ow, oh;
    int act [];
    w = p.width; h = p.height; k = p.ksize; pad = (k - 1) / 2; al = 1 << p.alpha_log2;
    nv = n_virt(p);
    act = new[nv * w * h];
    for (int v = 0; v < nv; v++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          int s, q, qmax;
          s = 0;
          for (int n = 0; n < int'(p.n_in); n++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int ix, iy, pix;
                ix = x + kx - pad; iy = y + ky - pad;
                pix = (ix < 0 || iy < 0 || ix >= w || iy >= h) ? 0
                      : int'(model[int'(p.in_base) + (n*h + iy)*w + ix]);
                if (p.pool_only) begin
                  if (n == v && pix > s) s = pix;   // window max of channel v
                end else begin
                  s += wbits[int'(p.w_base) + (v*int'(p.n_in) + n)*k*k + ky*k + kx] ? pix : -pix;
                end
              end
          qmax = (p.act_bits >= 8) ? 255 : (1 << p.act_bits) - 1;
          q = (s <= 0) ? 0 : ((s >>> p.act_shift) > qmax ? qmax : (s >>> p.act_shift));
          act[(v*h + y)*w + x] = q;
        end
    ow = p.sp_pool ? w / 2 : w;
    oh = p.sp_pool ? h / 2 : h;
    for (int c = 0; c < int'(p.n_out); c++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          int best;
          best = -1;
          for (int dy = 0; dy < (p.sp_pool ? 2 : 1); dy++)
            for (int dx = 0; dx < (p.sp_pool ? 2 : 1); dx++) begin
              int sx, sy, r;
              sx = p.sp_pool ? 2*x + dx : x;
              sy = p.sp_pool ? 2*y + dy : y;
              if (p.ccp_en) begin
                r = act[((c*al)*h + sy)*w + sx];
                for (int a = 1; a < al; a++) begin
                  int t;
                  t = act[((c*al + a)*h + sy)*w + sx];
                  case (p.ccp_mode)
                    CCP_MAX: r = (t > r) ? t : r;
                    CCP_MIN: r = (t < r) ? t : r;
                    default: r = r + t;
                  endcase
                end
                if (p.ccp_mode == CCP_AVG) r = r >> p.alpha_log2;
              end else begin
                r = act[(c*h + sy)*w + sx];
              end
              if (r > best) best = r;
            end
          model[int'(p.out_base) + (c*oh + y)*ow + x] = 8'(best);
        end
  endtask

  // ---------------------------------------------------------------- counters
  int n_ccp_max, n_ccp_avg, n_ccp_min, n_ccp_off, n_sp_on, n_sp_off;
  int n_pad_zero, n_skip_write, n_alpha4, n_pool, n_shared, n_k [8];
  int mac_cycles, cycles;

  always @(posedge clk) if (rst_n) begin
    if (busy) cycles++;
    if (dut.mac_en) mac_cycles++;
    // an accumulator entry beyond the first group: one block load serves several groups
    if (dut.mac_en && (dut.mac_sel >> dut.lp.alpha_log2) != 0) n_shared++;
    if (dut.pl_valid) begin
      if (!dut.lp.ccp_en) n_ccp_off++;
      else if (dut.lp.ccp_mode == CCP_MAX) n_ccp_max++;
      else if (dut.lp.ccp_mode == CCP_AVG) n_ccp_avg++;
      else n_ccp_min++;
      if (dut.lp.sp_pool) n_sp_on++; else n_sp_off++;
      if (dut.lp.alpha_log2 == 2) n_alpha4++;
      n_k[dut.lp.ksize]++;
      if (dut.lp.pool_only) n_pool++;
    end
    if (dut.tw_en && (dut.u_ctrl.t_zero || !dut.u_ctrl.col_ok[0])) n_pad_zero++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_WRITE && !dut.u_ctrl.w_in) n_skip_write++;
  end

  task automatic need(string what, int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism never happened: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    int wb, expect_mac;
    start = 0; host_fm_we = 0; host_fm_re = 0; host_wm_we = 0; host_lp_we = 0;
    host_fm_waddr = '0; host_fm_raddr = '0; host_fm_wdata = '0;
    host_wm_waddr = '0; host_wm_wdata = '0; host_lp_waddr = '0; host_lp_wdata = '0;
    for (int i = 0; i < MODEL; i++) model[i] = 0;

    wb = 0;
    L[0] = mk(0,       100_000, wb, IMG_W, IMG_H, 3, 4, 3, 1, 1, CCP_MAX, 1, 5, 2, 0);
    wb += n_virt(L[0]) * 3 * 9;
    L[1] = mk(100_000, 200_000, wb, 18, 12, 4, 2, 5, 2, 1, CCP_AVG, 0, 3, 2, 0);
    wb += n_virt(L[1]) * 4 * 25;
    L[2] = mk(200_000, 300_000, wb, 18, 12, 2, 4, 1, 1, 0, CCP_MAX, 0, 0, 4, 0);
    wb += n_virt(L[2]) * 2 * 1;
    L[3] = mk(300_000, 400_000, wb, 18, 12, 4, 1, 7, 1, 1, CCP_MIN, 1, 2, 2, 0);
    wb += n_virt(L[3]) * 4 * 49;
    // window max pooling 2 x 2 / 1 of layer 2's output (no weights)
    L[4] = mk(300_000, 450_000, 0, 18, 12, 4, 4, 2, 0, 0, CCP_MAX, 0, 0, 4, 1);
    L[4].pool_only = 1'b1;
    wtotal = wb;
    for (int i = 0; i < 8192; i++) wbits[i] = 1'($urandom);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // host loads image, weights, layer descriptors
    for (int i = 0; i < 3 * IMG_W * IMG_H; i++) begin
      model[i] = 8'($urandom_range(0, 31));
      host_fm_we <= 1; host_fm_waddr <= FM_AW'(i); host_fm_wdata <= model[i];
      @(posedge clk);
    end
    host_fm_we <= 0;
    for (int wd = 0; wd < (wtotal + 31) / 32; wd++) begin
      logic [31:0] word;
      for (int b = 0; b < 32; b++) word[b] = wbits[wd*32 + b];
      host_wm_we <= 1; host_wm_waddr <= WM_AW'(wd); host_wm_wdata <= word;
      @(posedge clk);
    end
    host_wm_we <= 0;
    for (int l = 0; l < NL; l++) begin
      host_lp_we <= 1; host_lp_waddr <= LP_AW'(l); host_lp_wdata <= L[l];
      @(posedge clk);
    end
    host_lp_we <= 0;

    // reference
    expect_mac = 0;
    for (int l = 0; l < NL; l++) begin
      int groups;
      ref_layer(L[l]);
      groups = L[l].ccp_en ? int'(L[l].n_out) : (int'(L[l].n_out) >> L[l].alpha_log2);
      expect_mac += groups * ((int'(L[l].width) + BLK_W - 1) / BLK_W)
                  * ((int'(L[l].height) + BLK_H - 1) / BLK_H)
                  * (L[l].pool_only ? 1 : int'(L[l].n_in))
                  * (1 << L[l].alpha_log2) * int'(L[l].ksize) * int'(L[l].ksize);
    end

    // run
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    @(posedge clk);
    $display("network done in %0d cycles, %0d MAC cycles", cycles, mac_cycles);

    // read back every layer's output through the host port
    for (int l = 0; l < NL; l++) begin
      int ow, oh, base, bad;
      ow = L[l].sp_pool ? int'(L[l].width) / 2 : int'(L[l].width);
      oh = L[l].sp_pool ? int'(L[l].height) / 2 : int'(L[l].height);
      base = int'(L[l].out_base);
      bad = 0;
      for (int i = 0; i < int'(L[l].n_out) * ow * oh; i++) begin
        host_fm_re <= 1; host_fm_raddr <= FM_AW'(base + i);
        @(posedge clk);
        host_fm_re <= 0;
        @(negedge clk);
        checks++;
        if (host_fm_rdata !== model[base + i]) begin
          failures++;
          if (bad++ < 5)
            $display("FAIL: layer %0d pixel %0d: got %0d expected %0d",
                     l, i, host_fm_rdata, model[base + i]);
        end
      end
    end
    checks++;
    if (mac_cycles != expect_mac) begin
      failures++;
      $display("FAIL: %0d MAC cycles, expected %0d", mac_cycles, expect_mac);
    end
    checks++;
    if (dut.LANES != 320) begin
      failures++;
      $display("FAIL: %0d convolution cores, expected 320", dut.LANES);
    end

    need("cross-channel max pooling", n_ccp_max);
    need("cross-channel average pooling", n_ccp_avg);
    need("cross-channel min pooling", n_ccp_min);
    need("cross-channel pooling disabled", n_ccp_off);
    need("spatial pooling on", n_sp_on);
    need("spatial pooling off", n_sp_off);
    need("alpha = 4", n_alpha4);
    need("1x1 filter", n_k[1]);
    need("3x3 filter", n_k[3]);
    need("5x5 filter", n_k[5]);
    need("7x7 filter", n_k[7]);
    need("2x2 / 1 window pooling layer", n_pool);
    need("several output groups per block load", n_shared);
    need("zero padding", n_pad_zero);
    need("block overhanging the image", n_skip_write);
    $display("mechanisms: ccp max %0d avg %0d min %0d off %0d, sp on %0d off %0d, pad %0d, skipped writes %0d",
             n_ccp_max, n_ccp_avg, n_ccp_min, n_ccp_off, n_sp_on, n_sp_off, n_pad_zero, n_skip_write);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
