// tb_workload: the first two convolution + pooling layers of the two
// networks compared in the evaluation, on a 64 x 64 x 3 image with the
// accelerator at its default sizes.
//
//   Tiny-YOLOv2:          conv 3 -> 16 (3 x 3), 2 x 2 / 2 pool, conv 16 -> 32, pool
//   Condensation-Net a=2: conv 3 -> 32 virtual, cross-channel max -> 16, pool,
//                         conv 16 -> 64 virtual, cross-channel max -> 32, pool
//
// Both networks run on the same hardware, one after the other, by rewriting the
// layer descriptors (the switch between networks). Each run is checked pixel
// by pixel against a reference model. The testbench reports the clock counts
// and checks that the stored feature maps of the two networks have the same
// size (the virtual feature maps take no memory) and that the condensed
// network needs more MAC clocks (twice the filters in these layers).
module tb_workload;
  import cnet_pkg::*;

  localparam int IMG   = 64;
  localparam int MODEL = 300_000;

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

  byte unsigned model [MODEL];
  bit           wbits [65536];
  int mac_cycles, cycles, n_fm_writes;

  always @(posedge clk) if (rst_n) begin
    if (busy) cycles++;
    if (dut.mac_en) mac_cycles++;
    if (dut.u_fm.we && busy) n_fm_writes++;
  end

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
    w = p.width; h = p.height; k = p.ksize; pad = k / 2; al = 1 << p.alpha_log2;
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
                s += wbits[int'(p.w_base) + (v*int'(p.n_in) + n)*k*k + ky*k + kx] ? pix : -pix;
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


  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_net(string name, int al2, output int cyc, output int macs, output int writes);
    layer_param_t L [2];
    int wb;
    wb = 0;
    L[0] = mk(0,       20_000, 0, IMG, IMG, 3, 16, 3, al2, al2 != 0, CCP_MAX, 1, 5, 2, 0);
    wb = n_virt(L[0]) * 3 * 9;
    L[1] = mk(20_000, 40_000, wb, IMG / 2, IMG / 2, 16, 32, 3, al2, al2 != 0, CCP_MAX, 1, 3, 2, 1);
    for (int l = 0; l < 2; l++) begin
      host_lp_we <= 1; host_lp_waddr <= LP_AW'(l); host_lp_wdata <= L[l];
      @(posedge clk);
    end
    host_lp_we <= 0;
    for (int l = 0; l < 2; l++) ref_layer(L[l]);
    cycles = 0; mac_cycles = 0; n_fm_writes = 0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    @(posedge clk);
    cyc = cycles; macs = mac_cycles; writes = n_fm_writes;
    $display("%s: %0d clocks, %0d MAC clocks, %0d pixels written", name, cyc, macs, writes);
    for (int l = 0; l < 2; l++) begin
      int n, base, bad;
      n = int'(L[l].n_out) * (int'(L[l].width) / 2) * (int'(L[l].height) / 2);
      base = int'(L[l].out_base);
      bad = 0;
      for (int i = 0; i < n; i++) begin
        host_fm_re <= 1; host_fm_raddr <= FM_AW'(base + i);
        @(posedge clk);
        host_fm_re <= 0;
        @(negedge clk);
        checks++;
        if (host_fm_rdata !== model[base + i]) begin
          failures++;
          if (bad++ < 5) $display("FAIL: %s layer %0d pixel %0d: got %0d expected %0d",
                                  name, l, i, host_fm_rdata, model[base + i]);
        end
      end
    end
  endtask

  initial begin
    int c1, m1, w1, c2, m2, w2;
    start = 0; host_fm_we = 0; host_fm_re = 0; host_wm_we = 0; host_lp_we = 0;
    host_fm_waddr = '0; host_fm_raddr = '0; host_fm_wdata = '0;
    host_wm_waddr = '0; host_wm_wdata = '0; host_lp_waddr = '0; host_lp_wdata = '0;
    for (int i = 0; i < MODEL; i++) model[i] = 0;
    for (int i = 0; i < 65536; i++) wbits[i] = 1'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 3 * IMG * IMG; i++) begin
      model[i] = 8'($urandom_range(0, 31));
      host_fm_we <= 1; host_fm_waddr <= FM_AW'(i); host_fm_wdata <= model[i];
      @(posedge clk);
    end
    host_fm_we <= 0;
    for (int wd = 0; wd < 65536 / 32; wd++) begin
      logic [31:0] word;
      for (int b = 0; b < 32; b++) word[b] = wbits[wd*32 + b];
      host_wm_we <= 1; host_wm_waddr <= WM_AW'(wd); host_wm_wdata <= word;
      @(posedge clk);
    end
    host_wm_we <= 0;

    run_net("Tiny-YOLOv2", 0, c1, m1, w1);
    run_net("Condensation-Net alpha=2", 1, c2, m2, w2);

    checks++;
    if (w1 != w2) begin
      failures++;
      $display("FAIL: stored feature maps differ: %0d vs %0d pixels", w1, w2);
    end
    checks++;
    if (m2 != 2 * m1) begin
      failures++;
      $display("FAIL: MAC clocks %0d vs %0d, expected twice", m2, m1);
    end
    $display("time ratio Condensation-Net / Tiny-YOLOv2 = %0d.%02d", c2 / c1, (c2 * 100 / c1) % 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
