// tb_control_unit: sequencer test with behavioural memories and a
// behavioural PLPU (4 x 2 block, filters up to 3 x 3, 4 accumulator entries).
//
// Three layers are run: a 6 x 3 image, 2 -> 2 channels, 3 x 3 filters,
// alpha = 2 with cross-channel pooling (blocks overhang the image on the right
// and bottom, so padding and skipped writes occur; both output groups share
// the four accumulator entries), then an 8 x 4 map, 1 -> 3 channels, 1 x 1
// filters, alpha = 1 with 2 x 2 spatial pooling (channels 0-3 would share
// the entries, so the last pass is a partial one with a single channel),
// then a 2 x 2 / stride 1 window pooling layer (pool_only) on that 4 x 2 x 3
// result. The testbench works out, from the loop nest of
// the design description, the exact ordered streams of tile row writes (row
// and pixels, zero outside the image), MAC commands (virtual channel, tap,
// weight bit, clear) and feature map writes (address, data), and compares
// the unit's outputs with them item by item. It also checks the total number
// of busy clocks against the cycle-cost formula.
module tb_control_unit;
  import cnet_pkg::*;
  localparam int BW = 4, BH = 2, KM = 3, AL = 4;
  localparam int LANES = BW * BH;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  logic lp_re; logic [LP_AW-1:0] lp_raddr; layer_param_t lp_rdata, lp;
  logic fm_re, fm_we; logic [FM_AW-1:0] fm_raddr, fm_waddr; logic [7:0] fm_rdata [32]; logic [7:0] fm_wdata;
  logic wm_re, wm_rbit; logic [WB_AW-1:0] wm_raddr;
  logic tw_en; logic [$clog2(BH+KM-1)-1:0] tw_row;
  logic [7:0] tw_data [BW+KM-1];
  logic mac_en, mac_clear, mac_max, mac_w; logic [1:0] mac_sel, act_sel; logic [2:0] mac_kx, mac_ky;
  logic act_en, act_first, act_last;
  logic pl_valid; logic [7:0] pl_blk [LANES];

  control_unit #(.BW(BW), .BH(BH), .KMAX(KM), .ALPHA(AL)) dut (.*);

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- models
  layer_param_t lpm [3];
  byte unsigned fmem [4096];
  bit wbits [1024];
  int plcount;

  always_ff @(posedge clk) begin
    if (lp_re) lp_rdata <= lpm[lp_raddr];
    if (fm_re) for (int i = 0; i < 32; i++) fm_rdata[i] <= fmem[12'(fm_raddr + 22'(i))];
    if (wm_re) wm_rbit <= wbits[wm_raddr];
    if (fm_we) fmem[fm_waddr] <= fm_wdata;
  end

  // behavioural PLPU: a block two clocks after the last activation
  logic act_d1, act_d2;
  always_ff @(posedge clk) begin
    act_d1 <= rst_n && act_en && act_last;
    act_d2 <= rst_n && act_d1;
  end
  assign pl_valid = act_d2;
  always_ff @(posedge clk) if (!rst_n) plcount <= 0; else if (act_d1) begin
    for (int l = 0; l < LANES; l++) pl_blk[l] <= 8'(plcount * 13 + l);
    plcount <= plcount + 1;
  end

  // ---------------------------------------------------------------- expected streams
  typedef struct { int row, k; int data [BW+KM-1]; } tile_t;
  typedef struct { int sel, kx, ky, w, clr; } mac_t;
  typedef struct { int addr, data; } wr_t;
  tile_t tq [$];
  mac_t  mq [$];
  wr_t   wq [$];
  int    exp_cycles;

  function automatic layer_param_t mk(int in_b, int out_b, int w_b, int w, int h, int ni,
                                      int no, int k, bit ccp, bit sp, bit last);
    layer_param_t p;
    p = '0;
    p.in_base = FM_AW'(in_b); p.out_base = FM_AW'(out_b); p.w_base = WB_AW'(w_b);
    p.width = DIM_W'(w); p.height = DIM_W'(h); p.n_in = CH_W'(ni); p.n_out = CH_W'(no);
    p.ksize = 3'(k); p.alpha_log2 = 2'd1; p.ccp_en = ccp; p.ccp_mode = CCP_MAX;
    p.sp_pool = sp; p.act_shift = '0; p.act_bits = 4'd2; p.last = last;
    return p;
  endfunction

  task automatic expect_layer(layer_param_t p, inout int blk);
    int w, h, k, pad, al, groups, nbx, nby, ow, oh, obw, obh, ne, gs;
    w = p.width; h = p.height; k = p.ksize; pad = (k - 1) / 2; al = 1 << p.alpha_log2;
    groups = p.ccp_en ? int'(p.n_out) : int'(p.n_out) / al;
    nbx = (w + BW - 1) / BW; nby = (h + BH - 1) / BH;
    ow = p.sp_pool ? w / 2 : w; oh = p.sp_pool ? h / 2 : h;
    obw = p.sp_pool ? BW / 2 : BW; obh = p.sp_pool ? BH / 2 : BH;
    exp_cycles += 2;
    for (int j = 0; j < groups; j += gs) begin
      ne = p.pool_only ? 1 : ((groups - j) * al >= AL ? AL : (groups - j) * al);
      gs = ne / al;
      for (int by = 0; by < nby; by++)
        for (int bx = 0; bx < nbx; bx++) begin
          for (int n = 0; n < (p.pool_only ? 1 : int'(p.n_in)); n++) begin
            int nc;
            nc = p.pool_only ? j : n;
            for (int ty = 0; ty < BH + k - 1; ty++) begin
              tile_t t;
              t.row = ty; t.k = k;
              for (int tx = 0; tx < BW + k - 1; tx++) begin
                int gx, gy;
                gx = bx * BW + tx - pad; gy = by * BH + ty - pad;
                t.data[tx] = (gx < 0 || gy < 0 || gx >= w || gy >= h) ? 0
                             : int'(fmem[int'(p.in_base) + (nc*h + gy)*w + gx]);
              end
              tq.push_back(t);
            end
            for (int a = 0; a < ne; a++)
              for (int ky = 0; ky < k; ky++)
                for (int kx = 0; kx < k; kx++) begin
                  mac_t m;
                  m.sel = a; m.kx = kx; m.ky = ky; m.clr = (n == 0 && kx == 0 && ky == 0);
                  m.w = wbits[int'(p.w_base) + ((j*al + a)*int'(p.n_in) + n)*k*k + ky*k + kx];
                  mq.push_back(m);
                end
            exp_cycles += (BH + k - 1) + 1 + ne * k * k + 1;
          end
          for (int o = 0; o < (p.ccp_en ? gs : ne); o++) begin
            int oc;
            oc = p.ccp_en ? j + o : j * al + o;
            for (int py = 0; py < obh; py++)
              for (int px = 0; px < obw; px++) begin
                int x, y;
                x = bx * obw + px; y = by * obh + py;
                if (x < ow && y < oh) begin
                  wr_t r;
                  r.addr = int'(p.out_base) + (oc*oh + y)*ow + x;
                  r.data = (blk * 13 + py * obw + px) & 255;
                  wq.push_back(r);
                end
              end
            blk++;
            exp_cycles += (p.ccp_en ? al : 1) + 2 + obw * obh;
          end
          exp_cycles += 1;
        end
    end
  endtask

  // ---------------------------------------------------------------- monitors
  int cycles, n_tile, n_mac, n_wr;
  always @(posedge clk) if (rst_n) begin
    if (busy) cycles++;
    if (tw_en) begin
      tile_t t;
      bit bad;
      n_tile++;
      checks++;
      if (tq.size() == 0) begin failures++; $display("FAIL: extra tile write"); end
      else begin
        t = tq.pop_front();
        bad = int'(tw_row) != t.row;
        for (int c = 0; c < BW + t.k - 1; c++) bad |= int'(tw_data[c]) != t.data[c];
        if (bad) begin
          failures++;
          if (failures < 6) $display("FAIL: tile row %0d write, expected row %0d", tw_row, t.row);
        end
      end
    end
    if (mac_en) begin
      mac_t m;
      n_mac++;
      checks++;
      if (mq.size() == 0) begin failures++; $display("FAIL: extra MAC"); end
      else begin
        m = mq.pop_front();
        if (int'(mac_sel) != m.sel || int'(mac_kx) != m.kx || int'(mac_ky) != m.ky
            || int'(mac_w) != m.w || int'(mac_clear) != m.clr) begin
          failures++;
          if (failures < 6) $display("FAIL: MAC sel %0d k(%0d,%0d) w %0d clr %0d expected %0d (%0d,%0d) %0d %0d",
                                     mac_sel, mac_kx, mac_ky, mac_w, mac_clear, m.sel, m.kx, m.ky, m.w, m.clr);
        end
      end
    end
    if (fm_we) begin
      wr_t r;
      n_wr++;
      checks++;
      if (wq.size() == 0) begin failures++; $display("FAIL: extra write"); end
      else begin
        r = wq.pop_front();
        if (int'(fm_waddr) != r.addr || int'(fm_wdata) != r.data) begin
          failures++;
          if (failures < 6) $display("FAIL: write %0d=%0d expected %0d=%0d", fm_waddr, fm_wdata, r.addr, r.data);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int blk;
    rst_n = 0; start = 0;
    for (int i = 0; i < 4096; i++) fmem[i] = 8'($urandom);
    for (int i = 0; i < 1024; i++) wbits[i] = 1'($urandom);
    lpm[0] = mk(0, 1000, 0, 6, 3, 2, 2, 3, 1, 0, 0);
    lpm[1] = mk(1000, 2000, 200, 8, 4, 1, 3, 1, 0, 1, 0);
    lpm[1].alpha_log2 = 2'd0;
    lpm[2] = mk(2000, 3000, 300, 4, 2, 3, 3, 2, 0, 0, 1);
    lpm[2].alpha_log2 = 2'd0; lpm[2].pool_only = 1'b1;
    blk = 0;
    exp_cycles = 1;   // the done clock
    expect_layer(lpm[0], blk);
    // the second layer reads what the first wrote
    foreach (wq[i]) fmem[wq[i].addr] = 8'(wq[i].data);
    expect_layer(lpm[1], blk);
    foreach (wq[i]) fmem[wq[i].addr] = 8'(wq[i].data);
    expect_layer(lpm[2], blk);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    @(posedge clk);
    checks++;
    if (tq.size() != 0 || mq.size() != 0 || wq.size() != 0) begin
      failures++;
      $display("FAIL: missing items: tiles %0d MACs %0d writes %0d", tq.size(), mq.size(), wq.size());
    end
    checks++;
    if (cycles != exp_cycles) begin
      failures++;
      $display("FAIL: %0d busy clocks, expected %0d", cycles, exp_cycles);
    end
    $display("tiles %0d MACs %0d writes %0d cycles %0d", n_tile, n_mac, n_wr, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
