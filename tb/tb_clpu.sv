// tb_clpu: Convolution Layer Processing Unit test (4 x 2 block, 3 x 3
// filters, alpha = 2).
// For several rounds: loads a random tile per input channel (a row per clock), issues the
// alpha*K*K MAC commands with random weights (clear on the first tap of the
// first channel), then activates each virtual channel and checks the block
// against a convolution computed here (every third round in max mode: the
// window maximum over all taps and channels instead of the weighted sum). Checks the MAC count per channel
// (alpha*K*K clocks, one MAC per core per clock) and the one-clock
// activation latency.
module tb_clpu;
  localparam int BW = 4, BH = 2, KM = 3, AL = 2, TW = BW + KM - 1, TH = BH + KM - 1;
  localparam int LANES = BW * BH, NCH = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, tw_en, mac_en, mac_clear, mac_max, mac_w, act_en, act_first, act_last;
  logic [$clog2(TH)-1:0] tw_row;
  logic [7:0] tw_data [TW];
  logic [0:0] mac_sel, act_sel;
  logic [2:0] mac_kx, mac_ky;
  logic [4:0] act_shift;
  logic [3:0] act_bits;
  logic vblk_valid, vblk_first, vblk_last;
  logic [7:0] vblk [LANES];
  int checks = 0, failures = 0;

  clpu #(.BW(BW), .BH(BH), .KMAX(KM), .ALPHA(AL)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; tw_en = 0; mac_en = 0; mac_clear = 0; mac_max = 0; mac_w = 0; act_en = 0;
    act_first = 0; act_last = 0; tw_row = 0; for (int c = 0; c < TW; c++) tw_data[c] = 0;
    mac_sel = 0; act_sel = 0; mac_kx = 0; mac_ky = 0; act_shift = 0; act_bits = 8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      int sums [AL][LANES];
      int macs;
      int sh;
      sh = $urandom_range(0, 3);
      mac_max = (round % 3 == 2);
      for (int a = 0; a < AL; a++) for (int l = 0; l < LANES; l++) sums[a][l] = 0;
      for (int n = 0; n < NCH; n++) begin
        int tile [TH][TW];
        for (int r = 0; r < TH; r++) begin
          @(negedge clk);
          tw_en = 1; tw_row = 2'(r);
          for (int c = 0; c < TW; c++) begin
            tile[r][c] = $urandom_range(0, 255);
            tw_data[c] = 8'(tile[r][c]);
          end
        end
        @(negedge clk);
        tw_en = 0;
        macs = 0;
        for (int a = 0; a < AL; a++)
          for (int ky = 0; ky < KM; ky++)
            for (int kx = 0; kx < KM; kx++) begin
              bit w;
              w = 1'($urandom);
              mac_en = 1; mac_clear = (n == 0 && kx == 0 && ky == 0);
              mac_sel = 1'(a); mac_kx = 3'(kx); mac_ky = 3'(ky); mac_w = w;
              for (int cy = 0; cy < BH; cy++)
                for (int cx = 0; cx < BW; cx++)
                  if (mac_max)
                    sums[a][cy*BW + cx] = (mac_clear || tile[cy+ky][cx+kx] > sums[a][cy*BW + cx])
                                          ? tile[cy+ky][cx+kx] : sums[a][cy*BW + cx];
                  else
                    sums[a][cy*BW + cx] += w ? tile[cy+ky][cx+kx] : -tile[cy+ky][cx+kx];
              @(negedge clk);
              macs++;
            end
        mac_en = 0;
        checks++;
        if (macs != AL * KM * KM) failures++;
      end
      for (int a = 0; a < AL; a++) begin
        act_en = 1; act_sel = 1'(a); act_first = (a == 0); act_last = (a == AL - 1);
        act_shift = 5'(sh); act_bits = 4'd8;
        @(negedge clk);
        act_en = 0;
        checks++;
        if (!vblk_valid || vblk_first != (a == 0) || vblk_last != (a == AL - 1)) failures++;
        for (int l = 0; l < LANES; l++) begin
          int e;
          e = (sums[a][l] <= 0) ? 0 : ((sums[a][l] >>> sh) > 255 ? 255 : (sums[a][l] >>> sh));
          checks++;
          if (int'(vblk[l]) != e) begin
            failures++;
            if (failures < 6) $display("FAIL: round %0d a %0d lane %0d got %0d expected %0d (sum %0d)",
                                       round, a, l, vblk[l], e, sums[a][l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
