// tb_plpu: Pooling Layer Processing Unit test on a 4 x 4 block.
// For random alpha (1, 2, 4), operation (max, average, min), pooling
// enable and spatial pooling, feeds alpha random virtual blocks and checks
// the output block(s) against values computed here: one condensed block after
// the last input when pooling is on, one block per input when it is off, and
// the 2 x 2 / 2 max of it when spatial pooling is on.
module tb_plpu;
  import cnet_pkg::*;
  localparam int BW = 4, BH = 4, LANES = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, ccp_en, sp_pool, in_valid, in_first, in_last, out_valid;
  ccp_mode_e ccp_mode;
  logic [1:0] alpha_log2;
  logic [7:0] in_blk [LANES];
  logic [7:0] out [LANES];
  int checks = 0, failures = 0;
  int n_modes [3];

  plpu #(.BW(BW), .BH(BH)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_block(int e [LANES], bit sp);
    int n;
    n = sp ? LANES / 4 : LANES;
    for (int q = 0; q < n; q++) begin
      int v;
      if (sp) begin
        int py, px, i0;
        py = q / (BW / 2); px = q % (BW / 2); i0 = 2 * py * BW + 2 * px;
        v = e[i0];
        if (e[i0 + 1] > v) v = e[i0 + 1];
        if (e[i0 + BW] > v) v = e[i0 + BW];
        if (e[i0 + BW + 1] > v) v = e[i0 + BW + 1];
      end else v = e[q];
      checks++;
      if (int'(out[q]) != v) begin
        failures++;
        if (failures < 6) $display("FAIL: lane %0d got %0d expected %0d (mode %0d sp %0b)", q, out[q], v, ccp_mode, sp);
      end
    end
  endtask

  initial begin
    rst_n = 0; ccp_en = 0; sp_pool = 0; in_valid = 0; in_first = 0; in_last = 0;
    ccp_mode = CCP_MAX; alpha_log2 = 0;
    for (int l = 0; l < LANES; l++) in_blk[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int al2, al, md, r [LANES];
      bit en, sp;
      al2 = $urandom_range(0, 2); al = 1 << al2;
      md = $urandom_range(0, 2);
      en = ($urandom_range(0, 3) != 0);
      sp = 1'($urandom);
      n_modes[md]++;
      @(negedge clk);
      ccp_en = en; sp_pool = sp; alpha_log2 = 2'(al2); ccp_mode = ccp_mode_e'(md);
      for (int a = 0; a < al; a++) begin
        int x [LANES];
        for (int l = 0; l < LANES; l++) begin
          x[l] = $urandom_range(0, 255);
          in_blk[l] = 8'(x[l]);
          if (a == 0) r[l] = x[l];
          else case (md)
            0: r[l] = (x[l] > r[l]) ? x[l] : r[l];
            2: r[l] = (x[l] < r[l]) ? x[l] : r[l];
            default: r[l] = r[l] + x[l];
          endcase
        end
        in_valid = 1; in_first = (a == 0); in_last = (a == al - 1);
        if (!en) begin in_first = 1; in_last = 1; end
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (out_valid != (!en || a == al - 1)) begin
          failures++;
          $display("FAIL: out_valid %0b at input %0d of %0d (en %0b)", out_valid, a, al, en);
        end
        if (!en) check_block(x, sp);
        // a gap between virtual blocks must not disturb the running result
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
      if (en) begin
        if (md == 1) for (int l = 0; l < LANES; l++) r[l] = r[l] >> al2;
        check_block(r, sp);
      end
    end
    for (int m = 0; m < 3; m++) begin
      checks++;
      if (n_modes[m] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
