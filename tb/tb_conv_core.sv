// tb_conv_core: convolution core test.
// Drives random pixel / weight / buffer-entry sequences, with `clear` at the
// start of each sum, and checks every buffer entry against sums kept here
// (weight 1 adds the pixel, weight 0 subtracts it) or, in max mode, the
// largest pixel since the clear. Also checks that an idle clock changes
// nothing.
module tb_conv_core;
  localparam int ALPHA = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, en, clear, weight, max_mode;
  logic [1:0] sel;
  logic [7:0] pixel;
  logic signed [25:0] acc [ALPHA];
  int expect_acc [ALPHA];
  int checks = 0, failures = 0;

  conv_core dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; en = 0; clear = 0; max_mode = 0; weight = 0; sel = 0; pixel = 0;
    for (int a = 0; a < ALPHA; a++) expect_acc[a] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int s, p;
      bit w, c;
      s = $urandom_range(0, ALPHA - 1);
      p = $urandom_range(0, 255);
      w = 1'($urandom);
      c = ($urandom_range(0, 40) == 0);
      if (c) max_mode <= ($urandom_range(0, 2) == 0);
      en <= ($urandom_range(0, 7) != 0);
      sel <= 2'(s); pixel <= 8'(p); weight <= w; clear <= c;
      @(posedge clk);
      @(negedge clk);
      if (en && max_mode) expect_acc[s] = (c || p > expect_acc[s]) ? p : expect_acc[s];
      else if (en)        expect_acc[s] = (c ? 0 : expect_acc[s]) + (w ? p : -p);
      for (int a = 0; a < ALPHA; a++) begin
        checks++;
        if (int'(acc[a]) != expect_acc[a]) begin
          failures++;
          if (failures < 5) $display("FAIL: t %0d entry %0d got %0d expected %0d", t, a, acc[a], expect_acc[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
