// tb_activation_unit: activation (quantization) test on 16 lanes.
// Random signed sums, shifts and output widths; checks ReLU + shift +
// saturation per lane, the one-clock latency and the tags carried along.
module tb_activation_unit;
  localparam int LANES = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_first, in_last, out_valid, out_first, out_last;
  logic signed [25:0] in_acc [LANES];
  logic [4:0] shift;
  logic [3:0] bits;
  logic [7:0] out [LANES];
  int checks = 0, failures = 0;

  activation_unit #(.LANES(LANES)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [LANES];
    rst_n = 0; in_valid = 0; in_first = 0; in_last = 0; shift = 0; bits = 2;
    for (int l = 0; l < LANES; l++) in_acc[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int sh, bt, qmax;
      bit f, la;
      sh = $urandom_range(0, 8);
      bt = $urandom_range(1, 8);
      f = 1'($urandom); la = 1'($urandom);
      qmax = (bt >= 8) ? 255 : (1 << bt) - 1;
      for (int l = 0; l < LANES; l++) begin
        int v;
        v = int'($urandom_range(0, 4000)) - 2000;
        in_acc[l] <= 26'(v);
        e[l] = (v <= 0) ? 0 : ((v >>> sh) > qmax ? qmax : (v >>> sh));
      end
      shift <= 5'(sh); bits <= 4'(bt); in_valid <= 1; in_first <= f; in_last <= la;
      @(posedge clk);
      in_valid <= 0;
      @(negedge clk);
      checks++;
      if (!out_valid || out_first != f || out_last != la) failures++;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (int'(out[l]) != e[l]) begin
          failures++;
          if (failures < 5) $display("FAIL: lane %0d got %0d expected %0d", l, out[l], e[l]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
