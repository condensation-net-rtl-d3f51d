// tb_layer_param_memory: layer parameter memory test.
// Writes a random descriptor into every entry, reads them back in a shuffled
// order and compares whole descriptors, one clock after the read request.
module tb_layer_param_memory;
  import cnet_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [LP_AW-1:0] waddr, raddr;
  layer_param_t wdata, rdata;
  layer_param_t ref_mem [LP_DEPTH];
  int checks = 0, failures = 0;

  layer_param_memory dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int i = 0; i < int'(LP_DEPTH); i++) begin
      layer_param_t p;
      p = layer_param_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      ref_mem[i] = p;
      we <= 1; waddr <= LP_AW'(i); wdata <= p;
      @(posedge clk);
    end
    we <= 0;
    for (int r = 0; r < 4; r++)
      for (int i = 0; i < int'(LP_DEPTH); i++) begin
        int a;
        a = (i * 5 + r * 3) % LP_DEPTH;
        re <= 1; raddr <= LP_AW'(a);
        @(posedge clk);
        re <= 0;
        @(negedge clk);
        checks++;
        if (rdata !== ref_mem[a]) begin
          failures++;
          $display("FAIL: entry %0d", a);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
