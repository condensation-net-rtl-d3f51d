// tb_weight_memory: weight memory test (reduced depth).
// Loads random 32-bit words, then reads single weight bits at random bit
// addresses and checks each against bit (addr % 32) of word (addr / 32), one
// clock after the request.
module tb_weight_memory;
  localparam int DEPTH = 256;
  localparam int AW = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re, rbit;
  logic [AW-1:0] waddr;
  logic [31:0] wdata;
  logic [AW+4:0] rbit_addr;
  logic [31:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  weight_memory #(.DEPTH(DEPTH), .AW(AW)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; wdata = 0; rbit_addr = 0;
    for (int i = 0; i < DEPTH; i++) begin
      ref_mem[i] = $urandom;
      we <= 1; waddr <= AW'(i); wdata <= ref_mem[i];
      @(posedge clk);
    end
    we <= 0;
    for (int t = 0; t < 4000; t++) begin
      int b;
      b = $urandom_range(0, DEPTH * 32 - 1);
      re <= 1; rbit_addr <= (AW+5)'(b);
      @(posedge clk);
      re <= 0;
      @(negedge clk);
      checks++;
      if (rbit !== ref_mem[b / 32][b % 32]) begin
        failures++;
        if (failures < 5) $display("FAIL: bit %0d got %0b", b, rbit);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
