// tb_fm_memory: feature map memory test (reduced depth, 32 banks).
// Writes random pixels to random addresses, then reads 32-pixel rows from
// random start addresses (any alignment, including wrap-around at the top of
// the memory) and checks every pixel, the one-clock read latency, and that
// the data holds while `re` is low.
module tb_fm_memory;
  localparam int DEPTH = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [9:0] waddr, raddr;
  logic [7:0] wdata;
  logic [7:0] rdata [32];
  byte unsigned ref_mem [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  fm_memory #(.DEPTH(DEPTH), .AW(10), .NB(32)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      we <= 1; waddr <= 10'(i); wdata <= 8'(i * 7 + 3); ref_mem[i] = 8'(i * 7 + 3);
      @(posedge clk);
    end
    for (int t = 0; t < 2000; t++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      we <= 1; waddr <= 10'(a); wdata <= 8'($urandom); re <= 0;
      @(posedge clk);
      ref_mem[a] = wdata;
      we <= 0;
      a = $urandom_range(0, DEPTH - 1);
      re <= 1; raddr <= 10'(a);
      @(posedge clk);
      re <= 0;
      @(negedge clk);
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (rdata[i] !== ref_mem[(a + i) % DEPTH]) begin
          failures++;
          if (failures < 5) $display("FAIL: addr %0d lane %0d got %0h expected %0h", a, i, rdata[i], ref_mem[(a + i) % DEPTH]);
        end
      end
      // hold: no re, data stays
      raddr <= 10'((a + 1) % DEPTH);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (rdata[0] !== ref_mem[a] || rdata[31] !== ref_mem[(a + 31) % DEPTH]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
