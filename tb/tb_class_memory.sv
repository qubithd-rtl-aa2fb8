// tb_class_memory: random writes of signed chunks followed by reads of every word, one
// read per clock, compared with a reference copy; also a write and a read of different
// words in the same clock.
module tb_class_memory;
  localparam int unsigned D = 40, LANES = 4, K_MAX = 3, CW = 16;
  localparam int unsigned DEPTH = K_MAX * (D / LANES);
  localparam int unsigned AW = $clog2(DEPTH);

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [LANES-1:0][CW-1:0] wdata = '0, rdata;
  logic [LANES-1:0][CW-1:0] ref_mem [DEPTH];

  class_memory #(.D(D), .LANES(LANES), .K_MAX(K_MAX), .CW(CW)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      for (int w = 0; w < LANES; w++) ref_mem[a][w] = CW'($urandom);
      we = 1; waddr = a; wdata = ref_mem[a];
      @(negedge clk);
    end
    // simultaneous write of word 0 and read of word 1
    for (int w = 0; w < LANES; w++) ref_mem[0][w] = CW'($urandom);
    we = 1; waddr = 0; wdata = ref_mem[0]; raddr = 1;
    @(posedge clk); #1;
    checks++;
    if (rdata !== ref_mem[1]) begin failures++; $display("concurrent read wrong"); end
    @(negedge clk);
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = a;
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("mismatch at %0d", a); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
