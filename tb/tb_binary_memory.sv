// tb_binary_memory: writes every class of every chunk one class at a time (in a shuffled
// class order) and checks that each read returns the bits of all classes of a chunk,
// i.e. that a per-class write leaves the other classes of the word untouched.
module tb_binary_memory;
  localparam int unsigned D = 40, LANES = 8, K_MAX = 5;
  localparam int unsigned CHUNKS = D / LANES;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we = 0;
  logic [$clog2(CHUNKS)-1:0] waddr = '0, raddr = '0;
  logic [$clog2(K_MAX)-1:0]  wclass = '0;
  logic [LANES-1:0] wdata = '0;
  logic [K_MAX-1:0][LANES-1:0] rdata;
  logic [K_MAX-1:0][LANES-1:0] ref_mem [CHUNKS];

  binary_memory #(.D(D), .LANES(LANES), .K_MAX(K_MAX)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int rep = 0; rep < 2; rep++)
      for (int i = 0; i < K_MAX; i++) begin
        int k;
        k = (i * 3 + rep) % K_MAX;
        for (int c = 0; c < CHUNKS; c++) begin
          ref_mem[c][k] = LANES'($urandom);
          we = 1; waddr = c; wclass = k; wdata = ref_mem[c][k];
          @(negedge clk);
        end
      end
    we = 0;
    for (int c = 0; c < CHUNKS; c++) begin
      raddr = c;
      @(posedge clk); #1;
      for (int k = 0; k < K_MAX; k++) begin
        checks++;
        if (rdata[k] !== ref_mem[c][k]) begin
          failures++; $display("mismatch chunk %0d class %0d", c, k);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
