// tb_item_memory: writes random ID and level hypervectors through the host port and reads
// every word back through both read ports, comparing with a copy kept by the testbench.
// Also checks the one-clock read latency.
module tb_item_memory;
  localparam int unsigned D = 48, LANES = 8, N_MAX = 6, LEVEL_BITS = 2;
  localparam int unsigned CHUNKS = D / LANES;
  localparam int unsigned NLV = 2 ** LEVEL_BITS;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0, wr_sel = 1'b0;
  logic [$clog2(N_MAX)-1:0]  wr_vec = '0;
  logic [$clog2(CHUNKS)-1:0] wr_chunk = '0;
  logic [LANES-1:0] wr_data = '0;
  logic [$clog2(N_MAX*CHUNKS)-1:0]   id_raddr = '0;
  logic [$clog2(NLV*CHUNKS)-1:0]     lv_raddr = '0;
  logic [LANES-1:0] id_rdata, lv_rdata;

  logic [LANES-1:0] ref_id [N_MAX][CHUNKS];
  logic [LANES-1:0] ref_lv [NLV][CHUNKS];

  item_memory #(.D(D), .LANES(LANES), .N_MAX(N_MAX), .LEVEL_BITS(LEVEL_BITS)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int v = 0; v < N_MAX; v++)
      for (int c = 0; c < CHUNKS; c++) begin
        ref_id[v][c] = LANES'($urandom);
        wr_en = 1; wr_sel = 0; wr_vec = v; wr_chunk = c; wr_data = ref_id[v][c];
        @(negedge clk);
      end
    for (int v = 0; v < NLV; v++)
      for (int c = 0; c < CHUNKS; c++) begin
        ref_lv[v][c] = LANES'($urandom);
        wr_en = 1; wr_sel = 1; wr_vec = v; wr_chunk = c; wr_data = ref_lv[v][c];
        @(negedge clk);
      end
    wr_en = 0;
    for (int v = 0; v < N_MAX; v++)
      for (int c = 0; c < CHUNKS; c++) begin
        int lvv;
        lvv = v % NLV;
        id_raddr = v * CHUNKS + c;
        lv_raddr = lvv * CHUNKS + c;
        @(posedge clk); #1;
        checks++;
        if (id_rdata !== ref_id[v][c]) begin
          failures++; $display("ID mismatch v=%0d c=%0d %h vs %h", v, c, id_rdata, ref_id[v][c]);
        end
        checks++;
        if (lv_rdata !== ref_lv[lvv][c]) begin
          failures++; $display("LV mismatch v=%0d c=%0d", lvv, c);
        end
        // latency: changing the address without a clock edge leaves the data unchanged
        id_raddr = ((v + 1) % N_MAX) * CHUNKS + c;
        #1;
        checks++;
        if (id_rdata !== ref_id[v][c]) begin
          failures++; $display("read data not registered");
        end
        @(negedge clk);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
