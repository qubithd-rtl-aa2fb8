// tb_hamming_search: random binary class hypervectors in a testbench memory model, random
// binary queries fed chunk by chunk with random gaps; the predicted class and its distance
// are compared with a Hamming-distance argmin computed here (lowest index wins a tie).
// Includes queries equal to a class (distance 0), duplicated classes (ties), and checks the
// latency: done is seen num_classes clock edges after the edge that takes the last chunk.
module tb_hamming_search;
  localparam int unsigned D = 64, LANES = 8, K_MAX = 5;
  localparam int unsigned CHUNKS = D / LANES;
  localparam int unsigned KW = $clog2(K_MAX), KNW = $clog2(K_MAX + 1), DW = $clog2(D + 1);

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic start = 0, q_valid = 0;
  logic [$clog2(CHUNKS)-1:0] q_chunk = '0;
  logic [LANES-1:0] q_bin = '0;
  logic [KNW-1:0] num_classes = KNW'(K_MAX);
  logic [$clog2(CHUNKS)-1:0] bm_raddr;
  logic [K_MAX-1:0][LANES-1:0] bm_rdata;
  logic done;
  logic [KW-1:0] pred_class;
  logic [DW-1:0] pred_dist;

  hamming_search #(.D(D), .LANES(LANES), .K_MAX(K_MAX)) dut (.*);

  logic [K_MAX-1:0][LANES-1:0] bm [CHUNKS];
  always_ff @(posedge clk) bm_rdata <= bm[bm_raddr];

  logic [LANES-1:0] q [CHUNKS];
  int cyc, last_cyc, done_cyc;
  logic [KW-1:0] got_class;
  logic [DW-1:0] got_dist;
  always @(posedge clk) begin
    cyc++;
    #1;
    if (done) begin done_cyc = cyc; got_class = pred_class; got_dist = pred_dist; end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_query(input int nc, input int mode);
    int dists [K_MAX];
    int best, bestd;
    // mode 0: random, 1: equal to a random class, 2: classes 1 and 3 duplicated, query near
    for (int c = 0; c < CHUNKS; c++)
      for (int k = 0; k < K_MAX; k++) bm[c][k] = LANES'($urandom);
    if (mode == 2) for (int c = 0; c < CHUNKS; c++) bm[c][3] = bm[c][1];
    for (int c = 0; c < CHUNKS; c++) begin
      q[c] = LANES'($urandom);
      if (mode == 1) q[c] = bm[c][nc - 1];
      if (mode == 2) q[c] = bm[c][1] ^ LANES'(c == 0);
    end
    best = 0; bestd = D + 1;
    for (int k = 0; k < nc; k++) begin
      dists[k] = 0;
      for (int c = 0; c < CHUNKS; c++) dists[k] += $countones(q[c] ^ bm[c][k]);
      if (dists[k] < bestd) begin bestd = dists[k]; best = k; end
    end
    @(negedge clk);
    num_classes = KNW'(nc);
    start = 1;
    @(negedge clk);
    start = 0;
    done_cyc = -1;
    for (int c = 0; c < CHUNKS; c++) begin
      repeat ($urandom % 3) @(negedge clk);
      q_valid = 1; q_chunk = c; q_bin = q[c];
      @(posedge clk); last_cyc = cyc + 1;
      @(negedge clk); q_valid = 0;
    end
    wait (done_cyc >= 0);
    checks++;
    if (int'(got_class) != best || int'(got_dist) != bestd) begin
      failures++;
      $display("mode %0d nc %0d: got class %0d dist %0d, expected %0d %0d",
               mode, nc, got_class, got_dist, best, bestd);
    end
    checks++;
    if (done_cyc - last_cyc != nc) begin
      failures++; $display("latency %0d expected %0d", done_cyc - last_cyc, nc);
    end
  endtask

  initial begin
    cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_query(K_MAX, 1);
    run_query(K_MAX, 2);
    run_query(2, 1);
    for (int t = 0; t < 30; t++) run_query(2 + ($urandom % (K_MAX - 1)), $urandom % 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
