// tb_hd_encoder: encodes random feature vectors with random ID and level hypervectors held
// in a testbench memory model (one-clock read latency), and compares every emitted chunk
// with H_j = sum_i L[q_i]_j * ID_i_j computed here in bipolar arithmetic, and the binary
// query with sign(H_j) (H_j >= 0 -> +1). Checks chunk order and the latency: the last chunk
// appears n*CHUNKS+2 clocks after start. Runs n = 1, N_MAX and random n.
module tb_hd_encoder;
  localparam int unsigned D = 48, LANES = 8, N_MAX = 10, FEAT_W = 8, LEVEL_BITS = 2;
  localparam int unsigned CHUNKS = D / LANES;
  localparam int unsigned NLV = 2 ** LEVEL_BITS;
  localparam int unsigned NW = $clog2(N_MAX + 1);
  localparam int unsigned HW = NW + 1;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic f_we = 0;
  logic [$clog2(N_MAX)-1:0] f_addr = '0;
  logic [FEAT_W-1:0] f_data = '0;
  logic [NW-1:0] num_features = NW'(1);
  logic start = 0, busy, done;
  logic [$clog2(N_MAX*CHUNKS)-1:0] id_raddr;
  logic [$clog2(NLV*CHUNKS)-1:0]   lv_raddr;
  logic [LANES-1:0] id_rdata, lv_rdata;
  logic hv_valid;
  logic [$clog2(CHUNKS)-1:0] hv_chunk;
  logic [LANES-1:0][HW-1:0] hv_val;
  logic [LANES-1:0] hv_bin;

  hd_encoder #(.D(D), .LANES(LANES), .N_MAX(N_MAX), .FEAT_W(FEAT_W), .LEVEL_BITS(LEVEL_BITS)) dut (.*);

  // item memory model
  logic [LANES-1:0] idm [N_MAX*CHUNKS];
  logic [LANES-1:0] lvm [NLV*CHUNKS];
  always_ff @(posedge clk) begin
    id_rdata <= idm[id_raddr];
    lv_rdata <= lvm[lv_raddr];
  end

  logic [FEAT_W-1:0] feats [N_MAX];
  int exp_h [CHUNKS][LANES];
  int next_chunk;
  int cyc, start_cyc, done_cyc;
  always @(posedge clk) cyc++;

  // output monitor
  always @(posedge clk) begin
    #1;
    if (hv_valid) begin
      checks++;
      if (int'(hv_chunk) != next_chunk) begin
        failures++; $display("chunk order: got %0d expected %0d", hv_chunk, next_chunk);
      end
      for (int w = 0; w < LANES; w++) begin
        checks++;
        if ($signed(hv_val[w]) != exp_h[hv_chunk][w] ||
            hv_bin[w] != (exp_h[hv_chunk][w] < 0)) begin
          failures++;
          $display("chunk %0d lane %0d: H=%0d bin=%0d expected %0d", hv_chunk, w,
                   $signed(hv_val[w]), hv_bin[w], exp_h[hv_chunk][w]);
        end
      end
      next_chunk++;
    end
    if (done) done_cyc = cyc;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_sample(input int n);
    for (int i = 0; i < n; i++) feats[i] = FEAT_W'($urandom);
    for (int c = 0; c < CHUNKS; c++)
      for (int w = 0; w < LANES; w++) begin
        int s;
        s = 0;
        for (int i = 0; i < n; i++) begin
          int q, a, b2;
          q  = feats[i] >> (FEAT_W - LEVEL_BITS);
          a  = idm[i*CHUNKS + c][w] ? -1 : 1;
          b2 = lvm[q*CHUNKS + c][w] ? -1 : 1;
          s += a * b2;
        end
        exp_h[c][w] = s;
      end
    @(negedge clk);
    num_features = NW'(n);
    for (int i = 0; i < n; i++) begin
      f_we = 1; f_addr = i; f_data = feats[i];
      @(negedge clk);
    end
    f_we = 0;
    next_chunk = 0;
    done_cyc = -1;
    start = 1;
    @(posedge clk); start_cyc = cyc;
    @(negedge clk); start = 0;
    wait (done_cyc >= 0);
    @(negedge clk);
    checks++;
    if (next_chunk != CHUNKS) begin failures++; $display("got %0d chunks", next_chunk); end
    checks++;
    if (done_cyc - start_cyc != n * CHUNKS + 2) begin
      failures++; $display("latency %0d, expected %0d", done_cyc - start_cyc, n * CHUNKS + 2);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    cyc = 0;
    for (int a = 0; a < N_MAX*CHUNKS; a++) idm[a] = LANES'($urandom);
    for (int a = 0; a < NLV*CHUNKS; a++)  lvm[a] = LANES'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_sample(1);
    run_sample(N_MAX);
    for (int t = 0; t < 6; t++) run_sample(1 + ($urandom % N_MAX));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
