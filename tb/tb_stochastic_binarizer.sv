// tb_stochastic_binarizer: the binarizer against testbench models of the class memory and
// binary memory. Class hypervectors are filled with roughly normal integers of a different
// spread per class (class 3 all zero). Checks, for every class:
//  * the cutoff b against floor(sigma*b_frac/256), sigma the population standard deviation
//    computed here in floating point (+-1 allowed for the fixed-point reciprocal of D);
//  * every element outside [-b, b] gets the deterministic bit (+1 above b, -1 below -b);
//  * over R repeated binarizations, the number of +1 draws of the elements inside the band
//    matches sum (x+b)/(2b) within 4 standard deviations, and the draws change between runs;
//  * with b_frac = 0 (b = 0) the plain sign rule, and an all-zero class gives +1 everywhere.
module tb_stochastic_binarizer;
  import qhd_pkg::*;
  localparam int unsigned D = 400, LANES = 8, K_MAX = 4, CW = 16;
  localparam int unsigned CHUNKS = D / LANES;
  localparam int unsigned AW = $clog2(K_MAX * CHUNKS);
  localparam int unsigned KW = $clog2(K_MAX), KNW = $clog2(K_MAX + 1);
  localparam int R = 30;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic start = 0;
  logic [KNW-1:0] num_classes = KNW'(K_MAX);
  logic [BFRAC_W-1:0] b_frac = 8'd128;
  logic busy, done;
  logic [AW-1:0] cm_raddr;
  logic [LANES-1:0][CW-1:0] cm_rdata;
  logic bm_we;
  logic [$clog2(CHUNKS)-1:0] bm_waddr;
  logic [KW-1:0] bm_wclass;
  logic [LANES-1:0] bm_wdata;
  logic b_valid;
  logic [KW-1:0] b_class;
  logic [CW-1:0] b_value;

  stochastic_binarizer #(.D(D), .LANES(LANES), .K_MAX(K_MAX), .CW(CW)) dut (.*);

  logic [LANES-1:0][CW-1:0] cm [K_MAX*CHUNKS];
  logic [K_MAX-1:0][LANES-1:0] bm [CHUNKS];
  always_ff @(posedge clk) begin
    cm_rdata <= cm[cm_raddr];
    if (bm_we) bm[bm_waddr][bm_wclass] <= bm_wdata;
  end

  int got_b [K_MAX];
  always @(posedge clk) begin
    #1;
    if (b_valid) got_b[b_class] = int'(b_value);
  end

  int x [K_MAX][D];
  int plus_cnt [K_MAX][D];
  logic prev_bit [K_MAX][D];
  int changes;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_b(input int k, input int frac);
    real m, s2, sig;
    m = 0; s2 = 0;
    for (int j = 0; j < D; j++) begin m += x[k][j]; s2 += real'(x[k][j]) * x[k][j]; end
    m = m / D; s2 = s2 / D - m * m;
    sig = $floor($sqrt(s2 < 0 ? 0.0 : s2));
    return int'($floor(sig * frac / 256.0));
  endfunction

  task automatic binarize_once();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
  endtask

  function automatic logic bit_of(input int k, input int j);
    return bm[j / LANES][k][j % LANES];
  endfunction

  initial begin
    real mean_exp, var_exp, z;
    int plus_tot, bandn;
    for (int k = 0; k < K_MAX; k++)
      for (int j = 0; j < D; j++) begin
        int v, spread;
        spread = (k == 0) ? 40 : (k == 1) ? 400 : (k == 2) ? 3000 : 0;
        v = 0;
        for (int t = 0; t < 4; t++) v += int'($urandom % (2*spread + 1)) - spread;
        if (k == 2) v += 500;              // non-zero mean
        x[k][j] = v;
        cm[k*CHUNKS + j/LANES][j%LANES] = CW'(v);
        plus_cnt[k][j] = 0;
      end
    repeat (3) @(negedge clk);
    rst_n = 1;

    changes = 0;
    for (int r = 0; r < R; r++) begin
      binarize_once();
      for (int k = 0; k < K_MAX; k++) begin
        int rb;
        rb = ref_b(k, 128);
        if (r == 0) begin
          checks++;
          if (got_b[k] < rb - 1 || got_b[k] > rb + 1) begin
            failures++; $display("class %0d: b = %0d, expected %0d", k, got_b[k], rb);
          end
        end
        for (int j = 0; j < D; j++) begin
          logic bt;
          bt = bit_of(k, j);
          if (got_b[k] == 0 || x[k][j] > got_b[k] || x[k][j] < -got_b[k]) begin
            checks++;
            if (bt != (x[k][j] < 0)) begin
              failures++;
              if (failures < 10) $display("class %0d elem %0d: x=%0d b=%0d bit=%0d", k, j, x[k][j], got_b[k], bt);
            end
          end else begin
            if (!bt) plus_cnt[k][j]++;
            if (r > 0 && bt != prev_bit[k][j]) changes++;
          end
          prev_bit[k][j] = bt;
        end
      end
    end
    // statistics of the band elements
    mean_exp = 0; var_exp = 0; plus_tot = 0; bandn = 0;
    for (int k = 0; k < K_MAX; k++)
      for (int j = 0; j < D; j++)
        if (got_b[k] != 0 && x[k][j] <= got_b[k] && x[k][j] >= -got_b[k]) begin
          real p;
          p = (real'(x[k][j]) + got_b[k]) / (2.0 * got_b[k]);
          mean_exp += R * p;
          var_exp  += R * p * (1.0 - p);
          plus_tot += plus_cnt[k][j];
          bandn++;
        end
    z = (plus_tot - mean_exp) / $sqrt(var_exp);
    $display("band elements %0d, +1 draws %0d, expected %0.1f, z = %0.2f, changes %0d",
             bandn, plus_tot, mean_exp, z, changes);
    checks++;
    if (bandn < 100) begin failures++; $display("too few band elements"); end
    checks++;
    if (z > 4.0 || z < -4.0) begin failures++; $display("qbin probability off"); end
    checks++;
    if (changes < bandn) begin failures++; $display("draws do not vary between runs"); end
    // plain sign rule with b = 0
    b_frac = 0;
    binarize_once();
    for (int k = 0; k < K_MAX; k++) begin
      checks++;
      if (got_b[k] != 0) begin failures++; $display("b not zero with b_frac 0"); end
      for (int j = 0; j < D; j++) begin
        checks++;
        if (bit_of(k, j) != (x[k][j] < 0)) begin
          failures++;
          if (failures < 10) $display("sign rule: class %0d elem %0d x=%0d", k, j, x[k][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
