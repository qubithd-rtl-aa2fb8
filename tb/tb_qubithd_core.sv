// tb_qubithd_core: end-to-end test of qubithd_top, shared by the reduced-size and the
// full-size testbench.
//
// A synthetic classification task: K random prototype feature vectors, samples drawn as
// prototypes plus bounded noise, optionally with some training labels made wrong so that
// retraining has misses to correct. The testbench keeps its own model of the whole algorithm:
// it encodes every sample from its own copy of the ID and level hypervectors, keeps the
// non-binary model, predicts with the binary model it reads back from the chip, and applies
// the retraining rule itself. The run:
//   CMD_CLEAR, one-shot training (OP_TRAIN) on the training set, CMD_BINARIZE,
//   retraining rounds (OP_RETRAIN on the training set, then CMD_END_PASS) until the chip
//   reports convergence or MAXPASS rounds, then inference (OP_INFER) on the test set.
// Checked: every result (prediction, distance, label, correct flag) against the testbench's
// own prediction; each round's error count and the convergence flag; after every
// binarization, each class's cutoff b (+-1) and every element outside [-b, b]
// (deterministic under qbin), while elements inside the band are counted as stochastic.
// Each mechanism (clear, one-shot training, stochastic binarization, retraining update on a
// miss, retraining hit, convergence, inference) must occur at least once.
// Standalone (STANDALONE = 1), the core has its own watchdog and ends the simulation with the
// TB_RESULT line. With STANDALONE = 0 it raises `done` and leaves checks, failures and the end
// of the simulation to the testbench that contains it.
module tb_qubithd_core
  import qhd_pkg::*;
#(
  parameter bit          FULL    = 1'b0,   // 1: the top with its default parameters
  parameter int unsigned D       = 800,
  parameter int unsigned LANES   = 40,
  parameter int unsigned N_MAX   = 32,
  parameter int unsigned K_MAX   = 6,
  parameter int unsigned N       = 12,     // features used
  parameter int unsigned K       = 5,      // classes used
  parameter int unsigned NTRAIN  = 40,
  parameter int unsigned NTEST   = 20,
  parameter int unsigned MAXPASS = 4,
  parameter int unsigned NOISE   = 120,
  parameter int unsigned ALPHA   = 2,
  parameter int unsigned BFRAC   = 128,
  parameter int unsigned EPS     = 3,
  parameter int unsigned FLIP    = 0,      // every FLIP-th training sample gets a wrong label
  parameter bit          STANDALONE = 1'b1, // 0: no watchdog or $finish here, raise done instead
  parameter string       NAME    = "run",
  parameter bit          CHECK_ACC = 1'b1, // fail when test accuracy is not above chance

  parameter int unsigned MAXCYC  = 2000000
);
  localparam int unsigned CHUNKS = D / LANES;
  localparam int unsigned CHW = $clog2(CHUNKS);
  localparam int unsigned NW = $clog2(N_MAX + 1), FAW = $clog2(N_MAX);
  localparam int unsigned KW = $clog2(K_MAX), KNW = $clog2(K_MAX + 1), DW = $clog2(D + 1);
  localparam int unsigned FEAT_W = FEAT_W_DEF, LEVEL_BITS = LEVEL_BITS_DEF, CW = CW_DEF;
  localparam int unsigned NLV = 2 ** LEVEL_BITS;
  localparam int unsigned NS = NTRAIN + NTEST;

  int checks = 0, failures = 0;
  bit done = 1'b0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  // ---------------------------------------------------------------- DUT signals
  logic [NW-1:0]  cfg_num_features = NW'(N);
  logic [KNW-1:0] cfg_num_classes  = KNW'(K);
  logic [ALPHA_W-1:0] cfg_alpha    = ALPHA_W'(ALPHA);
  logic [BFRAC_W-1:0] cfg_b_frac   = BFRAC_W'(BFRAC);
  logic [31:0]    cfg_eps          = 32'(EPS);
  logic im_we = 0, im_sel = 0;
  logic [FAW-1:0] im_vec = '0;
  logic [CHW-1:0] im_chunk = '0;
  logic [LANES-1:0] im_wdata = '0;
  logic smp_valid = 0, smp_ready, smp_last = 0;
  logic [FEAT_W-1:0] smp_feat = '0;
  op_e smp_op = OP_INFER;
  logic [KW-1:0] smp_label = '0;
  logic cmd_valid = 0, cmd_ready;
  cmd_e cmd = CMD_CLEAR;
  logic res_valid, res_ready = 1'b1;
  op_e res_op;
  logic [KW-1:0] res_pred, res_label;
  logic [DW-1:0] res_dist;
  logic res_correct;
  logic [31:0] pass_errors, pass_count, cur_errors;
  logic converged, busy;
  logic cut_valid;
  logic [KW-1:0] cut_class;
  logic [CW-1:0] cut_value;
  logic mr_en = 0;
  logic [CHW-1:0] mr_chunk = '0;
  logic [K_MAX-1:0][LANES-1:0] mr_data;

  if (FULL) begin : g_full
    qubithd_top dut (.*);
  end else begin : g_small
    qubithd_top #(.D(D), .LANES(LANES), .N_MAX(N_MAX), .K_MAX(K_MAX)) dut (.*);
  end

  // ---------------------------------------------------------------- reference state
  logic [LANES-1:0] idv [N * CHUNKS];     // ID hypervectors, bit 1 = -1
  logic [LANES-1:0] lvv [NLV * CHUNKS];   // level hypervectors
  byte unsigned feats [NS][N];
  int  labels [NS];
  int  hq [NS][D];                        // encoded samples
  int  cref [K][D];                       // non-binary model
  logic [LANES-1:0] bref [K][CHUNKS];     // binary model read back from the chip
  int  cut [K_MAX];

  int n_clear, n_train, n_binarize, n_miss, n_hit, n_conv, n_infer, n_band;
  int cyc;
  always @(posedge clk) cyc++;
  always @(posedge clk) begin
    #1;
    if (cut_valid) cut[cut_class] = int'(cut_value);
  end

  initial if (STANDALONE) begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  task automatic load_item_memory();
    int perm [D];
    logic [LANES-1:0] base [CHUNKS];
    for (int v = 0; v < N; v++)
      for (int c = 0; c < CHUNKS; c++) idv[v*CHUNKS + c] = LANES'({$urandom, $urandom, $urandom, $urandom});
    // level vectors: level q differs from level 0 in q*D/(2*(NLV-1)) positions
    for (int j = 0; j < D; j++) perm[j] = j;
    for (int j = D - 1; j > 0; j--) begin
      int r, t;
      r = $urandom % (j + 1); t = perm[j]; perm[j] = perm[r]; perm[r] = t;
    end
    for (int c = 0; c < CHUNKS; c++) base[c] = LANES'({$urandom, $urandom, $urandom, $urandom});
    for (int q = 0; q < NLV; q++) begin
      for (int c = 0; c < CHUNKS; c++) lvv[q*CHUNKS + c] = base[c];
      for (int t = 0; t < q * D / (2 * (NLV - 1)); t++)
        lvv[q*CHUNKS + perm[t]/LANES][perm[t]%LANES] = ~base[perm[t]/LANES][perm[t]%LANES];
    end
    @(negedge clk);
    for (int v = 0; v < N; v++)
      for (int c = 0; c < CHUNKS; c++) begin
        im_we = 1; im_sel = 0; im_vec = FAW'(v); im_chunk = CHW'(c); im_wdata = idv[v*CHUNKS + c];
        @(negedge clk);
      end
    for (int q = 0; q < NLV; q++)
      for (int c = 0; c < CHUNKS; c++) begin
        im_we = 1; im_sel = 1; im_vec = FAW'(q); im_chunk = CHW'(c); im_wdata = lvv[q*CHUNKS + c];
        @(negedge clk);
      end
    im_we = 0;
  endtask

  task automatic make_data();
    byte unsigned proto [K][N];
    for (int k = 0; k < K; k++) for (int i = 0; i < N; i++) proto[k][i] = byte'($urandom);
    for (int s = 0; s < NS; s++) begin
      labels[s] = (s < K) ? s : int'($urandom % K);
      for (int i = 0; i < N; i++) begin
        int v;
        v = int'(proto[labels[s] % K][i]) + int'($urandom % (2*NOISE + 1)) - int'(NOISE);
        feats[s][i] = byte'(v < 0 ? 0 : v > 255 ? 255 : v);
      end
      // label noise: features of class l, label l+1
      if (FLIP != 0 && s >= K && s < NTRAIN && s % FLIP == 0) labels[s] = (labels[s] + 1) % K;
      for (int j = 0; j < D; j++) begin
        int acc;
        acc = 0;
        for (int i = 0; i < N; i++) begin
          int q;
          q = int'(feats[s][i]) >> (FEAT_W - LEVEL_BITS);
          acc += (idv[i*CHUNKS + j/LANES][j%LANES] ^ lvv[q*CHUNKS + j/LANES][j%LANES]) ? -1 : 1;
        end
        hq[s][j] = acc;
      end
    end
  endtask

  // reference associative search on the read-back binary model
  task automatic ref_predict(input int s, output int pred, output int pd);
    pd = D + 1; pred = 0;
    for (int k = 0; k < K; k++) begin
      int dd;
      dd = 0;
      for (int j = 0; j < D; j++) dd += int'((hq[s][j] < 0) != bref[k][j/LANES][j%LANES]);
      if (dd < pd) begin pd = dd; pred = k; end
    end
  endtask

  task automatic send_sample(input int s, input op_e op);
    for (int i = 0; i < N; i++) begin
      smp_valid = 1; smp_feat = feats[s][i]; smp_last = (i == N - 1);
      smp_op = op; smp_label = KW'(labels[s]);
      @(posedge clk);
      while (!smp_ready) @(posedge clk);
      @(negedge clk);
    end
    smp_valid = 0; smp_last = 0;
  endtask

  // sends a sample and checks its result; returns whether the chip counted a miss
  task automatic run_sample(input int s, input op_e op, output bit miss);
    int pred, pd;
    ref_predict(s, pred, pd);
    send_sample(s, op);
    while (!res_valid) @(negedge clk);
    miss = 0;
    if (op != OP_TRAIN) begin
      checks++;
      if (int'(res_pred) != pred || int'(res_dist) != pd) begin
        failures++;
        if (failures < 10) $display("sample %0d op %s: pred %0d dist %0d, expected %0d %0d",
                                    s, op.name(), res_pred, res_dist, pred, pd);
      end
    end
    checks++;
    if (res_op != op || int'(res_label) != labels[s] || res_correct != (res_pred == res_label)) begin
      failures++; $display("result fields wrong for sample %0d", s);
    end
    // the testbench's own model update
    if (op == OP_TRAIN) begin
      for (int j = 0; j < D; j++) cref[labels[s]][j] += hq[s][j];
      n_train++;
    end else if (op == OP_RETRAIN) begin
      if (pred != labels[s]) begin
        for (int j = 0; j < D; j++) begin
          cref[labels[s]][j] += ALPHA * hq[s][j];
          cref[pred][j]      -= ALPHA * hq[s][j];
        end
        miss = 1;
        n_miss++;
      end else n_hit++;
    end else n_infer++;
    @(negedge clk);   // result taken (res_ready is high)
  endtask

  task automatic command(input cmd_e c);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // reads the binary model back and checks it against qbin of the reference model
  task automatic read_and_check_model();
    for (int c = 0; c < CHUNKS; c++) begin
      @(negedge clk);
      mr_en = 1; mr_chunk = CHW'(c);
      @(negedge clk);
      for (int k = 0; k < K; k++) bref[k][c] = mr_data[k];
    end
    mr_en = 0;
    for (int k = 0; k < K; k++) begin
      real m, s2;
      int rb;
      m = 0; s2 = 0;
      for (int j = 0; j < D; j++) begin m += cref[k][j]; s2 += real'(cref[k][j]) * cref[k][j]; end
      m = m / D; s2 = s2 / D - m * m;
      rb = int'($floor($floor($sqrt(s2 < 0 ? 0.0 : s2)) * BFRAC / 256.0));
      checks++;
      if (cut[k] < rb - 1 || cut[k] > rb + 1) begin
        failures++; $display("class %0d cutoff %0d, expected %0d", k, cut[k], rb);
      end
      for (int j = 0; j < D; j++) begin
        logic bt;
        bt = bref[k][j/LANES][j%LANES];
        if (cut[k] == 0 || cref[k][j] > cut[k] || cref[k][j] < -cut[k]) begin
          checks++;
          if (bt != (cref[k][j] < 0)) begin
            failures++;
            if (failures < 10) $display("binary model class %0d elem %0d: C=%0d b=%0d bit=%0d",
                                        k, j, cref[k][j], cut[k], bt);
          end
        end else n_band++;
      end
    end
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int errs, prev_errs, correct;
    bit miss, ref_conv;
    cyc = 0;
    n_clear = 0; n_train = 0; n_binarize = 0; n_miss = 0; n_hit = 0; n_conv = 0; n_infer = 0; n_band = 0;
    for (int k = 0; k < K; k++) for (int j = 0; j < D; j++) cref[k][j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_item_memory();
    make_data();
    $display("%s [%0d] item memory loaded, %0d samples encoded by the testbench", NAME, cyc, NS);

    command(CMD_CLEAR); n_clear++;
    for (int s = 0; s < NTRAIN; s++) run_sample(s, OP_TRAIN, miss);
    command(CMD_BINARIZE); n_binarize++;
    read_and_check_model();
    $display("%s [%0d] one-shot training and first binarization done", NAME, cyc);

    prev_errs = 0;
    for (int p = 0; p < MAXPASS; p++) begin
      errs = 0;
      for (int s = 0; s < NTRAIN; s++) begin
        run_sample(s, OP_RETRAIN, miss);
        errs += int'(miss);
      end
      checks++;
      if (int'(cur_errors) != errs) begin failures++; $display("cur_errors %0d vs %0d", cur_errors, errs); end
      command(CMD_END_PASS); n_binarize++;
      ref_conv = (p > 0) && ((errs > prev_errs ? errs - prev_errs : prev_errs - errs) < EPS);
      checks++;
      if (int'(pass_errors) != errs || int'(pass_count) != p + 1 || converged != ref_conv) begin
        failures++;
        $display("round %0d: errors %0d count %0d converged %0d, expected %0d %0d %0d",
                 p, pass_errors, pass_count, converged, errs, p + 1, ref_conv);
      end
      prev_errs = errs;
      read_and_check_model();
      $display("%s [%0d] retraining round %0d: %0d of %0d misclassified, converged=%0d",
               NAME, cyc, p, errs, NTRAIN, converged);
      if (converged) begin n_conv++; break; end
    end

    correct = 0;
    for (int s = NTRAIN; s < NS; s++) begin
      run_sample(s, OP_INFER, miss);
      correct += int'(res_correct);
    end
    $display("%s [%0d] inference: %0d of %0d correct", NAME, cyc, correct, NTEST);
    if (CHECK_ACC) checks++;
    if (CHECK_ACC && correct * K <= NTEST) begin failures++; $display("accuracy not above chance"); end

    $display("%s mechanisms: clear %0d, one-shot %0d, binarize %0d, stochastic elements %0d, retrain miss %0d, retrain hit %0d, converged %0d, infer %0d",
             NAME, n_clear, n_train, n_binarize, n_band, n_miss, n_hit, n_conv, n_infer);
    checks++; if (n_clear == 0)    begin failures++; $display("clear never ran"); end
    checks++; if (n_train == 0)    begin failures++; $display("one-shot training never ran"); end
    checks++; if (n_binarize == 0) begin failures++; $display("binarization never ran"); end
    checks++; if (n_band == 0)     begin failures++; $display("no stochastic element seen"); end
    checks++; if (n_miss == 0)     begin failures++; $display("no retraining update"); end
    checks++; if (n_hit == 0)      begin failures++; $display("no correct retraining sample"); end
    checks++; if (n_conv == 0)     begin failures++; $display("never converged"); end
    checks++; if (n_infer == 0)    begin failures++; $display("no inference"); end
    $display("%s: checks=%0d failures=%0d", NAME, checks, failures);
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    done = 1'b1;
  end
endmodule
