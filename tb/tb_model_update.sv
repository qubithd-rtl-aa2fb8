// tb_model_update: the model-update unit against testbench models of the class memory and
// the query buffer (one-clock read latency). Runs CLEAR, one-shot ADD (C[a] += H) and
// RETRAIN (C[a] += alpha*H, C[b] -= alpha*H) with random H, alpha and model contents,
// including elements pushed past the CW-bit range to check saturation, and compares the
// whole model with a reference after every operation. Also checks the clock count from
// start to done: CHUNKS+1 for ADD, 2*CHUNKS+1 for RETRAIN, K_MAX*CHUNKS+1 for CLEAR.
module tb_model_update;
  import qhd_pkg::*;
  localparam int unsigned D = 40, LANES = 4, N_MAX = 10, K_MAX = 3, CW = 12;
  localparam int unsigned CHUNKS = D / LANES;
  localparam int unsigned HW = $clog2(N_MAX + 1) + 1;
  localparam int unsigned AW = $clog2(K_MAX * CHUNKS);
  localparam int CMAX = (1 << (CW - 1)) - 1, CMIN = -(1 << (CW - 1));

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  logic start = 0;
  upd_op_e op = UPD_ADD;
  logic [$clog2(K_MAX)-1:0] cls_a = '0, cls_b = '0;
  logic [ALPHA_W-1:0] alpha = '0;
  logic busy, done;
  logic [$clog2(CHUNKS)-1:0] qb_raddr;
  logic [LANES-1:0][HW-1:0] qb_rdata;
  logic [AW-1:0] cm_raddr, cm_waddr;
  logic [LANES-1:0][CW-1:0] cm_rdata, cm_wdata;
  logic cm_we;

  model_update #(.D(D), .LANES(LANES), .N_MAX(N_MAX), .K_MAX(K_MAX), .CW(CW)) dut (.*);

  logic [LANES-1:0][CW-1:0] cm [K_MAX*CHUNKS];
  logic [LANES-1:0][HW-1:0] qb [CHUNKS];
  always_ff @(posedge clk) begin
    if (cm_we) cm[cm_waddr] <= cm_wdata;
    cm_rdata <= cm[cm_raddr];
    qb_rdata <= qb[qb_raddr];
  end

  int refm [K_MAX][D];
  int cyc, start_cyc, done_cyc;
  int n_sat;
  always @(posedge clk) begin
    cyc++;
    if (start) start_cyc = cyc;   // the edge that takes start
    #1;
    if (done) done_cyc = cyc;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input int v);
    if (v > CMAX) begin n_sat++; return CMAX; end
    if (v < CMIN) begin n_sat++; return CMIN; end
    return v;
  endfunction

  task automatic compare(input string what);
    for (int k = 0; k < K_MAX; k++)
      for (int j = 0; j < D; j++) begin
        checks++;
        if ($signed(cm[k*CHUNKS + j/LANES][j%LANES]) != refm[k][j]) begin
          failures++;
          if (failures < 10) $display("%s: C[%0d][%0d] = %0d, expected %0d", what, k, j,
                                      $signed(cm[k*CHUNKS + j/LANES][j%LANES]), refm[k][j]);
        end
      end
  endtask

  task automatic do_op(input upd_op_e o, input int a, input int b, input int al, input int exp_cycles);
    int h [D];
    for (int j = 0; j < D; j++) begin
      h[j] = int'($urandom % (2*N_MAX + 1)) - int'(N_MAX);
      qb[j/LANES][j%LANES] = HW'(h[j]);
    end
    for (int k = 0; k < K_MAX; k++)
      for (int j = 0; j < D; j++) begin
        case (o)
          UPD_CLEAR: refm[k][j] = 0;
          UPD_ADD:   if (k == a) refm[k][j] = sat(refm[k][j] + h[j]);
          default: begin
            if (k == a) refm[k][j] = sat(refm[k][j] + al * h[j]);
            if (k == b) refm[k][j] = sat(refm[k][j] - al * h[j]);
          end
        endcase
      end
    @(negedge clk);
    op = o; cls_a = a; cls_b = b; alpha = al; start = 1;
    done_cyc = -1;
    @(posedge clk);
    @(negedge clk); start = 0;
    wait (done_cyc >= 0);
    @(negedge clk);
    checks++;
    if (done_cyc - start_cyc != exp_cycles) begin
      failures++; $display("op %s took %0d clocks, expected %0d", o.name(), done_cyc - start_cyc, exp_cycles);
    end
    compare(o.name());
  endtask

  initial begin
    cyc = 0; n_sat = 0;
    for (int a = 0; a < K_MAX*CHUNKS; a++) cm[a] = {LANES{CW'($urandom)}};
    for (int k = 0; k < K_MAX; k++) for (int j = 0; j < D; j++) refm[k][j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do_op(UPD_CLEAR, 0, 0, 0, K_MAX*CHUNKS + 1);
    for (int t = 0; t < 6; t++) do_op(UPD_ADD, $urandom % K_MAX, 0, 0, CHUNKS + 1);
    for (int t = 0; t < 8; t++) begin
      int a, b;
      a = $urandom % K_MAX; b = (a + 1 + $urandom % (K_MAX - 1)) % K_MAX;
      do_op(UPD_RETRAIN, a, b, 1 + $urandom % 200, 2*CHUNKS + 1);
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturated elements: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
