// tb_qubithd_workloads: end-to-end runs of the full-size chip (qubithd_top with its default
// parameters) in the shapes of four of the data sets QubitHD was evaluated on: UCIHAR (561
// features, 12 classes), MNIST (784, 10), FACE (608, 2) and EXTRA (225, 4). ISOLET (617, 26)
// is the shape of tb_qubithd_full.
//
// The real data sets are not used. Each run takes the feature count and class count of its data
// set and draws a synthetic task with tb_qubithd_core: random class prototypes plus noise, and
// every third or sixth training sample past the first K given a wrong label so that
// retraining has misses to correct. The learning rate is 1, which is gentle enough that these
// few wrong labels do not take over classes that hold only a handful of samples.
// The sample counts are small to keep the simulation short. Each run then does the complete
// flow: clear, one-shot training, stochastic binarization, two retraining rounds with the
// convergence test, and inference. It checks every result, cutoff and deterministic binary
// element against the testbench's own model. The four chips run side by side, each with its own
// clock. The testbench ends when all four are done, or when the watchdog expires.
module tb_qubithd_workloads;
  localparam int unsigned D = 10000, LANES = 100, N_MAX = 784, K_MAX = 26;
  localparam int unsigned MAXCYC = 6000000;

  tb_qubithd_core #(.FULL(1'b1), .D(D), .LANES(LANES), .N_MAX(N_MAX), .K_MAX(K_MAX),
    .N(561), .K(12), .NTRAIN(16), .NTEST(2), .MAXPASS(2), .NOISE(40), .EPS(17), .FLIP(3), .ALPHA(1),
    .STANDALONE(1'b0), .NAME("UCIHAR")) ucihar ();
  tb_qubithd_core #(.FULL(1'b1), .D(D), .LANES(LANES), .N_MAX(N_MAX), .K_MAX(K_MAX),
    .N(784), .K(10), .NTRAIN(16), .NTEST(2), .MAXPASS(2), .NOISE(40), .EPS(17), .FLIP(3), .ALPHA(1),
    .STANDALONE(1'b0), .NAME("MNIST")) mnist ();
  tb_qubithd_core #(.FULL(1'b1), .D(D), .LANES(LANES), .N_MAX(N_MAX), .K_MAX(K_MAX),
    .N(608), .K(2), .NTRAIN(12), .NTEST(8), .MAXPASS(2), .NOISE(40), .EPS(13), .FLIP(6), .ALPHA(1),
    .STANDALONE(1'b0), .NAME("FACE")) face ();
  tb_qubithd_core #(.FULL(1'b1), .D(D), .LANES(LANES), .N_MAX(N_MAX), .K_MAX(K_MAX),
    .N(225), .K(4), .NTRAIN(12), .NTEST(8), .MAXPASS(2), .NOISE(40), .EPS(13), .FLIP(6), .ALPHA(1),
    .STANDALONE(1'b0), .NAME("EXTRA")) extra ();

  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic finish_all(input bit timed_out);
    int checks, failures;
    checks   = ucihar.checks + mnist.checks + face.checks + extra.checks;
    failures = ucihar.failures + mnist.failures + face.failures + extra.failures;
    if (timed_out) begin
      failures++;
      $display("watchdog expired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    fork
      begin
        wait (ucihar.done && mnist.done && face.done && extra.done);
        finish_all(1'b0);
      end
      begin
        repeat (MAXCYC) @(posedge clk);
        finish_all(1'b1);
      end
    join
  end
endmodule
