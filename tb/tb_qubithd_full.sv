// tb_qubithd_full: end-to-end run of the accelerator with every parameter at its default
// (D = 10,000, 100 lanes, up to 784 features and 26 classes), on a task in ISOLET's shape:
// 617 features and all 26 classes. It uses 52 training samples, every fourth of them
// mislabelled, and 4 test samples, with up to two retraining rounds.
// See tb_qubithd_core for what is checked.
module tb_qubithd_full;
  tb_qubithd_core #(
    .FULL(1'b1), .D(10000), .LANES(100), .N_MAX(784), .K_MAX(26),
    .N(617), .K(26), .NTRAIN(52), .NTEST(4), .MAXPASS(2), .NOISE(40),
    .EPS(53), .FLIP(4), .MAXCYC(14000000), .NAME("ISOLET")
  ) core ();
endmodule
