// tb_qubithd_top: end-to-end run of the accelerator at reduced size (D = 800, 40 lanes,
// 12 features, 5 classes); see tb_qubithd_core for what is checked.
module tb_qubithd_top;
  tb_qubithd_core #(.FULL(1'b0)) core ();
endmodule
