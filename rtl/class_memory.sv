// class_memory: the non-binary model C, K_MAX class hypervectors of D signed CW-bit elements.
//
// Stored as K_MAX*D/LANES words of LANES elements, address class*CHUNKS + chunk. One write
// port and one read port with registered read data (one-cycle latency), so a read-modify-
// write unit can read chunk c+1 while it writes chunk c. Holding the model in integer form
// follows QubitHD; word organisation and element width are this design's choices.
// The array has no reset: the model is cleared by writing zeros (CMD_CLEAR at the top).
module class_memory
  import qhd_pkg::*;
#(
  parameter int unsigned D      = D_DEF,
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned K_MAX  = K_MAX_DEF,
  parameter int unsigned CW     = CW_DEF,
  localparam int unsigned DEPTH = K_MAX * (D / LANES),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [AW-1:0]          waddr,
  input  logic [LANES-1:0][CW-1:0] wdata,
  input  logic [AW-1:0]          raddr,
  output logic [LANES-1:0][CW-1:0] rdata
);

  logic [LANES-1:0][CW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
