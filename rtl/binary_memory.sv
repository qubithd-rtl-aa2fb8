// binary_memory: the binarized model, K_MAX class hypervectors of D bits (bit 1 = -1).
//
// One word holds chunk c (LANES dimensions) of every class, so the associative search
// reads all classes of a chunk in one clock. The binarizer writes one class of one chunk
// per clock (wclass selects the LANES-bit slice). Read data is registered (one-cycle
// latency). The word organisation is this design's choice.
module binary_memory
  import qhd_pkg::*;
#(
  parameter int unsigned D      = D_DEF,
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned K_MAX  = K_MAX_DEF,
  localparam int unsigned CHUNKS = D / LANES,
  localparam int unsigned CHW   = $clog2(CHUNKS),
  localparam int unsigned KW    = $clog2(K_MAX)
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [CHW-1:0]              waddr,
  input  logic [KW-1:0]               wclass,
  input  logic [LANES-1:0]            wdata,
  input  logic [CHW-1:0]              raddr,
  output logic [K_MAX-1:0][LANES-1:0] rdata
);

  logic [K_MAX-1:0][LANES-1:0] mem [CHUNKS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wclass] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
