// item_memory: the random hypervectors the encoder combines.
//
// Two arrays: the ID (position) hypervectors, one per feature position, and the level
// (base) hypervectors, one per discretization level. Each hypervector is stored as D/LANES
// words of LANES bits (bit 1 = -1), at flat address vector*CHUNKS + chunk. The host writes
// one word per clock through the wr_* port (wr_sel picks the array); the encoder reads one
// word of each array per clock with a one-cycle latency (registered read data).
// That the hypervectors are random and fixed follows the QubitHD encoding; generating
// them on the host and loading them through a write port is this design's choice.
module item_memory
  import qhd_pkg::*;
#(
  parameter int unsigned D          = D_DEF,
  parameter int unsigned LANES      = LANES_DEF,
  parameter int unsigned N_MAX      = N_MAX_DEF,
  parameter int unsigned LEVEL_BITS = LEVEL_BITS_DEF,
  localparam int unsigned CHUNKS    = D / LANES,
  localparam int unsigned ID_DEPTH  = N_MAX * CHUNKS,
  localparam int unsigned LV_DEPTH  = (2 ** LEVEL_BITS) * CHUNKS,
  localparam int unsigned CHW       = $clog2(CHUNKS),
  localparam int unsigned VW        = $clog2(N_MAX),
  localparam int unsigned IDAW      = $clog2(ID_DEPTH),
  localparam int unsigned LVAW      = $clog2(LV_DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic             wr_sel,    // 0: ID vector, 1: level vector
  input  logic [VW-1:0]    wr_vec,
  input  logic [CHW-1:0]   wr_chunk,
  input  logic [LANES-1:0] wr_data,
  input  logic [IDAW-1:0]  id_raddr,
  output logic [LANES-1:0] id_rdata,
  input  logic [LVAW-1:0]  lv_raddr,
  output logic [LANES-1:0] lv_rdata
);

  logic [LANES-1:0] id_mem [ID_DEPTH];
  logic [LANES-1:0] lv_mem [LV_DEPTH];

  logic [IDAW-1:0] id_waddr;
  logic [LVAW-1:0] lv_waddr;
  assign id_waddr = IDAW'(wr_vec * CHUNKS + wr_chunk);
  assign lv_waddr = LVAW'(wr_vec[LEVEL_BITS-1:0] * CHUNKS + wr_chunk);

  always_ff @(posedge clk) begin
    if (wr_en && !wr_sel) id_mem[id_waddr] <= wr_data;
    if (wr_en &&  wr_sel) lv_mem[lv_waddr] <= wr_data;
    id_rdata <= id_mem[id_raddr];
    lv_rdata <= lv_mem[lv_raddr];
  end

endmodule
