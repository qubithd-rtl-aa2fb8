// prng_lanes: LANES independent 32-bit xorshift generators (x ^= x<<13; x ^= x>>17;
// x ^= x<<5), one per lane, each advancing by one step in every clock with en high.
// Lane w starts from a distinct non-zero seed derived from SEED and w. rnd[w] is the upper
// 16 bits of lane w's state. The random source of the stochastic binarizer; the generator
// type is this design's choice.
module prng_lanes #(
  parameter int unsigned LANES = 4,
  parameter logic [31:0] SEED  = 32'h1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  output logic [LANES-1:0][15:0] rnd
);

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  function automatic logic [31:0] seed_of(input int unsigned w);
    logic [31:0] s;
    s = SEED ^ (32'(w + 1) * 32'h9E37_79B9);
    return (s == 32'h0) ? 32'h6D2B_79F5 : s;
  endfunction

  logic [LANES-1:0][31:0] st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < LANES; w++) st[w] <= seed_of(w);
    end else if (en) begin
      for (int w = 0; w < LANES; w++) st[w] <= xorshift32(st[w]);
    end
  end

  always_comb
    for (int w = 0; w < LANES; w++) rnd[w] = st[w][31:16];

endmodule
