// stochastic_binarizer: builds the binary model from the non-binary model with qbin.
//
//   qbin(x) = +1                              if x >  b
//           = +1 with probability 1/2 + x/2b  if |x| <= b   (else -1)
//           = -1                              if x < -b
// so that E[qbin(x)] = x/b inside the cutoff band. The cutoff b is a fixed fraction of the
// standard deviation sigma: b = floor(sigma * b_frac / 256). This rule is the QubitHD
// stochastic binarization. This design takes sigma per class hypervector (over its D
// elements), draws the randomness from per-lane xorshift generators and, for b = 0, falls
// back to the plain sign rule (x >= 0 gives +1).
//
// Per class k (0..num_classes-1):
//   1. statistics pass: read the CHUNKS words of C_k, accumulate sum(x) and sum(x^2);
//   2. sigma = isqrt(E[x^2] - E[x]^2), with E[.] = sum * round(2^32/D) >> 32;
//      b = sigma*b_frac >> 8, reported on b_valid/b_class/b_value;
//   3. binarization pass: read C_k again; for lane w with 16 random bits u,
//      r = (u * 2b) >> 16 is uniform on [0, 2b) and the bit is +1 iff r < x + b, giving
//      P(+1) = (x+b)/(2b) to within 2^-16; one chunk of the binary model written per clock.
// Timing per class: about 2*CHUNKS + IN_W/2 + 8 clocks. start is taken while idle; done
// pulses when the last class is written. Bits: 0 = +1, 1 = -1.
// Tool notes: the square-root unit's busy output is unused, because its done pulse is enough.
// The low 16 bits of the product u*2b are unused, because r keeps only its top bits.
module stochastic_binarizer
  import qhd_pkg::*;
#(
  parameter int unsigned D      = D_DEF,
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned K_MAX  = K_MAX_DEF,
  parameter int unsigned CW     = CW_DEF,
  parameter logic [31:0] SEED   = 32'h1,
  localparam int unsigned CHUNKS = D / LANES,
  localparam int unsigned CHW   = $clog2(CHUNKS),
  localparam int unsigned KW    = $clog2(K_MAX),
  localparam int unsigned KNW   = $clog2(K_MAX + 1),
  localparam int unsigned AW    = $clog2(K_MAX * CHUNKS),
  localparam int unsigned SUMW  = CW + $clog2(D) + 1,        // signed sum of a class
  localparam int unsigned SQW   = 2 * CW + $clog2(D),        // sum of squares
  localparam int unsigned RS    = 32,                        // reciprocal scale 2^RS
  localparam int unsigned RW    = 34                         // reciprocal width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [KNW-1:0]           num_classes,
  input  logic [BFRAC_W-1:0]       b_frac,
  output logic                     busy,
  output logic                     done,
  output logic [AW-1:0]            cm_raddr,
  input  logic [LANES-1:0][CW-1:0] cm_rdata,
  output logic                     bm_we,
  output logic [CHW-1:0]           bm_waddr,
  output logic [KW-1:0]            bm_wclass,
  output logic [LANES-1:0]         bm_wdata,
  output logic                     b_valid,
  output logic [KW-1:0]            b_class,
  output logic [CW-1:0]            b_value
);

  localparam logic [RW-1:0] RECIP = RW'(((64'd1 << RS) + 64'(D / 2)) / 64'(D));

  typedef enum logic [2:0] {IDLE, STATS, STATS_END, CALC1, CALC2, SQRT, CUT, BIN} state_e;
  state_e state;

  logic [KW-1:0]  k;
  logic [CHW-1:0] ci;
  logic [AW-1:0]  base;       // k*CHUNKS
  logic           issue;      // a read is issued this clock
  logic           issue_bin;  // ... and it belongs to the binarization pass
  logic           last_chunk;

  assign last_chunk = (ci == CHW'(CHUNKS - 1));
  assign issue      = (state == STATS) || (state == BIN);
  assign issue_bin  = (state == BIN);
  assign cm_raddr   = base + AW'(ci);

  // data stage tags
  logic           d_stats, d_bin, d_last;
  logic [CHW-1:0] d_chunk;
  logic [KW-1:0]  d_class;

  logic signed [SUMW-1:0] sum;
  logic        [SQW-1:0]  sumsq;
  logic signed [CW:0]     mean;
  logic        [2*CW-1:0] ex2;
  logic        [2*CW-1:0] variance;
  logic        [CW-1:0]   b;

  // square root unit
  logic            sq_start, sq_busy, sq_done;
  logic [CW-1:0]   sigma;

  isqrt #(.IN_W(2 * CW)) u_isqrt (
    .clk, .rst_n, .start(sq_start), .radicand(variance),
    .busy(sq_busy), .done(sq_done), .root(sigma)
  );

  // random numbers, advanced once per binarized chunk
  logic [LANES-1:0][15:0] rnd;
  prng_lanes #(.LANES(LANES), .SEED(SEED)) u_prng (
    .clk, .rst_n, .en(d_bin), .rnd
  );

  // per-chunk statistics
  logic signed [SUMW-1:0] csum;
  logic        [SQW-1:0]  csq;
  always_comb begin
    csum = '0;
    csq  = '0;
    for (int w = 0; w < LANES; w++) begin
      csum = csum + SUMW'($signed(cm_rdata[w]));
      csq  = csq + SQW'($signed(cm_rdata[w]) * $signed(cm_rdata[w]));
    end
  end

  // qbin of one chunk
  logic [LANES-1:0] qbits;
  always_comb begin
    logic signed [CW+1:0] x, bb, xb;
    logic        [CW+16:0] prod;
    logic        [CW:0]    r;
    bb = $signed({2'b00, b});
    for (int w = 0; w < LANES; w++) begin
      x    = (CW+2)'($signed(cm_rdata[w]));
      xb   = x + bb;
      prod = (CW+17)'(rnd[w]) * (CW+17)'({b, 1'b0});
      r    = prod[CW+16:16];
      if (b == '0)        qbits[w] = x[CW+1];             // sign rule
      else if (x > bb)    qbits[w] = 1'b0;
      else if (x < -bb)   qbits[w] = 1'b1;
      else                qbits[w] = !($signed({1'b0, r}) < xb);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      k        <= '0;
      ci       <= '0;
      base     <= '0;
      d_stats  <= 1'b0;
      d_bin    <= 1'b0;
      d_last   <= 1'b0;
      d_chunk  <= '0;
      d_class  <= '0;
      sum      <= '0;
      sumsq    <= '0;
      mean     <= '0;
      ex2      <= '0;
      variance <= '0;
      b        <= '0;
      sq_start <= 1'b0;
      done     <= 1'b0;
      b_valid  <= 1'b0;
      b_class  <= '0;
      b_value  <= '0;
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      b_valid  <= 1'b0;
      d_stats  <= issue && !issue_bin;
      d_bin    <= issue_bin;
      d_last   <= issue && last_chunk;
      d_chunk  <= ci;
      d_class  <= k;

      if (issue) ci <= last_chunk ? '0 : ci + CHW'(1);

      if (d_stats) begin
        sum   <= sum + csum;
        sumsq <= sumsq + csq;
      end

      case (state)
        IDLE: if (start) begin
          state <= STATS;
          k     <= '0;
          base  <= '0;
          ci    <= '0;
          sum   <= '0;
          sumsq <= '0;
        end
        STATS: if (last_chunk) state <= STATS_END;
        STATS_END: state <= CALC1;           // last chunk accumulated this clock
        CALC1: begin
          logic signed [SUMW+RW:0]  mprod;
          logic        [SQW+RW-1:0] qprod;
          mprod = (SUMW+RW+1)'(sum) * $signed({1'b0, RECIP});
          qprod = (SQW+RW)'(sumsq) * (SQW+RW)'(RECIP);
          mean  <= (CW+1)'(mprod >>> RS);
          ex2   <= (2*CW)'(qprod >> RS);
          state <= CALC2;
        end
        CALC2: begin
          logic [2*CW+1:0] m2;
          m2 = (2*CW+2)'(mean * mean);
          variance <= ((2*CW+2)'(ex2) > m2) ? (2*CW)'((2*CW+2)'(ex2) - m2) : '0;
          sq_start <= 1'b1;
          state    <= SQRT;
        end
        SQRT: if (sq_done) state <= CUT;
        CUT: begin
          logic [CW+BFRAC_W-1:0] bp;
          bp = (CW+BFRAC_W)'(sigma) * (CW+BFRAC_W)'(b_frac);
          b       <= CW'(bp >> BFRAC_W);
          b_valid <= 1'b1;
          b_class <= k;
          b_value <= CW'(bp >> BFRAC_W);
          ci      <= '0;
          state   <= BIN;
        end
        BIN: if (last_chunk) begin
          if (KNW'(k) == num_classes - KNW'(1)) begin
            state <= IDLE;
          end else begin
            k     <= k + KW'(1);
            base  <= base + AW'(CHUNKS);
            sum   <= '0;
            sumsq <= '0;
            state <= STATS;
          end
        end
        default: state <= IDLE;
      endcase

      if (d_bin && d_last && state == IDLE) done <= 1'b1;
    end
  end

  assign bm_we     = d_bin;
  assign bm_waddr  = d_chunk;
  assign bm_wclass = d_class;
  assign bm_wdata  = qbits;
  assign busy      = (state != IDLE) || d_bin;

endmodule
