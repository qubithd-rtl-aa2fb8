// isqrt: sequential integer square root, root = floor(sqrt(radicand)).
// Digit-by-digit (restoring) method, one result bit per clock: IN_W/2 clocks from start to
// done. Used to turn the variance of a class hypervector into its standard deviation.
module isqrt #(
  parameter int unsigned IN_W = 64,
  localparam int unsigned OUT_W = IN_W / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [IN_W-1:0]  radicand,
  output logic             busy,
  output logic             done,
  output logic [OUT_W-1:0] root
);

  logic [IN_W-1:0]  a;
  logic [OUT_W+1:0] rem;
  logic [OUT_W-1:0] r;
  logic [$clog2(OUT_W+1)-1:0] n;

  logic [OUT_W+3:0] rem_sh, trial;
  assign rem_sh = {rem, a[IN_W-1 -: 2]};
  assign trial  = {2'b00, r, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a    <= '0;
      rem  <= '0;
      r    <= '0;
      n    <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        a    <= radicand;
        rem  <= '0;
        r    <= '0;
        n    <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        a <= a << 2;
        if (rem_sh >= trial) begin
          rem <= (OUT_W+2)'(rem_sh - trial);
          r   <= {r[OUT_W-2:0], 1'b1};
        end else begin
          rem <= (OUT_W+2)'(rem_sh);
          r   <= {r[OUT_W-2:0], 1'b0};
        end
        if (n == ($clog2(OUT_W+1))'(OUT_W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= (rem_sh >= trial) ? {r[OUT_W-2:0], 1'b1} : {r[OUT_W-2:0], 1'b0};
        end
        n <= n + 1'b1;
      end
    end
  end

endmodule
