// model_update: read-modify-write of the non-binary model C.
//
// Operations (start with op):
//   UPD_ADD     : C[cls_a] += H                 one-shot (initial) training
//   UPD_RETRAIN : C[cls_a] += alpha*H, then     retraining of a misclassified sample:
//                 C[cls_b] -= alpha*H           cls_a = true label, cls_b = predicted class
//   UPD_CLEAR   : every word of C set to 0
// H is the non-binary query of the current sample, read from the query buffer.
// The update rules are the QubitHD/QuantHD training rules; the integer learning rate, the
// saturation at the CW-bit range and the schedule are this design's choices.
//
// Timing: one chunk per clock. The class-memory and query-buffer reads are issued in the
// issue stage, their data return one clock later and the sum is written in that clock, so
// an add pass takes CHUNKS+1 clocks, a retrain 2*CHUNKS+1, a clear K_MAX*CHUNKS+1 (start edge to done). busy is
// high from the clock after start until done, which pulses after the last write.
module model_update
  import qhd_pkg::*;
#(
  parameter int unsigned D      = D_DEF,
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned N_MAX  = N_MAX_DEF,
  parameter int unsigned K_MAX  = K_MAX_DEF,
  parameter int unsigned CW     = CW_DEF,
  localparam int unsigned CHUNKS = D / LANES,
  localparam int unsigned CHW   = $clog2(CHUNKS),
  localparam int unsigned KW    = $clog2(K_MAX),
  localparam int unsigned HW    = $clog2(N_MAX + 1) + 1,
  localparam int unsigned AW    = $clog2(K_MAX * CHUNKS),
  localparam int unsigned PRW   = HW + ALPHA_W + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  upd_op_e                  op,
  input  logic [KW-1:0]            cls_a,
  input  logic [KW-1:0]            cls_b,
  input  logic [ALPHA_W-1:0]       alpha,
  output logic                     busy,
  output logic                     done,
  output logic [CHW-1:0]           qb_raddr,
  input  logic [LANES-1:0][HW-1:0] qb_rdata,
  output logic [AW-1:0]            cm_raddr,
  input  logic [LANES-1:0][CW-1:0] cm_rdata,
  output logic                     cm_we,
  output logic [AW-1:0]            cm_waddr,
  output logic [LANES-1:0][CW-1:0] cm_wdata
);

  localparam logic signed [CW:0] CMAX = (CW+1)'((64'sd1 <<< (CW - 1)) - 1);
  localparam logic signed [CW:0] CMIN = -(CW+1)'(64'sd1 <<< (CW - 1));

  upd_op_e                     op_q;
  logic                        run;
  logic                        phase;     // 0: cls_a, 1: cls_b
  logic [AW-1:0]               addr;      // word being issued
  logic [CHW-1:0]              ci;
  logic [KW-1:0]               cls_b_q;
  logic signed [ALPHA_W+1:0]   coef;      // weight of H in the current phase
  logic [ALPHA_W-1:0]          alpha_q;

  // data stage
  logic                        d_valid;
  logic                        d_clear;
  logic [AW-1:0]               d_addr;
  logic signed [ALPHA_W+1:0]   d_coef;
  logic                        d_done;

  logic last_issue;
  always_comb begin
    if (op_q == UPD_CLEAR) last_issue = (addr == AW'(K_MAX * CHUNKS - 1));
    else                   last_issue = (ci == CHW'(CHUNKS - 1)) &&
                                        (op_q == UPD_ADD || phase);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run     <= 1'b0;
      phase   <= 1'b0;
      addr    <= '0;
      ci      <= '0;
      op_q    <= UPD_ADD;
      cls_b_q <= '0;
      coef    <= '0;
      alpha_q <= '0;
    end else if (start && !busy) begin
      run     <= 1'b1;
      phase   <= 1'b0;
      ci      <= '0;
      op_q    <= op;
      cls_b_q <= cls_b;
      alpha_q <= alpha;
      addr    <= (op == UPD_CLEAR) ? '0 : AW'(cls_a * CHUNKS);
      coef    <= (op == UPD_ADD) ? (ALPHA_W+2)'(1) : $signed({2'b00, alpha});
    end else if (run) begin
      if (last_issue) begin
        run <= 1'b0;
      end else if (op_q != UPD_CLEAR && ci == CHW'(CHUNKS - 1)) begin
        phase <= 1'b1;
        ci    <= '0;
        addr  <= AW'(cls_b_q * CHUNKS);
        coef  <= -$signed({2'b00, alpha_q});
      end else begin
        ci   <= ci + CHW'(1);
        addr <= addr + AW'(1);
      end
    end
  end

  assign qb_raddr = ci;
  assign cm_raddr = addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      d_clear <= 1'b0;
      d_addr  <= '0;
      d_coef  <= '0;
      d_done  <= 1'b0;
      done    <= 1'b0;
    end else begin
      d_valid <= run;
      d_clear <= (op_q == UPD_CLEAR);
      d_addr  <= addr;
      d_coef  <= coef;
      d_done  <= run && last_issue;
      done    <= d_done;
    end
  end

  // saturating C + coef*H
  always_comb begin
    logic signed [PRW-1:0] prod;
    logic signed [CW:0]    sum;
    for (int w = 0; w < LANES; w++) begin
      prod = PRW'(d_coef * $signed(qb_rdata[w]));
      sum  = (CW+1)'($signed(cm_rdata[w])) + (CW+1)'(prod);
      if (d_clear)          cm_wdata[w] = '0;
      else if (sum > CMAX)  cm_wdata[w] = CMAX[CW-1:0];
      else if (sum < CMIN)  cm_wdata[w] = CMIN[CW-1:0];
      else                  cm_wdata[w] = sum[CW-1:0];
    end
  end

  assign cm_we    = d_valid;
  assign cm_waddr = d_addr;
  assign busy     = run || d_valid || d_done;

endmodule
