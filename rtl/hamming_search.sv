// hamming_search: associative search of a binary query against the binary model.
//
// For every query chunk that arrives (q_valid), the unit reads that chunk of all classes
// from the binary memory (address issued in the same clock, data one clock later), and adds
// popcount(q XOR C_k) to the distance counter of each class k. After the last chunk
// (q_chunk = CHUNKS-1) a scan over classes 0..num_classes-1, one class per clock, finds the
// smallest distance; the lowest index wins a tie. done pulses with pred_class/pred_dist.
// Hamming distance in place of cosine similarity and the minimum-distance decision are the
// QubitHD associative search; the per-chunk schedule and the sequential scan are this
// design's choices. Latency: done rises num_classes clock edges after the edge that takes the last chunk.
// start clears the counters and must come before the first chunk of a query.
module hamming_search
  import qhd_pkg::*;
#(
  parameter int unsigned D      = D_DEF,
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned K_MAX  = K_MAX_DEF,
  localparam int unsigned CHUNKS = D / LANES,
  localparam int unsigned CHW   = $clog2(CHUNKS),
  localparam int unsigned KW    = $clog2(K_MAX),
  localparam int unsigned KNW   = $clog2(K_MAX + 1),
  localparam int unsigned DW    = $clog2(D + 1),
  localparam int unsigned PW    = $clog2(LANES + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic                        q_valid,
  input  logic [CHW-1:0]              q_chunk,
  input  logic [LANES-1:0]            q_bin,
  input  logic [KNW-1:0]              num_classes,
  output logic [CHW-1:0]              bm_raddr,
  input  logic [K_MAX-1:0][LANES-1:0] bm_rdata,
  output logic                        done,
  output logic [KW-1:0]               pred_class,
  output logic [DW-1:0]               pred_dist
);

  function automatic logic [PW-1:0] popcount(input logic [LANES-1:0] v);
    logic [PW-1:0] s;
    s = '0;
    for (int i = 0; i < LANES; i++) s = s + PW'(v[i]);
    return s;
  endfunction

  assign bm_raddr = q_chunk;

  logic             s_valid, s_last;
  logic [LANES-1:0] s_q;
  logic [K_MAX-1:0][DW-1:0] hdist;

  typedef enum logic [1:0] {IDLE, ACC, SCAN} state_e;
  state_e         state;
  logic [KW-1:0]  k;
  logic [KW-1:0]  best_k;
  logic [DW-1:0]  best_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid    <= 1'b0;
      s_last     <= 1'b0;
      s_q        <= '0;
      hdist       <= '0;
      state      <= IDLE;
      k          <= '0;
      best_k     <= '0;
      best_d     <= '0;
      done       <= 1'b0;
      pred_class <= '0;
      pred_dist  <= '0;
    end else begin
      done    <= 1'b0;
      s_valid <= q_valid;
      s_last  <= q_valid && (q_chunk == CHW'(CHUNKS - 1));
      s_q     <= q_bin;
      if (start) begin
        hdist  <= '0;
        state <= ACC;
      end else begin
        if (s_valid)
          for (int c = 0; c < K_MAX; c++)
            hdist[c] <= hdist[c] + DW'(popcount(s_q ^ bm_rdata[c]));
        case (state)
          ACC: if (s_valid && s_last) begin
            state  <= SCAN;
            k      <= '0;
            best_k <= '0;
            best_d <= '1;
          end
          SCAN: begin
            if (hdist[k] < best_d) begin
              best_d <= hdist[k];
              best_k <= k;
            end
            if (KNW'(k) == num_classes - KNW'(1)) begin
              state      <= IDLE;
              done       <= 1'b1;
              pred_class <= (hdist[k] < best_d) ? k : best_k;
              pred_dist  <= (hdist[k] < best_d) ? hdist[k] : best_d;
            end else begin
              k <= k + KW'(1);
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
