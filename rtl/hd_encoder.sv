// hd_encoder: maps one feature vector to its hypervector.
//
// For every feature position i the feature value is discretized to a level q_i (the top
// LEVEL_BITS bits of the unsigned feature), the level hypervector L[q_i] is bound to the
// position hypervector ID_i (bipolar product = XOR of the sign bits) and the n bound vectors
// are bundled by summation:  H_j = sum_i L[q_i]_j * ID_i_j,  H_j in [-n, n].
// The binary query is the comparison with zero, bin(H_j) = +1 for H_j >= 0 (bit 0).
// This is the encoder of the QubitHD flow (discretization, base and ID vectors, x and +,
// non-binary query, compare, binary query).
//
// Schedule (this design's choice): the vector is split into CHUNKS = D/LANES chunks of LANES
// dimensions. For each chunk, one feature is read per clock, so a chunk takes n clocks and a
// sample n*CHUNKS clocks. A per-lane counter counts the -1 products; at the last feature
// H = n - 2*count. Item memory reads are issued here and their data return one clock later.
//
// Interface: the host first writes the n features into the feature buffer (f_we/f_addr/
// f_data) while the encoder is idle, then pulses start. Each finished chunk appears for one
// clock on hv_valid/hv_chunk/hv_val/hv_bin, chunks in order 0..CHUNKS-1, with no back-
// pressure; done pulses with the last chunk. num_features must be 1..N_MAX and stay
// stable while busy.
module hd_encoder
  import qhd_pkg::*;
#(
  parameter int unsigned D          = D_DEF,
  parameter int unsigned LANES      = LANES_DEF,
  parameter int unsigned N_MAX      = N_MAX_DEF,
  parameter int unsigned FEAT_W     = FEAT_W_DEF,
  parameter int unsigned LEVEL_BITS = LEVEL_BITS_DEF,
  localparam int unsigned CHUNKS    = D / LANES,
  localparam int unsigned CHW       = $clog2(CHUNKS),
  localparam int unsigned FAW       = $clog2(N_MAX),
  localparam int unsigned NW        = $clog2(N_MAX + 1),
  localparam int unsigned HW        = NW + 1,
  localparam int unsigned IDAW      = $clog2(N_MAX * CHUNKS),
  localparam int unsigned LVAW      = $clog2((2 ** LEVEL_BITS) * CHUNKS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // feature buffer load
  input  logic                     f_we,
  input  logic [FAW-1:0]           f_addr,
  input  logic [FEAT_W-1:0]        f_data,
  input  logic [NW-1:0]            num_features,
  // control
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // item memory read ports (data one clock after address)
  output logic [IDAW-1:0]          id_raddr,
  input  logic [LANES-1:0]         id_rdata,
  output logic [LVAW-1:0]          lv_raddr,
  input  logic [LANES-1:0]         lv_rdata,
  // encoded chunk output
  output logic                     hv_valid,
  output logic [CHW-1:0]           hv_chunk,
  output logic [LANES-1:0][HW-1:0] hv_val,   // two's complement H_j
  output logic [LANES-1:0]         hv_bin    // 1 = -1 (H_j < 0)
);

  logic [FEAT_W-1:0] fbuf [N_MAX];

  always_ff @(posedge clk) begin
    if (f_we) fbuf[f_addr] <= f_data;
  end

  // ---- issue stage ----
  logic            run;
  logic [FAW-1:0]  fi;       // feature index
  logic [CHW-1:0]  ci;       // chunk index
  logic [IDAW-1:0] id_addr_q; // fi*CHUNKS + ci, kept incrementally
  logic            last_feat;

  assign last_feat = (NW'(fi) == num_features - NW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      fi        <= '0;
      ci        <= '0;
      id_addr_q <= '0;
    end else if (start && !run) begin
      run       <= 1'b1;
      fi        <= '0;
      ci        <= '0;
      id_addr_q <= '0;
    end else if (run) begin
      if (last_feat) begin
        fi        <= '0;
        id_addr_q <= IDAW'(ci) + IDAW'(1);
        if (ci == CHW'(CHUNKS - 1)) run <= 1'b0;
        else ci <= ci + CHW'(1);
      end else begin
        fi        <= fi + FAW'(1);
        id_addr_q <= id_addr_q + IDAW'(CHUNKS);
      end
    end
  end

  logic [LEVEL_BITS-1:0] level;
  assign level    = fbuf[fi][FEAT_W-1 -: LEVEL_BITS];
  assign id_raddr = id_addr_q;
  assign lv_raddr = LVAW'(level * CHUNKS + ci);

  // ---- accumulate stage (memory data valid) ----
  logic           p_valid, p_first, p_last;
  logic [CHW-1:0] p_chunk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_first <= 1'b0;
      p_last  <= 1'b0;
      p_chunk <= '0;
    end else begin
      p_valid <= run;
      p_first <= (fi == '0);
      p_last  <= last_feat;
      p_chunk <= ci;
    end
  end

  logic [LANES-1:0][NW-1:0] cnt, cnt_next;
  logic [LANES-1:0]         prod;   // 1 where L*ID = -1

  always_comb begin
    prod = id_rdata ^ lv_rdata;
    for (int w = 0; w < LANES; w++)
      cnt_next[w] = (p_first ? NW'(0) : cnt[w]) + NW'(prod[w]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      hv_valid <= 1'b0;
      hv_chunk <= '0;
      hv_val   <= '0;
      hv_bin   <= '0;
      done     <= 1'b0;
    end else begin
      hv_valid <= p_valid && p_last;
      done     <= p_valid && p_last && (p_chunk == CHW'(CHUNKS - 1));
      if (p_valid) begin
        cnt <= cnt_next;
        if (p_last) begin
          hv_chunk <= p_chunk;
          for (int w = 0; w < LANES; w++) begin
            hv_val[w] <= HW'(num_features) - HW'({cnt_next[w], 1'b0});
            hv_bin[w] <= ({1'b0, cnt_next[w], 1'b0} > {2'b00, num_features});
          end
        end
      end
    end
  end

  assign busy = run || p_valid || hv_valid;

endmodule
