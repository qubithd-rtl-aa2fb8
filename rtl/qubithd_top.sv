// qubithd_top: QubitHD hyperdimensional classifier accelerator, training and inference.
//
// The chip holds a non-binary model C (k class hypervectors of integers) and a binary model
// C^bin (k hypervectors of bits). Samples arrive from the host one feature per beat; each
// sample is encoded to a hypervector H, searched against C^bin by Hamming distance, and then,
// depending on its operation:
//   OP_TRAIN   : one-shot training, C[label] += H;
//   OP_RETRAIN : if the binary model mispredicts class l for label k,
//                C[k] += alpha*H and C[l] -= alpha*H (the sample counts as an error);
//   OP_INFER   : only the prediction is returned.
// Every sample returns one result (predicted class, its Hamming distance, label, correct).
// Commands act on the whole model: CMD_CLEAR zeroes C; CMD_BINARIZE rebuilds C^bin from C
// with the stochastic rule qbin; CMD_END_PASS closes a retraining round: it records the
// round's error count E, sets `converged` when |E - E_prev| < eps (from the second round on)
// and rebinarizes. The host streams the data set again for every round and stops once
// converged is set. This flow (encode, one-shot train, stochastic binarization, retrain on
// the binary model's predictions, |dE| < eps, binary inference) is the QubitHD algorithm;
// the ports, handshakes, command set and the on-the-fly re-encoding of the data set (instead
// of a stored encoded data set) are this design's choices.
//
// Handshakes: smp_* and cmd_* are valid/ready; a sample ends with smp_last, which carries
// smp_op and smp_label. Samples take priority over commands. res_* is valid/ready.
// mr_en/mr_chunk read one chunk of the binary model (all classes) while the chip is idle;
// mr_data is valid the clock after. The item memory (im_*) must be written before use.
// Timing per sample: n load beats + n*D/LANES encode clocks + k+3 search clocks + model
// update (D/LANES+2 clocks for training, 2*D/LANES+2 for a retraining miss) + result.
// Tool notes: the encoder's done output is left open on purpose, because the controller
// follows the end of encoding through the search unit's done, which comes later. rst_n also
// appears in the assertions' disable iff clauses. A linter may report it as a net used both
// as an asynchronous reset and as a plain signal; that use is for simulation only.
module qubithd_top
  import qhd_pkg::*;
#(
  parameter int unsigned D          = D_DEF,
  parameter int unsigned LANES      = LANES_DEF,
  parameter int unsigned N_MAX      = N_MAX_DEF,
  parameter int unsigned K_MAX      = K_MAX_DEF,
  parameter int unsigned FEAT_W     = FEAT_W_DEF,
  parameter int unsigned LEVEL_BITS = LEVEL_BITS_DEF,
  parameter int unsigned CW         = CW_DEF,
  parameter logic [31:0] SEED       = 32'h1,
  localparam int unsigned CHUNKS    = D / LANES,
  localparam int unsigned CHW       = $clog2(CHUNKS),
  localparam int unsigned NW        = $clog2(N_MAX + 1),
  localparam int unsigned FAW       = $clog2(N_MAX),
  localparam int unsigned HW        = NW + 1,
  localparam int unsigned KW        = $clog2(K_MAX),
  localparam int unsigned KNW       = $clog2(K_MAX + 1),
  localparam int unsigned DW        = $clog2(D + 1),
  localparam int unsigned IDAW      = $clog2(N_MAX * CHUNKS),
  localparam int unsigned LVAW      = $clog2((2 ** LEVEL_BITS) * CHUNKS),
  localparam int unsigned AW        = $clog2(K_MAX * CHUNKS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration, static while samples are processed
  input  logic [NW-1:0]               cfg_num_features,  // n, 1..N_MAX
  input  logic [KNW-1:0]              cfg_num_classes,   // k, 2..K_MAX
  input  logic [ALPHA_W-1:0]          cfg_alpha,         // learning rate
  input  logic [BFRAC_W-1:0]          cfg_b_frac,        // b = sigma*cfg_b_frac/256
  input  logic [31:0]                 cfg_eps,           // convergence threshold on |dE|
  // item memory load
  input  logic                        im_we,
  input  logic                        im_sel,            // 0: ID vectors, 1: level vectors
  input  logic [FAW-1:0]              im_vec,
  input  logic [CHW-1:0]              im_chunk,
  input  logic [LANES-1:0]            im_wdata,
  // sample stream
  input  logic                        smp_valid,
  output logic                        smp_ready,
  input  logic [FEAT_W-1:0]           smp_feat,
  input  logic                        smp_last,
  input  op_e                         smp_op,
  input  logic [KW-1:0]               smp_label,
  // commands
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  cmd_e                        cmd,
  // results
  output logic                        res_valid,
  input  logic                        res_ready,
  output op_e                         res_op,
  output logic [KW-1:0]               res_pred,
  output logic [DW-1:0]               res_dist,
  output logic [KW-1:0]               res_label,
  output logic                        res_correct,
  // round statistics
  output logic [31:0]                 pass_errors,       // errors of the last closed round
  output logic [31:0]                 pass_count,        // rounds closed
  output logic [31:0]                 cur_errors,        // errors in the open round
  output logic                        converged,
  output logic                        busy,
  // cutoff b of each class, reported as the binarizer computes it
  output logic                        cut_valid,
  output logic [KW-1:0]               cut_class,
  output logic [CW-1:0]               cut_value,
  // binary model read-out
  input  logic                        mr_en,
  input  logic [CHW-1:0]              mr_chunk,
  output logic [K_MAX-1:0][LANES-1:0] mr_data
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ENC, S_UPD, S_RES, S_BIN, S_CLR} state_e;
  state_e state;

  // ------------------------------------------------------------------ datapath wires
  logic [IDAW-1:0]          id_raddr;
  logic [LVAW-1:0]          lv_raddr;
  logic [LANES-1:0]         id_rdata, lv_rdata;
  logic                     enc_start, enc_busy;
  logic                     f_we;
  logic [FAW-1:0]           f_addr;
  logic                     hv_valid;
  logic [CHW-1:0]           hv_chunk;
  logic [LANES-1:0][HW-1:0] hv_val;
  logic [LANES-1:0]         hv_bin;

  logic                     hs_done;
  logic [KW-1:0]            hs_pred;
  logic [DW-1:0]            hs_dist;
  logic [CHW-1:0]           hs_bm_raddr;

  logic [CHW-1:0]           bm_raddr;
  logic [K_MAX-1:0][LANES-1:0] bm_rdata;
  logic                     bm_we;
  logic [CHW-1:0]           bm_waddr;
  logic [KW-1:0]            bm_wclass;
  logic [LANES-1:0]         bm_wdata;

  logic [CHW-1:0]           qb_raddr;
  logic [LANES-1:0][HW-1:0] qb_rdata;

  logic                     upd_start, upd_busy, upd_done;
  upd_op_e                  upd_op;
  logic [KW-1:0]            upd_a, upd_b;
  logic [AW-1:0]            upd_cm_raddr, bin_cm_raddr, cm_raddr, cm_waddr;
  logic [LANES-1:0][CW-1:0] cm_rdata, cm_wdata;
  logic                     cm_we;

  logic                     bin_start, bin_busy, bin_done;

  // ------------------------------------------------------------------ blocks
  item_memory #(.D(D), .LANES(LANES), .N_MAX(N_MAX), .LEVEL_BITS(LEVEL_BITS)) u_item_memory (
    .clk, .wr_en(im_we), .wr_sel(im_sel), .wr_vec(im_vec), .wr_chunk(im_chunk),
    .wr_data(im_wdata), .id_raddr, .id_rdata, .lv_raddr, .lv_rdata
  );

  hd_encoder #(.D(D), .LANES(LANES), .N_MAX(N_MAX), .FEAT_W(FEAT_W),
               .LEVEL_BITS(LEVEL_BITS)) u_encoder (
    .clk, .rst_n, .f_we, .f_addr, .f_data(smp_feat), .num_features(cfg_num_features),
    .start(enc_start), .busy(enc_busy), .done(),
    .id_raddr, .id_rdata, .lv_raddr, .lv_rdata,
    .hv_valid, .hv_chunk, .hv_val, .hv_bin
  );

  // query buffer: keeps H until the model update has read it
  sdp_ram #(.WIDTH(LANES * HW), .DEPTH(CHUNKS)) u_query_buffer (
    .clk, .we(hv_valid), .waddr(hv_chunk), .wdata(hv_val),
    .raddr(qb_raddr), .rdata(qb_rdata)
  );

  hamming_search #(.D(D), .LANES(LANES), .K_MAX(K_MAX)) u_search (
    .clk, .rst_n, .start(enc_start), .q_valid(hv_valid), .q_chunk(hv_chunk), .q_bin(hv_bin),
    .num_classes(cfg_num_classes), .bm_raddr(hs_bm_raddr), .bm_rdata,
    .done(hs_done), .pred_class(hs_pred), .pred_dist(hs_dist)
  );

  assign bm_raddr = (state == S_IDLE && mr_en) ? mr_chunk : hs_bm_raddr;
  assign mr_data  = bm_rdata;

  binary_memory #(.D(D), .LANES(LANES), .K_MAX(K_MAX)) u_binary_memory (
    .clk, .we(bm_we), .waddr(bm_waddr), .wclass(bm_wclass), .wdata(bm_wdata),
    .raddr(bm_raddr), .rdata(bm_rdata)
  );

  model_update #(.D(D), .LANES(LANES), .N_MAX(N_MAX), .K_MAX(K_MAX), .CW(CW)) u_update (
    .clk, .rst_n, .start(upd_start), .op(upd_op), .cls_a(upd_a), .cls_b(upd_b),
    .alpha(cfg_alpha), .busy(upd_busy), .done(upd_done),
    .qb_raddr, .qb_rdata, .cm_raddr(upd_cm_raddr), .cm_rdata,
    .cm_we, .cm_waddr, .cm_wdata
  );

  assign cm_raddr = (state == S_BIN) ? bin_cm_raddr : upd_cm_raddr;

  class_memory #(.D(D), .LANES(LANES), .K_MAX(K_MAX), .CW(CW)) u_class_memory (
    .clk, .we(cm_we), .waddr(cm_waddr), .wdata(cm_wdata), .raddr(cm_raddr), .rdata(cm_rdata)
  );

  stochastic_binarizer #(.D(D), .LANES(LANES), .K_MAX(K_MAX), .CW(CW), .SEED(SEED)) u_binarizer (
    .clk, .rst_n, .start(bin_start), .num_classes(cfg_num_classes), .b_frac(cfg_b_frac),
    .busy(bin_busy), .done(bin_done), .cm_raddr(bin_cm_raddr), .cm_rdata,
    .bm_we, .bm_waddr, .bm_wclass, .bm_wdata, .b_valid(cut_valid), .b_class(cut_class), .b_value(cut_value)
  );

  // ------------------------------------------------------------------ controller
  logic [FAW-1:0] fcount;
  op_e            op_q;
  logic [KW-1:0]  label_q;
  logic [31:0]    prev_errors;
  logic [31:0]    delta;

  assign smp_ready = (state == S_IDLE) || (state == S_LOAD);
  assign cmd_ready = (state == S_IDLE) && !smp_valid;
  assign f_we      = smp_valid && smp_ready;
  assign f_addr    = fcount;
  assign delta     = (cur_errors > prev_errors) ? cur_errors - prev_errors
                                                : prev_errors - cur_errors;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      fcount      <= '0;
      op_q        <= OP_INFER;
      label_q     <= '0;
      enc_start   <= 1'b0;
      upd_start   <= 1'b0;
      upd_op      <= UPD_ADD;
      upd_a       <= '0;
      upd_b       <= '0;
      bin_start   <= 1'b0;
      res_valid   <= 1'b0;
      res_op      <= OP_INFER;
      res_pred    <= '0;
      res_dist    <= '0;
      res_label   <= '0;
      res_correct <= 1'b0;
      pass_errors <= '0;
      pass_count  <= '0;
      cur_errors  <= '0;
      prev_errors <= '0;
      converged   <= 1'b0;
    end else begin
      enc_start <= 1'b0;
      upd_start <= 1'b0;
      bin_start <= 1'b0;
      case (state)
        S_IDLE, S_LOAD: begin
          if (f_we) begin
            if (smp_last) begin
              op_q      <= smp_op;
              label_q   <= smp_label;
              fcount    <= '0;
              enc_start <= 1'b1;
              state     <= S_ENC;
            end else begin
              fcount <= fcount + FAW'(1);
              state  <= S_LOAD;
            end
          end else if (state == S_IDLE && cmd_valid) begin
            case (cmd)
              CMD_CLEAR: begin
                upd_op    <= UPD_CLEAR;
                upd_start <= 1'b1;
                state     <= S_CLR;
              end
              CMD_END_PASS: begin
                converged   <= (pass_count != 0) && (delta < cfg_eps);
                pass_errors <= cur_errors;
                prev_errors <= cur_errors;
                cur_errors  <= '0;
                pass_count  <= pass_count + 1;
                bin_start   <= 1'b1;
                state       <= S_BIN;
              end
              default: begin   // CMD_BINARIZE
                bin_start <= 1'b1;
                state     <= S_BIN;
              end
            endcase
          end
        end
        S_ENC: if (hs_done) begin
          res_op      <= op_q;
          res_pred    <= hs_pred;
          res_dist    <= hs_dist;
          res_label   <= label_q;
          res_correct <= (hs_pred == label_q);
          case (op_q)
            OP_TRAIN: begin
              upd_op    <= UPD_ADD;
              upd_a     <= label_q;
              upd_start <= 1'b1;
              state     <= S_UPD;
            end
            OP_RETRAIN: begin
              if (hs_pred != label_q) begin
                upd_op     <= UPD_RETRAIN;
                upd_a      <= label_q;
                upd_b      <= hs_pred;
                upd_start  <= 1'b1;
                cur_errors <= cur_errors + 1;
                state      <= S_UPD;
              end else begin
                res_valid <= 1'b1;
                state     <= S_RES;
              end
            end
            default: begin
              res_valid <= 1'b1;
              state     <= S_RES;
            end
          endcase
        end
        S_UPD: if (upd_done) begin
          res_valid <= 1'b1;
          state     <= S_RES;
        end
        S_RES: if (res_ready) begin
          res_valid <= 1'b0;
          state     <= S_IDLE;
        end
        S_CLR: if (upd_done) state <= S_IDLE;
        S_BIN: if (bin_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || enc_busy || upd_busy || bin_busy;

  // ------------------------------------------------------------------ protocol checks
  // A sample beat that is not accepted stays offered.
  a_smp_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               smp_valid && !smp_ready |=> smp_valid);
  // A result stays valid until taken.
  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               res_valid && !res_ready |=> res_valid);
  // The encoder only emits chunks while a sample is being encoded.
  a_enc_state: assert property (@(posedge clk) disable iff (!rst_n)
                                hv_valid |-> state == S_ENC);
  // The two users of the class memory never overlap.
  a_cm_excl: assert property (@(posedge clk) disable iff (!rst_n) !(upd_busy && bin_busy));

endmodule
