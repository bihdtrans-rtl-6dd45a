// bihdtrans_top: BiHDTrans inference pipeline, blocks A-F.
//
// A window of L multivariate samples (N features each) is classified by a
// single-layer binary hyperdimensional transformer. Every sample is mapped
// to hypervectors by the item memory (A), encoded into H_e^t by the encoder
// (B), bound into query/key/value hypervectors and stored (C); once all L
// keys are stored, the attention unit scores queries against all keys head by
// head (D), the bundling unit forms the head outputs H_c (E) and the
// classifier searches the associative memory (F). All units work on DP of
// the D dimensions per cycle; because the dimensions are independent, the
// units form one pipeline over word addresses and never need a whole
// hypervector at once, except that a mask row needs the full head.
//
// Interface:
//   cfg_*      loads the trained/pre-defined tables one DP-bit word at a time:
//              cfg_sel selects the table (bihd_pkg::cfg_sel_e), cfg_row the
//              feature, level or class, cfg_addr the word address
//              (head*CPH + chunk). Loading is allowed while idle.
//   last_only  1: score only the final token (classification); 0: score all
//              L tokens; the prediction is still that of the final token.
//   in_*       samples, valid/ready; feature values are unsigned FEAT_W bits.
//   done       one-cycle pulse with label (and the K similarities sims).
//   hr_*       reads word hr_addr of token hr_tok of the output token
//              register (H_c of every scored token).
// Timing: a sample is accepted every NCH+1 cycles; after the last one the
// result follows in about NH*CPH + NCH-independent pipeline cycles when
// last_only = 1 (see README). A new window is accepted after done.
module bihdtrans_top
  import bihd_pkg::*;
#(
  parameter int unsigned D      = D_DEF,
  parameter int unsigned NH     = NH_DEF,
  parameter int unsigned DP     = DP_DEF,
  parameter int unsigned N      = N_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned FEAT_W = FEAT_W_DEF,
  parameter int unsigned LVL_B  = LVL_B_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          cfg_we,
  input  cfg_sel_e                      cfg_sel,
  input  logic [CFG_ROW_W-1:0]          cfg_row,
  input  logic [CFG_ADDR_W-1:0]         cfg_addr,
  input  logic [DP-1:0]                 cfg_data,
  input  logic                          last_only,
  // samples
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [N-1:0][FEAT_W-1:0]      in_feat,
  // result
  output logic                          busy,
  output logic                          done,
  output logic [idxw(K)-1:0]            label,
  output logic [K-1:0][cntw(D)-1:0]     sims,
  // token register read port
  input  logic [idxw(L)-1:0]            hr_tok,
  input  logic [idxw(NH*cdiv(D/NH, DP))-1:0] hr_addr,
  output logic [DP-1:0]                 hr_data,
  // status of the attention unit, one bit per cycle
  output logic                          stall_empty,
  output logic                          stall_keys,
  output logic                          drop
);
  localparam int unsigned DH  = D / NH;
  localparam int unsigned CPH = cdiv(DH, DP);
  localparam int unsigned NCH = NH * CPH;
  localparam int unsigned AW  = idxw(NCH);
  localparam int unsigned TW  = idxw(L);
  localparam int unsigned KW  = idxw(K);

  logic clear;

  // A: item memory
  logic                     im_rd_en, im_valid;
  logic [AW-1:0]            im_rd_addr;
  logic [N-1:0][FEAT_W-1:0] im_feat;
  logic [N-1:0][DP-1:0]     im_pos, im_val;

  item_memory #(.N(N), .DP(DP), .NCH(NCH), .FEAT_W(FEAT_W), .LVL_B(LVL_B)) u_im (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_row, .cfg_addr, .cfg_data,
    .rd_en(im_rd_en), .rd_addr(im_rd_addr), .feat(im_feat),
    .rd_valid(im_valid), .pos_q(im_pos), .val_q(im_val)
  );

  // B: encoder
  logic          he_valid, he_last, enc_done;
  logic [AW-1:0] he_addr;
  logic [TW-1:0] he_tok;
  logic [DP-1:0] he_word;

  hd_encoder #(.N(N), .DP(DP), .NCH(NCH), .L(L), .FEAT_W(FEAT_W)) u_enc (
    .clk, .rst_n, .clear, .en(1'b1),
    .in_valid, .in_ready, .in_feat,
    .im_rd_en, .im_rd_addr, .im_feat, .im_valid, .im_pos, .im_val,
    .he_valid, .he_addr, .he_tok, .he_last, .he_word, .enc_done
  );

  // C: query/key/value binding and storage
  logic                 k_rd_en, v_rd_en, q_rd_en, q_rd_valid, q_empty, q_full;
  logic [AW-1:0]        k_rd_addr, v_rd_addr;
  logic [L-1:0][DP-1:0] k_rd_data, v_rd_data;
  logic [DP-1:0]        q_rd_data;

  qkv_store #(.DP(DP), .NCH(NCH), .L(L)) u_qkv (
    .clk, .rst_n, .clear, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data,
    .he_valid, .he_addr, .he_tok, .he_last, .he_word,
    .k_rd_en, .k_rd_addr, .k_rd_data, .v_rd_en, .v_rd_addr, .v_rd_data,
    .q_rd_en, .q_rd_valid, .q_rd_data, .q_empty, .q_full
  );

  // D: attention scores
  logic              mask_valid;
  logic [L-1:0]      mask;
  logic [TW-1:0]     mask_tok;
  logic [idxw(NH)-1:0] mask_head;

  attn_score #(.DP(DP), .DH(DH), .NH(NH), .L(L)) u_att (
    .clk, .rst_n, .clear, .last_only, .keys_ready(enc_done),
    .q_empty, .q_rd_en, .q_rd_valid, .q_rd_data,
    .k_rd_en, .k_rd_addr, .k_rd_data,
    .mask_valid, .mask, .mask_tok, .mask_head, .mask_last(),
    .stall_empty, .stall_keys, .drop
  );

  // E: selective bundling and output binding
  logic          hc_valid;
  logic [AW-1:0] hc_addr;
  logic [TW-1:0] hc_tok;
  logic [DP-1:0] hc_word;

  attn_bundle #(.DP(DP), .DH(DH), .NH(NH), .L(L)) u_bun (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data,
    .mask_valid, .mask, .mask_tok, .mask_head,
    .v_rd_en, .v_rd_addr, .v_rd_data,
    .hc_valid, .hc_addr, .hc_tok, .hc_last(), .hc_word,
    .hr_tok, .hr_addr, .hr_data
  );

  // F: classifier
  logic                         pred_valid;
  logic [TW-1:0]                pred_tok;
  logic [KW-1:0]                pred_label;
  logic [K-1:0][cntw(NH*DH)-1:0] pred_sims;

  hd_classifier #(.DP(DP), .DH(DH), .NH(NH), .L(L), .K(K)) u_cls (
    .clk, .rst_n, .clear, .cfg_we, .cfg_sel, .cfg_row, .cfg_addr, .cfg_data,
    .hc_valid, .hc_addr, .hc_tok, .hc_word,
    .pred_valid, .pred_tok, .pred_label, .sims(pred_sims)
  );

  // window control: the prediction of the final token ends the window and
  // clears the counters for the next one
  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clear   <= 1'b0;
      done    <= 1'b0;
      label   <= '0;
      sims    <= '0;
      started <= 1'b0;
    end else begin
      clear <= 1'b0;
      done  <= 1'b0;
      if (in_valid && in_ready) started <= 1'b1;
      if (pred_valid && pred_tok == TW'(L - 1)) begin
        done    <= 1'b1;
        clear   <= 1'b1;
        started <= 1'b0;
        label   <= pred_label;
        for (int k = 0; k < K; k++) sims[k] <= cntw(D)'(pred_sims[k]);
      end
    end
  end
  assign busy = started;

  a_no_query_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(he_valid && q_full));
endmodule
