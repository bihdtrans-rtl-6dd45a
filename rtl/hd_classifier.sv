// hd_classifier: associative-memory search (block F of the pipeline).
//
// Each word of a token representation H_c^t is XNORed with the same word of
// all K class prototypes C_k held in the associative memory; K parallel adder
// trees count the matching dimensions and the counts are accumulated under
// counter C5, which raises its flag after the NCH words of one token (all D
// dimensions; padding bits of each head's last word are not counted). The
// K accumulated match counts are the similarities; the predicted class is the
// one with the most matches, i.e. the smallest Hamming distance (ties go to
// the lower class index). The paper describes the XNOR/tree/C5 structure and
// a final "sorting" of similarities; taking the maximum instead of a full
// sort, and the tie rule, are this design's choices.
//
// Interface: cfg_* with SEL_CLS loads prototype words (row = class). hc_* is
// the token word stream, in address order 0..NCH-1 per token. One cycle
// after a token's last word, pred_valid pulses with pred_tok, pred_label and
// the K similarities sims. Timing: one word per cycle, 2 cycles latency from
// the last word to pred_valid.
module hd_classifier
  import bihd_pkg::*;
#(
  parameter int unsigned DP  = DP_DEF,
  parameter int unsigned DH  = D_DEF / NH_DEF,
  parameter int unsigned NH  = NH_DEF,
  parameter int unsigned L   = L_DEF,
  parameter int unsigned K   = K_DEF,
  parameter int unsigned CPH = cdiv(DH, DP),
  parameter int unsigned NCH = NH * CPH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  // configuration writes
  input  logic                          cfg_we,
  input  cfg_sel_e                      cfg_sel,
  input  logic [CFG_ROW_W-1:0]          cfg_row,
  input  logic [CFG_ADDR_W-1:0]         cfg_addr,
  input  logic [DP-1:0]                 cfg_data,
  // token words
  input  logic                          hc_valid,
  input  logic [idxw(NCH)-1:0]          hc_addr,
  input  logic [idxw(L)-1:0]            hc_tok,
  input  logic [DP-1:0]                 hc_word,
  // prediction
  output logic                          pred_valid,
  output logic [idxw(L)-1:0]            pred_tok,
  output logic [idxw(K)-1:0]            pred_label,
  output logic [K-1:0][cntw(NH*DH)-1:0] sims
);
  localparam int unsigned AW    = idxw(NCH);
  localparam int unsigned TW    = idxw(L);
  localparam int unsigned KW    = idxw(K);
  localparam int unsigned CW    = idxw(CPH);
  localparam int unsigned PW    = cntw(DP);
  localparam int unsigned SW    = cntw(NH * DH);
  localparam int unsigned LASTB = DH - (CPH - 1) * DP;

  logic [DP-1:0] am [K][NCH];
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == SEL_CLS && cfg_row < CFG_ROW_W'(K) && cfg_addr < CFG_ADDR_W'(NCH))
      am[cfg_row[KW-1:0]][cfg_addr[AW-1:0]] <= cfg_data;
  end

  // stage 1: register the word and read the prototypes
  logic                 s_valid;
  logic [DP-1:0]        s_word;
  logic [TW-1:0]        s_tok;
  logic [K-1:0][DP-1:0] s_proto;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_word  <= '0;
      s_tok   <= '0;
    end else begin
      s_valid <= hc_valid && !clear;
      s_word  <= hc_word;
      s_tok   <= hc_tok;
    end
  end
  always_ff @(posedge clk) begin
    for (int k = 0; k < K; k++) s_proto[k] <= am[k][hc_addr];
  end

  // counter C5: word of the token (c5_word) and word within the head (c5_chunk)
  logic [AW-1:0] c5_word;
  logic [CW-1:0] c5_chunk;
  logic          flag;
  assign flag = s_valid && (c5_word == AW'(NCH - 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c5_word  <= '0;
      c5_chunk <= '0;
    end else if (clear) begin
      c5_word  <= '0;
      c5_chunk <= '0;
    end else if (s_valid) begin
      c5_word  <= flag ? '0 : c5_word + 1'b1;
      c5_chunk <= (c5_chunk == CW'(CPH - 1)) ? '0 : c5_chunk + 1'b1;
    end
  end

  logic [DP-1:0] vmask;
  always_comb begin
    for (int j = 0; j < DP; j++)
      vmask[j] = (c5_chunk != CW'(CPH - 1)) || (j < LASTB);
  end

  logic [K-1:0][SW-1:0] acc, tot;
  for (genvar k = 0; k < K; k++) begin : g_class
    logic [DP-1:0] match;
    logic [PW-1:0] cnt;
    assign match = ~(s_word ^ s_proto[k]) & vmask;
    adder_tree #(.NIN(DP), .IW(1), .OW(PW)) u_tree (.in(match), .sum(cnt));
    assign tot[k] = acc[k] + SW'(cnt);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)       acc[k] <= '0;
      else if (clear)   acc[k] <= '0;
      else if (s_valid) acc[k] <= flag ? '0 : tot[k];
    end
  end

  // best class: most matches, lowest index on ties
  logic [KW-1:0] best;
  always_comb begin
    best = '0;
    for (int k = 1; k < K; k++)
      if (tot[k] > tot[best]) best = KW'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pred_valid <= 1'b0;
      pred_tok   <= '0;
      pred_label <= '0;
      sims       <= '0;
    end else begin
      pred_valid <= flag && !clear;
      if (flag) begin
        pred_tok   <= s_tok;
        pred_label <= best;
        sims       <= tot;
      end
    end
  end
endmodule
