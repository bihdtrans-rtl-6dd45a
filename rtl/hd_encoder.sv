// hd_encoder: spatial/temporal HD encoder (block B of the pipeline).
//
// For time step t (1-based) it computes
//     H_e^t = sign( rho^t( sum_i F_i (.) V_i^t ) )
// DP dimensions per cycle. Each cycle one word address of the item memory is
// read; the N position/value word pairs are bound with XNOR, every dimension's
// N match bits are added by an adder tree, and the count is compared with the
// threshold TAU = ceil(N/2), i.e. the bipolar sum is >= 0 (sign(0) is taken as
// +1). The cyclic permutation rho^t is applied to the binarized words: with
// t = q*DP + r, output word a takes bits from source words a-q-1 and a-q
// (modulo NCH), so the source words are read in the order
// (-q-1), (-q), ..., (NCH-1-q) (NCH+1 reads per time step) and each output
// word is a funnel shift by r of the current and previous binarized words.
// Rotation runs over the padded NCH*DP-bit word space, so padding bits of a
// head take part in the rotation (this design's choice; it is exact when DP
// divides D/NH).
//
// Interface: a sample (N features) is taken with in_valid/in_ready. in_ready
// is high when no step is being read, or the last read of the current step is
// being issued, and fewer than L steps have been taken
// since clear; en gates it. The item memory read port is driven through
// im_rd_en/im_rd_addr/im_feat; its data returns one cycle later on
// im_valid/im_pos/im_val. Output words leave on he_valid with word address
// he_addr (0..NCH-1 in order), token index he_tok (0-based) and he_last on
// the last word of a step. Timing: one step takes NCH+1 cycles of reads; the
// next step may start right behind it, and its words appear 3 cycles after
// their first read. enc_done rises after the last word of step L and stays
// high until clear.
module hd_encoder
  import bihd_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned DP     = DP_DEF,
  parameter int unsigned NCH    = NH_DEF * cdiv(D_DEF / NH_DEF, DP_DEF),
  parameter int unsigned L      = L_DEF,
  parameter int unsigned FEAT_W = FEAT_W_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      en,
  // sample stream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [N-1:0][FEAT_W-1:0]  in_feat,
  // item memory port
  output logic                      im_rd_en,
  output logic [idxw(NCH)-1:0]      im_rd_addr,
  output logic [N-1:0][FEAT_W-1:0]  im_feat,
  input  logic                      im_valid,
  input  logic [N-1:0][DP-1:0]      im_pos,
  input  logic [N-1:0][DP-1:0]      im_val,
  // encoded hypervector words
  output logic                      he_valid,
  output logic [idxw(NCH)-1:0]      he_addr,
  output logic [idxw(L)-1:0]        he_tok,
  output logic                      he_last,
  output logic [DP-1:0]             he_word,
  output logic                      enc_done
);
  localparam int unsigned AW   = idxw(NCH);
  localparam int unsigned TW   = idxw(L);
  localparam int unsigned RW   = idxw(DP);
  localparam int unsigned CW   = cntw(N);
  localparam int unsigned TAU  = (N + 1) / 2;
  // rotation of step 1
  localparam int unsigned Q0   = (DP == 1) ? 1 : 0;
  localparam int unsigned R0   = (DP == 1) ? 0 : 1;
  localparam int unsigned BASE0 = (NCH - ((Q0 + 1) % NCH)) % NCH;

  // ---------------- issue side ----------------
  logic             issuing;
  logic [AW:0]      k;          // read number within a step, 0..NCH
  logic [AW-1:0]    addr;       // current source word address
  logic [AW-1:0]    base;       // first source word of the next step
  logic [RW-1:0]    rot_r;      // r of the next step
  logic [RW-1:0]    cur_r;      // r of the step being read
  logic [TW:0]      tok_in;     // steps accepted
  logic [TW-1:0]    cur_tok;

  assign in_ready = en && (!issuing || k == (AW+1)'(NCH)) && (tok_in < (TW+1)'(L));

  function automatic logic [AW-1:0] inc_wrap(input logic [AW-1:0] a);
    return (a == AW'(NCH - 1)) ? '0 : a + 1'b1;
  endfunction
  function automatic logic [AW-1:0] dec_wrap(input logic [AW-1:0] a);
    return (a == '0) ? AW'(NCH - 1) : a - 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      k       <= '0;
      addr    <= '0;
      base    <= AW'(BASE0);
      rot_r   <= RW'(R0);
      cur_r   <= '0;
      tok_in  <= '0;
      cur_tok <= '0;
      im_feat <= '0;
    end else if (clear) begin
      issuing <= 1'b0;
      k       <= '0;
      base    <= AW'(BASE0);
      rot_r   <= RW'(R0);
      tok_in  <= '0;
    end else begin
      if (issuing) begin
        addr <= inc_wrap(addr);
        if (k == (AW+1)'(NCH)) issuing <= 1'b0;
        else                   k <= k + 1'b1;
      end
      // a new step may be taken in the cycle of the previous step's last read
      if (in_valid && in_ready) begin
        issuing <= 1'b1;
        k       <= '0;
        addr    <= base;
        cur_r   <= rot_r;
        cur_tok <= tok_in[TW-1:0];
        im_feat <= in_feat;
        tok_in  <= tok_in + 1'b1;
        // advance the rotation to step t+1: r+1, carrying into q (base - 1)
        if (rot_r == RW'(DP - 1) || DP == 1) begin
          rot_r <= '0;
          base  <= dec_wrap(base);
        end else begin
          rot_r <= rot_r + 1'b1;
        end
      end
    end
  end

  assign im_rd_en   = issuing;
  assign im_rd_addr = addr;

  // read-side pipeline tags travel with the memory latency
  logic          p1_first, p1_last;
  logic [RW-1:0] p1_r;
  logic [TW-1:0] p1_tok;
  logic [AW-1:0] p1_oaddr;
  always_ff @(posedge clk) begin
    p1_first <= (k == '0);
    p1_last  <= (k == (AW+1)'(NCH));
    p1_r     <= cur_r;
    p1_tok   <= cur_tok;
    p1_oaddr <= (k == '0) ? '0 : AW'(k - 1'b1);
  end

  // ---------------- bind, bundle, binarize ----------------
  logic [DP-1:0] bin_word;
  for (genvar j = 0; j < DP; j++) begin : g_dim
    logic [N-1:0]  match;
    logic [CW-1:0] cnt;
    for (genvar i = 0; i < N; i++) begin : g_bind
      assign match[i] = ~(im_pos[i][j] ^ im_val[i][j]);
    end
    adder_tree #(.NIN(N), .IW(1), .OW(CW)) u_tree (.in(match), .sum(cnt));
    assign bin_word[j] = (cnt >= CW'(TAU));
  end

  // ---------------- cyclic permutation ----------------
  logic [DP-1:0]   prev_word;
  logic [2*DP-1:0] pair;
  logic [DP-1:0]   rot_word;
  assign pair     = {bin_word, prev_word};
  assign rot_word = DP'(pair >> ((RW+1)'(DP) - (RW+1)'(p1_r)));

  always_ff @(posedge clk) begin
    if (im_valid) prev_word <= bin_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      he_valid <= 1'b0;
      he_last  <= 1'b0;
      he_addr  <= '0;
      he_tok   <= '0;
      he_word  <= '0;
      enc_done <= 1'b0;
    end else begin
      he_valid <= im_valid && !p1_first && !clear;
      he_last  <= im_valid && p1_last;
      if (im_valid && !p1_first) begin
        he_addr <= p1_oaddr;
        he_tok  <= p1_tok;
        he_word <= rot_word;
      end
      if (clear)
        enc_done <= 1'b0;
      else if (im_valid && p1_last && p1_tok == TW'(L - 1))
        enc_done <= 1'b1;
    end
  end
endmodule
