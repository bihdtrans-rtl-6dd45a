// qkv_store: query/key/value generation and storage (block C of the pipeline).
//
// Each encoded word H_e^t[a] is bound (XNOR) with the matching words of the
// trained binding hypervectors BV_q, BV_k and BV_v:
//     H_q = H_e (.) BV_q,  H_k = H_e (.) BV_k,  H_v = H_e (.) BV_v.
// Keys and values are written into indexed register files at token index
// C1, a counter that advances after the last word of each token; queries are
// pushed into the query FIFO (wr_en) for single-pass access by the attention
// unit. Both register files are organised word-address major, so one read
// returns word a of all L keys (or values) at once, which is what the L
// parallel lanes of the attention units consume. Structure follows the paper;
// the loadable binding-hypervector tables, the read latency and the FIFO
// depth (all L queries) are this design's choices.
//
// Interface: cfg_* loads binding-hypervector words (SEL_BVQ/SEL_BVK/SEL_BVV,
// row ignored). he_* is the encoder word stream (he_tok is only checked
// against C1 by an assertion). k_rd_en/k_rd_addr and
// v_rd_en/v_rd_addr read all L key/value words of one address, returned on
// k_rd_data/v_rd_data the next cycle. q_* is the query FIFO read side (data
// one cycle after q_rd_en). clear empties the FIFO and resets C1.
module qkv_store
  import bihd_pkg::*;
#(
  parameter int unsigned DP  = DP_DEF,
  parameter int unsigned NCH = NH_DEF * cdiv(D_DEF / NH_DEF, DP_DEF),
  parameter int unsigned L   = L_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  // configuration writes
  input  logic                      cfg_we,
  input  cfg_sel_e                  cfg_sel,
  input  logic [CFG_ADDR_W-1:0]     cfg_addr,
  input  logic [DP-1:0]             cfg_data,
  // encoded words
  input  logic                      he_valid,
  input  logic [idxw(NCH)-1:0]      he_addr,
  input  logic [idxw(L)-1:0]        he_tok,
  input  logic                      he_last,
  input  logic [DP-1:0]             he_word,
  // key / value read ports
  input  logic                      k_rd_en,
  input  logic [idxw(NCH)-1:0]      k_rd_addr,
  output logic [L-1:0][DP-1:0]      k_rd_data,
  input  logic                      v_rd_en,
  input  logic [idxw(NCH)-1:0]      v_rd_addr,
  output logic [L-1:0][DP-1:0]      v_rd_data,
  // query FIFO read side
  input  logic                      q_rd_en,
  output logic                      q_rd_valid,
  output logic [DP-1:0]             q_rd_data,
  output logic                      q_empty,
  output logic                      q_full
);
  localparam int unsigned AW = idxw(NCH);
  localparam int unsigned TW = idxw(L);

  logic [DP-1:0] bvq_mem [NCH];
  logic [DP-1:0] bvk_mem [NCH];
  logic [DP-1:0] bvv_mem [NCH];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr < CFG_ADDR_W'(NCH)) begin
      case (cfg_sel)
        SEL_BVQ: bvq_mem[cfg_addr[AW-1:0]] <= cfg_data;
        SEL_BVK: bvk_mem[cfg_addr[AW-1:0]] <= cfg_data;
        SEL_BVV: bvv_mem[cfg_addr[AW-1:0]] <= cfg_data;
        default: ;
      endcase
    end
  end

  // binding (XNOR)
  logic [DP-1:0] hq, hk, hv;
  assign hq = ~(he_word ^ bvq_mem[he_addr]);
  assign hk = ~(he_word ^ bvk_mem[he_addr]);
  assign hv = ~(he_word ^ bvv_mem[he_addr]);

  // counter C1: token index of the key/value registers
  logic [TW-1:0] c1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  c1 <= '0;
    else if (clear)              c1 <= '0;
    else if (he_valid && he_last) c1 <= (c1 == TW'(L - 1)) ? '0 : c1 + 1'b1;
  end

  a_c1_tracks_token: assert property (@(posedge clk) disable iff (!rst_n)
                                      he_valid |-> (he_tok == c1));

  // indexed key / value registers
  logic [L-1:0][DP-1:0] k_mem [NCH];
  logic [L-1:0][DP-1:0] v_mem [NCH];
  always_ff @(posedge clk) begin
    if (he_valid) begin
      k_mem[he_addr][c1] <= hk;
      v_mem[he_addr][c1] <= hv;
    end
    if (k_rd_en) k_rd_data <= k_mem[k_rd_addr];
    if (v_rd_en) v_rd_data <= v_mem[v_rd_addr];
  end

  // query FIFO
  hv_fifo #(.W(DP), .DEPTH(L * NCH)) u_qfifo (
    .clk, .rst_n, .clear,
    .wr_en   (he_valid),
    .wr_data (hq),
    .rd_en   (q_rd_en),
    .rd_valid(q_rd_valid),
    .rd_data (q_rd_data),
    .full    (q_full),
    .empty   (q_empty)
  );
endmodule
