// item_memory: the feature-mapping lookup table (block A of the pipeline).
//
// Holds the N position hypervectors F_i and the Q = 2**LVL_B value (level)
// hypervectors, each as NCH words of DP bits. For one word address it returns,
// for every feature i, the word of F_i and the word of the value hypervector
// selected by that feature's quantized value. Quantization is uniform over the
// unsigned FEAT_W-bit input range: the level is the top LVL_B bits of the
// feature. The paper says only that values are quantized and mapped through a
// pre-defined lookup table; the uniform quantizer, the level count and the
// loadable (rather than hard-wired) contents are this design's choices.
//
// Interface: a configuration write port (cfg_*) loads one DP-bit word of
// table row cfg_row at cfg_addr (cfg_sel SEL_POS or SEL_LVL). The read port is
// synchronous: rd_en with rd_addr and feat in cycle n gives rd_valid, pos_q
// and val_q in cycle n+1. Table contents are not reset.
module item_memory
  import bihd_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned DP     = DP_DEF,
  parameter int unsigned NCH    = NH_DEF * cdiv(D_DEF / NH_DEF, DP_DEF),
  parameter int unsigned FEAT_W = FEAT_W_DEF,
  parameter int unsigned LVL_B  = LVL_B_DEF
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // configuration writes
  input  logic                              cfg_we,
  input  cfg_sel_e                          cfg_sel,
  input  logic [CFG_ROW_W-1:0]              cfg_row,
  input  logic [CFG_ADDR_W-1:0]             cfg_addr,
  input  logic [DP-1:0]                     cfg_data,
  // lookup
  input  logic                              rd_en,
  input  logic [idxw(NCH)-1:0]              rd_addr,
  input  logic [N-1:0][FEAT_W-1:0]          feat,
  output logic                              rd_valid,
  output logic [N-1:0][DP-1:0]              pos_q,
  output logic [N-1:0][DP-1:0]              val_q
);
  localparam int unsigned Q = 1 << LVL_B;

  logic [DP-1:0] pos_mem [N][NCH];
  logic [DP-1:0] lvl_mem [Q][NCH];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == SEL_POS && cfg_row < CFG_ROW_W'(N) && cfg_addr < CFG_ADDR_W'(NCH))
      pos_mem[cfg_row[idxw(N)-1:0]][cfg_addr[idxw(NCH)-1:0]] <= cfg_data;
    if (cfg_we && cfg_sel == SEL_LVL && cfg_row < CFG_ROW_W'(Q) && cfg_addr < CFG_ADDR_W'(NCH))
      lvl_mem[cfg_row[idxw(Q)-1:0]][cfg_addr[idxw(NCH)-1:0]] <= cfg_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int i = 0; i < N; i++) begin
        pos_q[i] <= pos_mem[i][rd_addr];
        val_q[i] <= lvl_mem[feat[i][FEAT_W-1 -: LVL_B]][rd_addr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
