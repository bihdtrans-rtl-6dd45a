// bihd_pkg: constants and types shared by the binary hyperdimensional
// transformer (BiHDTrans) inference pipeline.
//
// Hypervectors of D bits are split into NH attention heads of DH = D/NH
// dimensions each, and every head into CPH chunks of DP bits ("d", the number
// of dimensions processed in parallel). The last chunk of a head is padded when
// DP does not divide DH; padding bits are carried through memories but never
// counted. A hypervector is therefore stored as NCH = NH*CPH words of DP bits,
// word address = head*CPH + chunk. Bipolar values are stored as bits
// (1 = +1, 0 = -1), so binding is XNOR.
//
// Default sizes follow the JapaneseVowels configuration of the hardware
// evaluation (N=12 features, L=25 time steps, d=128) with D=10000 and 10
// heads. The class count (9) and the value quantization (16 levels from 8-bit
// features) are this design's choices.
package bihd_pkg;

  localparam int unsigned D_DEF      = 10000;  // hyperspace dimension
  localparam int unsigned NH_DEF     = 10;     // attention heads
  localparam int unsigned DP_DEF     = 128;    // dimensions processed per cycle
  localparam int unsigned N_DEF      = 12;     // features per time step
  localparam int unsigned L_DEF      = 25;     // time steps (tokens)
  localparam int unsigned K_DEF      = 9;      // classes
  localparam int unsigned FEAT_W_DEF = 8;      // bits of one input feature
  localparam int unsigned LVL_B_DEF  = 4;      // log2 of value quantization levels

  // Widths of the configuration write port (row of a table, word address).
  localparam int unsigned CFG_ROW_W  = 10;
  localparam int unsigned CFG_ADDR_W = 14;

  // Selects which loadable table a configuration write goes to.
  typedef enum logic [2:0] {
    SEL_POS = 3'd0,  // position hypervector F_i, row = feature i
    SEL_LVL = 3'd1,  // value (level) hypervector, row = quantization level
    SEL_BVQ = 3'd2,  // binding hypervector BV_q
    SEL_BVK = 3'd3,  // binding hypervector BV_k
    SEL_BVV = 3'd4,  // binding hypervector BV_v
    SEL_BVA = 3'd5,  // binding hypervector BV_a
    SEL_CLS = 3'd6   // class prototype C_k, row = class k
  } cfg_sel_e;

  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Width needed to hold values 0..n (at least 1 bit).
  function automatic int unsigned cntw(input int unsigned n);
    return (n < 2) ? 1 : $clog2(n + 1);
  endfunction

  // Width of an index 0..n-1 (at least 1 bit).
  function automatic int unsigned idxw(input int unsigned n);
    return (n < 2) ? 1 : $clog2(n);
  endfunction

endpackage
