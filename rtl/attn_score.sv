// attn_score: binary attention scores (block D of the pipeline).
//
// For query token t and head h it computes the mask row
//     b_{t,i} = bool( H_q^t . H_k^i ),  i = 1..L,
// over the DH dimensions of head h, where bool(x) = 1 for x > 0. In bits the
// bipolar dot product over DH dimensions is 2*m - DH, m being the number of
// XNOR matches, so b = (2*m > DH). Query words are popped from the query FIFO
// under counter C2 (word address and token of the query being read); each
// word is XNORed with word a of all L keys, the L lanes count their matches
// with adder trees, and the partial sums are accumulated over the CPH words of
// a head under counter C3. After the last word of a head (C3 flag) the L
// comparisons give the mask row for (t, h), emitted for one cycle on
// mask_valid. Padding bits of a head's last word are not counted. This
// follows the paper; the accumulator widths, the mode input and the
// handshake are this design's choices.
//
// Mode: with last_only = 1 only the final token's query is scored (the
// configuration used for classification); the earlier query words are
// popped and dropped as soon as they are in the FIFO. With last_only = 0
// every token is scored, in order. Scoring waits for keys_ready (all L keys
// stored); dropping does not.
//
// Interface: q_* is the FIFO read side (data one cycle after q_rd_en), k_* the
// key read port (data one cycle after k_rd_en). mask_tok/mask_head identify
// the row; mask_last marks the last head of the last scored token. Status:
// stall_empty (a query word is wanted but the FIFO is empty), stall_keys (a
// query word is waiting for the keys), drop (a word is being dropped).
// Timing: one word per cycle; a mask row appears 2 cycles after the pop of
// the head's last word.
module attn_score
  import bihd_pkg::*;
#(
  parameter int unsigned DP  = DP_DEF,
  parameter int unsigned DH  = D_DEF / NH_DEF,
  parameter int unsigned NH  = NH_DEF,
  parameter int unsigned L   = L_DEF,
  parameter int unsigned CPH = cdiv(DH, DP),
  parameter int unsigned NCH = NH * CPH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     last_only,
  input  logic                     keys_ready,
  // query FIFO
  input  logic                     q_empty,
  output logic                     q_rd_en,
  input  logic                     q_rd_valid,
  input  logic [DP-1:0]            q_rd_data,
  // key read port
  output logic                     k_rd_en,
  output logic [idxw(NCH)-1:0]     k_rd_addr,
  input  logic [L-1:0][DP-1:0]     k_rd_data,
  // mask rows
  output logic                     mask_valid,
  output logic [L-1:0]             mask,
  output logic [idxw(L)-1:0]       mask_tok,
  output logic [idxw(NH)-1:0]      mask_head,
  output logic                     mask_last,
  // status
  output logic                     stall_empty,
  output logic                     stall_keys,
  output logic                     drop
);
  localparam int unsigned AW    = idxw(NCH);
  localparam int unsigned TW    = idxw(L);
  localparam int unsigned HW    = idxw(NH);
  localparam int unsigned CW    = idxw(CPH);
  localparam int unsigned PW    = cntw(DP);
  localparam int unsigned SW    = cntw(DH);
  localparam int unsigned LASTB = DH - (CPH - 1) * DP;   // valid bits of a head's last word

  // ---------------- counter C2: query read control ----------------
  logic [AW-1:0] c2_addr;
  logic [TW:0]   c2_tok;        // L when every query has been read
  logic          all_read;
  logic          want, is_drop, pop;

  assign all_read = (c2_tok == (TW+1)'(L));
  assign is_drop  = last_only && (c2_tok != (TW+1)'(L - 1));
  assign want     = !all_read;
  assign pop      = want && !q_empty && (is_drop || keys_ready);

  assign q_rd_en     = pop;
  assign k_rd_en     = pop && !is_drop;
  assign k_rd_addr   = c2_addr;
  assign stall_empty = want && q_empty;
  assign stall_keys  = want && !q_empty && !is_drop && !keys_ready;
  assign drop        = pop && is_drop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c2_addr <= '0;
      c2_tok  <= '0;
    end else if (clear) begin
      c2_addr <= '0;
      c2_tok  <= '0;
    end else if (pop) begin
      if (c2_addr == AW'(NCH - 1)) begin
        c2_addr <= '0;
        c2_tok  <= c2_tok + 1'b1;
      end else begin
        c2_addr <= c2_addr + 1'b1;
      end
    end
  end

  // tags that travel with the read data
  logic          p_use;
  logic [TW-1:0] p_tok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_use <= 1'b0;
      p_tok <= '0;
    end else begin
      p_use <= pop && !is_drop && !clear;
      p_tok <= c2_tok[TW-1:0];
    end
  end

  // ---------------- counter C3: position within the head ----------------
  logic [CW-1:0] c3;
  logic [HW-1:0] head;
  logic          flag;
  assign flag = p_use && (c3 == CW'(CPH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c3   <= '0;
      head <= '0;
    end else if (clear) begin
      c3   <= '0;
      head <= '0;
    end else if (p_use) begin
      if (flag) begin
        c3   <= '0;
        head <= (head == HW'(NH - 1)) ? '0 : head + 1'b1;
      end else begin
        c3 <= c3 + 1'b1;
      end
    end
  end

  // valid dimensions of the current word
  logic [DP-1:0] vmask;
  always_comb begin
    for (int j = 0; j < DP; j++)
      vmask[j] = (c3 != CW'(CPH - 1)) || (j < LASTB);
  end

  // ---------------- L parallel lanes ----------------
  logic [L-1:0][SW-1:0] acc;
  logic [L-1:0][SW-1:0] tot;
  for (genvar i = 0; i < L; i++) begin : g_lane
    logic [DP-1:0] match;
    logic [PW-1:0] cnt;
    assign match = ~(q_rd_data ^ k_rd_data[i]) & vmask;
    adder_tree #(.NIN(DP), .IW(1), .OW(PW)) u_tree (.in(match), .sum(cnt));
    assign tot[i] = acc[i] + SW'(cnt);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     acc[i] <= '0;
      else if (clear) acc[i] <= '0;
      else if (p_use) acc[i] <= flag ? '0 : tot[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_valid <= 1'b0;
      mask       <= '0;
      mask_tok   <= '0;
      mask_head  <= '0;
      mask_last  <= 1'b0;
    end else begin
      mask_valid <= flag && !clear;
      if (flag) begin
        for (int i = 0; i < L; i++)
          mask[i] <= ((SW+1)'(tot[i]) << 1) > (SW+1)'(DH);
        mask_tok  <= p_tok;
        mask_head <= head;
        mask_last <= (head == HW'(NH - 1)) && (p_tok == TW'(L - 1));
      end
    end
  end

  a_data_aligned: assert property (@(posedge clk) disable iff (!rst_n) p_use |-> q_rd_valid);
endmodule
