// attn_bundle: selective bundling and output binding (block E of the pipeline).
//
// For a mask row b_{t,1..L} of head h it computes, for every dimension of the
// head,
//     H_a^t = sign( sum_i b_{t,i} * H_v^i ),   H_c^t = H_a^t (.) BV_a .
// In bits, with S = number of selected tokens and c = number of selected
// value bits that are 1, the bipolar sum is 2c - S, so H_a = (2c >= S)
// (sign(0) taken as +1, which also covers an empty mask). Each of the head's
// CPH words is read from the value registers (word a of all L tokens), masked,
// summed per dimension by an adder tree over the L lanes, binarized, XNORed
// with BV_a, streamed out on hc_* and stored in the token register at index
// C4 = the token of the mask row. Follows the paper; sign(0), the loadable
// BV_a table and the token-register read port are this design's choices.
//
// Interface: a mask row is accepted on mask_valid when the unit is idle or
// issuing its last read (asserted). v_rd_en/v_rd_addr read the value
// registers (data one cycle later). cfg_* with SEL_BVA loads BV_a words.
// hc_valid/hc_addr/hc_tok/hc_word carry the output words, two cycles after
// their read is issued; hc_last marks the last word of the last head.
// hr_tok/hr_addr read the token register combinationally on hr_data.
// Timing: CPH cycles per mask row, so it keeps up with attn_score.
module attn_bundle
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
  // configuration writes
  input  logic                     cfg_we,
  input  cfg_sel_e                 cfg_sel,
  input  logic [CFG_ADDR_W-1:0]    cfg_addr,
  input  logic [DP-1:0]            cfg_data,
  // mask rows
  input  logic                     mask_valid,
  input  logic [L-1:0]             mask,
  input  logic [idxw(L)-1:0]       mask_tok,
  input  logic [idxw(NH)-1:0]      mask_head,
  // value read port
  output logic                     v_rd_en,
  output logic [idxw(NCH)-1:0]     v_rd_addr,
  input  logic [L-1:0][DP-1:0]     v_rd_data,
  // token representations H_c
  output logic                     hc_valid,
  output logic [idxw(NCH)-1:0]     hc_addr,
  output logic [idxw(L)-1:0]       hc_tok,
  output logic                     hc_last,
  output logic [DP-1:0]            hc_word,
  // token register read port
  input  logic [idxw(L)-1:0]       hr_tok,
  input  logic [idxw(NCH)-1:0]     hr_addr,
  output logic [DP-1:0]            hr_data
);
  localparam int unsigned AW = idxw(NCH);
  localparam int unsigned TW = idxw(L);
  localparam int unsigned CW = idxw(CPH);
  localparam int unsigned LW = cntw(L);

  logic [DP-1:0] bva_mem [NCH];
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == SEL_BVA && cfg_addr < CFG_ADDR_W'(NCH))
      bva_mem[cfg_addr[AW-1:0]] <= cfg_data;
  end

  // ---------------- read issue ----------------
  logic          busy;
  logic [CW-1:0] cnt;
  logic [AW-1:0] addr;
  logic [L-1:0]  cur_mask;
  logic [TW-1:0] cur_tok;
  logic          cur_lasthead;
  logic          accept, last_issue;

  assign last_issue = busy && (cnt == CW'(CPH - 1));
  assign accept     = mask_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      cnt          <= '0;
      addr         <= '0;
      cur_mask     <= '0;
      cur_tok      <= '0;
      cur_lasthead <= 1'b0;
    end else begin
      if (accept) begin
        busy         <= 1'b1;
        cnt          <= '0;
        addr         <= AW'(mask_head * CPH);
        cur_mask     <= mask;
        cur_tok      <= mask_tok;
        cur_lasthead <= (mask_head == idxw(NH)'(NH - 1));
      end else if (busy) begin
        addr <= addr + 1'b1;
        if (last_issue) busy <= 1'b0;
        else            cnt  <= cnt + 1'b1;
      end
    end
  end

  assign v_rd_en   = busy;
  assign v_rd_addr = addr;

  // tags travelling with the value read
  logic          p_valid, p_last;
  logic [AW-1:0] p_addr;
  logic [L-1:0]  p_mask;
  logic [TW-1:0] p_tok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_last  <= 1'b0;
      p_addr  <= '0;
      p_mask  <= '0;
      p_tok   <= '0;
    end else begin
      p_valid <= busy;
      p_last  <= last_issue && cur_lasthead;
      p_addr  <= addr;
      p_mask  <= cur_mask;
      p_tok   <= cur_tok;
    end
  end

  // ---------------- selective bundling ----------------
  logic [LW-1:0] nsel;
  adder_tree #(.NIN(L), .IW(1), .OW(LW)) u_nsel (.in(p_mask), .sum(nsel));

  logic [DP-1:0] ha;
  for (genvar j = 0; j < DP; j++) begin : g_dim
    logic [L-1:0]  sel;
    logic [LW-1:0] ones;
    for (genvar i = 0; i < L; i++) begin : g_sel
      assign sel[i] = p_mask[i] & v_rd_data[i][j];
    end
    adder_tree #(.NIN(L), .IW(1), .OW(LW)) u_tree (.in(sel), .sum(ones));
    assign ha[j] = ((LW+1)'(ones) << 1) >= (LW+1)'(nsel);
  end

  logic [DP-1:0] hc;
  assign hc = ~(ha ^ bva_mem[p_addr]);

  // ---------------- output and token register (counter C4) ----------------
  logic [DP-1:0] treg [L][NCH];
  always_ff @(posedge clk) begin
    if (p_valid) treg[p_tok][p_addr] <= hc;
  end
  assign hr_data = treg[hr_tok][hr_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc_valid <= 1'b0;
      hc_last  <= 1'b0;
      hc_addr  <= '0;
      hc_tok   <= '0;
      hc_word  <= '0;
    end else begin
      hc_valid <= p_valid;
      hc_last  <= p_last;
      if (p_valid) begin
        hc_addr <= p_addr;
        hc_tok  <= p_tok;
        hc_word <= hc;
      end
    end
  end

  a_mask_timing: assert property (@(posedge clk) disable iff (!rst_n)
                                  mask_valid |-> (!busy || last_issue));
endmodule
