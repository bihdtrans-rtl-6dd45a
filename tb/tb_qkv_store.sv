// tb_qkv_store: loads random BV_q/BV_k/BV_v words, streams L tokens of random
// encoded words in (with gaps), then reads every word address of the key and
// value registers (all L tokens at once) and pops all queries from the FIFO,
// comparing each with the XNOR of the encoded word and the binding word
// computed here. Also checks the FIFO flags and that clear resets C1.
`timescale 1ns/1ps
module tb_qkv_store;
  import bihd_pkg::*;
  localparam int DP = 8, NCH = 4, L = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, cfg_we = 0;
  cfg_sel_e cfg_sel = SEL_BVQ;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [DP-1:0] cfg_data = '0;
  logic he_valid = 0, he_last = 0;
  logic [idxw(NCH)-1:0] he_addr = '0;
  logic [idxw(L)-1:0] he_tok = '0;
  logic [DP-1:0] he_word = '0;
  logic k_rd_en = 0, v_rd_en = 0, q_rd_en = 0, q_rd_valid, q_empty, q_full;
  logic [idxw(NCH)-1:0] k_rd_addr = '0, v_rd_addr = '0;
  logic [L-1:0][DP-1:0] k_rd_data, v_rd_data;
  logic [DP-1:0] q_rd_data;

  qkv_store #(.DP(DP), .NCH(NCH), .L(L)) dut (.*);

  logic [DP-1:0] bv [3][NCH];
  logic [DP-1:0] he [2][L][NCH];
  int checks = 0, failures = 0;

  task automatic ck(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++)
      for (int a = 0; a < NCH; a++) begin
        bv[s][a] = DP'($urandom);
        @(negedge clk);
        cfg_we = 1; cfg_sel = cfg_sel_e'(int'(SEL_BVQ) + s); cfg_addr = CFG_ADDR_W'(a); cfg_data = bv[s][a];
        @(negedge clk);
        cfg_we = 0;
      end
    for (int run = 0; run < 2; run++) begin
      ck(q_empty, "FIFO not empty at start");
      for (int t = 0; t < L; t++)
        for (int a = 0; a < NCH; a++) begin
          he[run][t][a] = DP'($urandom);
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) @(negedge clk);
          he_valid = 1; he_addr = idxw(NCH)'(a); he_tok = idxw(L)'(t);
          he_last = (a == NCH - 1); he_word = he[run][t][a];
          @(negedge clk);
          he_valid = 0;
        end
      ck(q_full, "FIFO not full after L tokens");
      for (int a = 0; a < NCH; a++) begin
        @(negedge clk);
        k_rd_en = 1; v_rd_en = 1; k_rd_addr = idxw(NCH)'(a); v_rd_addr = idxw(NCH)'(NCH - 1 - a);
        @(negedge clk);
        k_rd_en = 0; v_rd_en = 0;
        for (int t = 0; t < L; t++) begin
          ck(k_rd_data[t] == ~(he[run][t][a] ^ bv[1][a]), $sformatf("key t%0d a%0d", t, a));
          ck(v_rd_data[t] == ~(he[run][t][NCH-1-a] ^ bv[2][NCH-1-a]), $sformatf("value t%0d a%0d", t, a));
        end
      end
      for (int t = 0; t < L; t++)
        for (int a = 0; a < NCH; a++) begin
          @(negedge clk);
          q_rd_en = 1;
          @(negedge clk);
          q_rd_en = 0;
          ck(q_rd_valid && q_rd_data == ~(he[run][t][a] ^ bv[0][a]), $sformatf("query t%0d a%0d", t, a));
        end
      ck(q_empty, "FIFO not empty after reading all queries");
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
