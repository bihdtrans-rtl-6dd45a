// tb_hd_classifier: loads K=4 random class prototypes, then streams tokens
// (with gaps between words) whose words are noisy copies of a chosen class or
// random, and a token equal to a class except in the padding bits. The K
// similarities (matches over real dimensions) and the label (most matches,
// lowest index on ties) are compared with values computed here; a token that
// ties two classes checks the tie rule.
`timescale 1ns/1ps
module tb_hd_classifier;
  import bihd_pkg::*;
  localparam int DP = 8, DH = 20, NH = 2, L = 2, K = 4, CPH = 3, NCH = 6;
  localparam int SW = cntw(NH * DH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, cfg_we = 0;
  cfg_sel_e cfg_sel = SEL_CLS;
  logic [CFG_ROW_W-1:0] cfg_row = '0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [DP-1:0] cfg_data = '0;
  logic hc_valid = 0;
  logic [idxw(NCH)-1:0] hc_addr = '0;
  logic [idxw(L)-1:0] hc_tok = '0;
  logic [DP-1:0] hc_word = '0;
  logic pred_valid;
  logic [idxw(L)-1:0] pred_tok;
  logic [idxw(K)-1:0] pred_label;
  logic [K-1:0][SW-1:0] sims;

  hd_classifier #(.DP(DP), .DH(DH), .NH(NH), .L(L), .K(K)) dut (.*);

  logic [DP-1:0] am [K][NCH];
  int checks = 0, failures = 0;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int a = 0; a < NCH; a++) begin
        am[k][a] = DP'($urandom);
        @(negedge clk);
        cfg_we = 1; cfg_row = CFG_ROW_W'(k); cfg_addr = CFG_ADDR_W'(a); cfg_data = am[k][a];
        @(negedge clk);
        cfg_we = 0;
      end
    for (int n = 0; n < 40; n++) begin
      logic [DP-1:0] w [NCH];
      int es [K];
      int el, tok;
      tok = n % L;
      for (int a = 0; a < NCH; a++) begin
        case (n % 4)
          0: w[a] = am[n % K][a] ^ DP'($urandom & $urandom & $urandom);  // noisy class
          1: w[a] = DP'($urandom);
          2: w[a] = (a % CPH == CPH - 1) ? (am[1][a] ^ 8'hF0) : am[1][a]; // padding differs only
          default: w[a] = (a < NCH / 2) ? am[2][a] : am[3][a];          // ties classes 2 and 3 if halves match
        endcase
      end
      el = 0;
      for (int k = 0; k < K; k++) begin
        es[k] = 0;
        for (int a = 0; a < NCH; a++)
          for (int b = 0; b < DP; b++)
            if ((a % CPH) * DP + b < DH && w[a][b] == am[k][a][b]) es[k]++;
        if (es[k] > es[el]) el = k;
      end
      for (int a = 0; a < NCH; a++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        hc_valid = 1; hc_addr = idxw(NCH)'(a); hc_tok = idxw(L)'(tok); hc_word = w[a];
        @(negedge clk);
        hc_valid = 0;
      end
      @(posedge clk iff pred_valid);
      checks += 2 + K;
      if (int'(pred_label) != el) begin failures++; $display("FAIL n%0d label %0d exp %0d", n, pred_label, el); end
      if (int'(pred_tok) != tok) begin failures++; $display("FAIL n%0d tok", n); end
      for (int k = 0; k < K; k++)
        if (int'(sims[k]) != es[k]) begin failures++; $display("FAIL n%0d sim %0d: %0d exp %0d", n, k, sims[k], es[k]); end
      if (n % 4 == 2) begin
        checks++;
        if (int'(sims[1]) != NH * DH) begin failures++; $display("FAIL: padding counted"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
