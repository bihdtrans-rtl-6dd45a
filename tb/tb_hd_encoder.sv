// tb_hd_encoder: the encoder with a behavioural item memory (one-cycle read
// latency) holding random tables. L=20 steps at 8 dimensions per word and 3
// words, so the permutation rho^t crosses word boundaries and wraps the
// whole hypervector; N=4 so sign(0) ties occur. Each output word is compared
// with sign(rho^t(sum_i F_i (.) V_i)) computed bit by bit here. Checks the
// word order and tags, one accepted sample every NCH+1 cycles when the input
// is always valid, in_ready low after L samples, enc_done, and a second
// window after clear with random input gaps.
`timescale 1ns/1ps
module tb_hd_encoder;
  import bihd_pkg::*;
  localparam int N = 4, DP = 8, NCH = 3, L = 20, FEAT_W = 4, LVL_B = 2, Q = 4;
  localparam int DPD = NCH * DP;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, en = 1, in_valid = 0, in_ready;
  logic [N-1:0][FEAT_W-1:0] in_feat = '0;
  logic im_rd_en, im_valid = 0;
  logic [idxw(NCH)-1:0] im_rd_addr;
  logic [N-1:0][FEAT_W-1:0] im_feat;
  logic [N-1:0][DP-1:0] im_pos, im_val;
  logic he_valid, he_last, enc_done;
  logic [idxw(NCH)-1:0] he_addr;
  logic [idxw(L)-1:0] he_tok;
  logic [DP-1:0] he_word;

  hd_encoder #(.N(N), .DP(DP), .NCH(NCH), .L(L), .FEAT_W(FEAT_W)) dut (.*);

  // behavioural item memory
  logic [DP-1:0] pos_m [N][NCH];
  logic [DP-1:0] lvl_m [Q][NCH];
  always_ff @(posedge clk) begin
    im_valid <= im_rd_en;
    for (int i = 0; i < N; i++) begin
      im_pos[i] <= pos_m[i][im_rd_addr];
      im_val[i] <= lvl_m[im_feat[i][FEAT_W-1 -: LVL_B]][im_rd_addr];
    end
  end

  int checks = 0, failures = 0, n_ties = 0;
  bit exp_he [L][DPD];
  int got_words = 0;
  int exp_tok = 0, exp_addr = 0;

  function automatic bit tbit(int tab, int row, int g);
    return tab == 0 ? pos_m[row][g / DP][g % DP] : lvl_m[row][g / DP][g % DP];
  endfunction

  task automatic model(int t, logic [N-1:0][FEAT_W-1:0] f);
    bit s [DPD];
    for (int g = 0; g < DPD; g++) begin
      int c;
      c = 0;
      for (int i = 0; i < N; i++) c += (tbit(0, i, g) == tbit(1, int'(f[i][FEAT_W-1 -: LVL_B]), g));
      if (2 * c == N) n_ties++;
      s[g] = (2 * c >= N);
    end
    for (int g = 0; g < DPD; g++) exp_he[t][g] = s[((g - (t + 1)) % DPD + DPD) % DPD];
  endtask

  // output monitor
  always @(posedge clk) begin
    if (rst_n && he_valid) begin
      logic [DP-1:0] e;
      for (int b = 0; b < DP; b++) e[b] = exp_he[exp_tok][exp_addr * DP + b];
      checks++;
      if (he_word !== e || int'(he_addr) != exp_addr || int'(he_tok) != exp_tok ||
          he_last != (exp_addr == NCH - 1)) begin
        failures++;
        $display("FAIL tok %0d word %0d: %h exp %h (addr %0d tok %0d)", exp_tok, exp_addr, he_word, e, he_addr, he_tok);
      end
      got_words++;
      if (exp_addr == NCH - 1) begin exp_addr = 0; exp_tok++; end else exp_addr++;
    end
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc_cyc [L];
    longint cyc;
    for (int a = 0; a < NCH; a++) begin
      for (int i = 0; i < N; i++) pos_m[i][a] = DP'($urandom);
      for (int q = 0; q < Q; q++) lvl_m[q][a] = DP'($urandom);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      logic [N-1:0][FEAT_W-1:0] f [L];
      exp_tok = 0; exp_addr = 0; got_words = 0;
      for (int t = 0; t < L; t++) begin
        for (int i = 0; i < N; i++) f[t][i] = FEAT_W'($urandom);
        model(t, f[t]);
      end
      cyc = 0;
      for (int t = 0; t < L; t++) begin
        @(negedge clk);
        if (run == 1) while ($urandom_range(0, 2) == 0) @(negedge clk);
        in_valid = 1; in_feat = f[t];
        @(posedge clk);
        while (!in_ready) begin @(posedge clk); end
        acc_cyc[t] = $time / 10;
        @(negedge clk);
        in_valid = 0;
      end
      if (run == 0)
        for (int t = 1; t < L; t++) begin
          checks++;
          if (acc_cyc[t] - acc_cyc[t-1] != NCH + 1) begin
            failures++; $display("FAIL: step interval %0d", acc_cyc[t] - acc_cyc[t-1]);
          end
        end
      repeat (NCH + 6) @(negedge clk);
      checks += 3;
      if (got_words != L * NCH) begin failures++; $display("FAIL: %0d words", got_words); end
      if (!enc_done) begin failures++; $display("FAIL: enc_done low"); end
      if (in_ready)  begin failures++; $display("FAIL: in_ready after L steps"); end
      clear = 1;
      @(negedge clk);
      clear = 0;
      checks++;
      if (enc_done) begin failures++; $display("FAIL: enc_done after clear"); end
    end
    checks++;
    if (n_ties == 0) begin failures++; $display("FAIL: no tie exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
