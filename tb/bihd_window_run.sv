// bihd_window_run: runs one classification window (final token only) through
// a bihdtrans_top of the given size and compares the label, the similarities
// and the final token's H_c with the reference model. Used by
// tb_bihd_workloads to run several dataset configurations side by side; it
// reports its counts on its ports and raises finished when done. Tables are
// loaded one word per cycle.
`timescale 1ns/1ps
module bihd_window_run #(
  parameter string NAME   = "run",
  parameter int    D      = 60,
  parameter int    NH     = 3,
  parameter int    DP     = 8,
  parameter int    N      = 4,
  parameter int    L      = 12,
  parameter int    K      = 4,
  parameter int    FEAT_W = 8,
  parameter int    LVL_B  = 4
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   finished
);
  import bihd_pkg::*;
  import bihd_ref_pkg::*;

  localparam int DH = D / NH, CPH = (DH + DP - 1) / DP, NCH = NH * CPH;

  logic                          rst_n = 0;
  logic                          cfg_we = 0;
  cfg_sel_e                      cfg_sel = SEL_POS;
  logic [CFG_ROW_W-1:0]          cfg_row = '0;
  logic [CFG_ADDR_W-1:0]         cfg_addr = '0;
  logic [DP-1:0]                 cfg_data = '0;
  logic                          last_only = 1;
  logic                          in_valid = 0, in_ready;
  logic [N-1:0][FEAT_W-1:0]      in_feat = '0;
  logic                          busy, done;
  logic [idxw(K)-1:0]            label;
  logic [K-1:0][cntw(D)-1:0]     sims;
  logic [idxw(L)-1:0]            hr_tok = '0;
  logic [idxw(NCH)-1:0]          hr_addr = '0;
  logic [DP-1:0]                 hr_data;
  logic                          stall_empty, stall_keys, drop;

  bihdtrans_top #(.D(D), .NH(NH), .DP(DP), .N(N), .L(L), .K(K), .FEAT_W(FEAT_W), .LVL_B(LVL_B)) dut (.*);

  ref_model #(.D(D), .NH(NH), .DP(DP), .N(N), .L(L), .K(K), .FEAT_W(FEAT_W), .LVL_B(LVL_B)) m;

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %s", NAME, what);
    end
  endtask

  task automatic cfg_put(input cfg_sel_e sel, input int row, input int a);
    cfg_we = 1; cfg_sel = sel; cfg_row = CFG_ROW_W'(row); cfg_addr = CFG_ADDR_W'(a);
    cfg_data = m.word(int'(sel), row, a);
    @(negedge clk);
  endtask

  initial begin
    int feat [L][N];
    longint t_last, lat;
    checks = 0; failures = 0; finished = 0;
    m = new();
    m.randomize_tables();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int a = 0; a < NCH; a++) begin
      for (int i = 0; i < N; i++) cfg_put(SEL_POS, i, a);
      for (int q = 0; q < (1 << LVL_B); q++) cfg_put(SEL_LVL, q, a);
      cfg_put(SEL_BVQ, 0, a); cfg_put(SEL_BVK, 0, a);
      cfg_put(SEL_BVV, 0, a); cfg_put(SEL_BVA, 0, a);
      for (int k = 0; k < K; k++) cfg_put(SEL_CLS, k, a);
    end
    cfg_we = 0;
    for (int t = 0; t < L; t++) begin
      for (int i = 0; i < N; i++) feat[t][i] = int'($urandom_range(0, (1 << FEAT_W) - 1));
      m.encode(t, feat[t]);
    end
    fork
      begin
        for (int t = 0; t < L; t++) begin
          in_valid = 1;
          for (int i = 0; i < N; i++) in_feat[i] = FEAT_W'(feat[t][i]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          t_last = cyc;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        @(posedge clk iff done);
      end
    join
    lat = cyc - t_last;
    m.attend(L - 1);
    m.classify(L - 1);
    check(int'(label) == m.label, $sformatf("label %0d exp %0d", label, m.label));
    for (int k = 0; k < K; k++)
      check(int'(sims[k]) == m.sims[k], $sformatf("sim[%0d] %0d exp %0d", k, sims[k], m.sims[k]));
    for (int a = 0; a < NCH; a++) begin
      logic [DP-1:0] e;
      @(negedge clk);
      hr_tok = idxw(L)'(L - 1); hr_addr = idxw(NCH)'(a);
      #1;
      for (int b = 0; b < DP; b++)
        e[b] = ((a % CPH) * DP + b < DH) ? m.hc[L-1][a * DP + b] : hr_data[b];
      check(hr_data == e, $sformatf("H_c word %0d", a));
    end
    check(lat == 2 * NCH + CPH + 9, $sformatf("latency %0d exp %0d", lat, 2 * NCH + CPH + 9));
    $display("%s: N=%0d L=%0d d=%0d K=%0d label %0d, %0d cycles from last sample to result (%0d words/hypervector)",
             NAME, N, L, DP, K, label, lat, NCH);
    finished = 1;
  end
endmodule
