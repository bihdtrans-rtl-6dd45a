// tb_bihdtrans_full: one window in each mode through the pipeline at its
// default size (D=10000 in 10 heads, 128 dimensions per cycle, 12 features,
// 25 time steps, 9 classes), against the bit-level reference model: label,
// similarities, every scored token's H_c and the cycle count from the last
// sample to done. Mechanism counts are printed; at this size the permutation
// never crosses a word (t <= 25 < 128), so only the reduced-size test
// requires that.
`timescale 1ns/1ps
module tb_bihdtrans_full;
  import bihd_pkg::*;
  import bihd_ref_pkg::*;

  localparam int D = D_DEF, NH = NH_DEF, DP = DP_DEF, N = N_DEF, L = L_DEF, K = K_DEF,
                 FEAT_W = FEAT_W_DEF, LVL_B = LVL_B_DEF;
  localparam int DH = D / NH, CPH = (DH + DP - 1) / DP, NCH = NH * CPH;
  localparam int NWIN = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  bihdtrans_top dut (.*);

  ref_model #(.D(D), .NH(NH), .DP(DP), .N(N), .L(L), .K(K), .FEAT_W(FEAT_W), .LVL_B(LVL_B)) m;

  int checks = 0, failures = 0;
  int n_backpressure = 0, n_stall_empty = 0, n_stall_keys = 0, n_drop = 0;
  int n_mode_last = 0, n_mode_all = 0, n_rot_cross = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && !in_ready) n_backpressure++;
    if (stall_empty) n_stall_empty++;
    if (stall_keys)  n_stall_keys++;
    if (drop)        n_drop++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic cfg_write(input cfg_sel_e sel, input int row, input int a);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_row = CFG_ROW_W'(row); cfg_addr = CFG_ADDR_W'(a);
    cfg_data = m.word(int'(sel), row, a);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int feat [L][N];
    longint t_last, lat, lat_expect;
    m = new();
    m.randomize_tables();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NCH; a++) begin
      for (int i = 0; i < N; i++) cfg_write(SEL_POS, i, a);
      for (int q = 0; q < (1 << LVL_B); q++) cfg_write(SEL_LVL, q, a);
      cfg_write(SEL_BVQ, 0, a); cfg_write(SEL_BVK, 0, a);
      cfg_write(SEL_BVV, 0, a); cfg_write(SEL_BVA, 0, a);
      for (int k = 0; k < K; k++) cfg_write(SEL_CLS, k, a);
    end

    for (int w = 0; w < NWIN; w++) begin
      last_only = (w % 2 == 0);
      if (last_only) n_mode_last++; else n_mode_all++;
      for (int t = 0; t < L; t++)
        for (int i = 0; i < N; i++)
          feat[t][i] = int'($urandom_range(0, (1 << FEAT_W) - 1));
      for (int t = 0; t < L; t++) begin
        m.encode(t, feat[t]);
        if (t + 1 >= DP) n_rot_cross++;
      end
      // drive the samples, with random gaps
      fork
        begin
          for (int t = 0; t < L; t++) begin
            @(negedge clk);
            while ($urandom_range(0, 3) == 0) @(negedge clk);
            in_valid = 1;
            for (int i = 0; i < N; i++) in_feat[i] = FEAT_W'(feat[t][i]);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            t_last = cyc;
            @(negedge clk);
            in_valid = 0;
          end
        end
        begin
          @(posedge clk iff done);
        end
      join
      lat = cyc - t_last;
      // reference
      if (last_only) m.attend(L - 1);
      else for (int t = 0; t < L; t++) m.attend(t);
      m.classify(L - 1);
      check(int'(label) == m.label, $sformatf("win %0d label %0d exp %0d", w, label, m.label));
      for (int k = 0; k < K; k++)
        check(int'(sims[k]) == m.sims[k], $sformatf("win %0d sim[%0d] %0d exp %0d", w, k, sims[k], m.sims[k]));
      // token register contents
      for (int t = (last_only ? L - 1 : 0); t < L; t++)
        for (int a = 0; a < NCH; a++) begin
          logic [DP-1:0] e;
          @(negedge clk);
          hr_tok = idxw(L)'(t); hr_addr = idxw(NCH)'(a);
          #1;
          for (int b = 0; b < DP; b++) e[b] = m.hc[t][a * DP + b];
          for (int b = 0; b < DP; b++)
            if ((a % CPH) * DP + b >= DH) e[b] = hr_data[b];  // padding is not specified
          check(hr_data == e, $sformatf("win %0d H_c tok %0d word %0d %h exp %h", w, t, a, hr_data, e));
        end
      // latency from the last accepted sample to done: NCH+1 encoder reads,
      // the final query's NCH words through attention (the FIFO holds them),
      // CPH more words of bundling for the last head, pipeline registers
      if (last_only) lat_expect = NCH + 1 + 3 + NCH + CPH + 5;
      else           lat_expect = NCH + 1 + 3 + L * NCH + CPH + 5;
      check(lat == lat_expect, $sformatf("win %0d latency %0d exp %0d", w, lat, lat_expect));
      $display("window %0d mode %s label %0d latency %0d cycles", w, last_only ? "last" : "all", label, lat);
    end

    $display("mechanisms: backpressure=%0d stall_empty=%0d stall_keys=%0d drop=%0d rot_cross=%0d enc_ties=%0d empty_rows=%0d full_rows=%0d mode_last=%0d mode_all=%0d",
             n_backpressure, n_stall_empty, n_stall_keys, n_drop, n_rot_cross, m.n_enc_ties,
             m.n_empty_rows, m.n_full_rows, n_mode_last, n_mode_all);
    check(n_backpressure > 0, "input back-pressure never happened");
    check(n_stall_empty > 0,  "FIFO-empty stall never happened");
    check(n_stall_keys > 0,   "wait for keys never happened");
    check(n_drop > 0,         "query drop never happened");
    check(n_mode_last > 0 && n_mode_all > 0, "a mode was not run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
