// tb_item_memory: loads random position and level tables through the
// configuration port (plus writes to other tables and out-of-range rows that
// must be ignored), then performs random lookups and compares the returned
// words, one cycle after the read, with the table copy kept here. The level
// is the top LVL_B bits of each feature.
`timescale 1ns/1ps
module tb_item_memory;
  import bihd_pkg::*;
  localparam int N = 3, DP = 8, NCH = 5, FEAT_W = 8, LVL_B = 2, Q = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = SEL_POS;
  logic [CFG_ROW_W-1:0] cfg_row = '0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [DP-1:0] cfg_data = '0;
  logic rd_en = 0, rd_valid;
  logic [idxw(NCH)-1:0] rd_addr = '0;
  logic [N-1:0][FEAT_W-1:0] feat = '0;
  logic [N-1:0][DP-1:0] pos_q, val_q;

  item_memory #(.N(N), .DP(DP), .NCH(NCH), .FEAT_W(FEAT_W), .LVL_B(LVL_B)) dut (.*);

  logic [DP-1:0] pos_m [N][NCH];
  logic [DP-1:0] lvl_m [Q][NCH];
  int checks = 0, failures = 0;

  task automatic wr(input cfg_sel_e s, input int row, input int a, input logic [DP-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_row = CFG_ROW_W'(row); cfg_addr = CFG_ADDR_W'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NCH; a++) begin
      for (int i = 0; i < N; i++) begin pos_m[i][a] = DP'($urandom); wr(SEL_POS, i, a, pos_m[i][a]); end
      for (int q = 0; q < Q; q++) begin lvl_m[q][a] = DP'($urandom); wr(SEL_LVL, q, a, lvl_m[q][a]); end
      wr(SEL_BVQ, 0, a, DP'($urandom));        // another table: ignored here
      wr(SEL_POS, N, a, DP'($urandom));        // row out of range: ignored
    end
    for (int n = 0; n < 200; n++) begin
      int a;
      logic [N-1:0][FEAT_W-1:0] f;
      a = $urandom_range(0, NCH - 1);
      for (int i = 0; i < N; i++) f[i] = FEAT_W'($urandom);
      @(negedge clk);
      rd_en = 1; rd_addr = idxw(NCH)'(a); feat = f;
      @(negedge clk);
      rd_en = 0; feat = '0;
      checks++;
      if (!rd_valid) begin failures++; $display("FAIL: rd_valid low"); end
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (pos_q[i] != pos_m[i][a]) begin failures++; $display("FAIL pos %0d %0d", i, a); end
        if (val_q[i] != lvl_m[f[i][FEAT_W-1 -: LVL_B]][a]) begin failures++; $display("FAIL val %0d %0d", i, a); end
      end
      @(negedge clk);
      checks++;
      if (rd_valid) begin failures++; $display("FAIL: rd_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
