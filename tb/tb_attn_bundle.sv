// tb_attn_bundle: the selective-bundling unit with a behavioural value
// register (one-cycle read) of random words and random BV_a. Mask rows are
// offered back to back, one every CPH cycles, as the attention unit produces
// them, including an all-zero row (empty selection) and an all-one row. Each
// output word is compared with sign(sum of the selected bipolar values),
// sign(0) = +1, XNOR BV_a, computed here; the token register is read back
// afterwards.
`timescale 1ns/1ps
module tb_attn_bundle;
  import bihd_pkg::*;
  localparam int DP = 8, DH = 20, NH = 2, L = 5, CPH = 3, NCH = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = SEL_BVA;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [DP-1:0] cfg_data = '0;
  logic mask_valid = 0;
  logic [L-1:0] mask = '0;
  logic [idxw(L)-1:0] mask_tok = '0;
  logic [idxw(NH)-1:0] mask_head = '0;
  logic v_rd_en;
  logic [idxw(NCH)-1:0] v_rd_addr;
  logic [L-1:0][DP-1:0] v_rd_data;
  logic hc_valid, hc_last;
  logic [idxw(NCH)-1:0] hc_addr;
  logic [idxw(L)-1:0] hc_tok;
  logic [DP-1:0] hc_word;
  logic [idxw(L)-1:0] hr_tok = '0;
  logic [idxw(NCH)-1:0] hr_addr = '0;
  logic [DP-1:0] hr_data;

  attn_bundle #(.DP(DP), .DH(DH), .NH(NH), .L(L)) dut (.*);

  logic [L-1:0][DP-1:0] vm [NCH];
  logic [DP-1:0] bva [NCH];
  logic [L-1:0] masks [L][NH];
  logic [DP-1:0] expw [L][NCH];
  always @(posedge clk) if (v_rd_en) v_rd_data <= vm[v_rd_addr];

  int checks = 0, failures = 0, nout = 0;

  function automatic logic [DP-1:0] ref_word(logic [L-1:0] m, int a);
    logic [DP-1:0] w;
    for (int b = 0; b < DP; b++) begin
      int s;
      s = 0;
      for (int i = 0; i < L; i++) if (m[i]) s += vm[a][i][b] ? 1 : -1;
      w[b] = (s >= 0) ~^ bva[a][b];
    end
    return w;
  endfunction

  always @(posedge clk) begin
    if (rst_n && hc_valid) begin
      checks++;
      nout++;
      if (hc_word !== expw[hc_tok][hc_addr] ||
          hc_last != (int'(hc_addr) % CPH == CPH - 1 && int'(hc_addr) / CPH == NH - 1)) begin
        failures++;
        $display("FAIL tok %0d word %0d: %h exp %h", hc_tok, hc_addr, hc_word, expw[hc_tok][hc_addr]);
      end
    end
  end

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < NCH; a++) begin
      vm[a] = {L{DP'($urandom)}};
      for (int i = 0; i < L; i++) vm[a][i] = DP'($urandom);
      bva[a] = DP'($urandom);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NCH; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = CFG_ADDR_W'(a); cfg_data = bva[a];
      @(negedge clk);
      cfg_we = 0;
    end
    for (int t = 0; t < L; t++)
      for (int h = 0; h < NH; h++) begin
        masks[t][h] = (t == 0 && h == 0) ? '0 : (t == 0 && h == 1) ? '1 : L'($urandom);
        for (int c = 0; c < CPH; c++) expw[t][h*CPH+c] = ref_word(masks[t][h], h * CPH + c);
      end
    @(negedge clk);
    for (int t = 0; t < L; t++)
      for (int h = 0; h < NH; h++) begin
        mask_valid = 1; mask = masks[t][h]; mask_tok = idxw(L)'(t); mask_head = idxw(NH)'(h);
        @(negedge clk);
        mask_valid = 0;
        repeat (CPH - 1) @(negedge clk);
        if (t == 2) repeat ($urandom_range(0, 3)) @(negedge clk);
      end
    repeat (6) @(negedge clk);
    checks++;
    if (nout != L * NCH) begin failures++; $display("FAIL: %0d words", nout); end
    for (int t = 0; t < L; t++)
      for (int a = 0; a < NCH; a++) begin
        hr_tok = idxw(L)'(t); hr_addr = idxw(NCH)'(a);
        #1;
        checks++;
        if (hr_data != expw[t][a]) begin failures++; $display("FAIL reg t%0d a%0d", t, a); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
