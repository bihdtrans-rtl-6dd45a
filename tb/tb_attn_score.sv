// tb_attn_score: the attention-score unit with a behavioural query FIFO and
// key register (both one-cycle reads) filled with random words. Heads of 20
// dimensions at 8 per word, so the last word of each head has 4 real bits
// and 4 padding bits that must not count. Each mask row is compared with
// bool(sum over the head of the bipolar products) computed here. Run 1
// scores all tokens (queries held back until keys_ready rises, so the unit
// must wait); run 2 scores only the final token (earlier queries dropped).
// The FIFO model also goes empty at random to exercise the empty stall.
`timescale 1ns/1ps
module tb_attn_score;
  import bihd_pkg::*;
  localparam int DP = 8, DH = 20, NH = 2, L = 4, CPH = 3, NCH = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, last_only = 0, keys_ready = 0;
  logic q_empty, q_rd_en, q_rd_valid = 0;
  logic [DP-1:0] q_rd_data;
  logic k_rd_en;
  logic [idxw(NCH)-1:0] k_rd_addr;
  logic [L-1:0][DP-1:0] k_rd_data;
  logic mask_valid, mask_last, stall_empty, stall_keys, drop;
  logic [L-1:0] mask;
  logic [idxw(L)-1:0] mask_tok;
  logic [idxw(NH)-1:0] mask_head;

  attn_score #(.DP(DP), .DH(DH), .NH(NH), .L(L)) dut (.*);

  logic [DP-1:0] qm [L][NCH];
  logic [L-1:0][DP-1:0] km [NCH];
  logic [DP-1:0] fifo [$];
  int avail;   // words the FIFO model shows
  assign q_empty = (avail == 0);
  always @(posedge clk) begin
    q_rd_valid <= q_rd_en;
    if (q_rd_en) begin q_rd_data <= fifo.pop_front(); avail = avail - 1; end
    if (k_rd_en) k_rd_data <= km[k_rd_addr];
  end

  int checks = 0, failures = 0, n_stall_empty = 0, n_stall_keys = 0, n_drop = 0;
  int rows = 0, exp_tok, exp_head;
  always @(posedge clk) begin
    if (stall_empty) n_stall_empty++;
    if (stall_keys)  n_stall_keys++;
    if (drop)        n_drop++;
  end

  always @(posedge clk) begin
    if (rst_n && mask_valid) begin
      logic [L-1:0] e;
      for (int i = 0; i < L; i++) begin
        int dot;
        dot = 0;
        for (int c = 0; c < CPH; c++)
          for (int b = 0; b < DP; b++)
            if (c * DP + b < DH)
              dot += (qm[exp_tok][exp_head*CPH+c][b] == km[exp_head*CPH+c][i][b]) ? 1 : -1;
        e[i] = dot > 0;
      end
      checks++;
      if (mask !== e || int'(mask_tok) != exp_tok || int'(mask_head) != exp_head ||
          mask_last != (exp_tok == L - 1 && exp_head == NH - 1)) begin
        failures++;
        $display("FAIL row t%0d h%0d: %b exp %b (tok %0d head %0d)", exp_tok, exp_head, mask, e, mask_tok, mask_head);
      end
      rows++;
      if (exp_head == NH - 1) begin exp_head = 0; exp_tok++; end else exp_head++;
    end
  end

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    avail = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      last_only = (run == 1);
      keys_ready = 0;
      rows = 0; exp_head = 0; exp_tok = last_only ? L - 1 : 0;
      for (int a = 0; a < NCH; a++)
        for (int t = 0; t < L; t++) begin
          qm[t][a] = DP'($urandom);
          km[a][t] = DP'($urandom);
        end
      for (int a = 0; a < NCH; a++) km[a][1] = qm[L-1][a];   // token 1 matches the last query
      for (int t = 0; t < L; t++)
        for (int a = 0; a < NCH; a++) fifo.push_back(qm[t][a]);
      // the FIFO model releases words in random bursts; keys come late
      for (int n = 0; n < 60 && avail < L * NCH; n++) begin
        @(negedge clk);
        if ($urandom_range(0, 1) == 0 && avail < fifo.size()) avail = avail + 1;
        if (n == 30) keys_ready = 1;
      end
      @(negedge clk);
      keys_ready = 1;
      avail = fifo.size();
      wait (rows == (last_only ? NH : L * NH));
      repeat (5) @(negedge clk);
      checks++;
      if (rows != (last_only ? NH : L * NH)) begin failures++; $display("FAIL: rows %0d", rows); end
      clear = 1;
      @(negedge clk);
      clear = 0;
      fifo.delete(); avail = 0;
    end
    checks += 3;
    if (n_stall_empty == 0) begin failures++; $display("FAIL: no empty stall"); end
    if (n_stall_keys == 0)  begin failures++; $display("FAIL: no key wait"); end
    if (n_drop != (L - 1) * NCH) begin failures++; $display("FAIL: dropped %0d", n_drop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
