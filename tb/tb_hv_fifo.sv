// tb_hv_fifo: random pushes and pops (never into a full or out of an empty
// FIFO) against a queue model; checks data order, the one-cycle read latency,
// full and empty, and clear.
`timescale 1ns/1ps
module tb_hv_fifo;
  localparam int W = 8, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, wr_en = 0, rd_en = 0, rd_valid, full, empty;
  logic [W-1:0] wr_data = '0, rd_data;

  hv_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  logic [W-1:0] q [$];
  logic [W-1:0] exp_data;
  bit exp_valid = 0;
  int checks = 0, failures = 0;
  int n_full = 0, n_empty = 0;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // outputs of the previous cycle's read
      if (exp_valid) begin
        checks++;
        if (!rd_valid || rd_data != exp_data) begin
          failures++; $display("FAIL: data %h exp %h valid %b", rd_data, exp_data, rd_valid);
        end
      end
      checks += 2;
      if (full  != (q.size() == DEPTH)) begin failures++; $display("FAIL: full"); end
      if (empty != (q.size() == 0))     begin failures++; $display("FAIL: empty"); end
      if (full) n_full++;
      if (empty) n_empty++;
      if (n == 1000) begin
        clear = 1; q.delete(); wr_en = 0; rd_en = 0; exp_valid = 0;
        @(negedge clk);
        clear = 0;
        continue;
      end
      wr_en = !full && ($urandom_range(0, 99) < ((n / 250) % 2 ? 70 : 35));
      rd_en = !empty && ($urandom_range(0, 99) < ((n / 250) % 2 ? 35 : 70));
      wr_data = W'($urandom);
      exp_valid = rd_en;
      if (rd_en) exp_data = q.pop_front();
      if (wr_en) q.push_back(wr_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL: full/empty not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
