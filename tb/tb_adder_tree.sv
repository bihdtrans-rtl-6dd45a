// tb_adder_tree: random operands into two adder trees (13 three-bit operands,
// a non-power-of-two count, and 128 one-bit operands as used for popcounts),
// sums compared with a plain loop.
`timescale 1ns/1ps
module tb_adder_tree;
  logic [12:0][2:0]  a;
  logic [6:0]        sa;
  logic [127:0][0:0] b;
  logic [7:0]        sb;
  int checks = 0, failures = 0;

  adder_tree #(.NIN(13),  .IW(3), .OW(7)) u_a (.in(a), .sum(sa));
  adder_tree #(.NIN(128), .IW(1), .OW(8)) u_b (.in(b), .sum(sb));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      int ea, eb;
      ea = 0; eb = 0;
      for (int i = 0; i < 13; i++) a[i] = (n == 0) ? 3'd7 : 3'($urandom);
      for (int i = 0; i < 128; i++) b[i] = (n == 0) ? 1'b1 : 1'($urandom);
      #1;
      for (int i = 0; i < 13; i++) ea += a[i];
      for (int i = 0; i < 128; i++) eb += b[i];
      checks += 2;
      if (int'(sa) != ea) begin failures++; $display("FAIL a: %0d exp %0d", sa, ea); end
      if (int'(sb) != eb) begin failures++; $display("FAIL b: %0d exp %0d", sb, eb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
