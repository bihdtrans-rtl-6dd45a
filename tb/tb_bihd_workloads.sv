// tb_bihd_workloads: the dataset configurations of the hardware evaluation
// (features N, window L, dimensions per cycle d; D = 10000 in 10 heads),
// each classifying one random window with random tables against the
// reference model, all running side by side, plus two of the reduced
// hyperspace sizes of the dimension study. PEMS-SF (N=963, L=144, d=1) is
// left out: loading its tables alone takes about ten million cycles.
`timescale 1ns/1ps
module tb_bihd_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NR = 8;
  int  c [NR];
  int  f [NR];
  bit  fin [NR];

  bihd_window_run #(.NAME("JapaneseVowels"),     .D(10000), .NH(10), .DP(128), .N(12),  .L(25),  .K(9))
    u_jv  (.clk, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  bihd_window_run #(.NAME("SpokenArabicDigits"), .D(10000), .NH(10), .DP(100), .N(13),  .L(93),  .K(10))
    u_sad (.clk, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  bihd_window_run #(.NAME("FaceDetection"),      .D(10000), .NH(10), .DP(10),  .N(144), .L(2),   .K(2))
    u_fd  (.clk, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  bihd_window_run #(.NAME("RacketSports"),       .D(10000), .NH(10), .DP(200), .N(6),   .L(30),  .K(4))
    u_rs  (.clk, .checks(c[3]), .failures(f[3]), .finished(fin[3]));
  bihd_window_run #(.NAME("Epilepsy"),           .D(10000), .NH(10), .DP(80),  .N(3),   .L(207), .K(4))
    u_ep  (.clk, .checks(c[4]), .failures(f[4]), .finished(fin[4]));
  bihd_window_run #(.NAME("Heartbeat"),          .D(10000), .NH(10), .DP(16),  .N(61),  .L(405), .K(2))
    u_hb  (.clk, .checks(c[5]), .failures(f[5]), .finished(fin[5]));
  // Reduced hyperspace (dimension study): JapaneseVowels at D = 8100 and 3600,
  // keeping d = 128.
  bihd_window_run #(.NAME("JapaneseVowels D=8100"), .D(8100), .NH(10), .DP(128), .N(12), .L(25), .K(9))
    u_jv81 (.clk, .checks(c[6]), .failures(f[6]), .finished(fin[6]));
  bihd_window_run #(.NAME("JapaneseVowels D=3600"), .D(3600), .NH(10), .DP(128), .N(12), .L(25), .K(9))
    u_jv36 (.clk, .checks(c[7]), .failures(f[7]), .finished(fin[7]));

  int checks, failures;

  initial begin
    #50000000;
    checks = 0; failures = 1;
    for (int i = 0; i < NR; i++) begin checks += c[i]; failures += f[i]; end
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < NR; i++) all &= fin[i];
    end while (!all);
    checks = 0; failures = 0;
    for (int i = 0; i < NR; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
