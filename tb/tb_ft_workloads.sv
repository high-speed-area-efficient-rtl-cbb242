// tb_ft_workloads -- runs the fault-tolerant multiplier in the code sizes of
// the evaluation: a 16-bit multiplier with BCH(31,16), T = 3, and a 45-bit
// multiplier protected against 3, 4 and 5 errors (BCH(63,45), and the
// shortened codes BCH(73,45) and BCH(80,45) derived from the length-127
// codes with T = 4 and T = 5). Each configuration gets random products and
// 0..T+1 channel errors per word; see ft_workload_driver.
module tb_ft_workloads;
  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic fin [4];
  int   chk [4];
  int   fl  [4];

  ft_workload_driver #(.M(16), .MD(5), .T(3)) w16  (.clk(clk), .rst_n(rst_n), .finished(fin[0]), .checks(chk[0]), .failures(fl[0]));
  ft_workload_driver #(.M(45), .MD(6), .T(3)) w45a (.clk(clk), .rst_n(rst_n), .finished(fin[1]), .checks(chk[1]), .failures(fl[1]));
  ft_workload_driver #(.M(45), .MD(7), .T(4)) w45b (.clk(clk), .rst_n(rst_n), .finished(fin[2]), .checks(chk[2]), .failures(fl[2]));
  ft_workload_driver #(.M(45), .MD(7), .T(5)) w45c (.clk(clk), .rst_n(rst_n), .finished(fin[3]), .checks(chk[3]), .failures(fl[3]));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    for (int i = 0; i < 4; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
