// tb_syndrome_calc -- feeds random remainders (and zero) and compares all 2T
// syndromes with direct evaluation rem(alpha^j), j = 1..2T, including the
// even ones the block derives by squaring. Checks the one-cycle latency and
// the error-detected flag.
module tb_syndrome_calc;
  import tb_ref_pkg::*;
  import gf_pkg::gfe_t;

  localparam int MD = 6, T = 3, R = 18;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic           in_valid, out_valid, err;
  logic [R-1:0]   rem;
  gfe_t [2*T-1:0] synd;

  syndrome_calc dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .rem(rem),
                     .out_valid(out_valid), .synd(synd), .err_detected(err));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; rem = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      rem = (n == 0) ? '0 : (n < 19) ? (R'(1) << (n - 1)) : R'($urandom);
      in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int j = 1; j <= 2 * T; j++) begin
        checks++;
        if (synd[j-1][MD-1:0] != ref_eval_bin(wide_t'(rem), R, ref_alpha(j, MD), MD) ||
            synd[j-1][9:MD] != '0) begin
          failures++;
          $display("rem %h S%0d got %h", rem, j, synd[j-1]);
        end
      end
      checks++;
      if (err != (rem != '0)) begin failures++; $display("err flag wrong for %h", rem); end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
