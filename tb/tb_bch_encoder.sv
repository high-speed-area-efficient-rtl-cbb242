// tb_bch_encoder -- checks that every encoder output forms a codeword: the
// codeword {msg, parity} must vanish at alpha^1 .. alpha^2T (reference
// Horner evaluation). Covers the default BCH(63,45) code and BCH(31,16),
// and checks the parity widths 18 and 15 of those codes.
module tb_bch_encoder;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [44:0] msg1;
  logic [17:0] par1;
  bch_encoder dut63 (.msg(msg1), .parity(par1));

  logic [15:0] msg2;
  logic [14:0] par2;
  bch_encoder #(.MD(5), .T(3), .K(16)) dut31 (.msg(msg2), .parity(par2));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_code(input wide_t cw, input int n, input int md, input string name);
    for (int j = 1; j <= 6; j++) begin
      checks++;
      if (ref_eval_bin(cw, n, ref_alpha(j, md), md) != '0) begin
        failures++;
        $display("%s: codeword %h not zero at alpha^%0d", name, cw, j);
      end
    end
  endtask

  initial begin
    checks++;
    if ($bits(dut63.parity) != 18 || $bits(dut31.parity) != 15) begin
      failures++;
      $display("unexpected parity widths");
    end
    for (int n = 0; n < 200; n++) begin
      msg1 = (n == 0) ? 45'd1 : {$urandom, $urandom};
      msg2 = (n == 0) ? 16'h8000 : 16'($urandom);
      #1;
      check_code(wide_t'({msg1, par1}), 63, 6, "BCH(63,45)");
      check_code(wide_t'({msg2, par2}), 31, 5, "BCH(31,16)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
