// tb_gh_cell -- checks the G/H cell against i3 = i2 XOR (i AND i1) for
// random operands and both values of the select bit, at the default width.
module tb_gh_cell;
  localparam int M = 45;
  logic [M-1:0] i1, i2, i3;
  logic         i;
  int checks = 0, failures = 0;

  gh_cell #(.M(M)) dut (.i1(i1), .i2(i2), .i(i), .i3(i3));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      i1 = {$urandom, $urandom};
      i2 = {$urandom, $urandom};
      i  = (n % 2 == 0);
      #1;
      checks++;
      if (i3 !== (i ? (i1 ^ i2) : i2)) begin
        failures++;
        $display("mismatch i1=%h i2=%h i=%b i3=%h", i1, i2, i, i3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
