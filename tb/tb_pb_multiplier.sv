// tb_pb_multiplier -- random products in GF(2^45) (default width) and
// GF(2^16) against a schoolbook-multiply-then-divide reference. Also checks
// the latency (done M+1 cycles after the start cycle), back-to-back operation
// (start in the done cycle) and the corner operands 0, 1 and all-ones.
module tb_pb_multiplier;
  import tb_ref_pkg::*;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- M = 45 (default)
  localparam int M1 = 45;
  logic          start1, ready1, done1;
  logic [M1-1:0] a1, b1, f1, c1;
  pb_multiplier dut45 (.clk(clk), .rst_n(rst_n), .start(start1), .a(a1), .b(b1),
                       .f(f1), .ready(ready1), .done(done1), .c(c1));

  // ---- M = 16
  localparam int M2 = 16;
  logic          start2, ready2, done2;
  logic [M2-1:0] a2, b2, f2, c2;
  pb_multiplier #(.M(M2)) dut16 (.clk(clk), .rst_n(rst_n), .start(start2), .a(a2), .b(b2),
                                 .f(f2), .ready(ready2), .done(done2), .c(c2));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run45(input logic [M1-1:0] a, input logic [M1-1:0] b);
    wide_t exp;
    int    lat;
    exp = ref_gf2m_mul(wide_t'(a), wide_t'(b), ref_field_poly(M1), M1);
    a1 = a; b1 = b; start1 = 1;
    @(posedge clk); #1 start1 = 0;
    lat = 1;
    while (!done1) begin @(posedge clk); #1 lat++; end
    checks++;
    if (c1 !== M1'(exp)) begin failures++; $display("M=45 %h*%h got %h exp %h", a, b, c1, M1'(exp)); end
    checks++;
    if (lat != M1 + 1) begin failures++; $display("M=45 latency %0d", lat); end
    checks++;
    if (!ready1) begin failures++; $display("M=45 not ready in done cycle"); end
  endtask

  task automatic run16(input logic [M2-1:0] a, input logic [M2-1:0] b);
    wide_t exp;
    int    lat;
    exp = ref_gf2m_mul(wide_t'(a), wide_t'(b), ref_field_poly(M2), M2);
    a2 = a; b2 = b; start2 = 1;
    @(posedge clk); #1 start2 = 0;
    lat = 1;
    while (!done2) begin @(posedge clk); #1 lat++; end
    checks++;
    if (c2 !== M2'(exp)) begin failures++; $display("M=16 %h*%h got %h exp %h", a, b, c2, M2'(exp)); end
    checks++;
    if (lat != M2 + 1) begin failures++; $display("M=16 latency %0d", lat); end
  endtask

  initial begin
    rst_n = 0; start1 = 0; start2 = 0;
    a1 = '0; b1 = '0; a2 = '0; b2 = '0;
    f1 = M1'(ref_field_poly(M1));
    f2 = M2'(ref_field_poly(M2));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    run45('0, {$urandom, $urandom});
    run45(M1'(1), {$urandom, $urandom});
    run45({M1{1'b1}}, {M1{1'b1}});
    for (int n = 0; n < 60; n++) run45({$urandom, $urandom}, {$urandom, $urandom});
    run16(M2'(1), M2'($urandom));
    for (int n = 0; n < 100; n++) run16(M2'($urandom), M2'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
