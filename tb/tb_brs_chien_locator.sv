// tb_brs_chien_locator -- builds locator polynomials
// lambda(y) = c * prod_p (1 + alpha^p y) for random sets of error positions
// p and a random non-zero scale c, and checks that the error vector marks
// exactly those positions. Two instances: the default (T = 3, length 63)
// and T = 5, which exercises every coefficient of the affine split. Also
// checks the latency (done 2 cycles after start).
module tb_brs_chien_locator;
  import tb_ref_pkg::*;
  import gf_pkg::gfe_t;

  localparam int MD = 6, NF = 63;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic          start, done3, done5;
  gfe_t [3:0]    lam3;
  gfe_t [5:0]    lam5;
  logic [NF-1:0] ev3, ev5;

  brs_chien_locator dut3 (.clk(clk), .rst_n(rst_n), .start(start), .lambda(lam3),
                          .done(done3), .err_vec(ev3));
  brs_chien_locator #(.MD(MD), .T(5), .N(NF)) dut5 (.clk(clk), .rst_n(rst_n), .start(start),
                          .lambda(lam5), .done(done5), .err_vec(ev5));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // coefficients of c * prod (1 + alpha^p y) over the set bits of errs
  task automatic build(input logic [NF-1:0] errs, input int tmax, output el_t co [6]);
    el_t nx [6];
    el_t c;
    c = el_t'($urandom_range(NF - 1) + 1);
    for (int i = 0; i < 6; i++) co[i] = '0;
    co[0] = c;
    for (int p = 0; p < NF; p++) begin
      if (errs[p]) begin
        for (int i = 0; i < 6; i++) begin
          nx[i] = co[i];
          if (i > 0) nx[i] = nx[i] ^ ref_mul(co[i-1], ref_alpha(p, MD), MD);
        end
        for (int i = 0; i < 6; i++) co[i] = nx[i];
      end
    end
    if (tmax < 5) for (int i = tmax + 1; i < 6; i++) if (co[i] != '0) $display("build overflow");
  endtask

  initial begin
    logic [NF-1:0] e3, e5;
    el_t           co3 [6];
    el_t           co5 [6];
    int            p, lat;
    rst_n = 0; start = 0; lam3 = '0; lam5 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      e3 = '0; e5 = '0;
      while ($countones(e3) < n % 4) begin p = $urandom_range(NF - 1); e3[p] = 1'b1; end
      while ($countones(e5) < n % 6) begin p = $urandom_range(NF - 1); e5[p] = 1'b1; end
      build(e3, 3, co3);
      build(e5, 5, co5);
      for (int i = 0; i <= 3; i++) lam3[i] = gfe_t'(co3[i]);
      for (int i = 0; i <= 5; i++) lam5[i] = gfe_t'(co5[i]);
      start = 1;
      @(posedge clk); #1 start = 0;
      lat = 1;
      while (!done3) begin @(posedge clk); #1 lat++; end
      checks++;
      if (lat != 2 || !done5) begin failures++; $display("latency %0d", lat); end
      checks++;
      if (ev3 != e3) begin failures++; $display("T=3: got %h exp %h", ev3, e3); end
      checks++;
      if (ev5 != e5) begin failures++; $display("T=5: got %h exp %h", ev5, e5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
