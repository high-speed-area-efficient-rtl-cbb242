// tb_ibm_solver -- for random error patterns of weight 0..T in a length-63
// code, computes the syndromes directly (S_j = sum over error positions p of
// alpha^(j*p)), runs the solver and checks that the resulting lambda has a
// root at alpha^(-q) exactly for the error positions q, over all 63
// positions, and that lambda_0 is non-zero. Also checks the latency
// (done T+1 cycles after start).
module tb_ibm_solver;
  import tb_ref_pkg::*;
  import gf_pkg::gfe_t;

  localparam int MD = 6, T = 3, NF = 63;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic           start, busy, done;
  gfe_t [2*T-1:0] synd;
  gfe_t [T:0]     lambda;

  ibm_solver dut (.clk(clk), .rst_n(rst_n), .start(start), .synd(synd),
                  .busy(busy), .done(done), .lambda(lambda));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic el_t eval_lambda(input el_t y);
    el_t acc;
    acc = '0;
    for (int i = T; i >= 0; i--) acc = ref_mul(acc, y, MD) ^ el_t'(lambda[i][MD-1:0]);
    return acc;
  endfunction

  initial begin
    logic [NF-1:0] errs;
    int            w, p, lat;
    el_t           s;
    rst_n = 0; start = 0; synd = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      w = n % (T + 1);
      errs = '0;
      while ($countones(errs) < w) begin
        p = $urandom_range(NF - 1);
        errs[p] = 1'b1;
      end
      for (int j = 1; j <= 2 * T; j++) begin
        s = '0;
        for (int q = 0; q < NF; q++) if (errs[q]) s = s ^ ref_alpha(j * q, MD);
        synd[j-1] = gfe_t'(s);
      end
      start = 1;
      @(posedge clk); #1 start = 0;
      lat = 1;
      while (!done) begin @(posedge clk); #1 lat++; end
      checks++;
      if (lat != T + 1) begin failures++; $display("latency %0d", lat); end
      checks++;
      if (lambda[0] == '0) begin failures++; $display("lambda_0 is zero"); end
      for (int q = 0; q < NF; q++) begin
        checks++;
        if ((eval_lambda(ref_alpha(-q, MD)) == '0) != errs[q]) begin
          failures++;
          $display("errors %h: position %0d misjudged, lambda=%h", errs, q, lambda);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
