// ft_workload_driver -- drives one parameterised ft_multiplier_top through
// NWORDS random multiplications with 0..T+1 channel errors per codeword and
// reports its check counts. Used by tb_ft_workloads to run the code sizes
// of the evaluation (BCH(31,16) with a 16-bit multiplier; a 45-bit
// multiplier protected against 3, 4 and 5 errors).
module ft_workload_driver
  import tb_ref_pkg::*;
#(
  parameter int M      = 16,
  parameter int MD     = 5,
  parameter int T      = 3,
  parameter int NWORDS = 120
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);

  localparam int R = gf_pkg::bch_parity_bits(MD, T);
  localparam int N = M + R;

  logic         start, ready, code_valid, out_valid, err_det;
  logic [M-1:0] a, b, f, product;
  logic [N-1:0] code_out, rx_in;

  ft_multiplier_top #(.M(M), .MD(MD), .T(T)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b), .f(f), .ready(ready),
    .code_valid(code_valid), .code_out(code_out), .rx_in(rx_in),
    .out_valid(out_valid), .product(product), .err_detected(err_det)
  );

  logic [N-1:0] err_pat [NWORDS];
  int           code_idx = 0;
  assign rx_in = code_out ^ err_pat[code_idx % NWORDS];

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [M-1:0] exp_prod [$];
  int           exp_nerr [$];
  int           exp_t0   [$];
  int           n_out = 0;
  int           seen [0:T+1];

  always @(posedge clk) begin
    if (rst_n && code_valid) begin
      for (int j = 1; j <= 2 * T; j++) begin
        checks++;
        if (ref_eval_bin(wide_t'(code_out), N, ref_alpha(j, MD), MD) != '0) begin
          failures++;
          $display("M=%0d T=%0d: code_out is not a codeword", M, T);
        end
      end
      code_idx <= code_idx + 1;
    end
    if (rst_n && out_valid) begin
      logic [M-1:0] ep;
      int           ne, t0;
      ep = exp_prod.pop_front();
      ne = exp_nerr.pop_front();
      t0 = exp_t0.pop_front();
      n_out++;
      seen[ne]++;
      checks++;
      if (cycle - t0 != M + T + 6) begin failures++; $display("M=%0d T=%0d: latency %0d", M, T, cycle - t0); end
      checks++;
      if (err_det != (ne != 0)) begin failures++; $display("M=%0d T=%0d: err_detected wrong", M, T); end
      if (ne <= T) begin
        checks++;
        if (product != ep) begin failures++; $display("M=%0d T=%0d: %0d errors not corrected", M, T, ne); end
      end
    end
  end

  initial begin
    logic [N-1:0] e;
    int           ne, p;
    checks = 0; failures = 0; finished = 0;
    start = 0; a = '0; b = '0;
    f = M'(ref_field_poly(M));
    for (int n = 0; n < NWORDS; n++) err_pat[n] = '0;
    for (int j = 0; j <= T + 1; j++) seen[j] = 0;
    @(posedge rst_n);
    @(posedge clk); #1;
    for (int n = 0; n < NWORDS; n++) begin
      while (!ready) begin @(posedge clk); #1; end
      a = M'({$urandom, $urandom});
      b = M'({$urandom, $urandom});
      ne = n % (T + 2);
      e = '0;
      while ($countones(e) < ne) begin p = $urandom_range(N - 1); e[p] = 1'b1; end
      err_pat[n] = e;
      exp_prod.push_back(M'(ref_gf2m_mul(wide_t'(a), wide_t'(b), wide_t'(f), M)));
      exp_nerr.push_back(ne);
      exp_t0.push_back(cycle);
      start = 1;
      @(posedge clk); #1 start = 0;
    end
    while (n_out < NWORDS) begin @(posedge clk); #1; end
    // every error count 0..T+1 must have been exercised
    for (int j = 0; j <= T + 1; j++) begin
      checks++;
      if (seen[j] == 0) begin failures++; $display("M=%0d T=%0d: no word with %0d errors", M, T, j); end
    end
    $display("workload M=%0d BCH(%0d,%0d) T=%0d: words=%0d checks=%0d failures=%0d",
             M, N, M, T, n_out, checks, failures);
    finished = 1;
  end
endmodule
