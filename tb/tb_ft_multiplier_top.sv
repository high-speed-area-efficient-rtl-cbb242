// tb_ft_multiplier_top -- end-to-end test of the fault-tolerant multiplier at
// its default size (GF(2^45) multiplier, BCH(63,45), T = 3), with no
// parameter overrides.
//
// The channel between encoder and decoder is modelled here: rx_in is the
// codeword XOR an error pattern chosen per multiplication. Each product is
// checked against a reference GF(2^45) multiplication; the codeword leaving
// the block is checked to carry the uncorrupted product; err_detected must
// be set exactly when errors were injected; up to T errors must be
// corrected; T+1 errors must at least be detected. The end-to-end latency
// (M+T+6 cycles from start to out_valid) is checked.
//
// Mechanisms counted (each must occur): error-free words, corrected words
// with 1, 2 and 3 errors, errors in the parity part only, detected but
// uncorrectable words (T+1 errors), and back-to-back multiplications
// started in the cycle the previous one finished (the encoder then encodes
// and re-encodes in consecutive cycles while the next product is computed).
module tb_ft_multiplier_top;
  import tb_ref_pkg::*;

  localparam int M = 45, T = 3, R = 18, N = 63;
  localparam int NWORDS = 400;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic         start, ready, code_valid, out_valid, err_det;
  logic [M-1:0] a, b, f, product;
  logic [N-1:0] code_out, rx_in, chan_err;

  ft_multiplier_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b), .f(f), .ready(ready),
    .code_valid(code_valid), .code_out(code_out), .rx_in(rx_in),
    .out_valid(out_valid), .product(product), .err_detected(err_det)
  );

  // the channel
  assign rx_in = code_out ^ chan_err;

  initial begin : watchdog
    repeat (NWORDS * (M + 20) + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // per-word expectations, in order
  logic [M-1:0] exp_prod [$];
  int           exp_nerr [$];
  int           exp_t0   [$];
  logic [N-1:0] err_pat  [NWORDS];   // pattern the channel applies to word n
  int           code_idx = 0;        // codewords seen so far

  int n_clean = 0, n_corr [1:T], n_parity_only = 0, n_uncorr = 0, n_b2b = 0, n_out = 0;

  // channel: corrupt the current codeword with its pattern
  assign chan_err = err_pat[code_idx % NWORDS];

  always @(posedge clk) begin
    if (rst_n && code_valid) begin
      checks++;
      if (code_out[N-1:R] != exp_prod[0]) begin
        failures++;
        $display("codeword carries %h, expected %h", code_out[N-1:R], exp_prod[0]);
      end
      for (int j = 1; j <= 2 * T; j++) begin
        checks++;
        if (ref_eval_bin(wide_t'(code_out), N, ref_alpha(j, 6), 6) != '0) begin
          failures++;
          $display("code_out %h is not a codeword", code_out);
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
      checks++;
      if (cycle - t0 != M + T + 6) begin failures++; $display("latency %0d", cycle - t0); end
      checks++;
      if (err_det != (ne != 0)) begin failures++; $display("err_detected=%b with %0d errors", err_det, ne); end
      if (ne <= T) begin
        checks++;
        if (product != ep) begin failures++; $display("%0d errors: product %h exp %h", ne, product, ep); end
      end
    end
  end

  initial begin
    logic [N-1:0] e;
    int           ne, p, kind;
    rst_n = 0; start = 0; a = '0; b = '0;
    for (int n = 0; n < NWORDS; n++) err_pat[n] = '0;
    for (int j = 1; j <= T; j++) n_corr[j] = 0;
    f = M'(ref_field_poly(M));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < NWORDS; n++) begin
      while (!ready) begin @(posedge clk); #1; end
      if (n > 0 && dut.u_mul.done) n_b2b++;
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      kind = n % 6;                       // 0: clean, 1..3: errors, 4: parity only, 5: T+1
      ne = (kind == 4) ? 1 + (n / 6) % T : (kind == 5) ? T + 1 : kind;
      e = '0;
      while ($countones(e) < ne) begin
        p = (kind == 4) ? $urandom_range(R - 1) : $urandom_range(N - 1);
        e[p] = 1'b1;
      end
      if (ne == 0) n_clean++;
      else if (kind == 4) n_parity_only++;
      else if (ne <= T) n_corr[ne]++;
      else n_uncorr++;
      exp_prod.push_back(M'(ref_gf2m_mul(wide_t'(a), wide_t'(b), wide_t'(f), M)));
      exp_nerr.push_back(ne);
      exp_t0.push_back(cycle);
      err_pat[n] = e;
      start = 1;
      @(posedge clk); #1 start = 0;
      // mostly back to back; sometimes idle gaps
      if (n % 5 == 4) begin
        repeat (60) @(posedge clk);
        #1;
      end
    end
    while (n_out < NWORDS) begin @(posedge clk); #1; end
    repeat (5) @(posedge clk);
    $display("mechanisms: clean=%0d corrected1=%0d corrected2=%0d corrected3=%0d parity_only=%0d uncorrectable=%0d back_to_back=%0d",
             n_clean, n_corr[1], n_corr[2], n_corr[3], n_parity_only, n_uncorr, n_b2b);
    checks++; if (n_clean == 0)       begin failures++; $display("no clean word"); end
    for (int j = 1; j <= T; j++) begin
      checks++; if (n_corr[j] == 0)   begin failures++; $display("no word with %0d errors", j); end
    end
    checks++; if (n_parity_only == 0) begin failures++; $display("no parity-only errors"); end
    checks++; if (n_uncorr == 0)      begin failures++; $display("no uncorrectable word"); end
    checks++; if (n_b2b == 0)         begin failures++; $display("no back-to-back start"); end
    checks++; if (n_out != NWORDS)    begin failures++; $display("outputs %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
