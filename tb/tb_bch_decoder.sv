// tb_bch_decoder -- decoder together with a BCH encoder (for re-encoding),
// default BCH(63,45), T = 3. Random messages are encoded, 0..T+1 random bit
// errors are injected, and the decoded word is checked: equal to the sent
// codeword for up to T errors, with err_detected set exactly when errors
// were injected. With T+1 errors only detection is checked (every pattern
// of weight <= 2T is detectable). Words are sent back to back at the fastest
// allowed rate (every T+2 cycles), so several words sit in the FIFO, and the
// latency (T+4 cycles) is checked.
module tb_bch_decoder;
  import tb_ref_pkg::*;

  localparam int MD = 6, T = 3, K = 45, R = 18, N = 63;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic         in_valid, out_valid, err_det;
  logic [N-1:0] rx, corrected;
  logic [K-1:0] reenc_msg, msg;
  logic [R-1:0] reenc_parity, parity;

  // encoder for the sent words
  bch_encoder enc_tx (.msg(msg), .parity(parity));
  // encoder used by the decoder for re-encoding
  bch_encoder enc_re (.msg(reenc_msg), .parity(reenc_parity));

  bch_decoder dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .rx(rx),
                   .reenc_msg(reenc_msg), .reenc_parity(reenc_parity),
                   .out_valid(out_valid), .corrected(corrected), .err_detected(err_det));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, in order
  logic [N-1:0] exp_word [$];
  int           exp_nerr [$];
  int           exp_time [$];
  int           cycle = 0;
  int           outputs = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [N-1:0] w;
      int           ne, t0;
      w  = exp_word.pop_front();
      ne = exp_nerr.pop_front();
      t0 = exp_time.pop_front();
      outputs++;
      checks++;
      if (cycle - t0 != T + 4) begin failures++; $display("latency %0d", cycle - t0); end
      checks++;
      if (err_det != (ne != 0)) begin failures++; $display("err_detected=%b with %0d errors", err_det, ne); end
      if (ne <= T) begin
        checks++;
        if (corrected != w) begin
          failures++;
          $display("%0d errors: got %h exp %h", ne, corrected, w);
        end
      end
    end
  end

  initial begin
    logic [N-1:0] cw, e;
    int           p, ne;
    rst_n = 0; in_valid = 0; rx = '0; msg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      msg = {$urandom, $urandom};
      #0;
      cw = {msg, parity};
      ne = n % (T + 2);
      e  = '0;
      while ($countones(e) < ne) begin p = $urandom_range(N - 1); e[p] = 1'b1; end
      rx = cw ^ e;
      in_valid = 1;
      exp_word.push_back(cw);
      exp_nerr.push_back(ne);
      exp_time.push_back(cycle);
      @(posedge clk); #1 in_valid = 0;
      repeat (T + 1 + (n % 3 == 0 ? 4 : 0)) @(posedge clk);
      #1;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (outputs != 600) begin failures++; $display("only %0d outputs", outputs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
