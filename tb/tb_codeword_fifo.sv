// tb_codeword_fifo -- random pushes and pops (never overflowing or
// underflowing) compared with a queue model; checks the head word, the
// empty/full flags and the fill-up-to-DEPTH case, including simultaneous
// push and pop.
module tb_codeword_fifo;
  localparam int W = 63, DEPTH = 4;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic         push, pop, empty, full;
  logic [W-1:0] din, dout;
  logic [W-1:0] model [$];

  codeword_fifo dut (.clk(clk), .rst_n(rst_n), .push(push), .din(din), .pop(pop),
                     .dout(dout), .empty(empty), .full(full));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fills;
    fills = 0;
    rst_n = 0; push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      // compare state
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH)) begin
        failures++;
        $display("flags wrong: empty=%b full=%b size=%0d", empty, full, model.size());
      end
      if (model.size() > 0) begin
        checks++;
        if (dout != model[0]) begin failures++; $display("head %h exp %h", dout, model[0]); end
      end
      if (model.size() == DEPTH) fills++;
      // choose legal operations; phases bias towards filling or draining
      pop  = (model.size() > 0) && ($urandom_range(3) < ((n / 200) % 2 == 0 ? 1 : 3));
      push = (model.size() < DEPTH || pop) && ($urandom_range(3) < ((n / 200) % 2 == 0 ? 3 : 1));
      din  = {$urandom, $urandom};
      @(posedge clk); #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
      push = 0; pop = 0;
    end
    checks++;
    if (fills == 0) begin failures++; $display("FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
