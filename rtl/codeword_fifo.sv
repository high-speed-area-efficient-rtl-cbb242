// codeword_fifo -- buffer that holds received words while the decoder works
// out their error vectors.
//
// A synchronous FIFO over a DEPTH x W memory array (the paper's decoder uses
// an SRAM-based FIFO here; a register array stands in for the SRAM macro and
// maps to one in synthesis). First-word-fall-through: dout always shows the
// oldest stored word, and pop removes it at the clock edge. A push and a pop
// in the same cycle are both served. The depth is this design's choice: with
// the multiplier producing one word per M+1 cycles and a decoder latency of
// T+4 cycles, at most two words are ever stored; DEPTH = 4 leaves margin.
//
// Interface: push/din write, pop/dout read, empty/full status. Pushing when
// full or popping when empty is a protocol violation (checked by
// assertions). Active-low synchronous reset empties the FIFO.
module codeword_fifo #(
  parameter int W     = 63,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (int'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + AW'(1);
      if (pop)  rd_ptr <= (int'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assign dout  = mem[rd_ptr];
  assign empty = (count == '0);
  assign full  = (int'(count) == DEPTH);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
