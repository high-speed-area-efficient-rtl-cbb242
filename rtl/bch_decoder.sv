// bch_decoder -- t-error-correcting binary BCH decoder with re-encoding.
//
// The received word goes two ways: into the FIFO, where it waits, and into
// the decoding chain
//     re-encoding -> syndrome_calc -> ibm_solver -> brs_chien_locator,
// which produces the error vector e. When e is ready the oldest word leaves
// the FIFO and is XORed with e, which flips the erroneous bits. Words with at
// most T bit errors come out corrected; an error-free word passes unchanged
// (all syndromes zero, lambda constant, no roots).
//
// Re-encoding: the decoder owns no encoder. It sends the received message
// bits out on reenc_msg to the system's BCH encoder, which is idle at that
// moment, and takes the returned parity on reenc_parity (combinational path,
// same cycle). reenc_parity XOR the received parity is the remainder of the
// received word modulo g(x), from which the syndromes follow.
//
// Codeword layout as in bch_encoder: rx = {message (K bits), parity (R)}.
//
// Timing: in_valid for one cycle with rx (and reenc_parity) valid. Syndromes
// are registered one cycle later, the solver's done follows T+1 cycles after
// that and the locator adds 2, so out_valid pulses T+4 cycles after
// in_valid (7 cycles for T = 3), with corrected and
// err_detected (the word had non-zero syndromes, i.e. an error was found).
// A new word may arrive every T+2 cycles or less often (ibm_solver is not
// pipelined). Active-low synchronous reset.
module bch_decoder
  import gf_pkg::*;
#(
  parameter int MD    = 6,
  parameter int T     = 3,
  parameter int K     = 45,
  parameter int DEPTH = 4,
  localparam int R    = bch_parity_bits(MD, T),
  localparam int N    = K + R
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] rx,
  output logic [K-1:0] reenc_msg,
  input  logic [R-1:0] reenc_parity,
  output logic         out_valid,
  output logic [N-1:0] corrected,
  output logic         err_detected
);

  // ---- re-encoding and syndromes
  logic [R-1:0]   rem;
  logic           syn_valid;
  gfe_t [2*T-1:0] synd;
  logic           syn_err;

  assign reenc_msg = rx[N-1:R];
  assign rem       = reenc_parity ^ rx[R-1:0];

  syndrome_calc #(.MD(MD), .T(T)) u_syn (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (in_valid),
    .rem          (rem),
    .out_valid    (syn_valid),
    .synd         (synd),
    .err_detected (syn_err)
  );

  // ---- key-equation solver
  logic       bm_busy, bm_done;
  gfe_t [T:0] lambda;

  ibm_solver #(.MD(MD), .T(T)) u_bm (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (syn_valid),
    .synd   (synd),
    .busy   (bm_busy),
    .done   (bm_done),
    .lambda (lambda)
  );

  // ---- error locator
  logic         loc_done;
  logic [N-1:0] err_vec;

  brs_chien_locator #(.MD(MD), .T(T), .N(N)) u_loc (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (bm_done),
    .lambda  (lambda),
    .done    (loc_done),
    .err_vec (err_vec)
  );

  // ---- detection flag travels alongside the word being decoded
  logic det_bm, det_l1, det_l2;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      det_bm <= 1'b0;
      det_l1 <= 1'b0;
      det_l2 <= 1'b0;
    end else begin
      if (syn_valid) det_bm <= syn_err;
      if (bm_done)   det_l1 <= det_bm;
      det_l2 <= det_l1;
    end
  end

  // ---- received-word buffer and correction
  logic [N-1:0] fifo_dout;
  logic         fifo_empty, fifo_full;

  codeword_fifo #(.W(N), .DEPTH(DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (in_valid),
    .din   (rx),
    .pop   (loc_done),
    .dout  (fifo_dout),
    .empty (fifo_empty),
    .full  (fifo_full)
  );

  assign out_valid    = loc_done;
  assign corrected    = fifo_dout ^ err_vec;
  assign err_detected = det_l2;

  // A result always finds its word waiting in the FIFO, and the FIFO never
  // overflows at the supported word rate.
  a_word_rate: assert property (@(posedge clk) disable iff (!rst_n) syn_valid |-> !bm_busy);
  a_fifo_holds_word: assert property (@(posedge clk) disable iff (!rst_n) loc_done |-> !fifo_empty);
  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !fifo_full);

endmodule
