// oversampling_cdr: all-digital oversampling clock and data recovery.
//
// The external clock runs at OSR times the bit rate. The clocking block
// divides it into OSR phases of the bit clock; the sampling block takes one
// sample of the data on each phase, i.e. OSR samples per bit; the register
// bank collects them into one word per bit period and keeps the last three;
// the boundary detector finds the transitions in the newest word; and the
// decision block tracks the bit boundary, picks the sample in the middle of
// each bit (with optional majority vote) and outputs one recovered bit per
// bit clock. Glitch and jitter correction are tuned by the scan inputs (see
// decision_block). This structure follows the link description; the inner
// workings of each part are this design's choices.
// Interface: din must be a logic-level signal (the front-end flip-flop's
// output). bit_clk_o is phase 0 of the clock generator; bit_o, valid_o and
// the status pulses change on its rising edge. Latency from a sample to
// bit_o is about three bit clocks. The TX bit rate must equal the external
// clock frequency / OSR; the phase between them may be anything and may
// wander (jitter, slow drift), but a sustained frequency offset leads to bit
// slips (slip_o). The boundary detector's per-sample transition vector is
// left unconnected (lint reports an empty pin): the decision block only
// needs its summary outputs (first transition, count, any).
`timescale 1ps/1ps
module oversampling_cdr #(
  parameter int unsigned OSR = serdes_pkg::OSR,
  parameter int unsigned JW  = serdes_pkg::JW
) (
  input  logic                     clk_i,
  input  logic                     rst_n,
  input  logic                     din,
  input  logic [1:0]               glitch_scan,
  input  logic [JW-1:0]            jitter_scan,
  output logic                     bit_clk_o,
  output logic                     bit_o,
  output logic                     valid_o,
  output logic [$clog2(3*OSR)-1:0] sel_o,
  output logic                     phase_step_o,
  output logic                     jitter_hold_o,
  output logic                     glitch_o,
  output logic                     vote_fix_o,
  output logic                     slip_o
);
  logic [OSR-1:0]        ph;
  logic [OSR-1:0]        samples;
  logic [2:0][OSR-1:0]   words;
  logic [$clog2(OSR)-1:0] first;
  logic [$clog2(OSR):0]  count;
  logic                  any_t;

  multiphase_clkgen #(.OSR(OSR)) u_clkgen (
    .clk_i(clk_i), .rst_n(rst_n), .ph_o(ph)
  );

  phase_samplers #(.OSR(OSR)) u_samplers (
    .ph_i(ph), .rst_n(rst_n), .din(din), .s_o(samples)
  );

  register_bank #(.OSR(OSR), .DEPTH(3)) u_bank (
    .clk(ph[0]), .rst_n(rst_n), .s_i(samples), .words_o(words)
  );

  bit_boundary_detect #(.OSR(OSR)) u_bnd (
    .new_i(words[0]), .old_i(words[1]), .trans_o(),
    .first_o(first), .count_o(count), .any_o(any_t)
  );

  decision_block #(.OSR(OSR), .JW(JW)) u_dec (
    .clk(ph[0]), .rst_n(rst_n), .words_i(words),
    .first_i(first), .count_i(count), .any_i(any_t),
    .glitch_scan(glitch_scan), .jitter_scan(jitter_scan),
    .bit_o(bit_o), .valid_o(valid_o), .sel_o(sel_o),
    .phase_step_o(phase_step_o), .jitter_hold_o(jitter_hold_o),
    .glitch_o(glitch_o), .vote_fix_o(vote_fix_o), .slip_o(slip_o)
  );

  assign bit_clk_o = ph[0];
endmodule
