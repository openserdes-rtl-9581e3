// openserdes_top: the complete all-digital serial link, transmitter and receiver.
//
// Transmitter: the serializer turns a frame of NUM_WORDS x WORD_W bits
// (8 x 32) into a serial stream, one bit per tx_clk, and the three-stage
// inverter driver puts it on the line (tx_out).
// Receiver: the line, after the off-chip coupling capacitor (outside this
// module), arrives as a voltage rx_in of some tens of millivolts. The
// resistive-feedback inverter amplifies it around its self-bias point; the
// sampling block (static inverter and flip-flop on rx_clk) turns it into a
// logic signal; the oversampling CDR recovers bits and a bit clock from it;
// the deserializer rebuilds the frames.
// The chain of blocks follows the link description. The driver, sensing
// inverter and sampling inverter are analog cells here given as behavioural
// models; everything else is synthesizable logic.
// Interface and timing: the TX and RX halves are independent, each with its
// own clock and asynchronous active-low reset. rx_clk must run at OSR times
// the TX bit rate (its phase is free). rx_bit_clk is the recovered bit clock;
// rx_data, rx_valid and the CDR status pulses change on its rising edge.
`timescale 1ps/1ps
module openserdes_top #(
  parameter int unsigned NUM_WORDS = serdes_pkg::NUM_WORDS,
  parameter int unsigned WORD_W    = serdes_pkg::WORD_W,
  parameter int unsigned OSR       = serdes_pkg::OSR,
  parameter int unsigned JW        = serdes_pkg::JW
) (
  // transmitter
  input  logic                              tx_clk,
  input  logic                              tx_rst_n,
  input  logic [NUM_WORDS-1:0][WORD_W-1:0]  tx_data,
  input  logic                              tx_valid,
  output logic                              tx_ready,
  output logic                              tx_busy,
  output logic                              tx_out,
  // receiver
  input  logic                              rx_clk,
  input  logic                              rx_rst_n,
  input  real                               rx_in,
  input  logic [1:0]                        glitch_scan,
  input  logic [JW-1:0]                     jitter_scan,
  output logic                              rx_bit_clk,
  output logic [NUM_WORDS-1:0][WORD_W-1:0]  rx_data,
  output logic                              rx_valid,
  output logic                              rx_sync,
  output logic                              rx_locked,
  output logic [$clog2(3*OSR)-1:0]          cdr_sel,
  output logic                              cdr_phase_step,
  output logic                              cdr_jitter_hold,
  output logic                              cdr_glitch,
  output logic                              cdr_vote_fix,
  output logic                              cdr_slip,
  output logic                              fe_bit
);
  logic ser_bit;
  real  fe_v;
  logic fe_q;
  logic rec_bit;

  // ---------------- transmitter ----------------
  serializer #(.NUM_WORDS(NUM_WORDS), .WORD_W(WORD_W)) u_ser (
    .clk(tx_clk), .rst_n(tx_rst_n), .data_i(tx_data), .valid_i(tx_valid),
    .ready_o(tx_ready), .ser_o(ser_bit), .busy_o(tx_busy)
  );

  tx_driver u_drv (.in_i(ser_bit), .out_o(tx_out));

  // ---------------- receiver ----------------
  res_fb_inverter u_sense (.vin(rx_in), .vout(fe_v));

  rx_sampler u_samp (
    .clk(rx_clk), .rst_n(rx_rst_n), .vin(fe_v), .inv_o(fe_bit), .q_o(fe_q)
  );

  oversampling_cdr #(.OSR(OSR), .JW(JW)) u_cdr (
    .clk_i(rx_clk), .rst_n(rx_rst_n), .din(fe_q),
    .glitch_scan(glitch_scan), .jitter_scan(jitter_scan),
    .bit_clk_o(rx_bit_clk), .bit_o(rec_bit), .valid_o(rx_locked),
    .sel_o(cdr_sel), .phase_step_o(cdr_phase_step),
    .jitter_hold_o(cdr_jitter_hold), .glitch_o(cdr_glitch),
    .vote_fix_o(cdr_vote_fix), .slip_o(cdr_slip)
  );

  deserializer #(.NUM_WORDS(NUM_WORDS), .WORD_W(WORD_W)) u_des (
    .clk(rx_bit_clk), .rst_n(rx_rst_n), .bit_i(rec_bit), .bit_valid_i(rx_locked),
    .data_o(rx_data), .valid_o(rx_valid), .sync_o(rx_sync)
  );
endmodule
