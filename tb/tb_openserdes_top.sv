// tb_openserdes_top: end-to-end test of the whole link at its default size.
//
// The transmitter runs at 2 Gb/s (500 ps bit) and the receiver's external
// clock at OSR x 2 GHz (125 ps), with an arbitrary phase between them. The
// testbench models the channel: the driver output is attenuated by 34 dB
// (1.8 V -> about 36 mV), delayed, given random edge jitter, a slow wander of
// its delay, and, in the last part of the test, short glitches in the middle
// of bits instead of jitter. It sends frames of random 8 x 32-bit data, some back to back and
// some with idle gaps, and checks that every frame arrives intact and in
// order. It also checks the frame rate of back-to-back frames (one frame per
// 264 bit clocks) and counts how often each mechanism of the link occurred:
// CDR lock, header found, idle gap, back-to-back frame, phase step, jitter
// hold, glitch detection and majority-vote correction. One that never
// occurred counts as a failure, and so does any bit slip.
`timescale 1ps/100fs
module tb_openserdes_top;
  import serdes_pkg::*;

  localparam int  TBIT     = 500;               // TX bit period (ps)
  localparam real TRX_HALF = real'(TBIT) / (2.0 * OSR); // RX clock half period
  localparam real AMP      = 1.8 * 0.019953;    // 34 dB below 1.8 V
  localparam int  NFRAMES  = 24;
  localparam int  FRAME_BITS = SYNC_W + NUM_WORDS * WORD_W;

  int checks = 0, failures = 0;

  logic tx_clk = 1'b0, rx_clk = 1'b0;
  logic tx_rst_n = 1'b1, rx_rst_n = 1'b1;
  logic [NUM_WORDS-1:0][WORD_W-1:0] tx_data, rx_data;
  logic tx_valid = 1'b0, tx_ready, tx_busy, tx_out;
  real  rx_in;
  logic [1:0]    glitch_scan = 2'b11;
  logic [JW-1:0] jitter_scan = JW'(2);
  logic rx_bit_clk, rx_valid, rx_sync, rx_locked, fe_bit;
  logic [$clog2(3*OSR)-1:0] cdr_sel;
  logic cdr_phase_step, cdr_jitter_hold, cdr_glitch, cdr_vote_fix, cdr_slip;

  openserdes_top dut (.*);

  always #(TBIT/2) tx_clk = ~tx_clk;
  initial begin
    #(37);                                       // arbitrary RX phase
    forever #(TRX_HALF) rx_clk = ~rx_clk;
  end

  // ---------------- channel model ----------------
  int   base_delay = 200;
  int   jitter_ps  = 40;
  logic line_lvl   = 1'b0;
  logic glitch     = 1'b0;
  logic glitch_on  = 1'b0;

  always @(tx_out) begin
    automatic logic lvl = tx_out;
    automatic int   d   = base_delay + int'($urandom_range(0, jitter_ps));
    fork
      begin #(d); line_lvl = lvl; end
    join_none
  end

  // Glitch of 120 ps in the middle of a bit, on about one bit in 20, only
  // where the bits before and after have the same value (tx_out equals the
  // serializer's bit, the driver inverting the pre-inverted serializer output).
  logic prev_tx = 1'b0;
  always @(negedge tx_clk) begin
    if (glitch_on && prev_tx == tx_out && dut.u_ser.next_bit == tx_out &&
        ($urandom_range(0, 19) == 0)) begin
      fork
        begin
          #(11 + base_delay);
          glitch = 1'b1;
          #(120);
          glitch = 1'b0;
        end
      join_none
    end
    prev_tx = tx_out;
  end

  always_comb rx_in = (line_lvl ^ glitch) ? AMP : 0.0;

  // ---------------- stimulus and scoreboard ----------------
  logic [NUM_WORDS-1:0][WORD_W-1:0] sent_q[$];
  int n_sent = 0, n_recv = 0;
  int n_lock = 0, n_sync = 0, n_idle_gap = 0, n_b2b = 0;
  int n_step = 0, n_hold = 0, n_glitch = 0, n_vote = 0, n_slip = 0;
  int rate_ok = 0;
  longint last_take = -1, tx_cycle = 0;
  logic prev_locked = 1'b0, prev_sync = 1'b0;

  function automatic logic [NUM_WORDS-1:0][WORD_W-1:0] rand_frame();
    logic [NUM_WORDS-1:0][WORD_W-1:0] f;
    for (int w = 0; w < NUM_WORDS; w++) f[w] = $urandom();
    return f;
  endfunction

  // Monitors sample on the falling edge, half a cycle away from the DUT's edges.
  always @(negedge tx_clk) begin
    tx_cycle = tx_cycle + 1;
    if (tx_valid && tx_ready) begin
      if (last_take >= 0 && tx_cycle - last_take == FRAME_BITS) begin
        n_b2b++;
        checks++;
        rate_ok++;
      end else if (last_take >= 0 && tx_cycle - last_take < FRAME_BITS) begin
        checks++; failures++;
        $display("FAIL: frames taken %0d clocks apart", tx_cycle - last_take);
      end
      last_take = tx_cycle;
    end
  end

  always @(negedge rx_bit_clk) if (rx_rst_n === 1'b1 && $time > 10) begin
    if (rx_locked && !prev_locked) n_lock++;
    if (rx_sync && !prev_sync) n_sync++;
    prev_locked = rx_locked;
    prev_sync   = rx_sync;
    if (cdr_phase_step)  n_step++;
    if (cdr_jitter_hold) n_hold++;
    if (cdr_glitch)      n_glitch++;
    if (cdr_vote_fix)    n_vote++;
    if (cdr_slip)        n_slip++;
    if (rx_valid) begin
      checks++;
      if (sent_q.size() == 0) begin
        failures++;
        $display("FAIL: frame received but none sent");
      end else begin
        automatic logic [NUM_WORDS-1:0][WORD_W-1:0] exp = sent_q.pop_front();
        if (rx_data !== exp) begin
          failures++;
          $display("FAIL: frame %0d mismatch: got %h exp %h", n_recv, rx_data, exp);
        end
      end
      n_recv++;
    end
  end

  task automatic send_frame(input bit back_to_back);
    // driven on the falling edge; the frame is taken on the next rising
    // edge once tx_ready is seen high
    @(negedge tx_clk);
    tx_data  = rand_frame();
    tx_valid = 1'b1;
    while (!tx_ready) @(negedge tx_clk);
    sent_q.push_back(tx_data);
    n_sent++;
    @(negedge tx_clk);
    if (!back_to_back) begin
      tx_valid = 1'b0;
      while (tx_busy) @(negedge tx_clk);
      repeat ($urandom_range(3, 40)) @(negedge tx_clk);
      n_idle_gap++;
    end
  endtask

  // slow wander of the channel delay: +150 ps then back
  task automatic wander(input int step);
    repeat (150) begin
      repeat (4) @(posedge tx_clk);
      base_delay += step;
    end
  endtask

  task automatic count_seen(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never occurred", what);
    end
  endtask

  initial begin
    tx_data = '0;
    #(1);
    tx_rst_n = 1'b0;                             // reset needs a falling edge
    rx_rst_n = 1'b0;
    repeat (4) @(posedge tx_clk);
    tx_rst_n = 1'b1;
    #(1000);
    rx_rst_n = 1'b1;
    repeat (200) @(posedge tx_clk);             // idle pattern: CDR locks
    for (int i = 0; i < NFRAMES / 3; i++) send_frame(i % 2 == 0);
    fork
      wander(1);
      for (int i = 0; i < NFRAMES / 3; i++) send_frame(i % 3 != 0);
    join
    // glitches, without edge jitter: with 4 samples per bit a glitch on the
    // centre sample and a jittered edge on a neighbour would defeat the vote
    glitch_on = 1'b1;
    jitter_ps = 0;
    fork
      wander(-1);
      for (int i = 0; i < NFRAMES / 3; i++) send_frame(i % 2 == 1);
    join
    glitch_on = 1'b0;
    tx_valid = 1'b0;
    repeat (FRAME_BITS + 100) @(posedge tx_clk);

    checks++;
    if (n_recv != n_sent || sent_q.size() != 0) begin
      failures++;
      $display("FAIL: sent %0d frames, received %0d", n_sent, n_recv);
    end
    checks++;
    if (n_slip != 0) begin
      failures++;
      $display("FAIL: %0d bit slips", n_slip);
    end
    count_seen("CDR lock", n_lock);
    count_seen("sync header found", n_sync);
    count_seen("idle gap between frames", n_idle_gap);
    count_seen("back-to-back frames", n_b2b);
    count_seen("CDR phase step", n_step);
    count_seen("CDR jitter hold", n_hold);
    count_seen("CDR glitch detected", n_glitch);
    count_seen("CDR majority-vote fix", n_vote);
    $display("frames sent=%0d received=%0d lock=%0d sync=%0d gaps=%0d b2b=%0d",
             n_sent, n_recv, n_lock, n_sync, n_idle_gap, n_b2b);
    $display("cdr phase_step=%0d jitter_hold=%0d glitch=%0d vote_fix=%0d slip=%0d",
             n_step, n_hold, n_glitch, n_vote, n_slip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(60_000_000);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
