// tb_decision_block: checks lock, tracking, jitter filter and glitch correction.
//
// The testbench builds an oversampled stream of random bits, 4 samples per
// bit, where each bit starts at 4n + off[n]. It feeds the decision block one
// word per clock together with the last two words and with transition data
// worked out by its own reference code. Events in the stream:
//   bits   0..199  off = 1                      -> lock
//   bits 200..499  off = 2 (a permanent step)   -> one phase step
//   bits 250, 300  off = 3 for that bit only    -> jitter holds, no step
//   bits 350, 450  centre sample flipped        -> glitch seen, vote fixes it
//   bits 500..     jitter_scan = 0, bit 550 off = 3 -> immediate steps
// After lock the output must equal the sent bits at one fixed lag.
`timescale 1ps/1ps
module tb_decision_block;
  localparam int OSR = 4, NB = 640;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [2:0][OSR-1:0] words = '0;
  logic [1:0] first;
  logic [2:0] count;
  logic any;
  logic [1:0] glitch_scan = 2'b11;
  logic [3:0] jitter_scan = 4'd2;
  logic bit_o, valid_o, step, hold, glitch, vfix, slip;
  logic [3:0] sel;

  decision_block dut (
    .clk(clk), .rst_n(rst_n), .words_i(words), .first_i(first), .count_i(count), .any_i(any),
    .glitch_scan(glitch_scan), .jitter_scan(jitter_scan), .bit_o(bit_o), .valid_o(valid_o),
    .sel_o(sel), .phase_step_o(step), .jitter_hold_o(hold), .glitch_o(glitch),
    .vote_fix_o(vfix), .slip_o(slip));

  logic bits[NB];
  int   off[NB];
  logic samp[OSR*NB];
  logic outs[$];
  int   n_step_a = 0, n_step_b = 0, n_hold = 0, n_glitch = 0, n_vfix = 0, n_slip = 0;

  initial begin
    for (int n = 0; n < NB; n++) begin
      bits[n] = $urandom();
      off[n]  = (n < 200) ? 1 : 2;
    end
    foreach (bits[n]) if (n > 0 && n % 2 == 0 && n < 100) bits[n] = ~bits[n-1];
    // jitter events: the bit starts one sample late, for that bit only
    foreach (off[n]) if (n == 250 || n == 300 || n == 550) begin
      off[n] = 3; bits[n] = ~bits[n-1]; bits[n+1] = ~bits[n];
    end
    // build the sample stream
    for (int n = 0; n < NB; n++)
      for (int m = OSR * n + off[n]; m < OSR * (n + 1) + ((n + 1 < NB) ? off[n+1] : 0) && m < OSR*NB; m++)
        samp[m] = bits[n];
    for (int m = 0; m < off[0]; m++) samp[m] = 1'b0;
    // glitches: flip the sample two after the bit start, neighbours equal
    foreach (bits[n]) if (n == 350 || n == 450) begin
      bits[n-1] = bits[n]; bits[n+1] = bits[n];
    end
    for (int n = 0; n < NB; n++)
      for (int m = OSR * n + off[n]; m < OSR * (n + 1) + ((n + 1 < NB) ? off[n+1] : 0) && m < OSR*NB; m++)
        samp[m] = bits[n];
    samp[OSR*350 + off[350] + 2] = ~bits[350];
    samp[OSR*450 + off[450] + 2] = ~bits[450];
  end

  // reference transition finder on the two newest words
  function automatic logic [5:0] ref_trans(input logic [OSR-1:0] nw, input logic [OSR-1:0] ow);
    logic prev;
    int f, c;
    prev = ow[OSR-1];
    f = -1;
    c = 0;
    for (int k = 0; k < OSR; k++) begin
      if (nw[k] != prev) begin c++; if (f < 0) f = k; end
      prev = nw[k];
    end
    return {(c > 0), 3'(c), (f < 0) ? 2'd0 : 2'(f)};
  endfunction

  always_comb {any, count, first} = ref_trans(words[0], words[1]);

  always #250 clk = ~clk;

  initial begin
    #1 rst_n = 1'b0;
    #100 rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < NB; n++) begin
      automatic logic [OSR-1:0] w;
      for (int k = 0; k < OSR; k++) w[k] = samp[OSR*n + k];
      words = {words[1], words[0], w};      // [0] newest
      if (n == 500) jitter_scan = 4'd0;
      @(negedge clk);
      if (valid_o) outs.push_back(bit_o);
      if (step && n < 500) n_step_a++;
      if (step && n >= 500) n_step_b++;
      if (hold) n_hold++;
      if (glitch) n_glitch++;
      if (vfix) n_vfix++;
      if (slip) n_slip++;
    end
    // find the lag on the first outputs, then check all
    begin
      automatic int start = NB - outs.size();   // index of the first output's period
      automatic int lag = -1;
      for (int L = 0; L < 8 && lag < 0; L++) begin
        automatic bit ok = 1;
        for (int i = 0; i < 60; i++) if (outs[i] !== bits[start + i - L]) ok = 0;
        if (ok) lag = L;
      end
      checks++;
      if (lag < 0) begin failures++; $display("FAIL: output never matches the input"); end
      else begin
        for (int i = 0; i < outs.size() - 4; i++) begin
          checks++;
          if (outs[i] !== bits[start + i - lag]) begin
            failures++;
            if (failures < 10) $display("FAIL: bit %0d got %b exp %b", start + i - lag, outs[i], bits[start+i-lag]);
          end
        end
      end
      checks++;
      if (outs.size() < NB - 40) begin failures++; $display("FAIL: lock took too long: %0d outputs", outs.size()); end
    end
    checks++; if (n_step_a != 1) begin failures++; $display("FAIL: %0d phase steps with jitter filter, expected 1", n_step_a); end
    checks++; if (n_hold < 2) begin failures++; $display("FAIL: %0d jitter holds, expected at least 2", n_hold); end
    checks++; if (n_step_b != 2) begin failures++; $display("FAIL: %0d steps without jitter filter, expected 2", n_step_b); end
    checks++; if (n_glitch < 2) begin failures++; $display("FAIL: %0d glitches detected", n_glitch); end
    checks++; if (n_vfix != 2) begin failures++; $display("FAIL: %0d vote fixes, expected 2", n_vfix); end
    checks++; if (n_slip != 0) begin failures++; $display("FAIL: %0d slips", n_slip); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
