// tb_oversampling_cdr: checks the complete CDR on an asynchronous-phase bit stream.
//
// The CDR gets an external clock of 8 GHz (125 ps) and a random bit stream
// at 2 Gb/s (500 ps per bit) whose phase against the clock is random. Each
// edge gets up to 30 ps of random jitter. From the middle of the run the
// stream is delayed by 50 ps more every 100 bits, three times: 150 ps in all,
// more than one sample, so the sampling point must follow. (A single jump of
// half a bit could not be followed: its direction is ambiguous.) After lock, the recovered bits, taken on the falling edge of the
// recovered bit clock, must equal the sent bits at one constant lag for the
// whole run: any lost or repeated bit breaks the match. The testbench also
// checks that lock is reached, that the sampling point moved at the step,
// that no slip is reported, and that the recovered clock has a period of
// exactly OSR external clocks.
`timescale 1ps/100fs
module tb_oversampling_cdr;
  localparam int  OSR   = 4;
  localparam int  TBIT  = 500;
  localparam real THALF = real'(TBIT) / (2.0 * OSR);
  localparam int  NB    = 1200;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1, din = 1'b0;
  logic [1:0] glitch_scan = 2'b11;
  logic [3:0] jitter_scan = 4'd2;
  logic bit_clk, bit_o, valid_o, step, hold, glitch, vfix, slip;
  logic [3:0] sel;

  oversampling_cdr dut (
    .clk_i(clk), .rst_n(rst_n), .din(din), .glitch_scan(glitch_scan),
    .jitter_scan(jitter_scan), .bit_clk_o(bit_clk), .bit_o(bit_o), .valid_o(valid_o),
    .sel_o(sel), .phase_step_o(step), .jitter_hold_o(hold), .glitch_o(glitch),
    .vote_fix_o(vfix), .slip_o(slip));

  always #(THALF) clk = ~clk;

  logic bits[NB];
  logic outs[$];
  int   n_step = 0, n_slip = 0, extra_delay = 0;
  bit   done_tx = 1'b0;

  // transmitter: bit n starts at t0 + n*TBIT + extra_delay + jitter
  initial begin
    automatic int t0 = 300 + int'($urandom_range(0, TBIT - 1));
    for (int n = 0; n < NB; n++) bits[n] = 1'($urandom());
    #(t0);
    for (int n = 0; n < NB; n++) begin
      automatic int j = int'($urandom_range(0, 30));
      if (n == NB / 2 || n == NB / 2 + 100 || n == NB / 2 + 200) extra_delay += 50;
      fork
        automatic logic b = bits[n];
        begin #(j + extra_delay); din = b; end
      join_none
      #(TBIT);
    end
    done_tx = 1'b1;
  end

  // recovered-clock period check and output capture
  realtime last_rise = 0;
  int n_period = 0;
  always @(posedge bit_clk) if (rst_n === 1'b1 && $time > 2000) begin
    if (last_rise > 0) begin
      checks++;
      if ($realtime - last_rise != real'(TBIT)) begin
        failures++;
        $display("FAIL: bit clock period %0t", $realtime - last_rise);
      end
    end
    last_rise = $realtime;
  end

  always @(negedge bit_clk) if (rst_n === 1'b1 && $time > 10) begin
    if (valid_o) outs.push_back(bit_o);
    if (step) n_step++;
    if (slip) n_slip++;
  end

  initial begin
    automatic int lag = -1;
    automatic int mism = 0;
    #(1);
    rst_n = 1'b0;
    #(1000);
    rst_n = 1'b1;
    wait (done_tx);
    #(5 * TBIT);
    // outputs start at some bit index L of the sent stream: find it on the
    // first 64 outputs after lock, then check everything against it
    checks++;
    if (outs.size() < NB - 120) begin
      failures++;
      $display("FAIL: only %0d bits recovered of %0d", outs.size(), NB);
    end
    for (int l = 0; l < 120 && lag < 0; l++) begin
      automatic bit ok = 1'b1;
      for (int i = 0; i < 64; i++) if (outs[i] !== bits[i + l]) ok = 1'b0;
      if (ok) lag = l;
    end
    checks++;
    if (lag < 0) begin
      failures++;
      $display("FAIL: no lag matches the recovered stream");
    end else begin
      for (int i = 0; i + lag < NB && i < outs.size(); i++) begin
        checks++;
        if (outs[i] !== bits[i + lag]) begin
          failures++;
          if (mism++ < 5) $display("FAIL: bit %0d: got %b exp %b", i + lag, outs[i], bits[i + lag]);
        end
      end
    end
    checks++;
    if (n_step == 0) begin failures++; $display("FAIL: no phase step seen"); end
    checks++;
    if (n_slip != 0) begin failures++; $display("FAIL: %0d slips", n_slip); end
    $display("recovered=%0d lag=%0d steps=%0d", outs.size(), lag, n_step);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5_000_000);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
