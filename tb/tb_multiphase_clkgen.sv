// tb_multiphase_clkgen: checks the phases made by the Johnson counter.
//
// With a 125 ps input clock and OSR = 4, every phase must have a 500 ps
// period and 50 % duty cycle, phase k must rise k x 125 ps after phase 0,
// and all edges must coincide with falling edges of the input clock.
`timescale 1ps/1ps
module tb_multiphase_clkgen;
  localparam int OSR = 4, T = 125;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [OSR-1:0] ph;
  multiphase_clkgen dut (.clk_i(clk), .rst_n(rst_n), .ph_o(ph));

  always #(T/2) clk = ~clk;             // 62 ps half period: 124 ps clock
  localparam int TC = 2 * (T / 2);

  longint rise[OSR][$];
  longint fall[OSR][$];
  for (genvar k = 0; k < OSR; k++) begin : g_mon
    always @(posedge ph[k]) if (rst_n) rise[k].push_back($time);
    always @(negedge ph[k]) if (rst_n) fall[k].push_back($time);
  end

  int n_on_negedge = 0;
  always @(ph) if (rst_n && $time > 1000) begin
    checks++;
    if (clk !== 1'b0) begin failures++; $display("FAIL: phase edge not on falling input edge"); end
  end

  initial begin
    #1 rst_n = 1'b0;
    #300 rst_n = 1'b1;
    #(TC * 200);
    for (int k = 0; k < OSR; k++) begin
      for (int i = 2; i < 40; i++) begin
        checks++;
        if (rise[k][i] - rise[k][i-1] != OSR * TC) begin
          failures++; $display("FAIL: phase %0d period %0d", k, rise[k][i] - rise[k][i-1]);
        end
        begin
          automatic longint high_time = -1;
          foreach (fall[k][j]) if (high_time < 0 && fall[k][j] > rise[k][i]) high_time = fall[k][j] - rise[k][i];
          checks++;
          if (high_time != (OSR/2) * TC) begin
            failures++; $display("FAIL: phase %0d high for %0d ps", k, high_time);
          end
        end
        checks++;
        // rise of phase k follows the matching rise of phase 0 by k input periods
        if (((rise[k][i] - rise[0][i]) % (OSR * TC) + OSR * TC) % (OSR * TC) != k * TC) begin
          failures++; $display("FAIL: phase %0d offset %0d", k, rise[k][i] - rise[0][i]);
        end
      end
    end
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
