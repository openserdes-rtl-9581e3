// tb_phase_samplers: each sampler must take din on the rising edge of its own phase.
//
// The testbench drives the OSR phase clocks one after another with a new
// random data value before each edge; after each edge only the sample of
// that phase may change, and it must equal the data value at the edge.
`timescale 1ps/1ps
module tb_phase_samplers;
  localparam int OSR = 4;
  int checks = 0, failures = 0;
  logic [OSR-1:0] ph = '0, s;
  logic rst_n = 1'b1, din = 1'b0;
  phase_samplers dut (.ph_i(ph), .rst_n(rst_n), .din(din), .s_o(s));

  initial begin
    automatic logic [OSR-1:0] exp = '0;
    #1 rst_n = 1'b0;
    #10;
    checks++;
    if (s !== '0) begin failures++; $display("FAIL: reset"); end
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      automatic int k = i % OSR;
      din = $urandom();
      #10 ph[k] = 1'b1;
      exp[k] = din;
      #5 din = ~din;                       // change after the edge is ignored
      #10;
      checks++;
      if (s !== exp) begin failures++; $display("FAIL: samples %b, expected %b", s, exp); end
      ph[k] = 1'b0;
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
