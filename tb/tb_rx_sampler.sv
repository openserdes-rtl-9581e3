// tb_rx_sampler: checks the static-inverter threshold and the sampling flip-flop.
//
// Random voltages around 0.83 V are applied between clock edges. inv_o must
// be 1 exactly when the voltage is below 0.83 V, and q_o must show, after
// each rising clock edge, the value inv_o had before it.
`timescale 1ps/1ps
module tb_rx_sampler;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  real vin = 0.83;
  logic inv_o, q_o;
  rx_sampler dut (.clk(clk), .rst_n(rst_n), .vin(vin), .inv_o(inv_o), .q_o(q_o));

  initial begin
    #1 rst_n = 1'b0;
    #100 rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      automatic logic exp;
      vin = 0.83 + (real'($urandom_range(0, 600)) - 300.0) / 1000.0;
      if (i % 17 == 0) vin = 0.83;
      exp = (vin < 0.83);
      #10;
      checks++;
      if (inv_o !== exp) begin failures++; $display("FAIL: inv_o %b at %f V", inv_o, vin); end
      #50 clk = 1'b1;
      #10;
      checks++;
      if (q_o !== exp) begin failures++; $display("FAIL: q_o %b, expected %b", q_o, exp); end
      vin = 0.0;                            // change after the edge does not reach q_o
      #50 clk = 1'b0;
      checks++;
      if (q_o !== exp) begin failures++; $display("FAIL: q_o changed without a clock"); end
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
