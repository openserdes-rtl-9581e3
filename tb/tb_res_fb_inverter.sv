// tb_res_fb_inverter: checks the sensing-inverter model's bias, gain and AC coupling.
//
// A 0 / 32 mV square wave of 1 ns period is applied. Once the DC tracking
// has settled the output must sit near 0.83 V - 9.4 x (+-16 mV): about
// 0.68 V while the input is high and 0.98 V while it is low (inverting).
// A long constant input must then be blocked: after 200 ns at 32 mV the DC
// level has followed it, so a step down to 0 V now swings the output by the
// full 9.4 x 32 mV above the bias point instead of half of it.
`timescale 1ps/1ps
module tb_res_fb_inverter;
  int checks = 0, failures = 0;
  real vin = 0.0, vout;
  res_fb_inverter dut (.vin(vin), .vout(vout));

  task automatic near(input real got, input real exp, input real tol, input string what);
    checks++;
    if (got < exp - tol || got > exp + tol) begin
      failures++; $display("FAIL: %s: %f, expected %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (200) begin                      // 200 ns of square wave
      vin = 0.032; #500;
      vin = 0.0;   #500;
    end
    repeat (20) begin
      vin = 0.032; #400;
      near(vout, 0.83 - 9.4 * 0.016, 0.03, "input high");
      #100;
      vin = 0.0;   #400;
      near(vout, 0.83 + 9.4 * 0.016, 0.03, "input low");
      #100;
    end
    vin = 0.032;
    #200_000;                               // 10 time constants
    vin = 0.0;
    #10;
    near(vout, 0.83 + 9.4 * 0.032, 0.01, "DC blocked");
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
