// tb_tx_driver: checks polarity and delay of the inverter-chain driver model.
//
// For random input changes the output must keep its old value until
// 3 x 20 ps after the change and then equal the complement of the input.
`timescale 1ps/1ps
module tb_tx_driver;
  int checks = 0, failures = 0;
  logic in_i = 1'b0, out_o;
  tx_driver dut (.in_i(in_i), .out_o(out_o));

  initial begin
    #500;
    for (int i = 0; i < 200; i++) begin
      automatic logic prev_out = out_o;
      in_i = ~in_i;
      #(59);
      checks++;
      if (out_o !== prev_out) begin failures++; $display("FAIL: output changed too early"); end
      #(2);
      checks++;
      if (out_o !== ~in_i) begin failures++; $display("FAIL: output %b for input %b", out_o, in_i); end
      #($urandom_range(100, 800));
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
