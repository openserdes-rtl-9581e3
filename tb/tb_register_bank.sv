// tb_register_bank: checks the FIFO of sample words.
//
// Random sample words are presented before each bit-clock edge; after the
// edge, word d of the bank must equal the word presented d+1 edges ago
// (for d = 0..2), and reset must clear it.
`timescale 1ps/1ps
module tb_register_bank;
  localparam int OSR = 4, DEPTH = 3;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [OSR-1:0] s_i = '0;
  logic [DEPTH-1:0][OSR-1:0] words;
  register_bank dut (.clk(clk), .rst_n(rst_n), .s_i(s_i), .words_o(words));

  logic [OSR-1:0] hist[$];

  initial begin
    #1 rst_n = 1'b0;
    #10;
    checks++;
    if (words !== '0) begin failures++; $display("FAIL: reset"); end
    rst_n = 1'b1;
    for (int i = 0; i < DEPTH; i++) hist.push_front('0);
    for (int i = 0; i < 300; i++) begin
      s_i = $urandom();
      #100 clk = 1'b1;
      hist.push_front(s_i);
      #10;
      for (int d = 0; d < DEPTH; d++) begin
        checks++;
        if (words[d] !== hist[d]) begin failures++; $display("FAIL: word %0d = %b, expected %b", d, words[d], hist[d]); end
      end
      #90 clk = 1'b0;
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
