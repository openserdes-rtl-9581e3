// tb_deserializer: checks header hunting, frame assembly and output timing.
//
// The testbench plays the role of the CDR: it feeds a bit stream with
// bit_valid_i sometimes low. The stream holds idle 1010 patterns, headers
// 8'hF0 and frames of random data; one frame ends in the bits 11110000 and
// is followed directly by idle, which must not be taken for a header. Each
// received frame must equal the sent one, valid_o must pulse on the clock
// after the frame's last bit was taken, and sync_o must be high in between.
`timescale 1ps/1ps
module tb_deserializer;
  localparam int NW = 8, WW = 32;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  logic bit_i = 1'b0, bit_valid = 1'b0;
  logic [NW-1:0][WW-1:0] data_o;
  logic valid_o, sync_o;

  deserializer dut (.clk(clk), .rst_n(rst_n), .bit_i(bit_i), .bit_valid_i(bit_valid),
                    .data_o(data_o), .valid_o(valid_o), .sync_o(sync_o));

  always #250 clk = ~clk;

  logic [NW-1:0][WW-1:0] exp_q[$];
  int n_recv = 0, n_sent = 0;
  int last_bit_cyc = -10, cyc = 0;

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (valid_o) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected frame");
      end else begin
        automatic logic [NW-1:0][WW-1:0] e = exp_q.pop_front();
        if (data_o !== e) begin failures++; $display("FAIL: frame %0d got %h exp %h", n_recv, data_o, e); end
      end
      checks++;
      if (cyc != last_bit_cyc + 1) begin
        failures++; $display("FAIL: valid_o %0d clocks after the last bit", cyc - last_bit_cyc);
      end
      n_recv++;
    end
  end

  // drive one bit; bit_valid_i is sometimes low for a clock first
  task automatic put(input logic b);
    if ($urandom_range(0, 7) == 0) begin
      bit_valid = 1'b0; bit_i = $urandom(); @(negedge clk);
    end
    bit_valid = 1'b1; bit_i = b; @(negedge clk);
    bit_valid = 1'b0;
    last_bit_cyc = cyc;
  endtask

  task automatic idle(input int n);
    for (int i = 0; i < n; i++) put(i[0]);
  endtask

  task automatic frame(input logic [NW-1:0][WW-1:0] f);
    for (int k = 7; k >= 0; k--) put(8'hF0 >> k);
    exp_q.push_back(f);
    n_sent++;
    for (int w = 0; w < NW; w++)
      for (int b = WW - 1; b >= 0; b--) put(f[w][b]);
  endtask

  function automatic logic [NW-1:0][WW-1:0] rnd();
    for (int w = 0; w < NW; w++) rnd[w] = $urandom();
  endfunction

  initial begin
    automatic logic [NW-1:0][WW-1:0] f;
    #1 rst_n = 1'b0;
    #1000 rst_n = 1'b1;
    @(negedge clk);
    idle(21);
    frame(rnd());
    checks++;
    if (sync_o) begin failures++; $display("FAIL: sync_o high after frame"); end
    frame(rnd());                       // back to back
    idle(9);
    f = rnd();
    f[NW-1][7:0] = 8'hF0;               // frame ends in the header pattern
    frame(f);
    idle(40);                           // must not start a frame
    checks++;
    if (sync_o) begin failures++; $display("FAIL: false header after data"); end
    for (int i = 0; i < 5; i++) begin
      frame(rnd());
      if (i % 2) idle($urandom_range(1, 30));
    end
    repeat (5) @(negedge clk);
    checks++;
    if (n_recv != n_sent || exp_q.size() != 0) begin
      failures++; $display("FAIL: sent %0d received %0d", n_sent, n_recv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
