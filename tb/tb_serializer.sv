// tb_serializer: checks the serializer's bit stream and frame rate.
//
// Frames of random data are offered, some back to back and some after idle
// gaps. Every clock the serial output is recorded on the falling edge. For
// every frame taken (valid and ready high before a rising edge) the output,
// starting two falling edges later, must be the complement of the 8-bit
// header 8'hF0 followed by stream 0..7, MSB first. Between frames the output
// must alternate (idle pattern). Back-to-back frames must be taken exactly
// 264 clocks apart, and ready must be low while a frame is being sent.
`timescale 1ps/1ps
module tb_serializer;
  localparam int NW = 8, WW = 32, FB = 8 + NW * WW;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [NW-1:0][WW-1:0] data;
  logic valid = 1'b0, ready, ser, busy;

  serializer dut (.clk(clk), .rst_n(rst_n), .data_i(data), .valid_i(valid),
                  .ready_o(ready), .ser_o(ser), .busy_o(busy));

  always #250 clk = ~clk;

  logic stream[0:20000];
  logic busy_h[0:20000];
  int   take_cyc[$];
  logic [NW-1:0][WW-1:0] take_frame[$];
  int   cyc = 0;

  always @(negedge clk) begin
    stream[cyc] = ser;
    busy_h[cyc] = busy;
    if (valid && ready && rst_n) begin
      take_cyc.push_back(cyc);
      take_frame.push_back(data);
    end
    cyc++;
  end

  task automatic send(input bit b2b);
    data  = {$urandom(), $urandom(), $urandom(), $urandom(),
             $urandom(), $urandom(), $urandom(), $urandom()};
    valid = 1'b1;
    while (!ready) @(negedge clk);
    @(negedge clk);                 // taken on the rising edge before this
    if (!b2b) begin
      valid = 1'b0;
      repeat (FB + $urandom_range(2, 30)) @(negedge clk);
    end
  endtask

  initial begin
    data = '0;
    #1 rst_n = 1'b0;
    #1000 rst_n = 1'b1;
    @(negedge clk);
    repeat (20) @(negedge clk);
    for (int i = 0; i < 12; i++) send(i % 3 != 2);
    valid = 1'b0;
    repeat (FB + 20) @(negedge clk);

    // frame contents
    for (int f = 0; f < take_cyc.size(); f++) begin
      automatic logic [FB-1:0] bits = {8'hF0, take_frame[f]};
      // bit order: header MSB first, then stream 0 (MSB first) ... stream 7
      for (int k = 0; k < FB; k++) begin
        automatic logic exp;
        if (k < 8) exp = bits[FB-1-k];
        else exp = take_frame[f][(k-8)/WW][WW-1-((k-8)%WW)];
        checks++;
        if (stream[take_cyc[f] + 2 + k] !== ~exp) begin
          failures++;
          if (failures < 10) $display("FAIL: frame %0d bit %0d got %b exp %b", f, k, stream[take_cyc[f]+2+k], ~exp);
        end
      end
      if (f > 0) begin
        checks++;
        if (take_cyc[f] - take_cyc[f-1] < FB) begin
          failures++; $display("FAIL: frames %0d clocks apart", take_cyc[f] - take_cyc[f-1]);
        end
      end
    end
    // back-to-back rate: frames 0 and 1 were offered back to back
    checks++;
    if (take_cyc[1] - take_cyc[0] != FB) begin
      failures++; $display("FAIL: back-to-back spacing %0d, expected %0d", take_cyc[1]-take_cyc[0], FB);
    end
    // idle pattern alternates when not busy (skip first cycle after busy)
    for (int c = 5; c < cyc - 1; c++) begin
      if (!busy_h[c] && !busy_h[c-1] && !busy_h[c+1] && c > 4) begin
        checks++;
        if (stream[c+1] === stream[c]) begin
          failures++;
          if (failures < 10) $display("FAIL: idle pattern not alternating at %0d", c);
        end
      end
    end
    checks++;
    if (take_cyc.size() != 12) begin failures++; $display("FAIL: %0d frames taken", take_cyc.size()); end
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
