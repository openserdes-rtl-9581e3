// tb_bit_boundary_detect: exhaustive check of the transition finder for OSR = 4.
//
// For every pair of words the reference walks the samples in time order
// (the last sample of the old word, then the new word) and lists where the
// value changes; the block's transition vector, first position, count and
// any-flag must agree.
`timescale 1ps/1ps
module tb_bit_boundary_detect;
  localparam int OSR = 4;
  int checks = 0, failures = 0;
  logic [OSR-1:0] nw, ow, trans;
  logic [1:0] first;
  logic [2:0] count;
  logic any;
  bit_boundary_detect dut (.new_i(nw), .old_i(ow), .trans_o(trans),
                                        .first_o(first), .count_o(count), .any_o(any));

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int b = 0; b < 16; b++) begin
        automatic logic prev;
        automatic logic [OSR-1:0] et = '0;
        automatic int ef = -1, ec = 0;
        nw = a[OSR-1:0];
        ow = b[OSR-1:0];
        prev = ow[OSR-1];
        for (int k = 0; k < OSR; k++) begin
          if (nw[k] != prev) begin
            et[k] = 1'b1;
            ec++;
            if (ef < 0) ef = k;
          end
          prev = nw[k];
        end
        #1;
        checks++;
        if (trans !== et || count !== 3'(ec) || any !== (ec > 0) ||
            (ec > 0 && first !== 2'(ef))) begin
          failures++;
          $display("FAIL: new=%b old=%b trans=%b first=%0d count=%0d", nw, ow, trans, first, count);
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
