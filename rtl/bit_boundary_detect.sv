// bit_boundary_detect: finds the data transitions in the oversampled words.
//
// A bit boundary lies where two successive samples differ. trans_o[k] is the
// XOR of sample k and the sample before it; for sample 0 that is the last
// sample of the previous word. The block also gives the position of the
// first transition in the word, the number of transitions and whether there
// was any. The link description names this block but not its method; the
// XOR of neighbouring samples is this design's choice.
// Interface: purely combinational; new_i is the newest word, old_i the one
// before it, both in time order (sample 0 first).
`timescale 1ps/1ps
module bit_boundary_detect #(
  parameter int unsigned OSR = serdes_pkg::OSR
) (
  input  logic [OSR-1:0]         new_i,
  input  logic [OSR-1:0]         old_i,
  output logic [OSR-1:0]         trans_o,
  output logic [$clog2(OSR)-1:0] first_o,
  output logic [$clog2(OSR):0]   count_o,
  output logic                   any_o
);
  always_comb begin
    trans_o[0] = new_i[0] ^ old_i[OSR-1];
    for (int k = 1; k < OSR; k++) trans_o[k] = new_i[k] ^ new_i[k-1];

    first_o = '0;
    count_o = '0;
    for (int k = OSR - 1; k >= 0; k--) begin
      if (trans_o[k]) first_o = ($clog2(OSR))'(k);
      count_o = count_o + {{$clog2(OSR){1'b0}}, trans_o[k]};
    end
    any_o = |trans_o;
  end
endmodule
