// multiphase_clkgen: clocking block of the oversampling CDR.
//
// Makes OSR clock phases at 1/OSR of the input clock frequency, spaced one
// input-clock period apart, so that OSR samplers can take OSR samples in one
// bit period. The circuit is a Johnson (twisted-ring) counter of OSR/2
// flip-flops: its outputs and their complements are OSR square waves of 50 %
// duty cycle whose rising edges fall on successive input-clock edges. That
// the CDR needs multiple phases from an external clock follows the link
// description; the Johnson counter, the even OSR and the use of the falling
// input edge (so that phase edges fall midway between updates of the
// front-end flip-flop, which uses the rising edge) are this design's choices.
// Interface: ph_o[k] rises k input periods after ph_o[0]; ph_o[0] is the bit
// clock of the CDR. Reset (asynchronous, active low) clears the counter, after
// which ph_o[0] rises on the first falling input edge.
`timescale 1ps/1ps
module multiphase_clkgen #(
  parameter int unsigned OSR = serdes_pkg::OSR
) (
  input  logic           clk_i,
  input  logic           rst_n,
  output logic [OSR-1:0] ph_o
);
  localparam int unsigned M = OSR / 2;

  logic [M-1:0] q;

  if (M > 1) begin : g_shift
    always_ff @(negedge clk_i or negedge rst_n) begin
      if (!rst_n) q <= '0;
      else        q <= {q[M-2:0], ~q[M-1]};
    end
  end else begin : g_toggle
    always_ff @(negedge clk_i or negedge rst_n) begin
      if (!rst_n) q <= '0;
      else        q <= ~q;
    end
  end

  // Rising-edge order: ~q[M-1], q[0], ..., q[M-1], ~q[0], ..., ~q[M-2].
  always_comb begin
    ph_o[0] = ~q[M-1];
    for (int k = 1; k <= M; k++)       ph_o[k] = q[k-1];
    for (int k = M + 1; k < OSR; k++)  ph_o[k] = ~q[k-M-1];
  end
endmodule
