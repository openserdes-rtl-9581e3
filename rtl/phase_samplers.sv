// phase_samplers: sampling block of the oversampling CDR.
//
// One flip-flop per clock phase samples the data input on the rising edge of
// its phase, so that together they take OSR evenly spaced samples of every
// bit. That the data is sampled at multiple points follows the link
// description; one flip-flop per phase is the simplest way to do it.
// Interface: s_o[k] holds the value of din at the latest rising edge of
// ph_i[k]. Reset (asynchronous, active low) clears all samples.
`timescale 1ps/1ps
module phase_samplers #(
  parameter int unsigned OSR = serdes_pkg::OSR
) (
  input  logic [OSR-1:0] ph_i,
  input  logic           rst_n,
  input  logic           din,
  output logic [OSR-1:0] s_o
);
  for (genvar k = 0; k < OSR; k++) begin : g_ff
    logic s_q;
    always_ff @(posedge ph_i[k] or negedge rst_n) begin
      if (!rst_n) s_q <= 1'b0;
      else        s_q <= din;
    end
    assign s_o[k] = s_q;
  end
endmodule
