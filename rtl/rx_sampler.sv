// rx_sampler: behavioural model of the receiver's sampling block.
//
// A static CMOS inverter turns the amplified signal from the sensing
// inverter into a rail-to-rail logic level, and a D flip-flop clocked by the
// external clock samples it. The inverter is analog at its input, so it is
// modelled as an ideal threshold at VTH: inv_o is 1 while vin is below VTH.
// VTH defaults to 0.83 V, the switching point of the sensing inverter, on the
// assumption that both inverters are alike. The flip-flop is ordinary logic.
// Because the sensing inverter also inverts, inv_o follows the line's polarity.
// Interface: vin in volts; q_o changes on the rising edge of clk and goes to
// the oversampling CDR. Reset (asynchronous, active low) clears q_o.
`timescale 1ps/1ps
module rx_sampler #(
  parameter real VTH = 0.83
) (
  input  logic clk,
  input  logic rst_n,
  input  real  vin,
  output logic inv_o,
  output logic q_o
);
  always_comb inv_o = (vin < VTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q_o <= 1'b0;
    else        q_o <= inv_o;
  end
endmodule
