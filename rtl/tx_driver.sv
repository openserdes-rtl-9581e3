// tx_driver: behavioural model of the voltage-mode CMOS transmit driver.
//
// The real driver is a chain of three CMOS inverters, each larger than the
// one before, that drives the channel and its 2 pF load rail to rail (0 to
// 1.8 V). It is an analog, process-specific cell, so this model only gives
// its logic behaviour: STAGES inverters in series, each with a fixed
// propagation delay STAGE_DELAY_PS. With the default three stages the output
// is the complement of the input, delayed by 3 x STAGE_DELAY_PS. The stage
// count follows the link description; the delay value is an assumption.
// Interface: in_i from the serializer, out_o to the line (logic 1 = 1.8 V).
`timescale 1ps/1ps
module tx_driver #(
  parameter int unsigned STAGES         = 3,
  parameter int unsigned STAGE_DELAY_PS = 20
) (
  input  logic in_i,
  output logic out_o
);
  logic [STAGES:0] node;

  assign node[0] = in_i;
  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    assign #(STAGE_DELAY_PS) node[i+1] = ~node[i];
  end
  assign out_o = node[STAGES];
endmodule
