// res_fb_inverter: behavioural model of the resistive-feedback sensing inverter.
//
// The real circuit is a CMOS inverter whose output is fed back to its input
// through a PMOS pseudo-resistor. The feedback holds the input and output at
// the inverter's switching point (about 0.83 V), where the inverter has its
// highest gain, and an off-chip capacitor AC-couples the line into the input.
// A line swing of a few tens of millivolts then becomes a swing of a few
// hundred millivolts around the bias point, inverted.
//
// This model is small-signal and linear:
//   vout = VBIAS + GAIN * (vin - vdc),  clipped to 0 .. VDD,
// where vdc is the line's DC level as seen through the coupling capacitor:
// a first-order average of vin with time constant TAU_PS. The model is
// event driven so that it stays a plain combinational-style process: at each
// change of vin, vdc is advanced exactly over the time the old value was
// held, vdc += (vin_old - vdc) * (1 - exp(-dt / TAU_PS)), and vout is
// recomputed; between input changes vout holds (the real circuit would drift
// slowly toward the bias point during long runs of equal bits, which only
// helps this model's decisions). VBIAS (0.83 V) and the gain (about -9.4,
// i.e. 300 mV out for 32 mV in) are read from the circuit's published
// operating point and waveforms; TAU_PS is an assumption.
// Interface: real voltages in volts; vout follows vin with no delay.
`timescale 1ps/1ps
module res_fb_inverter #(
  parameter real VBIAS  = 0.83,
  parameter real GAIN   = -9.4,
  parameter real VDD    = 1.8,
  parameter real TAU_PS = 20000.0
) (
  input  real vin,
  output real vout
);
  real vdc, vprev, tprev, v;

  initial begin                           // state until the first input change
    vdc   = 0.0;
    vprev = 0.0;
    tprev = 0.0;
    vout  = VBIAS;
  end

  always @(vin) begin
    vdc   = vdc + (vprev - vdc) * (1.0 - $exp(-($realtime - tprev) / TAU_PS));
    vprev = vin;
    tprev = $realtime;
    v = VBIAS + GAIN * (vin - vdc);
    if (v < 0.0) v = 0.0;
    if (v > VDD) v = VDD;
    vout = v;
  end
endmodule
