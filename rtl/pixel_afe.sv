// pixel_afe: BEHAVIOURAL MODEL of the analog front end of one pixel. It is not
// synthesizable logic in the real chip; it stands in for the analog circuit so
// that the digital part can be simulated from a charge deposit.
//
// The real circuit: a charge-sensitive preamplifier (feedback capacitor, active
// transistor feedback and a leakage current compensation circuit) integrates
// the charge on the sensor electrode; its output is AC coupled into three
// auto-zeroed comparators with thresholds Vth[0..2], which together form a
// 2-bit thermometric flash ADC. A test switch connects a programmable
// capacitor array that injects a known charge. The comparators are reset
// (auto-zeroed) at the end of each 25 ns bunch crossing.
//
// The model works in electrons: the preamplifier output is the sensor charge
// plus, while test_enable is high, the injected test charge. Leakage current is
// a DC input that the compensation circuit and the AC coupling remove, so it
// has no effect here. Comparator i fires while the integrated charge reaches
// vth_e[i] + OFFSET_E (OFFSET_E models one pixel's threshold dispersion);
// az holds all comparators in reset. Noise is not modelled. The thresholds are
// taken in equivalent electrons rather than volts, and the injected charge is
// given directly because the capacitor array's programming is not specified.
//
// Interface: q_in_e (sensor charge, electrons), test_enable, q_test_e,
// vth_e[3] (equivalent thresholds), az (comparator reset), comp[2:0].
// Timing: comp follows its inputs without delay.
module pixel_afe
  import smartpix_pkg::*;
#(
  parameter int OFFSET_E = 0   // threshold offset of this pixel, electrons
) (
  input  logic [15:0] q_in_e,               // charge from the sensor electrode
  input  logic        test_enable,          // closes the charge-injection switch
  input  logic [15:0] q_test_e,             // charge delivered by the C_test array
  input  logic [15:0] vth_e [N_COMP],       // comparator thresholds
  input  logic        az,                   // end-of-bunch-crossing reset
  output logic [N_COMP-1:0] comp            // comparator outputs (thermometer)
);

  logic [16:0] q_pre;   // preamplifier output, in electrons

  always_comb begin
    q_pre = {1'b0, q_in_e} + (test_enable ? {1'b0, q_test_e} : 17'd0);
    for (int i = 0; i < int'(N_COMP); i++)
      comp[i] = !az && (int'(q_pre) >= int'(vth_e[i]) + OFFSET_E);
  end

endmodule
