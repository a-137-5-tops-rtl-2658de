// dtc: behavioural model of the digital-to-time converter of one core.
//
// Behavioural model, not synthesizable logic: in silicon this is an analog
// current-starved delay stage (a capacitor discharged by a bias current) whose
// delay dt = C*(VDD-VTH)/(m*Ibias) sets the unit pulse width. Here a pulse width is
// returned as an integer count of dt. On a trigger the model outputs the
// binary-weighted widths 2^p*dt on its NPATH paths at once; the paths feed the
// SL[2:0] columns (MAC) and the readout cells (ADC). With boost set during a MAC
// slot the bias current is halved, so every MAC pulse doubles (the boosted-clipping
// scheme); readout pulses keep their width so the ADC full-scale range stays put.
// Without a trigger all widths are zero. Combinational: the widths apply to the
// slot in which trig is high.
module dtc
  import cim_pkg::*;
(
  input  logic trig,              // slot has pulses
  input  logic mac,               // slot is a MAC slot (boost applies)
  input  logic boost,             // 2x MAC pulse resolution
  output pw_t  pw [NPATH]         // width of each path, in dt
);
  always_comb begin
    for (int p = 0; p < NPATH; p++) begin
      if (!trig)
        pw[p] = '0;
      else if (mac && boost)
        pw[p] = pw_t'(2 << p);
      else
        pw[p] = pw_t'(1 << p);
    end
  end
endmodule
