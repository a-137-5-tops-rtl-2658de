// pulse_path: pulse path configuration of one core.
//
// Routes the DTC pulse widths to the four sense lines SL[3:0] of each of the 64
// rows. The same row pulses are shared by all 16 column engines of the core.
//
// MAC slot for activation bit k (k = 2, 1, 0, and the compensation slot C acting
// as k = 0): a row whose bit is set gets width 2^(k+j)*dt on SL[j], j = 0..2, so
// the cell storing W[j] removes ACT[k]*W[j]*2^(k+j) units (Fig. 3 pulse table:
// ACT[2] -> 16/8/4 dt, ACT[1] -> 8/4/2, ACT[0] and ACT[C] -> 4/2/1). SL[3] is idle.
//
// Readout step for output bit n: only SL[3] (the sign cells, whose branches are
// free during readout) is pulsed. The 64 sign cells form groups of
// 32,16,8,4,2,1,1 rows; a step removes 2^(n+adc_scale) units as x cells times a
// width of 2^p dt. This design picks x = 2^u cells with p = 0 while u = n+adc_scale
// <= 5, and all 32 cells of the largest group with p = u-5 above that. The group
// sizes are the paper's; the row order of the groups and this choice table are not
// given there and are this design's.
// Combinational.
module pulse_path
  import cim_pkg::*;
(
  input  logic       mac_en,            // a MAC slot is active
  input  mac_slot_e  mac_slot,          // which activation bit
  input  logic       adc_en,            // a readout step is active
  input  logic [3:0] adc_bit,           // output bit n, 8..0
  input  logic [1:0] adc_scale,         // ADC LSB = 2^adc_scale units
  input  act_fold_t  act [ROWS],        // folded activations of the rows
  input  pw_t        pw  [NPATH],       // DTC widths 2^p dt (p = 0..5)
  output pw_t        sl  [ROWS][4]      // width applied to SL[j] of each row
);

  // Readout-cell group of a row: rows 0..31 -> group 6 (32 cells), 32..47 -> 5,
  // 48..55 -> 4, 56..59 -> 3, 60..61 -> 2, 62 -> 1, 63 -> 0.
  function automatic int unsigned row_group(int unsigned r);
    int unsigned base;
    base = 0;
    for (int unsigned g = NGRP - 1; g >= 2; g--) begin
      if (r < base + (ROWS >> (NGRP - g))) return g;
      base += ROWS >> (NGRP - g);
    end
    return (r == ROWS - 2) ? 1 : 0;
  endfunction

  logic [NGRP-1:0] grp_sel;   // readout-cell groups enabled in this step
  logic [2:0]      adc_path;  // DTC path used in this step
  logic [3:0]      u;         // log2 of the units removed in this step
  logic [2:0]      k;         // activation bit weight of the MAC slot

  always_comb begin
    u        = adc_bit + 4'(adc_scale);
    grp_sel  = '0;
    adc_path = '0;
    if (u <= 4'd5) begin
      grp_sel[(u == 4'd0) ? 0 : int'(u) + 1] = 1'b1;
    end else begin
      grp_sel[NGRP-1] = 1'b1;
      adc_path        = 3'(u - 4'd5);
    end

    unique case (mac_slot)
      SLOT_A2: k = 3'd2;
      SLOT_A1: k = 3'd1;
      default: k = 3'd0;
    endcase

    for (int unsigned r = 0; r < ROWS; r++) begin
      logic bit_on;
      unique case (mac_slot)
        SLOT_A2: bit_on = act[r].mag[2];
        SLOT_A1: bit_on = act[r].mag[1];
        SLOT_A0: bit_on = act[r].mag[0];
        default: bit_on = act[r].comp;
      endcase
      for (int j = 0; j < 3; j++)
        sl[r][j] = (mac_en && bit_on) ? pw[int'(k) + j] : '0;
      sl[r][3] = (adc_en && grp_sel[row_group(r)]) ? pw[adc_path] : '0;
    end
  end

endmodule
