// out_unfold: digital correction of MAC-folding for one column engine.
//
// The array computed sum((ACT-8)*W); adding 8*sum(W) restores sum(ACT*W). The
// readout code counts ADC LSBs of 2*2^adc_scale unit discharges, and a boosted
// MAC doubles every product, so in code units the correction is
// 8*sum(W)*B/(2*2^s) = sum(W) << (2 + boost - s) with B = 1 or 2 and s <= 2.
// The result estimates B*sum(ACT*W)/(2*2^s) and is signed, OUT_W bits; it is
// exact up to the readout's own rounding unless the readout clipped.
// sum(W) is taken from the stored sign-magnitude weights. The correction itself
// follows the paper (Fig. 4); where the sum is formed and the scaling are this
// design's. Combinational.
module out_unfold
  import cim_pkg::*;
(
  input  logic signed [ADC_BITS-1:0] code,       // readout code
  input  logic [WGT_W-1:0]           w [ROWS],   // weights of the column
  input  cim_cfg_t                   cfg,        // boost and ADC scale
  output logic signed [OUT_W-1:0]    out         // unfolded output
);
  logic signed [OUT_W-1:0] wsum;
  logic [1:0]              sh;

  always_comb begin
    wsum = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (w[r][WGT_W-1]) wsum -= OUT_W'(w[r][WGT_W-2:0]);
      else               wsum += OUT_W'(w[r][WGT_W-2:0]);
    end
    sh  = 2'(3'd2 + 3'(cfg.boost) - 3'((cfg.adc_scale > 2'd2) ? 2'd2 : cfg.adc_scale));
    out = OUT_W'(code) + (wsum <<< sh);
  end
endmodule
