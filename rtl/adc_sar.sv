// adc_sar: binary-search readout logic of one column engine.
//
// The MAC leaves a difference d = V(RBLB) - V(RBL) on the bit lines (positive
// products pull RBL down). The readout first compares the lines (the sign step),
// then runs nine steps n = 8..0: in step n the line the last comparison found
// higher is discharged by 2^n ADC LSBs and the SA compares again. The lines close
// in on each other, ending within one LSB.
//
// This block records the ten SA results {sign, b8..b0} and steers each step:
// en_rbl = last SA result (1: RBL was higher, pull RBL down), en_rblb its
// complement. With s8..s0 the nine steering results (sign, b8..b1), d is about
// 511 - 2*S LSBs, so the 9-bit two's-complement code is 255 - S = {s8, ~s7..~s0}:
// code ~ d/2, -256..255, clipping outside. The last result (b0) tells on which
// side of the final level d lies; it is kept in sa_bits[0] but not in the code.
//
// Timing: take is high in the cycle after each SA strobe (sa_out then holds the
// new result); the 10-bit shift register flushes itself, so no clear is needed.
// After the tenth take the code is valid until the sixth take of the next
// operation. The search itself follows the paper; the code mapping is this
// design's reading of its 9-bit signed output and the -512..512 -> -256..256
// transfer curve.
module adc_sar
  import cim_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       adc_en,    // a discharge step is active
  input  logic                       sa_out,    // latched SA result
  input  logic                       take,      // sa_out holds a new result
  output logic                       en_rbl,    // discharge RBL in this step
  output logic                       en_rblb,   // discharge RBLB in this step
  output logic [SA_STEPS-1:0]        sa_bits,   // {sign, b8..b0}
  output logic signed [ADC_BITS-1:0] code       // 9-bit signed readout
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    sa_bits <= '0;
    else if (take) sa_bits <= {sa_bits[SA_STEPS-2:0], sa_out};

  assign en_rbl  = adc_en &  sa_out;
  assign en_rblb = adc_en & ~sa_out;
  assign code    = {sa_bits[SA_STEPS-1], ~sa_bits[SA_STEPS-2:1]};

endmodule
