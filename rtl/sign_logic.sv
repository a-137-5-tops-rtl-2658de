// sign_logic: sign control of the 64 rows of one column engine.
//
// During a MAC slot each row's product ACT*W is either positive, and discharges
// RBL, or negative, and discharges RBLB. The product sign is the XOR of the
// activation sign (from MAC-folding) and the weight sign stored in the W[3] cell.
// The two outputs are the complementary sign/sign-bar gate signals of the row's
// three magnitude cells; outside MAC slots both are low so the cells stay off the
// bit lines. A zero magnitude needs no special case: its branches carry no pulse.
// Behaviour follows the paper (Fig. 3, "(+) value: accumulate on RBL, (-) value:
// accumulate on RBLB"). Combinational.
module sign_logic
  import cim_pkg::*;
(
  input  logic            mac_en,          // MAC slot active
  input  logic [ROWS-1:0] act_sign,        // folded activation sign per row
  input  logic [ROWS-1:0] w_sign,          // stored weight sign per row
  output logic [ROWS-1:0] to_rbl,          // row discharges RBL
  output logic [ROWS-1:0] to_rblb          // row discharges RBLB
);
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      to_rbl[r]  = mac_en & ~(act_sign[r] ^ w_sign[r]);
      to_rblb[r] = mac_en &  (act_sign[r] ^ w_sign[r]);
    end
  end
endmodule
