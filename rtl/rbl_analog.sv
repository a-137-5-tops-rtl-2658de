// rbl_analog: behavioural model of the analog part of one column engine.
//
// Behavioural model, not synthesizable logic. It stands for the 9-T discharge
// branches, the two matched MOM capacitors on RBL and RBLB, the pre-charge devices
// and the sense amplifier (SA). Voltages are integers in units of I0*dt/C, the drop
// one branch causes in one unit pulse width; the current I0 is taken as constant,
// so a drop is proportional to the summed pulse widths (ideal linearity, no noise
// or mismatch).
//
// Each clock is one slot. At the clock edge ending a slot:
//   pre      both lines return to VPRE (one pre-charge per operation);
//   otherwise RBL drops by the widths on SL[j] of every magnitude cell with
//            W[j] = 1 whose row the sign logic sends to RBL, plus the SL[3] widths
//            of all readout cells if en_rbl is set; likewise RBLB. A line stops at 0
//            (the voltage headroom is used up).
//   sa_en    the SA compares the lines after the slot's discharge:
//            sa_out = 1 when RBL is higher than RBLB.
// sa_out holds between strobes. Port names follow the cell signals of the paper
// (SL, RBL, RBLB, EN/ENB); VPRE is this design's choice of headroom.
module rbl_analog
  import cim_pkg::*;
#(
  parameter int unsigned VPRE = 8192   // pre-charge level in discharge units
)(
  input  logic             clk,
  input  logic             pre,                 // pre-charge both lines
  input  pw_t              sl      [ROWS][4],   // sense-line pulse widths
  input  logic [WGT_W-1:0] w       [ROWS],      // stored weights of this engine
  input  logic [ROWS-1:0]  to_rbl,              // sign logic: row drives RBL
  input  logic [ROWS-1:0]  to_rblb,             // sign logic: row drives RBLB
  input  logic             en_rbl,              // readout cells discharge RBL
  input  logic             en_rblb,             // readout cells discharge RBLB
  input  logic             sa_en,               // SA strobe at the end of the slot
  output logic             sa_out,              // 1: V(RBL) > V(RBLB)
  output logic [VOLT_W-1:0] v_rbl,              // observed line voltages
  output logic [VOLT_W-1:0] v_rblb
);
  int d_rbl, d_rblb, n_rbl, n_rblb;

  initial begin
    v_rbl  = VOLT_W'(VPRE);
    v_rblb = VOLT_W'(VPRE);
    sa_out = 1'b0;
  end

  always_comb begin
    d_rbl  = 0;
    d_rblb = 0;
    for (int r = 0; r < ROWS; r++) begin
      for (int j = 0; j < 3; j++) begin
        if (w[r][j] && to_rbl[r])  d_rbl  += int'(sl[r][j]);
        if (w[r][j] && to_rblb[r]) d_rblb += int'(sl[r][j]);
      end
      if (en_rbl)  d_rbl  += int'(sl[r][3]);
      if (en_rblb) d_rblb += int'(sl[r][3]);
    end
    n_rbl  = (int'(v_rbl)  > d_rbl)  ? int'(v_rbl)  - d_rbl  : 0;
    n_rblb = (int'(v_rblb) > d_rblb) ? int'(v_rblb) - d_rblb : 0;
  end

  always @(posedge clk) begin
    if (pre) begin
      v_rbl  <= VOLT_W'(VPRE);
      v_rblb <= VOLT_W'(VPRE);
    end else begin
      v_rbl  <= VOLT_W'(n_rbl);
      v_rblb <= VOLT_W'(n_rblb);
      if (sa_en) sa_out <= (n_rbl > n_rblb);
    end
  end

endmodule
