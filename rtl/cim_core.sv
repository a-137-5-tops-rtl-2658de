// cim_core: one analog compute-in-memory core of the macro.
//
// Holds 16 column engines of 64 rows, one DTC, the pulse path configuration and
// the control logic. Per operation every engine computes the signed dot product
// of the core's 64 folded activations with its 64 stored weights on its RBL/RBLB
// pair and reads it out with its own SA as a 9-bit signed code; out_unfold then
// adds back the folding offset. The activations (raw 4-bit) must stay stable
// through the four MAC slots (steps 1..4 of cim_ctrl). Timing is that of cim_ctrl:
// done 16 clocks after start, one operation per 15 clocks back to back.
// Structure (engines, shared DTC, pulse path and control per core) follows the
// paper; VPRE, the analog headroom of the behavioural bit-line model, is this
// design's.
module cim_core
  import cim_pkg::*;
#(
  parameter int unsigned VPRE = 8192
)(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  cim_cfg_t                   cfg,
  input  logic [ACT_W-1:0]           act  [ROWS],     // raw activations
  input  logic                       w_we,            // weight write
  input  logic [$clog2(ROWS)-1:0]    w_row,
  input  logic [$clog2(COLS)-1:0]    w_col,
  input  logic [WGT_W-1:0]           w_data,
  output logic                       busy,
  output logic                       done,
  output logic signed [ADC_BITS-1:0] code    [COLS],  // readout codes
  output logic [SA_STEPS-1:0]        sa_bits [COLS],  // raw SA results
  output logic signed [OUT_W-1:0]    out     [COLS]   // unfolded outputs
);
  logic       pre, mac_en, adc_en, sa_en, take, dtc_trig;
  mac_slot_e  mac_slot;
  logic [3:0] adc_bit;
  act_fold_t  fold [ROWS];
  logic [ROWS-1:0] act_sign;
  pw_t        pw [NPATH];
  pw_t        sl [ROWS][4];
  logic [WGT_W-1:0] w [COLS][ROWS];

  cim_ctrl u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .pre, .mac_en, .mac_slot,
    .adc_en, .adc_bit, .sa_en, .take, .dtc_trig
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_fold
    act_fold u_fold (.act(act[r]), .fold(fold[r]));
    assign act_sign[r] = fold[r].sign;
  end

  dtc u_dtc (.trig(dtc_trig), .mac(mac_en), .boost(cfg.boost), .pw);

  pulse_path u_path (
    .mac_en, .mac_slot, .adc_en, .adc_bit, .adc_scale(cfg.adc_scale),
    .act(fold), .pw, .sl
  );

  weight_array u_wa (
    .clk, .we(w_we), .wrow(w_row), .wcol(w_col), .wdata(w_data), .w
  );

  for (genvar c = 0; c < COLS; c++) begin : g_eng
    logic [ROWS-1:0] w_sign, to_rbl, to_rblb;
    logic            en_rbl, en_rblb, sa_out;
    logic [VOLT_W-1:0] v_rbl, v_rblb;

    for (genvar r = 0; r < ROWS; r++) begin : g_ws
      assign w_sign[r] = w[c][r][WGT_W-1];
    end

    sign_logic u_sign (.mac_en, .act_sign, .w_sign, .to_rbl, .to_rblb);

    rbl_analog #(.VPRE(VPRE)) u_rbl (
      .clk, .pre, .sl, .w(w[c]), .to_rbl, .to_rblb, .en_rbl, .en_rblb,
      .sa_en, .sa_out, .v_rbl, .v_rblb
    );

    adc_sar u_sar (
      .clk, .rst_n, .adc_en, .sa_out, .take, .en_rbl, .en_rblb,
      .sa_bits(sa_bits[c]), .code(code[c])
    );

    out_unfold u_unf (.code(code[c]), .w(w[c]), .cfg, .out(out[c]));
  end

endmodule
