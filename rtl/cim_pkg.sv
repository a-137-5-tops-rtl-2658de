// cim_pkg: sizes, types and constants shared by the 16Kb compute-in-memory macro.
//
// The macro holds 4 cores. Each core has 16 column engines of 64 rows; every row
// of an engine stores one 4-bit sign-magnitude weight (W[3] sign, W[2:0] magnitude)
// in four 9-T cells. Activations are 4-bit unsigned; with MAC-folding they are
// shifted by -8 and sent as sign-magnitude plus a compensation bit ACT[C].
//
// Time on the sense lines is carried as an integer number of unit pulse widths
// (dt). One unit is the charge one cell branch removes from a bit line in one dt,
// so bit-line voltages are integers in the same unit. These numbers (sizes,
// pulse table) follow the paper; the integer representation is this design's.
package cim_pkg;

  localparam int unsigned ROWS      = 64;  // rows (weights) per column engine
  localparam int unsigned COLS      = 16;  // column engines per core
  localparam int unsigned CORES     = 4;   // analog CIM cores per macro
  localparam int unsigned ACT_W     = 4;   // activation bits
  localparam int unsigned WGT_W     = 4;   // weight bits, sign-magnitude
  localparam int unsigned ADC_BITS  = 9;   // readout code bits (signed)
  localparam int unsigned SA_STEPS  = ADC_BITS + 1; // sign compare + 9 search steps
  localparam int unsigned NPATH     = 6;   // DTC pulse paths, widths 2^0..2^5 dt
  localparam int unsigned PW_W      = 7;   // bits of a pulse width in dt units
  localparam int unsigned NGRP      = 7;   // readout-cell groups 32,16,8,4,2,1,1
  localparam int unsigned OUT_W     = 14;  // unfolded output width
  localparam int unsigned VOLT_W    = 16;  // bit-line voltage width in model units
  localparam int unsigned FOLD_OFS  = 8;   // constant subtracted by MAC-folding
  localparam int unsigned OP_CYCLES = 15;  // slots per MAC+readout operation

  // MAC slots in the order the sequencer applies them: A[2]*W, A[1]*W, A[0]*W, A[C]*W.
  typedef enum logic [1:0] {
    SLOT_A2 = 2'd0,
    SLOT_A1 = 2'd1,
    SLOT_A0 = 2'd2,
    SLOT_AC = 2'd3
  } mac_slot_e;

  // Folded activation as applied to one row.
  typedef struct packed {
    logic       sign;  // 1: ACT-8 is negative
    logic [2:0] mag;   // |ACT-8| for values -7..7, 3'd7 for -8
    logic       comp;  // ACT[C]: adds the missing 1*W when |ACT-8| = 8
  } act_fold_t;

  // Macro configuration.
  typedef struct packed {
    logic [1:0] adc_scale; // ADC LSB = 2^adc_scale unit discharges (0..2)
    logic       boost;     // boosted-clipping: MAC pulses at 2x width
  } cim_cfg_t;

  typedef logic [PW_W-1:0] pw_t;

endpackage
