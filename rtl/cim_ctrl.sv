// cim_ctrl: operation sequencer (control logic) of one core.
//
// One operation is 15 slots of one clock each:
//   step 0       pre-charge RBL/RBLB
//   steps 1..4   MAC slots A[2]*W, A[1]*W, A[0]*W, A[C]*W (DTC triggered)
//   step 5       sign compare (SA strobe, no pulses)
//   steps 6..14  readout steps for bits 8..0 (DTC triggered, SA strobe)
// take follows every SA strobe by one cycle, when the latched SA result is read.
// The last take falls in the cycle after step 14, which is also step 0 of a
// following operation, so operations started back to back complete every 15
// clocks; done is a one-cycle pulse one clock after the last take, 16 clocks after
// the edge that accepted start. A start while busy is accepted only in step 14.
// The slot order is the paper's (Fig. 3 timing); one clock per slot and the
// handshake are this design's. At 200 MHz, 15 slots give 8192 operations in
// 75 ns, which is the lower throughput end the paper reports (109.2 GOPS).
module cim_ctrl
  import cim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,     // begin an operation
  output logic       busy,      // an operation is in its slots
  output logic       done,      // readout codes valid (one cycle)
  output logic       pre,       // pre-charge slot
  output logic       mac_en,    // MAC slot
  output mac_slot_e  mac_slot,  // which activation bit
  output logic       adc_en,    // readout discharge slot
  output logic [3:0] adc_bit,   // readout bit 8..0
  output logic       sa_en,     // SA strobe at the end of this slot
  output logic       take,      // latched SA result is new
  output logic       dtc_trig   // DTC pulses in this slot
);
  localparam logic [3:0] LAST = 4'(OP_CYCLES - 1);

  logic [3:0] step;
  logic       run, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      step   <= '0;
      take   <= 1'b0;
      last_q <= 1'b0;
      done   <= 1'b0;
    end else begin
      take   <= sa_en;
      last_q <= run && (step == LAST);
      done   <= take && last_q;
      if (!run || step == LAST) begin
        run  <= start;
        step <= '0;
      end else begin
        step <= step + 4'd1;
      end
    end
  end

  always_comb begin
    busy     = run;
    pre      = run && (step == 4'd0);
    mac_en   = run && (step >= 4'd1) && (step <= 4'd4);
    mac_slot = mac_slot_e'(step - 4'd1);
    adc_en   = run && (step >= 4'd6);
    adc_bit  = LAST - step;
    sa_en    = run && (step >= 4'd5);
    dtc_trig = mac_en || adc_en;
  end

  // A strobe is always followed by a take, and done only ends an operation.
  a_take: assert property (@(posedge clk) disable iff (!rst_n) sa_en |=> take);
  a_done: assert property (@(posedge clk) disable iff (!rst_n) done |-> $past(take));

endmodule
