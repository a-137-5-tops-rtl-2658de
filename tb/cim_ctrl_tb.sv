// cim_ctrl_tb: checks the slot sequence of the sequencer against the table
// pre, A2, A1, A0, AC, sign, bits 8..0; the SA strobes and takes; done 16 clocks
// after start; back-to-back operations every 15 clocks; a start during an
// operation (other than in its last slot) is ignored.
module cim_ctrl_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, start;
  logic busy, done, pre, mac_en, adc_en, sa_en, take, dtc_trig;
  mac_slot_e mac_slot;
  logic [3:0] adc_bit;
  int checks = 0, failures = 0;
  int cyc = 0, start_cyc, done_cycles[$];

  cim_ctrl dut (.clk, .rst_n, .start, .busy, .done, .pre, .mac_en, .mac_slot,
                .adc_en, .adc_bit, .sa_en, .take, .dtc_trig);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (done) done_cycles.push_back(cyc);
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Check the outputs of slot s (0..14) of an operation.
  task automatic check_slot(input int s);
    chk(busy, $sformatf("slot %0d busy", s));
    chk(pre == (s == 0), $sformatf("slot %0d pre", s));
    chk(mac_en == (s >= 1 && s <= 4), $sformatf("slot %0d mac_en", s));
    if (s >= 1 && s <= 4) chk(mac_slot == mac_slot_e'(s - 1), $sformatf("slot %0d mac_slot", s));
    chk(sa_en == (s >= 5), $sformatf("slot %0d sa_en", s));
    chk(adc_en == (s >= 6), $sformatf("slot %0d adc_en", s));
    if (s >= 6) chk(int'(adc_bit) == 14 - s, $sformatf("slot %0d adc_bit %0d", s, adc_bit));
    chk(dtc_trig == ((s >= 1 && s <= 4) || s >= 6), $sformatf("slot %0d trig", s));
    chk(take == (s >= 6), $sformatf("slot %0d take", s));
  endtask

  initial begin
    start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !sa_en && !pre, "idle after reset");
    // single operation, with a spurious start in its middle
    start = 1; start_cyc = cyc;
    @(negedge clk);
    start = 0;
    for (int s = 0; s < 15; s++) begin
      check_slot(s);
      start = (s == 7);
      @(negedge clk);
    end
    start = 0;
    chk(take && !busy, "last take after slot 14");
    @(negedge clk);
    chk(!busy, "no second operation from a mid-operation start");
    repeat (5) @(negedge clk);
    // start_cyc is counted one edge before the accepting edge, and a done pulse
    // is seen one edge after the edge that raised it: 16 clocks read as 18.
    chk(done_cycles.size() == 1 && done_cycles[0] - start_cyc == 16 + 2,
        $sformatf("latency %0d", done_cycles.size() ? done_cycles[0] - start_cyc : -1));
    // three operations back to back
    done_cycles.delete();
    start = 1;
    repeat (45) @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);
    chk(done_cycles.size() == 3, $sformatf("%0d done pulses", done_cycles.size()));
    if (done_cycles.size() == 3) begin
      chk(done_cycles[1] - done_cycles[0] == OP_CYCLES, "back-to-back period");
      chk(done_cycles[2] - done_cycles[1] == OP_CYCLES, "back-to-back period");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
