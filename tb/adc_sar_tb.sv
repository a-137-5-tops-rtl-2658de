// adc_sar_tb: the testbench plays the bit lines. For a given difference d
// (in ADC LSBs) it discharges the line the block selects by 2^n in step n and
// returns the comparison, in the cycle order of the sequencer. The code must be
// floor(d/2) clipped to -256..255, and the raw results must hold the sign first.
module adc_sar_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic adc_en, sa_out, take, en_rbl, en_rblb;
  logic [SA_STEPS-1:0] sa_bits;
  logic signed [ADC_BITS-1:0] code;
  int checks = 0, failures = 0;
  int vr, vb;

  adc_sar dut (.clk, .rst_n, .adc_en, .sa_out, .take, .en_rbl, .en_rblb, .sa_bits, .code);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // One conversion of d: 10 comparisons, 9 discharges.
  task automatic convert(input int d);
    int expc;
    vr = 4000; vb = 4000 + d;     // d = V(RBLB) - V(RBL)
    adc_en = 0; take = 0;
    @(negedge clk);
    sa_out = (vr > vb);           // sign compare, latched at the end of the slot
    for (int n = 8; n >= 0; n--) begin
      adc_en = 1; take = 1;
      @(posedge clk);
      // discharge chosen by the block in this step
      if (en_rbl)  vr -= (1 << n);
      if (en_rblb) vb -= (1 << n);
      chk(en_rbl ^ en_rblb, "exactly one line discharged");
      @(negedge clk);
      sa_out = (vr > vb);
    end
    adc_en = 0; take = 1;
    @(negedge clk);
    take = 0;
    expc = (d >= 0) ? d / 2 : -((-d + 1) / 2);
    if (expc > 255) expc = 255;
    if (expc < -256) expc = -256;
    chk(int'(code) == expc, $sformatf("d=%0d code %0d expected %0d", d, code, expc));
    chk(sa_bits[SA_STEPS-1] == (d < 0), $sformatf("d=%0d sign bit", d));
    chk((vr - vb <= 1) && (vb - vr <= 1) || expc == 255 || expc == -256,
        $sformatf("d=%0d lines end %0d apart", d, vb - vr));
  endtask

  initial begin
    adc_en = 0; take = 0; sa_out = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = -520; d <= 520; d++) convert(d);
    for (int i = 0; i < 50; i++) convert(int'($urandom % 3000) - 1500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
