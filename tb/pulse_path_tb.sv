// pulse_path_tb: random folded activations; for each MAC slot every row's SL[j]
// width must be the pulse-table entry 2^(k+j) dt (doubled when boosted) when its
// activation bit is set and 0 otherwise. For each readout bit n and ADC scale s
// the SL[3] widths summed over the rows must be 2^(n+s), on a power-of-two number
// of rows of equal width; no other SL may pulse.
module pulse_path_tb;
  import cim_pkg::*;
  logic clk = 0;
  logic mac_en, adc_en, boost, dmac;
  mac_slot_e mac_slot;
  logic [3:0] adc_bit;
  logic [1:0] adc_scale;
  act_fold_t act [ROWS];
  pw_t pw [NPATH];
  pw_t sl [ROWS][4];
  int checks = 0, failures = 0;

  dtc u_dtc (.trig(mac_en || adc_en), .mac(dmac), .boost, .pw);
  pulse_path dut (.mac_en, .mac_slot, .adc_en, .adc_bit, .adc_scale, .act, .pw, .sl);

  assign dmac = mac_en;
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    mac_en = 0; adc_en = 0; boost = 0; adc_bit = 0; adc_scale = 0; mac_slot = SLOT_A2;
    for (int t = 0; t < 8; t++) begin
      for (int r = 0; r < ROWS; r++) act[r] = act_fold_t'($urandom);
      boost = t[0];
      // MAC slots
      for (int s = 0; s < 4; s++) begin
        mac_en = 1; adc_en = 0; mac_slot = mac_slot_e'(s);
        @(posedge clk);
        for (int r = 0; r < ROWS; r++) begin
          int k; bit on;
          k  = (s == 0) ? 2 : (s == 1) ? 1 : 0;
          on = (s == 3) ? act[r].comp : act[r].mag[k];
          for (int j = 0; j < 3; j++)
            chk(int'(sl[r][j]) == (on ? (boost ? 2 : 1) * (2 ** (k + j)) : 0),
                $sformatf("slot %0d row %0d SL%0d width %0d", s, r, j, sl[r][j]));
          chk(sl[r][3] == 0, $sformatf("slot %0d row %0d SL3 active", s, r));
        end
      end
      // readout steps
      for (int sc = 0; sc <= 2; sc++)
        for (int n = 8; n >= 0; n--) begin
          int total, cells, width; bit same;
          mac_en = 0; adc_en = 1; adc_scale = 2'(sc); adc_bit = 4'(n);
          @(posedge clk);
          total = 0; cells = 0; width = 0; same = 1;
          for (int r = 0; r < ROWS; r++) begin
            for (int j = 0; j < 3; j++)
              chk(sl[r][j] == 0, $sformatf("adc row %0d SL%0d active", r, j));
            if (sl[r][3] != 0) begin
              if (width != 0 && int'(sl[r][3]) != width) same = 0;
              width = int'(sl[r][3]);
              cells++;
              total += int'(sl[r][3]);
            end
          end
          chk(total == 2 ** (n + sc), $sformatf("bit %0d scale %0d removes %0d", n, sc, total));
          chk(same && cells > 0 && (cells & (cells - 1)) == 0 && cells <= 32,
              $sformatf("bit %0d scale %0d uses %0d cells", n, sc, cells));
        end
    end
    mac_en = 0; adc_en = 0;
    @(posedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < 4; j++) chk(sl[r][j] == 0, "idle slot pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
