// out_unfold_tb: random weights, codes and configurations. The output must be
// code + 8*sum(W)*B/(2*2^s), with B = 2 when boosted and s the ADC scale
// (a scale of 3 acts as 2), the sum taken over the signed weights.
module out_unfold_tb;
  import cim_pkg::*;
  logic clk = 0;
  logic signed [ADC_BITS-1:0] code;
  logic [WGT_W-1:0] w [ROWS];
  cim_cfg_t cfg;
  logic signed [OUT_W-1:0] out;
  int checks = 0, failures = 0;

  out_unfold dut (.code, .w, .cfg, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int ws, b, k, exp;
      ws = 0;
      for (int r = 0; r < ROWS; r++) begin
        // mostly extreme weights so the full range is used
        w[r] = (t % 3 == 0) ? {t[1], 3'd7} : 4'($urandom);
        ws += (w[r][3] ? -1 : 1) * int'(w[r][2:0]);
      end
      code = 9'($urandom);
      cfg  = cim_cfg_t'($urandom);
      @(posedge clk);
      b   = cfg.boost ? 2 : 1;
      k   = 2 ** ((cfg.adc_scale > 2) ? 2 : cfg.adc_scale);
      exp = int'(code) + (8 * ws * b) / (2 * k);
      checks++;
      if (int'(out) != exp) begin
        failures++;
        if (failures < 20) $display("FAIL code=%0d sumW=%0d cfg=%p out=%0d expected %0d", code, ws, cfg, out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
