// act_fold_tb: exhaustive check of the MAC-folding encoder.
// For all 16 activations the folded value (+/-)(mag + comp) must equal ACT - 8,
// and the code must be the canonical one: -8 as 7 + C, zero as positive.
module act_fold_tb;
  import cim_pkg::*;
  logic clk = 0;
  logic [ACT_W-1:0] act;
  act_fold_t fold;
  int checks = 0, failures = 0;

  act_fold dut (.act, .fold);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++) begin
      int v, exp_mag, got;
      bit exp_sign, exp_comp;
      act = 4'(a);
      @(posedge clk);
      v        = a - 8;
      exp_sign = (v < 0);
      exp_mag  = (v == -8) ? 7 : (v < 0 ? -v : v);
      exp_comp = (v == -8);
      got      = (fold.sign ? -1 : 1) * (int'(fold.mag) + int'(fold.comp));
      checks++;
      if (got != v) begin
        failures++;
        $display("FAIL act=%0d folded value %0d, expected %0d", a, got, v);
      end
      checks++;
      if (fold.sign != exp_sign || int'(fold.mag) != exp_mag || fold.comp != exp_comp) begin
        failures++;
        $display("FAIL act=%0d code s=%0b m=%0d c=%0b", a, fold.sign, fold.mag, fold.comp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
