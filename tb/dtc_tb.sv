// dtc_tb: checks the DTC model's pulse widths: 2^p dt per path, doubled for
// boosted MAC slots only, zero without a trigger.
module dtc_tb;
  import cim_pkg::*;
  logic clk = 0;
  logic trig, mac, boost;
  pw_t  pw [NPATH];
  int checks = 0, failures = 0;

  dtc dut (.trig, .mac, .boost, .pw);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 8; t++) begin
      {trig, mac, boost} = 3'(t);
      @(posedge clk);
      for (int p = 0; p < NPATH; p++) begin
        int exp;
        exp = !trig ? 0 : ((mac && boost) ? 2 * (2 ** p) : 2 ** p);
        checks++;
        if (int'(pw[p]) != exp) begin
          failures++;
          $display("FAIL trig=%0b mac=%0b boost=%0b path %0d: %0d, expected %0d",
                   trig, mac, boost, p, pw[p], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
