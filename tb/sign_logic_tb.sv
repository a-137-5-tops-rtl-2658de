// sign_logic_tb: random activation and weight signs; a row must go to RBL when
// the product is positive, to RBLB when negative, and nowhere outside MAC slots.
module sign_logic_tb;
  import cim_pkg::*;
  logic clk = 0;
  logic mac_en;
  logic [ROWS-1:0] act_sign, w_sign, to_rbl, to_rblb;
  int checks = 0, failures = 0;

  sign_logic dut (.mac_en, .act_sign, .w_sign, .to_rbl, .to_rblb);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      mac_en   = (t % 4 != 3);
      act_sign = {$urandom, $urandom};
      w_sign   = {$urandom, $urandom};
      @(posedge clk);
      for (int r = 0; r < ROWS; r++) begin
        int prod_sign;
        prod_sign = (act_sign[r] ? -1 : 1) * (w_sign[r] ? -1 : 1);
        checks++;
        if (to_rbl[r] != (mac_en && prod_sign > 0) || to_rblb[r] != (mac_en && prod_sign < 0)) begin
          failures++;
          $display("FAIL row %0d mac=%0b a=%0b w=%0b -> %0b/%0b", r, mac_en,
                   act_sign[r], w_sign[r], to_rbl[r], to_rblb[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
