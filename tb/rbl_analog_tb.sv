// rbl_analog_tb: drives the bit-line model with random weights, sign routing and
// sense-line widths and checks every slot's voltage drop on RBL and RBLB against
// a sum formed in the testbench, the floor at 0, the pre-charge, and that the SA
// reports the higher line only when strobed.
module rbl_analog_tb;
  import cim_pkg::*;
  localparam int unsigned VP = 600;
  logic clk = 0;
  logic pre, en_rbl, en_rblb, sa_en, sa_out;
  pw_t sl [ROWS][4];
  logic [WGT_W-1:0] w [ROWS];
  logic [ROWS-1:0] to_rbl, to_rblb;
  logic [VOLT_W-1:0] v_rbl, v_rblb;
  int checks = 0, failures = 0;
  int exp_r, exp_b;
  bit floored = 0;

  rbl_analog #(.VPRE(VP)) dut (.clk, .pre, .sl, .w, .to_rbl, .to_rblb, .en_rbl,
                               .en_rblb, .sa_en, .sa_out, .v_rbl, .v_rblb);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    pre = 1; en_rbl = 0; en_rblb = 0; sa_en = 0;
    to_rbl = '0; to_rblb = '0;
    for (int r = 0; r < ROWS; r++) begin
      w[r] = 4'($urandom);
      for (int j = 0; j < 4; j++) sl[r][j] = '0;
    end
    @(negedge clk);
    chk(v_rbl == VP && v_rblb == VP, "pre-charge level");
    exp_r = VP; exp_b = VP;
    pre = 0;
    for (int t = 0; t < 60; t++) begin
      int dr, db; bit old_sa;
      if (t % 20 == 0) begin
        pre = 1; @(negedge clk); pre = 0; exp_r = VP; exp_b = VP;
        chk(v_rbl == VP && v_rblb == VP, "re-pre-charge");
      end
      for (int r = 0; r < ROWS; r++) begin
        logic s;
        s = 1'($urandom);
        to_rbl[r] = s; to_rblb[r] = ~s;
        for (int j = 0; j < 4; j++) sl[r][j] = ($urandom % 4 == 0) ? pw_t'($urandom % 5) : '0;
      end
      en_rbl = 1'($urandom); en_rblb = ~en_rbl & 1'($urandom);
      sa_en = 1'($urandom);
      old_sa = sa_out;
      dr = 0; db = 0;
      for (int r = 0; r < ROWS; r++) begin
        for (int j = 0; j < 3; j++)
          if (w[r][j]) begin
            if (to_rbl[r])  dr += sl[r][j];
            if (to_rblb[r]) db += sl[r][j];
          end
        if (en_rbl)  dr += sl[r][3];
        if (en_rblb) db += sl[r][3];
      end
      exp_r = (exp_r > dr) ? exp_r - dr : 0;
      exp_b = (exp_b > db) ? exp_b - db : 0;
      if (exp_r == 0 || exp_b == 0) floored = 1;
      @(negedge clk);
      chk(int'(v_rbl) == exp_r, $sformatf("t=%0d RBL %0d expected %0d", t, v_rbl, exp_r));
      chk(int'(v_rblb) == exp_b, $sformatf("t=%0d RBLB %0d expected %0d", t, v_rblb, exp_b));
      chk(sa_out == (sa_en ? (exp_r > exp_b) : old_sa), $sformatf("t=%0d SA", t));
    end
    chk(floored, "the floor at 0 was reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
