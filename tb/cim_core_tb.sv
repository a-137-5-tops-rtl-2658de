// cim_core_tb: one core, all 16 engines, end to end. Random and extreme weights
// and activations are run under several configurations (boost on/off, ADC scale
// 0..2). For every engine the testbench forms its own bit-line model: the
// positive and negative folded products B*|ACT-8|*|W| on RBL and RBLB, the
// ten-step binary search with the higher line discharged by 2^n*2^s, and from it
// the expected code and SA results. Without clipping the code must also equal
// floor(d/(2*2^s)) and the unfolded output must be within one LSB of
// B*sum(ACT*W)/(2*2^s). Latency start -> done is checked (16 clocks).
module cim_core_tb;
  import cim_pkg::*;
  localparam int unsigned VP = 8192;
  logic clk = 0, rst_n = 0, start;
  cim_cfg_t cfg;
  logic [ACT_W-1:0] act [ROWS];
  logic w_we;
  logic [5:0] w_row;
  logic [3:0] w_col;
  logic [3:0] w_data;
  logic busy, done;
  logic signed [ADC_BITS-1:0] code [COLS];
  logic [SA_STEPS-1:0] sa_bits [COLS];
  logic signed [OUT_W-1:0] out [COLS];
  logic [3:0] wm [COLS][ROWS];
  int checks = 0, failures = 0, clipped = 0, exact = 0;

  cim_core dut (.clk, .rst_n, .start, .cfg, .act, .w_we, .w_row, .w_col, .w_data,
                .busy, .done, .code, .sa_bits, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic write_weights(input int mode);
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        case (mode)
          0: wm[c][r] = 4'($urandom);
          1: wm[c][r] = (c < 8) ? 4'h7 : 4'hF;       // +7 / -7 columns
          default: wm[c][r] = {1'($urandom), 3'($urandom % 3)};
        endcase
        w_we = 1; w_row = 6'(r); w_col = 4'(c); w_data = wm[c][r];
        @(negedge clk);
      end
    w_we = 0;
  endtask

  task automatic run_and_check();
    int t0, lat;
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = 1; lat = -1;
    while (lat < 0) begin
      @(negedge clk);
      t0++;
      if (done) lat = t0;
      if (t0 > 40) lat = 0;
    end
    // lat counts negedges after the accepting edge: done raised 16 edges later.
    chk(lat == 16 + 1, $sformatf("latency %0d", lat));
    for (int c = 0; c < COLS; c++) begin
      int pos, neg, b, k, vr, vb, s, ideal, ws, S, expc, d;
      logic [9:0] sa;
      b = cfg.boost ? 2 : 1;
      k = 2 ** cfg.adc_scale;
      pos = 0; neg = 0; ideal = 0; ws = 0;
      for (int r = 0; r < ROWS; r++) begin
        int a, wv, p;
        a  = int'(act[r]) - 8;
        wv = (wm[c][r][3] ? -1 : 1) * int'(wm[c][r][2:0]);
        p  = a * wv * b;
        if (p > 0) pos += p; else neg -= p;
        ideal += int'(act[r]) * wv;
        ws += wv;
      end
      d  = pos - neg;
      vr = VP - pos; vb = VP - neg;
      if (vr < 0) vr = 0;
      if (vb < 0) vb = 0;
      s = (vr > vb); sa[9] = 1'(s);
      for (int n = 8; n >= 0; n--) begin
        if (s) vr = (vr > (k << n)) ? vr - (k << n) : 0;
        else   vb = (vb > (k << n)) ? vb - (k << n) : 0;
        s = (vr > vb); sa[n] = 1'(s);
      end
      S = int'(sa[9:1]);
      expc = 255 - S;
      chk(sa_bits[c] == sa, $sformatf("col %0d SA %b expected %b (d=%0d)", c, sa_bits[c], sa, d));
      chk(int'(code[c]) == expc, $sformatf("col %0d code %0d expected %0d", c, code[c], expc));
      chk(int'(out[c]) == int'(code[c]) + 8 * ws * b / (2 * k), $sformatf("col %0d unfold", c));
      if (d >= 512 * k || d < -512 * k) clipped++;
      else begin
        int fl;
        fl = (d >= 0) ? d / (2 * k) : -((-d + 2 * k - 1) / (2 * k));
        chk(int'(code[c]) == fl, $sformatf("col %0d code %0d != floor(d/2k) %0d", c, code[c], fl));
        chk((2 * k * int'(out[c]) - b * ideal) <= 2 * k && (b * ideal - 2 * k * int'(out[c])) < 2 * k,
            $sformatf("col %0d out %0d vs ideal %0d*%0d/%0d", c, out[c], ideal, b, 2 * k));
        exact++;
      end
    end
  endtask

  initial begin
    start = 0; w_we = 0; cfg = '0;
    for (int r = 0; r < ROWS; r++) act[r] = 4'd8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    write_weights(0);
    for (int t = 0; t < 6; t++) begin
      for (int r = 0; r < ROWS; r++) act[r] = 4'($urandom);
      cfg.boost = 1'(t % 2);
      cfg.adc_scale = 2'(t % 3);
      run_and_check();
    end
    // small weights: results inside the ADC range at scale 0
    write_weights(2);
    for (int t = 0; t < 4; t++) begin
      for (int r = 0; r < ROWS; r++) act[r] = 4'($urandom);
      cfg.boost = 1'(t % 2); cfg.adc_scale = 0;
      run_and_check();
    end
    // extreme: +7/-7 weights with all-zero (-8 after folding) and all-15 activations
    write_weights(1);
    for (int t = 0; t < 2; t++) begin
      for (int r = 0; r < ROWS; r++) act[r] = (t == 0) ? 4'd0 : 4'd15;
      cfg.boost = 1; cfg.adc_scale = 2;
      run_and_check();
    end
    chk(clipped > 0 && exact > 0, $sformatf("clipped %0d in range %0d", clipped, exact));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
